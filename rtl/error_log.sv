// error_log: Pauli frame of one logical qubit.
//
// One two-bit entry per data qubit, {z, x}: I = 00, X = 01, Z = 10, Y = 11.
// The Correction engine of an X-type decoding toggles the x bit of the data
// qubit it corrects, that of a Z-type decoding the z bit. Toggling is how the
// frame is updated against the last cycle: Z met by Z again becomes I, as in
// the paper's peeling example. The Z-type decoding graph is taken to use the
// same data-qubit numbering as the X-type one (by the code's symmetry); that
// mapping is this design's choice.
//
// Interface: tog_en/tog_z/tog_idx apply one toggle at the clock edge; rd_idx
// reads an entry combinationally. Reset clears the frame to I.
module error_log #(
  parameter int D   = 11,
  parameter int NDQ = D * D + (D - 1) * (D - 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tog_en,
  input  logic        tog_z,
  input  logic [15:0] tog_idx,
  input  logic [15:0] rd_idx,
  output logic [1:0]  rd_pauli
);

  logic [1:0] frame [NDQ];

  assign rd_pauli = (int'(rd_idx) < NDQ) ? frame[rd_idx] : 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NDQ; i++) frame[i] <= 2'b00;
    end else if (tog_en && int'(tog_idx) < NDQ) begin
      frame[tog_idx][tog_z] <= ~frame[tog_idx][tog_z];
    end
  end

endmodule
