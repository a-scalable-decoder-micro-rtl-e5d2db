// rr_arbiter: round-robin select logic of the decoder block.
//
// The decoder block shares one DFS engine (and one root/size table pair)
// between several Graph Generators. The select logic gives the shared unit to
// the first requester that is ready and, when several are ready together,
// rotates priority starting after the one served last, so that every unit is
// served in turn ("prioritizes the first ready component and uses round robin
// arbitration"). That policy is the paper's; the handshake is this design's:
//   req[i]   held high by unit i for as long as it needs the shared unit
//   gnt[i]   one-hot, registered; stays with its holder until the holder drops
//            req, then moves in the same cycle-after to the next requester
// Timing: a request seen at a clock edge with the unit free is granted at that
// edge, so gnt rises one cycle after req at the earliest.
module rr_arbiter #(
  parameter int N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  output logic [N-1:0] gnt
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_q;       // index of the unit served last
  logic [N-1:0]  pick;
  logic          busy;

  assign busy = |(gnt & req);

  always_comb begin
    pick = '0;
    for (int k = 1; k <= N; k++)
      if (req[(int'(last_q) + k) % N] && pick == '0) pick[(int'(last_q) + k) % N] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt    <= '0;
      last_q <= IW'(N - 1);
    end else if (!busy) begin
      gnt <= pick;
      for (int i = 0; i < N; i++)
        if (pick[i]) last_q <= IW'(i);
    end
  end

  // Grants are one-hot and only go to a requester.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule
