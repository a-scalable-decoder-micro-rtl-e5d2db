// tb_error_log: self-checking test of the error log (Pauli frame).
//
// Random X and Z toggles are applied to random data qubits and the whole log
// is read back against a model after each batch. Toggling the same component
// twice must give I again (a correction that meets the previous error).
// Out-of-range indices must change nothing and read as I.
`timescale 1ns/100ps
module tb_error_log;
  localparam int D = 5, NDQ = D * D + (D - 1) * (D - 1);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic tog_en, tog_z;
  logic [15:0] tog_idx, rd_idx;
  logic [1:0] rd_pauli;
  logic [1:0] m [NDQ];
  int checks = 0, failures = 0;

  error_log #(.D(D)) dut (.*);

  task automatic check_all();
    for (int i = 0; i < NDQ + 3; i++) begin
      rd_idx = 16'(i);
      #0.1;
      checks++;
      if (rd_pauli !== ((i < NDQ) ? m[i] : 2'b00)) begin
        failures++;
        if (failures < 10) $display("FAIL qubit %0d: %b expected %b", i, rd_pauli, (i < NDQ) ? m[i] : 2'b00);
      end
    end
  endtask

  initial begin
    tog_en = 0; tog_z = 0; tog_idx = 0; rd_idx = 0;
    for (int i = 0; i < NDQ; i++) m[i] = 2'b00;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    for (int b = 0; b < 20; b++) begin
      for (int k = 0; k < 50; k++) begin
        @(negedge clk);
        tog_en = ($urandom % 4) != 0;
        tog_z = $urandom % 2;
        tog_idx = 16'($urandom % (NDQ + 4));
        @(posedge clk);
        if (tog_en && tog_idx < NDQ) m[tog_idx][tog_z] ^= 1'b1;
        #0.1 tog_en = 0;
      end
      check_all();
    end
    // same Z toggled twice returns to I
    @(negedge clk); tog_en = 1; tog_z = 1; tog_idx = 5;
    @(negedge clk); tog_en = 1;
    @(negedge clk); tog_en = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
