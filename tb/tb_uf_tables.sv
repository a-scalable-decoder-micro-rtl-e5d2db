// tb_uf_tables: self-checking test of the Root and Size Tables.
//
// After init from a random syndrome every root must point at itself and every
// size must equal the syndrome bit (the start state of the growth example).
// Then random writes on both tables and random reads on both ports are
// compared with an array model; init must win over a write in the same cycle.
`timescale 1ns/100ps
module tb_uf_tables;
  import uf_pkg::*;
  localparam int NV = 60;
  logic clk = 0;
  always #1 clk = ~clk;
  logic init, root_we, size_we;
  logic [NV-1:0] init_syn;
  logic [VID_W-1:0] rd_a, rd_b, root_a, root_b, size_a, size_b;
  logic [VID_W-1:0] root_wa, root_wd, size_wa, size_wd;
  logic [VID_W-1:0] rm [NV], sm [NV];
  int checks = 0, failures = 0;

  uf_tables #(.NV(NV)) dut (.*);

  task automatic check_read();
    rd_a = VID_W'($urandom % NV); rd_b = VID_W'($urandom % NV);
    #0.1;
    checks++;
    if (root_a !== rm[rd_a] || root_b !== rm[rd_b] || size_a !== sm[rd_a] || size_b !== sm[rd_b]) begin
      failures++;
      if (failures < 10) $display("FAIL read %0d/%0d: %0d %0d %0d %0d", rd_a, rd_b, root_a, root_b, size_a, size_b);
    end
  endtask

  initial begin
    init = 0; root_we = 0; size_we = 0; rd_a = 0; rd_b = 0;
    root_wa = 0; root_wd = 0; size_wa = 0; size_wd = 0;
    for (int rep = 0; rep < 5; rep++) begin
      @(negedge clk);
      for (int i = 0; i < NV; i++) init_syn[i] = ($urandom % 3) == 0;
      init = 1;
      // a write in the init cycle must be lost
      root_we = 1; root_wa = 3; root_wd = 7;
      @(negedge clk);
      init = 0; root_we = 0;
      for (int i = 0; i < NV; i++) begin rm[i] = VID_W'(i); sm[i] = VID_W'(init_syn[i]); end
      for (int i = 0; i < NV; i++) begin
        rd_a = VID_W'(i); rd_b = VID_W'(NV - 1 - i);
        #0.1;
        checks++;
        if (root_a !== VID_W'(i) || size_a !== VID_W'(init_syn[i])) begin
          failures++;
          $display("FAIL init entry %0d: root %0d size %0d", i, root_a, size_a);
        end
      end
      for (int k = 0; k < 400; k++) begin
        @(negedge clk);
        check_read();
        root_we = ($urandom % 2); root_wa = VID_W'($urandom % NV); root_wd = VID_W'($urandom % NV);
        size_we = ($urandom % 2); size_wa = VID_W'($urandom % NV); size_wd = VID_W'($urandom % 40);
        @(posedge clk);
        if (root_we) rm[root_wa] = root_wd;
        if (size_we) sm[size_wa] = size_wd;
        #0.1;
        root_we = 0; size_we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
