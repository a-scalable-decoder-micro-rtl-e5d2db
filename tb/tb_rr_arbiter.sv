// tb_rr_arbiter: self-checking test of the round-robin select logic.
//
// Four units raise and drop random requests; a unit that is granted keeps its
// request for a random number of cycles. A reference model written from the
// stated policy (the holder keeps the grant while it requests; a free unit
// goes to the first requester after the one served last) predicts the
// registered grant each cycle. Also checked: the grant is one-hot and every
// unit that keeps requesting is served within N grants (no starvation).
`timescale 1ns/100ps
module tb_rr_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [N-1:0] req, gnt, gnt_m;
  int last_m, checks = 0, failures = 0;
  int wait_n [N];
  int hold;
  logic [N-1:0] prev_gnt = '0;

  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .gnt);

  initial begin
    req = '0; gnt_m = '0; last_m = N - 1; hold = 0;
    for (int i = 0; i < N; i++) wait_n[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // drive requests: holders keep theirs for a while
      for (int i = 0; i < N; i++)
        if (gnt[i]) begin
          if (hold == 0) req[i] = 1'b0; else hold--;
        end else if (!req[i]) req[i] = (($urandom % 4) == 0);
      @(posedge clk);
      // model of the grant register, updated on this edge
      if (!(|(gnt_m & req))) begin
        logic [N-1:0] p;
        p = '0;
        for (int k = 1; k <= N; k++)
          if (req[(last_m + k) % N] && p == '0) p[(last_m + k) % N] = 1'b1;
        gnt_m = p;
        for (int i = 0; i < N; i++) if (p[i]) begin last_m = i; hold = $urandom % 5; end
      end
      #0.1;
      checks++;
      if (gnt !== gnt_m) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: req %b gnt %b expected %b", cyc, req, gnt, gnt_m);
      end
      checks++;
      if (!$onehot0(gnt)) failures++;
      // starvation: count grants given to others while i waits
      for (int i = 0; i < N; i++)
        if (gnt[i] || !req[i]) wait_n[i] = 0;
        else if (gnt != '0 && prev_gnt != gnt) begin
          wait_n[i]++;
          checks++;
          if (wait_n[i] > N - 1) begin failures++; $display("FAIL unit %0d starved", i); end
        end
      prev_gnt = gnt;
    end
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
