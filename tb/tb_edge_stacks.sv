// tb_edge_stacks: self-checking test of the two edge-stack banks.
//
// Random pushes and pops on both banks (never both on one bank in a cycle)
// are compared with two queue models: top, count, full and empty of each
// bank, last-in first-out order, refusal of a push into a full bank with the
// ovf flag, and clear emptying both banks.
`timescale 1ns/100ps
module tb_edge_stacks;
  import uf_pkg::*;
  localparam int DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clear;
  logic [1:0] push, pop, full, empty, ovf;
  stk_entry_t push_data [2];
  stk_entry_t top [2];
  logic [$clog2(DEPTH+1)-1:0] cnt [2];
  stk_entry_t q [2][$];
  int checks = 0, failures = 0, n_ovf = 0;

  edge_stacks #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    clear = 0; push = 0; pop = 0; push_data[0] = '0; push_data[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      for (int b = 0; b < 2; b++) begin
        // state check
        checks++;
        if (cnt[b] != q[b].size() || empty[b] != (q[b].size() == 0) ||
            full[b] != (q[b].size() == DEPTH) ||
            (q[b].size() > 0 && top[b] !== q[b][$])) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d: cnt %0d model %0d", b, cnt[b], q[b].size());
        end
        push_data[b] = stk_entry_t'({$urandom, $urandom});
        case ($urandom % 3)
          0: begin push[b] = 1; pop[b] = 0; end
          1: begin push[b] = 0; pop[b] = !empty[b]; end
          default: begin push[b] = 0; pop[b] = 0; end
        endcase
      end
      clear = ($urandom % 300) == 0;
      #0.1;
      for (int b = 0; b < 2; b++) begin
        checks++;
        if (ovf[b] != (push[b] && q[b].size() == DEPTH)) begin
          failures++; $display("FAIL ovf bank %0d", b);
        end
        n_ovf += int'(ovf[b]);
      end
      @(posedge clk);
      for (int b = 0; b < 2; b++) begin
        if (clear) q[b].delete();
        else if (push[b] && q[b].size() < DEPTH) q[b].push_back(push_data[b]);
        else if (pop[b]) void'(q[b].pop_back());
      end
    end
    checks++;
    if (n_ovf == 0) begin failures++; $display("FAIL: no overflow seen"); end
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
