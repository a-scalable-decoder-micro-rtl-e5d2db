// edge_stacks: Edge Stack S0 and the alternate Edge Stack S1.
//
// The DFS engine pushes the spanning-tree edges of a cluster in the order it
// visits them; the Correction engine pops them, so that peeling runs from the
// leaves back to the root. Two banks let the two engines work at the same
// time on different clusters: while the Correction engine empties one bank the
// DFS engine fills the other. A cluster that does not fit in one bank goes on
// in the other one (the paper sizes each stack to half the largest cluster it
// must handle and uses the alternate stack on overflow).
//
// Each bank is a LIFO with its own push and pop port, so a push and a pop can
// hit different banks in the same cycle. top[b] is the entry a pop returns
// (combinational); a push or pop takes effect at the clock edge. A push to a
// full bank is refused and raises ovf[b] for that cycle.
// Depth default 40 = 80 / 2: the paper drops clusters of more than 80 edges
// at d = 11, p = 1e-3 and halves the stack size.
module edge_stacks #(
  parameter int DEPTH = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [1:0]              push,
  input  uf_pkg::stk_entry_t      push_data [2],
  input  logic [1:0]              pop,
  output uf_pkg::stk_entry_t      top [2],
  output logic [$clog2(DEPTH+1)-1:0] cnt [2],
  output logic [1:0]              full,
  output logic [1:0]              empty,
  output logic [1:0]              ovf
);
  import uf_pkg::*;

  localparam int PW = $clog2(DEPTH + 1);

  stk_entry_t mem [2][DEPTH];
  logic [PW-1:0] sp [2];

  for (genvar b = 0; b < 2; b++) begin : g_bank
    assign cnt[b]   = sp[b];
    assign full[b]  = (int'(sp[b]) == DEPTH);
    assign empty[b] = (sp[b] == '0);
    assign top[b]   = mem[b][(sp[b] == '0) ? '0 : sp[b] - 1'b1];
    assign ovf[b]   = push[b] && full[b];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sp[b] <= '0;
      end else if (clear) begin
        sp[b] <= '0;
      end else if (push[b] && !full[b]) begin
        mem[b][sp[b]] <= push_data[b];
        sp[b] <= sp[b] + 1'b1;
      end else if (pop[b] && !empty[b]) begin
        sp[b] <= sp[b] - 1'b1;
      end
    end

    // The two engines never push and pop the same bank together.
    a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(push[b] && pop[b]));
  end

endmodule
