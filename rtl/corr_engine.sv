// corr_engine: Correction engine, the third pipeline stage (peeling).
//
// What it does. It pops the spanning-tree edges of one cluster from the edge
// stack, leaves first, and decides for each edge whether it carries an error:
// an edge is in the correction when its child end holds a non-trivial
// syndrome; the child is then cleared and the parent's syndrome flipped. Each
// stack entry brings the original syndrome bits of both ends; changes made by
// peeling are kept in the Syndrome Hold Registers, which override the stacked
// bits. For every corrected data-qubit edge the Pauli frame in the error log
// is toggled, so a correction that meets the same error of the last cycle
// turns it back to I. This follows the paper's peeling example.
//
// This design's own choices: HOLD_N hold registers (the paper draws two and
// gives no number) each {vertex, value}, looked up associatively. An entry is
// freed when its vertex is popped as a child. A flip into the boundary vertex
// is dropped. If no register is free an overflow event is raised. At the end
// of a cluster a non-trivial syndrome left at the tree root (the parent of
// the edge popped last) or in a hold register means an odd tree (ev_odd).
// Measurement (time) edges are corrected but never reach the error log.
//
// Interface and timing: cl_valid/cl_ready take a cluster descriptor (bank to
// pop first, spans two banks, drop). While busy the engine owns the banks in
// corr_own and pops one entry per cycle; a dropped cluster is popped without
// correcting. el_we/el_dq toggle one error-log entry per cycle; cor_valid /
// cor_eid report every corrected edge.
module corr_engine #(
  parameter int D      = 11,
  parameter int R      = D,
  parameter int C      = D - 1,
  parameter int T      = D,
  parameter int HOLD_N = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  // cluster hand-off
  input  logic                     cl_valid,
  output logic                     cl_ready,
  input  logic                     cl_first,
  input  logic                     cl_two,
  input  logic                     cl_drop,
  // edge stacks
  output logic [1:0]               stk_pop,
  input  uf_pkg::stk_entry_t       stk_top [2],
  input  logic [1:0]               stk_empty,
  output logic [1:0]               corr_own,
  // error log (toggle)
  output logic                     el_we,
  output logic [15:0]              el_dq,
  // every corrected edge
  output logic                     cor_valid,
  output logic [uf_pkg::EID_W-1:0] cor_eid,
  output logic                     busy,
  // statistics
  output logic                     ev_hold_ovf,
  output logic                     ev_odd
);
  import uf_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_POP, S_FIN} state_e;
  typedef struct packed {
    logic             v;
    logic [VID_W-1:0] vid;
    logic             val;
  } hold_t;

  state_e      st;
  logic        bank, second_left, drop;
  hold_t       hold [HOLD_N];
  logic        root_val;    // value left at the parent of the last popped edge

  // --------------------------------------------- decode the top entry
  stk_entry_t       e;
  far_end_t         far;
  logic [VID_W-1:0] child, parent;
  logic             par_isb;
  logic             hc_hit, hp_hit;
  logic [$clog2(HOLD_N+1)-1:0] hc_i, hp_i, free_i;
  logic             free_ok;
  logic             s_c, s_p;
  dq_t              dq;

  assign e = stk_top[bank];

  always_comb begin
    far     = far_end(VID_W'(e.eid >> 2), e.eid[1:0], R, C, T);
    child   = e.fwd ? far.vid : VID_W'(e.eid >> 2);
    parent  = e.fwd ? VID_W'(e.eid >> 2) : far.vid;
    par_isb = !e.fwd && far.isb;
    hc_hit = 1'b0; hp_hit = 1'b0; hc_i = '0; hp_i = '0;
    free_ok = 1'b0; free_i = '0;
    for (int i = 0; i < HOLD_N; i++) begin
      if (hold[i].v && hold[i].vid == child && !hc_hit) begin
        hc_hit = 1'b1; hc_i = ($bits(hc_i))'(i);
      end
      if (hold[i].v && hold[i].vid == parent && !par_isb && !hp_hit) begin
        hp_hit = 1'b1; hp_i = ($bits(hp_i))'(i);
      end
    end
    // a free register, or the child's own register which is freed now
    if (hc_hit) begin
      free_ok = 1'b1; free_i = hc_i;
    end else begin
      for (int i = HOLD_N - 1; i >= 0; i--)
        if (!hold[i].v) begin free_ok = 1'b1; free_i = ($bits(free_i))'(i); end
    end
    s_c = hc_hit ? hold[hc_i].val : e.s_chd;
    s_p = hp_hit ? hold[hp_i].val : e.s_par;
    dq  = data_qubit(e.eid, R, C);
  end

  logic do_pop;
  assign do_pop = (st == S_POP) && !stk_empty[bank];

  always_comb begin
    stk_pop = '0;
    if (do_pop) stk_pop[bank] = 1'b1;
  end

  assign cl_ready  = (st == S_IDLE);
  assign busy      = (st != S_IDLE);
  assign cor_valid = do_pop && !drop && s_c;
  assign cor_eid   = e.eid;
  assign el_we     = cor_valid && dq.valid;
  assign el_dq     = dq.idx;

  always_comb begin
    corr_own = '0;
    if (st != S_IDLE) begin
      corr_own[bank] = 1'b1;
      if (second_left) corr_own[~bank] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bank <= 1'b0; second_left <= 1'b0; drop <= 1'b0;
      for (int i = 0; i < HOLD_N; i++) hold[i] <= '0;
      ev_hold_ovf <= 1'b0; ev_odd <= 1'b0; root_val <= 1'b0;
    end else begin
      ev_hold_ovf <= 1'b0; ev_odd <= 1'b0;
      if (flush) begin
        st <= S_IDLE;
        second_left <= 1'b0;
        for (int i = 0; i < HOLD_N; i++) hold[i] <= '0;
      end else begin
        unique case (st)
          S_IDLE: if (cl_valid) begin
            bank <= cl_first;
            second_left <= cl_two;
            drop <= cl_drop;
            root_val <= 1'b0;
            st <= S_POP;
          end

          S_POP: begin
            if (stk_empty[bank]) begin
              if (second_left) begin
                bank <= ~bank;
                second_left <= 1'b0;
              end else begin
                st <= S_FIN;
              end
            end else if (!drop) begin
              // the edge popped last leads to the tree root
              root_val <= !par_isb && (s_c ? ~s_p : s_p);
              // the child is now settled: free its register
              if (hc_hit) hold[hc_i].v <= 1'b0;
              if (s_c && !par_isb) begin
                if (hp_hit) begin
                  hold[hp_i].val <= ~s_p;
                end else if (free_ok) begin
                  hold[free_i] <= '{v: 1'b1, vid: parent, val: ~s_p};
                end else begin
                  ev_hold_ovf <= 1'b1;
                end
              end
            end
          end

          default: begin  // S_FIN
            for (int i = 0; i < HOLD_N; i++) begin
              if (hold[i].v && hold[i].val && !drop) ev_odd <= 1'b1;
              hold[i] <= '0;
            end
            if (root_val && !drop) ev_odd <= 1'b1;
            st <= S_IDLE;
          end
        endcase
      end
    end
  end

endmodule
