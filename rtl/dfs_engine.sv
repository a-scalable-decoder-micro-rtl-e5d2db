// dfs_engine: Depth First Search engine, the second pipeline stage.
//
// What it does. It walks the grown clusters left in a Graph Generator's STM
// and writes, per cluster, the edges of a spanning tree onto an edge stack,
// each with the syndrome bits of its two ends, so that the Correction engine
// can peel the tree without going back to the STM. It uses a finite state
// machine, a pending edge stack (edges still to explore) and the two edge
// stacks, and it visits only the STM rows flagged by the Zero Data Register.
// That much is the paper's.
//
// How it works (this design's own choices where the paper is silent):
//  * A visited bit per vertex keeps the walk a tree.
//  * Clusters that touch the boundary are walked first, from the boundary: the
//    boundary is the root, each fully grown boundary edge to an unvisited
//    vertex is a tree edge and a sub-tree is walked from it. Each such
//    sub-tree is handed over as a cluster of its own.
//  * Then every unvisited vertex of a non-zero row roots the tree of its
//    cluster; a vertex with no fully grown edge gives an empty tree, which is
//    not handed over. Half-grown edges are ignored.
//  * An edge is pushed when its child is first reached (pre-order), so popping
//    gives every edge after all edges below it: leaves first.
//  * Bank use: a cluster starts in a free bank (empty and not held by the
//    Correction engine); when that bank is full it goes on in the other bank
//    if that one is free, and waits for it otherwise. A cluster that fills
//    both banks, or the pending stack, is a stack-overflow failure: it is
//    walked to the end without pushing and handed over with drop = 1.
//
// Interface and timing: start (one cycle) begins a pass over the STM seen
// through stm_ra/stm_rb/zdr; done pulses when the STM is no longer needed.
// cl_valid/cl_ready hand one cluster at a time to the Correction engine;
// cl_first is the bank to pop first and cl_two says the cluster spans both.
// One STM read (two ports), one pending push or pop and one stack push per
// cycle.
module dfs_engine #(
  parameter int D          = 11,
  parameter int R          = D,
  parameter int C          = D - 1,
  parameter int T          = D,
  parameter int PEND_DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     start,
  output logic                     done,
  output logic                     busy,
  // STM of the selected Graph Generator
  output logic [uf_pkg::VID_W-1:0] stm_ra,
  input  uf_pkg::stm_word_t        stm_rda,
  output logic [uf_pkg::VID_W-1:0] stm_rb,
  input  uf_pkg::stm_word_t        stm_rdb,
  input  logic [R*T-1:0]           zdr,
  // edge stacks
  output logic [1:0]               stk_push,
  output uf_pkg::stk_entry_t       stk_data,
  input  logic [1:0]               stk_full,
  input  logic [1:0]               stk_empty,
  input  logic [1:0]               corr_own,
  // cluster hand-off
  output logic                     cl_valid,
  input  logic                     cl_ready,
  output logic                     cl_first,
  output logic                     cl_two,
  output logic                     cl_drop,
  // statistics
  output logic                     ev_switch,
  output logic                     ev_stall,
  output logic                     ev_overflow
);
  import uf_pkg::*;

  localparam int NV   = R * C * T;
  localparam int NROW = R * T;
  localparam int RW   = $clog2(NROW + 1);
  localparam int CW   = $clog2(C + 1);
  localparam int PW   = $clog2(PEND_DEPTH + 1);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_SCAN, S_EXP, S_PEND, S_PUSH, S_HAND} state_e;
  typedef struct packed {
    logic [EID_W-1:0] eid;
    logic             fwd;
    logic             s_par;
  } pend_t;

  state_e           st;
  logic             phase_n;      // 0: boundary-rooted trees, 1: the rest
  logic [RW-1:0]    row;
  logic [CW-1:0]    col;
  logic [NV-1:0]    visited;
  logic [VID_W-1:0] w;            // vertex being expanded
  logic [2:0]       k;
  pend_t            pend [PEND_DEPTH];
  logic [PW-1:0]    pcnt;
  stk_entry_t       ent;          // entry waiting to be pushed

  // cluster state
  logic             started, two, drop, bank;

  // ------------------------------------------------ candidate of the scan
  logic [VID_W-1:0] cand;
  logic [1:0]       cand_dir;
  always_comb begin
    if (!phase_n) begin
      cand     = (col == '0) ? VID_W'(int'(row) * C) : VID_W'(int'(row) * C + C - 1);
      cand_dir = (col == '0) ? 2'd3 : 2'd0;
    end else begin
      cand     = VID_W'(int'(row) * C + int'(col));
      cand_dir = 2'd0;
    end
  end

  // ------------------------------------------------ expansion slot k of w
  logic [VID_W-1:0] x_vid;
  logic             x_ok;
  logic [1:0]       x_es;
  logic [EID_W-1:0] x_eid;
  logic             x_fwd;
  far_end_t         own_far;
  always_comb begin
    int c, r, t;
    c = int'(w) % C;
    r = (int'(w) / C) % R;
    t = int'(w) / (R * C);
    own_far = far_end(w, k[1:0], R, C, T);
    x_vid = '0; x_ok = 1'b0; x_es = '0; x_eid = '0; x_fwd = 1'b0;
    unique case (k)
      3'd0, 3'd1, 3'd2: begin
        x_vid = own_far.vid;
        x_ok  = own_far.valid && !own_far.isb;
        x_es  = stm_rda.es[k[1:0]];
        x_eid = EID_W'({w, k[1:0]});
        x_fwd = 1'b1;
      end
      3'd3: begin x_vid = w - 1'b1;          x_ok = (c > 0); x_es = stm_rdb.es[0]; x_eid = EID_W'({x_vid, 2'd0}); end
      3'd4: begin x_vid = w - VID_W'(C);     x_ok = (r > 0); x_es = stm_rdb.es[1]; x_eid = EID_W'({x_vid, 2'd1}); end
      default: begin x_vid = w - VID_W'(R*C); x_ok = (t > 0); x_es = stm_rdb.es[2]; x_eid = EID_W'({x_vid, 2'd2}); end
    endcase
  end

  // ------------------------------------------------ child of the pending top
  pend_t            ptop;
  far_end_t         p_far;
  logic [VID_W-1:0] p_child;
  assign ptop    = pend[(pcnt == '0) ? '0 : pcnt - 1'b1];
  assign p_far   = far_end(VID_W'(ptop.eid >> 2), ptop.eid[1:0], R, C, T);
  assign p_child = ptop.fwd ? p_far.vid : VID_W'(ptop.eid >> 2);

  // ------------------------------------------------ STM read addresses
  always_comb begin
    stm_ra = w;
    stm_rb = x_vid;
    if (st == S_SCAN) stm_ra = cand;
    if (st == S_PEND) stm_rb = p_child;
  end

  // ------------------------------------------------ bank choice for a push
  logic [1:0] free;
  assign free = stk_empty & ~corr_own;
  logic push_ok, push_switch, push_start_bank;
  always_comb begin
    push_ok = 1'b0; push_switch = 1'b0; push_start_bank = 1'b0;
    if (!started) begin
      push_ok = |free;
      push_start_bank = free[0] ? 1'b0 : 1'b1;
    end else if (!stk_full[bank]) begin
      push_ok = 1'b1;
    end else if (!two && free[~bank]) begin
      push_ok = 1'b1;
      push_switch = 1'b1;
    end
  end

  always_comb begin
    stk_push = '0;
    stk_data = ent;
    if (st == S_PUSH && !drop && push_ok) begin
      if (!started)         stk_push[push_start_bank] = 1'b1;
      else if (push_switch) stk_push[~bank] = 1'b1;
      else                  stk_push[bank] = 1'b1;
    end
  end

  assign busy     = (st != S_IDLE);
  assign cl_valid = (st == S_HAND);
  assign cl_first = bank;          // the bank pushed last is popped first
  assign cl_two   = two;
  assign cl_drop  = drop;

  // ------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      phase_n <= 1'b0; row <= '0; col <= '0; w <= '0; k <= '0;
      pcnt <= '0; ent <= '0;
      started <= 1'b0; two <= 1'b0; drop <= 1'b0; bank <= 1'b0;
      done <= 1'b0; ev_switch <= 1'b0; ev_stall <= 1'b0; ev_overflow <= 1'b0;
    end else begin
      done <= 1'b0; ev_switch <= 1'b0; ev_stall <= 1'b0; ev_overflow <= 1'b0;
      if (flush) begin
        st <= S_IDLE;
        pcnt <= '0;
        started <= 1'b0; two <= 1'b0; drop <= 1'b0;
      end else begin
        unique case (st)
          S_IDLE: if (start) st <= S_CLR;

          S_CLR: begin
            visited <= '0;
            phase_n <= 1'b0; row <= '0; col <= '0;
            pcnt <= '0;
            started <= 1'b0; two <= 1'b0; drop <= 1'b0;
            st <= S_SCAN;
          end

          S_SCAN: begin
            if (int'(row) == NROW) begin
              if (!phase_n) begin
                phase_n <= 1'b1; row <= '0; col <= '0;
              end else begin
                done <= 1'b1;
                st <= S_IDLE;
              end
            end else if (!zdr[row]) begin
              row <= row + 1'b1; col <= '0;
            end else begin
              // advance the scan position first
              if ((!phase_n && col != '0) || (phase_n && int'(col) == C - 1)) begin
                row <= row + 1'b1; col <= '0;
              end else begin
                col <= col + 1'b1;
              end
              if (!phase_n) begin
                if (stm_rda.es[cand_dir] == ES_FULL && !visited[cand]) begin
                  visited[cand] <= 1'b1;
                  ent <= '{eid: EID_W'({cand, cand_dir}), fwd: 1'b0,
                           s_par: 1'b0, s_chd: stm_rda.syn};
                  w <= cand;
                  st <= S_PUSH;
                end
              end else if (!visited[cand]) begin
                visited[cand] <= 1'b1;
                w <= cand; k <= '0;
                st <= S_EXP;
              end
            end
          end

          S_EXP: begin
            if (x_ok && x_es == ES_FULL && !visited[x_vid]) begin
              if (int'(pcnt) == PEND_DEPTH) begin
                if (!drop) ev_overflow <= 1'b1;
                drop <= 1'b1;
              end else begin
                pend[pcnt] <= '{eid: x_eid, fwd: x_fwd, s_par: stm_rda.syn};
                pcnt <= pcnt + 1'b1;
              end
            end
            if (k == 3'd5) st <= S_PEND;
            else           k <= k + 1'b1;
          end

          S_PEND: begin
            if (pcnt == '0) begin
              st <= started ? S_HAND : S_SCAN;
            end else begin
              pcnt <= pcnt - 1'b1;
              if (!visited[p_child]) begin
                visited[p_child] <= 1'b1;
                ent <= '{eid: ptop.eid, fwd: ptop.fwd, s_par: ptop.s_par,
                         s_chd: stm_rdb.syn};
                w <= p_child;
                st <= S_PUSH;
              end
            end
          end

          S_PUSH: begin
            if (drop) begin
              k <= '0;
              st <= S_EXP;
            end else if (push_ok) begin
              if (!started) begin
                started <= 1'b1;
                bank <= push_start_bank;
              end else if (push_switch) begin
                two <= 1'b1;
                bank <= ~bank;
                ev_switch <= 1'b1;
              end
              k <= '0;
              st <= S_EXP;
            end else if (started && stk_full[bank] && two) begin
              // both banks full: stack overflow failure
              ev_overflow <= 1'b1;
              drop <= 1'b1;
            end else begin
              ev_stall <= 1'b1;
            end
          end

          S_HAND: if (cl_ready) begin
            started <= 1'b0; two <= 1'b0; drop <= 1'b0;
            st <= S_SCAN;
          end

          default: st <= S_IDLE;
        endcase
      end
    end
  end

endmodule
