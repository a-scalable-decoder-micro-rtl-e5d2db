// gr_gen: Graph Generator, the first stage of the Union-Find decoder pipeline.
//
// What it does. It takes the d rounds of syndrome of one error type of one
// logical qubit and grows clusters around the non-trivial syndrome bits until
// every cluster holds an even number of them or touches the boundary. The
// grown clusters are left in the Spanning Tree Memory (STM) for the DFS engine.
//
// How it works (paper's structure): the STM holds one syndrome bit per vertex
// and two bits per edge (half-edge growth). The Zero Data Register (ZDR) has
// one bit per STM row (one row of C vertices in one round) that is set once
// anything in the row is non-zero, so scans skip empty rows. Parity registers
// hold one bit per cluster root. Root and size tables (uf_tables, outside this
// module so that two Graph Generators can share them) implement Find() with
// path compression through the tree traversal registers (five per primary
// vertex, as in the paper) and Union() by size: the root of the smaller
// cluster is pointed at the root of the larger one. Newly fully-grown edges
// go to the Fusion Edge Stack (FES) and are merged after the growth scan.
//
// This design's own choices where the paper gives only the function:
//  * One growth round scans the ZDR rows; for each vertex a Find() gives its
//    root, and if that cluster is odd and off the boundary each of the
//    vertex's up to six edges (plus a boundary edge) is grown by one half.
//    An edge thus grows by two halves in a round when both its ends are in
//    growing clusters, as in the Union-Find algorithm.
//  * A per-root boundary bit marks clusters that reached the boundary; such a
//    cluster is neutral and stops growing. Merged parity is the XOR.
//  * When the FES is full the scan pauses and the FES is drained; FES depth
//    is a parameter. After the scan the FES is drained completely.
//  * The traversal-register paths of both primary vertices are compressed to
//    the root that survives the union (as drawn in the paper's Fig. 8).
//  * Every table access is one cycle (the paper assumes a 4-cycle memory).
//
// Interface and timing:
//  ld_valid/ld_ready  one syndrome round (layer ld_layer, bit r*C+c) per
//                     transfer; after T layers growth starts on its own.
//  tab_req/tab_gnt    held request for the root/size tables for the whole
//                     growth; dropped when the STM is grown.
//  grown              high while the STM holds finished clusters; the STM read
//                     ports and zdr are then for the DFS engine.
//  release            one-cycle pulse from the block when the DFS engine is
//                     done: the unit clears its memories (one cycle) and loads
//                     the next syndrome. flush does the same at any time.
//  ev_*               one-cycle event pulses for statistics.
module gr_gen #(
  parameter int D         = 11,
  parameter int R         = D,
  parameter int C         = D - 1,
  parameter int T         = D,
  parameter int FES_DEPTH = 16,
  parameter int TTR_N     = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  // syndrome load
  input  logic                     ld_valid,
  output logic                     ld_ready,
  input  logic [((T > 1) ? $clog2(T) : 1)-1:0] ld_layer,
  input  logic [R*C-1:0]           ld_bits,
  // shared root / size tables
  output logic                     tab_req,
  input  logic                     tab_gnt,
  output logic                     tab_init,
  output logic [R*C*T-1:0]         tab_init_syn,
  output logic [uf_pkg::VID_W-1:0] tab_rd_a,
  output logic [uf_pkg::VID_W-1:0] tab_rd_b,
  input  logic [uf_pkg::VID_W-1:0] tab_root_a,
  input  logic [uf_pkg::VID_W-1:0] tab_root_b,
  input  logic [uf_pkg::VID_W-1:0] tab_size_a,
  input  logic [uf_pkg::VID_W-1:0] tab_size_b,
  output logic                     tab_root_we,
  output logic [uf_pkg::VID_W-1:0] tab_root_wa,
  output logic [uf_pkg::VID_W-1:0] tab_root_wd,
  output logic                     tab_size_we,
  output logic [uf_pkg::VID_W-1:0] tab_size_wa,
  output logic [uf_pkg::VID_W-1:0] tab_size_wd,
  // hand-off to the DFS engine
  output logic                     grown,
  input  logic                     release_i,
  input  logic [uf_pkg::VID_W-1:0] stm_ra,
  output uf_pkg::stm_word_t        stm_rda,
  input  logic [uf_pkg::VID_W-1:0] stm_rb,
  output uf_pkg::stm_word_t        stm_rdb,
  output logic [R*T-1:0]           zdr,
  // statistics
  output logic                     ev_round,
  output logic                     ev_union,
  output logic                     ev_fes_full,
  output logic                     ev_boundary
);
  import uf_pkg::*;

  localparam int NV   = R * C * T;
  localparam int NROW = R * T;
  localparam int LW   = (T > 1) ? $clog2(T) : 1;
  localparam int RW   = $clog2(NROW + 1);
  localparam int CW   = $clog2(C + 1);
  localparam int FW   = $clog2(FES_DEPTH + 1);
  localparam int TW   = $clog2(TTR_N + 1);

  typedef enum logic [3:0] {
    S_LOAD, S_REQ, S_INIT, S_ROW, S_FIND, S_COMP, S_GROW,
    S_POP, S_FV, S_UNION, S_UNION2, S_DONE, S_CLEAR
  } state_e;

  // where a Find() returns to
  typedef enum logic [1:0] {F_SCAN, F_U, F_V} fret_e;

  state_e   st;
  fret_e    fret;

  stm_word_t        stm    [NV];
  logic [NV-1:0]    parity;
  logic [NV-1:0]    bnd;
  logic [LW:0]      layers_in;

  // FES
  logic [EID_W-1:0] fes [FES_DEPTH];
  logic [FW-1:0]    fes_cnt;
  logic             mid_drain;     // drain started because the FES was full

  // scan position
  logic [RW-1:0]    row;
  logic [CW-1:0]    col;
  logic [2:0]       slot;
  logic             any_active;
  logic [VID_W-1:0] scan_v;
  logic             scan_act;

  // Find() and traversal registers
  logic [VID_W-1:0] cur;
  logic [VID_W-1:0] ttr_a [TTR_N];
  logic [VID_W-1:0] ttr_b [TTR_N];
  logic [TW-1:0]    ttr_a_n, ttr_b_n;
  logic [TW:0]      comp_i;
  logic [VID_W-1:0] ru, rv, final_root;
  logic [EID_W-1:0] fe;            // FES entry being merged
  far_end_t         fe_far;

  // ---------------------------------------------------------------- outputs
  assign ld_ready = (st == S_LOAD);
  assign tab_req  = (st == S_REQ) || (st == S_INIT) || (st == S_ROW) ||
                    (st == S_FIND) || (st == S_COMP) || (st == S_GROW) ||
                    (st == S_POP) || (st == S_FV) || (st == S_UNION) ||
                    (st == S_UNION2);
  assign grown    = (st == S_DONE);
  assign stm_rda  = stm[stm_ra];
  assign stm_rdb  = stm[stm_rb];

  always_comb
    for (int i = 0; i < NV; i++) tab_init_syn[i] = stm[i].syn;

  assign tab_init = (st == S_INIT);

  // ---------------------------------------------------------- slot decoding
  // Edge slot k of the scan vertex: 0..3 owned (dir = k), 4..6 owned by the
  // -c, -r, -t neighbour (dir 0, 1, 2).
  logic [VID_W-1:0] g_owner;
  logic [1:0]       g_dir;
  logic             g_valid;
  far_end_t         g_far;
  stm_word_t        g_word;
  logic [1:0]       g_es;
  logic [1:0]       g_new;
  logic             g_push;
  logic [RW-1:0]    g_row_own, g_row_far;

  always_comb begin
    int c, r, t;
    c = int'(col);
    r = int'(row) % R;
    t = int'(row) / R;
    g_owner = scan_v;
    g_dir   = slot[1:0];
    g_valid = 1'b0;
    unique case (slot)
      3'd4:    begin g_owner = scan_v - 1'b1;         g_dir = 2'd0; g_valid = (c > 0); end
      3'd5:    begin g_owner = scan_v - VID_W'(C);    g_dir = 2'd1; g_valid = (r > 0); end
      3'd6:    begin g_owner = scan_v - VID_W'(R*C);  g_dir = 2'd2; g_valid = (t > 0); end
      default: g_valid = 1'b1;
    endcase
    g_far  = far_end(g_owner, g_dir, R, C, T);
    if (slot < 3'd4) g_valid = g_far.valid;
    g_word = stm[g_owner];
    g_es   = g_word.es[g_dir];
    g_new  = (g_es == ES_FULL) ? ES_FULL : g_es + 2'd1;
    g_push = g_valid && (g_es == ES_HALF);
    g_row_own = RW'(int'(g_owner) / C);
    g_row_far = RW'(int'(g_far.vid) / C);
  end

  // FES entry decoding
  always_comb fe_far = far_end(VID_W'(fe >> 2), fe[1:0], R, C, T);

  // number of compression writes still to do
  logic [TW:0] comp_total;
  assign comp_total = (TW+1)'(ttr_a_n) + (TW+1)'(ttr_b_n);

  // ------------------------------------------------------------ table ports
  always_comb begin
    tab_rd_a    = cur;
    tab_rd_b    = '0;
    tab_root_we = 1'b0;
    tab_root_wa = '0;
    tab_root_wd = '0;
    tab_size_we = 1'b0;
    tab_size_wa = '0;
    tab_size_wd = '0;
    unique case (st)
      S_COMP: begin
        tab_root_we = (comp_i < comp_total);
        tab_root_wd = final_root;
        if (comp_i < (TW+1)'(ttr_a_n)) tab_root_wa = ttr_a[comp_i[TW-1:0]];
        else                           tab_root_wa = ttr_b[comp_i[TW-1:0] - ttr_a_n];
      end
      S_UNION: begin
        tab_rd_a    = ru;
        tab_rd_b    = rv;
        tab_root_we = (ru != rv);
        tab_size_we = (ru != rv);
        if (tab_size_a >= tab_size_b) begin
          tab_root_wa = rv; tab_root_wd = ru;
          tab_size_wa = ru;
        end else begin
          tab_root_wa = ru; tab_root_wd = rv;
          tab_size_wa = rv;
        end
        tab_size_wd = tab_size_a + tab_size_b;
      end
      S_UNION2: begin
        // clear the size of the absorbed root
        tab_size_we = (ru != rv);
        tab_size_wa = (final_root == ru) ? rv : ru;
        tab_size_wd = '0;
      end
      default: ;
    endcase
  end

  // ----------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_CLEAR;
      fret <= F_SCAN;
      layers_in <= '0;
      fes_cnt <= '0;
      mid_drain <= 1'b0;
      row <= '0; col <= '0; slot <= '0;
      any_active <= 1'b0;
      scan_v <= '0; scan_act <= 1'b0;
      cur <= '0; ttr_a_n <= '0; ttr_b_n <= '0; comp_i <= '0;
      ru <= '0; rv <= '0; final_root <= '0; fe <= '0;
      ev_round <= 1'b0; ev_union <= 1'b0; ev_fes_full <= 1'b0; ev_boundary <= 1'b0;
    end else begin
      ev_round <= 1'b0; ev_union <= 1'b0; ev_fes_full <= 1'b0; ev_boundary <= 1'b0;
      if (flush && st != S_CLEAR) begin
        st <= S_CLEAR;
      end else begin
        unique case (st)
          S_CLEAR: begin
            for (int i = 0; i < NV; i++) stm[i] <= '0;
            zdr <= '0;
            parity <= '0;
            bnd <= '0;
            layers_in <= '0;
            fes_cnt <= '0;
            st <= S_LOAD;
          end

          S_LOAD: if (ld_valid) begin
            for (int r = 0; r < R; r++)
              for (int c = 0; c < C; c++)
                stm[(int'(ld_layer) * R + r) * C + c].syn <= ld_bits[r * C + c];
            for (int r = 0; r < R; r++)
              zdr[int'(ld_layer) * R + r] <= |ld_bits[r*C +: C];
            layers_in <= layers_in + 1'b1;
            if (int'(layers_in) == T - 1) st <= S_REQ;
          end

          S_REQ: if (tab_gnt) st <= S_INIT;

          S_INIT: begin
            for (int i = 0; i < NV; i++) parity[i] <= stm[i].syn;
            row <= '0; col <= '0; any_active <= 1'b0;
            ev_round <= 1'b1;
            st <= S_ROW;
          end

          // -------- growth scan over non-zero rows
          S_ROW: begin
            if (int'(row) == NROW) begin
              if (fes_cnt != 0) begin
                mid_drain <= 1'b0;
                st <= S_POP;
              end else if (any_active) begin
                row <= '0; col <= '0; any_active <= 1'b0;
                ev_round <= 1'b1;
              end else begin
                st <= S_DONE;
              end
            end else if (zdr[row]) begin
              col <= '0;
              scan_v <= VID_W'(int'(row) * C);
              cur <= VID_W'(int'(row) * C);
              ttr_a_n <= '0; ttr_b_n <= '0;
              fret <= F_SCAN;
              st <= S_FIND;
            end else begin
              row <= row + 1'b1;
            end
          end

          S_FIND: begin
            if (tab_root_a == cur) begin
              // root found
              unique case (fret)
                F_SCAN: begin
                  final_root <= cur;
                  scan_act <= parity[cur] & ~bnd[cur];
                  if (parity[cur] & ~bnd[cur]) any_active <= 1'b1;
                  comp_i <= '0;
                  st <= S_COMP;
                end
                F_U: begin
                  ru <= cur;
                  if (fe_far.isb) begin
                    bnd[cur] <= 1'b1;
                    ev_boundary <= 1'b1;
                    final_root <= cur;
                    comp_i <= '0;
                    st <= S_COMP;
                  end else begin
                    cur <= fe_far.vid;
                    fret <= F_V;
                  end
                end
                default: begin
                  rv <= cur;
                  st <= S_UNION;
                end
              endcase
            end else begin
              if (fret == F_V) begin
                if (int'(ttr_b_n) < TTR_N) begin
                  ttr_b[ttr_b_n] <= cur;
                  ttr_b_n <= ttr_b_n + 1'b1;
                end
              end else if (int'(ttr_a_n) < TTR_N) begin
                ttr_a[ttr_a_n] <= cur;
                ttr_a_n <= ttr_a_n + 1'b1;
              end
              cur <= tab_root_a;
            end
          end

          // path compression, one table write per cycle (the write itself is
          // driven from the combinational table port block)
          S_COMP: begin
            if (comp_i >= comp_total) begin
              if (fret == F_SCAN) begin
                slot <= '0;
                st <= scan_act ? S_GROW : S_ROW;
                if (!scan_act) begin
                  // next vertex
                  if (int'(col) == C - 1) begin
                    row <= row + 1'b1;
                  end else begin
                    col <= col + 1'b1;
                    scan_v <= scan_v + 1'b1;
                    cur <= scan_v + 1'b1;
                    ttr_a_n <= '0; ttr_b_n <= '0;
                    st <= S_FIND;
                  end
                end
              end else begin
                st <= S_POP;
              end
            end else begin
              comp_i <= comp_i + 1'b1;
            end
          end

          // grow one edge slot of an active vertex by one half
          S_GROW: begin
            if (g_push && int'(fes_cnt) == FES_DEPTH) begin
              ev_fes_full <= 1'b1;
              mid_drain <= 1'b1;
              st <= S_POP;
            end else begin
              if (g_valid && g_es != ES_FULL) begin
                stm[g_owner].es[g_dir] <= g_new;
                zdr[g_row_own] <= 1'b1;
                if (!g_far.isb) zdr[g_row_far] <= 1'b1;
              end
              if (g_push) begin
                fes[fes_cnt] <= EID_W'({g_owner, g_dir});
                fes_cnt <= fes_cnt + 1'b1;
              end
              if (slot == 3'd6) begin
                if (int'(col) == C - 1) begin
                  row <= row + 1'b1;
                  st <= S_ROW;
                end else begin
                  col <= col + 1'b1;
                  scan_v <= scan_v + 1'b1;
                  cur <= scan_v + 1'b1;
                  ttr_a_n <= '0; ttr_b_n <= '0;
                  fret <= F_SCAN;
                  st <= S_FIND;
                end
              end else begin
                slot <= slot + 1'b1;
              end
            end
          end

          // -------- merge the clusters joined by the FES edges
          S_POP: begin
            if (fes_cnt == 0) begin
              // drained: back to the scan (or the end-of-round test)
              fret <= F_SCAN;
              st <= mid_drain ? S_GROW : S_ROW;
            end else begin
              fe <= fes[fes_cnt - 1'b1];
              fes_cnt <= fes_cnt - 1'b1;
              cur <= VID_W'(fes[fes_cnt - 1'b1] >> 2);
              ttr_a_n <= '0; ttr_b_n <= '0;
              fret <= F_U;
              st <= S_FIND;
            end
          end

          S_UNION: begin
            comp_i <= '0;
            if (ru == rv) begin
              final_root <= ru;
              st <= S_COMP;
            end else begin
              ev_union <= 1'b1;
              if (tab_size_a >= tab_size_b) begin
                final_root <= ru;
                parity[ru] <= parity[ru] ^ parity[rv];
                parity[rv] <= 1'b0;
                bnd[ru] <= bnd[ru] | bnd[rv];
                bnd[rv] <= 1'b0;
              end else begin
                final_root <= rv;
                parity[rv] <= parity[ru] ^ parity[rv];
                parity[ru] <= 1'b0;
                bnd[rv] <= bnd[ru] | bnd[rv];
                bnd[ru] <= 1'b0;
              end
              st <= S_UNION2;
            end
          end

          S_UNION2: st <= S_COMP;

          S_DONE: if (release_i) st <= S_CLEAR;

          default: st <= S_CLEAR;
        endcase
      end
    end
  end

  // FES pointer stays in range
  a_fes: assert property (@(posedge clk) disable iff (!rst_n) int'(fes_cnt) <= FES_DEPTH);

endmodule
