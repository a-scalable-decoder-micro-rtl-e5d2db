// tb_corr_engine: self-checking test of the Correction (peeling) engine.
//
// The edge stacks are modelled here as two queues. Part 1 is the worked
// peeling example: a path v0 - v1 - v2 with defects at v0 and v2, stacked as
// {e0, v0->v1, syndromes 1,0} under {e1, v1->v2, syndromes 0,1}, with the
// error log holding Z on e0's qubit. Both edges must be corrected, e1 first,
// leaving I on e0's qubit and Z on e1's.
// Part 2 draws random trees on a 3 x 2 x 3 lattice, rooted at a vertex (even
// defect count) or at the boundary (any count), pushes their edges in
// pre-order, sometimes split over both banks, and compares the corrected
// edges with a peeling model that keeps a full syndrome array. Dropped
// clusters must be popped without corrections, and an odd tree rooted at a
// vertex must raise ev_odd. Four hold registers must never overflow on
// these trees of at most eleven edges.
`timescale 1ns/100ps
module tb_corr_engine;
  import uf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int D = 3, R = 3, C = 2, T = 3, NV = R * C * T;
  logic flush = 1'b0;
  logic cl_valid, cl_ready, cl_first, cl_two, cl_drop, el_we, cor_valid, busy, ev_hold_ovf, ev_odd;
  logic [1:0] stk_pop, stk_empty, corr_own;
  stk_entry_t stk_top [2];
  logic [15:0] el_dq;
  logic [EID_W-1:0] cor_eid;
  stk_entry_t q [2][$];

  corr_engine #(.D(D), .R(R), .C(C), .T(T), .HOLD_N(4)) dut (.*);

  logic [15:0] rd_idx;
  logic [1:0]  rd_pauli;
  logic        pre_we;
  logic [15:0] pre_idx;
  error_log #(.D(D)) u_log (.clk, .rst_n, .tog_en(el_we || pre_we), .tog_z(1'b1),
                            .tog_idx(pre_we ? pre_idx : el_dq), .rd_idx, .rd_pauli);

  // stack model
  always_comb for (int b = 0; b < 2; b++) begin
    stk_empty[b] = (q[b].size() == 0);
    stk_top[b]   = (q[b].size() == 0) ? '0 : q[b][$];
  end
  always @(posedge clk) for (int b = 0; b < 2; b++) if (stk_pop[b]) void'(q[b].pop_back());

  int got [$];
  int n_odd = 0, n_hovf = 0;
  always @(posedge clk) begin
    if (cor_valid) got.push_back(int'(cor_eid));
    n_odd += int'(ev_odd);
    n_hovf += int'(ev_hold_ovf);
  end

  task automatic run_cluster(bit first, bit two, bit drop);
    @(negedge clk);
    cl_valid = 1; cl_first = first; cl_two = two; cl_drop = drop;
    @(posedge clk); while (!cl_ready) @(posedge clk);
    @(negedge clk); cl_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);   // ev_odd is registered one cycle after the end
  endtask

  function automatic stk_entry_t mk(int eid, bit fwd, bit sp, bit sc);
    stk_entry_t x;
    x.eid = EID_W'(eid); x.fwd = fwd; x.s_par = sp; x.s_chd = sc;
    return x;
  endfunction

  // random tree
  int   vis [NV];
  logic syn [NV];
  stk_entry_t ent [$];
  int   chd [$], prt [$];   // child and parent (-1 = boundary) per entry

  task automatic grow_tree(int v, int maxn);
    far_end_t f;
    int order [4], k, tmp, u;
    for (int i = 0; i < 4; i++) order[i] = i;
    for (int i = 3; i > 0; i--) begin k = $urandom % (i + 1); tmp = order[i]; order[i] = order[k]; order[k] = tmp; end
    // each of the 6 lattice neighbours: owner side (+dir) or far side (-dir)
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 3; i++) begin
        int dir;
        dir = order[i] % 3;
        if (ent.size() >= maxn) return;
        if (s == 0) begin
          f = far_end(VID_W'(v), 2'(dir), R, C, T);
          if (!f.valid || f.isb || vis[f.vid] || ($urandom % 3 == 0)) continue;
          u = int'(f.vid);
          vis[u] = 1;
          ent.push_back(mk(4 * v + dir, 1'b1, syn[v], syn[u])); chd.push_back(u); prt.push_back(v);
          grow_tree(u, maxn);
        end else begin
          // neighbour u that owns an edge to v
          u = (dir == 0) ? v - 1 : (dir == 1) ? v - C : v - R * C;
          if (u < 0 || (dir == 0 && (v % C) == 0) || (dir == 1 && ((v / C) % R) == 0)) continue;
          if (vis[u] || ($urandom % 3 == 0)) continue;
          vis[u] = 1;
          ent.push_back(mk(4 * u + dir, 1'b0, syn[v], syn[u])); chd.push_back(u); prt.push_back(v);
          grow_tree(u, maxn);
        end
      end
  endtask

  initial begin
    int exp_e [$], cur [NV], split, nd, root, cnt_bad;
    bit from_b, drop, odd;
    far_end_t f;
    cl_valid = 0; cl_first = 0; cl_two = 0; cl_drop = 0; pre_we = 0; pre_idx = 0; rd_idx = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- worked example: e0 = (v0,+c) = id 0, e1 = (v1,+c) = id 4
    @(negedge clk); pre_we = 1; pre_idx = data_qubit(EID_W'(0), R, C).idx;
    @(negedge clk); pre_we = 0;
    q[0].push_back(mk(0, 1'b1, 1'b1, 1'b0));
    q[0].push_back(mk(4, 1'b1, 1'b0, 1'b1));
    got.delete();
    run_cluster(1'b0, 1'b0, 1'b0);
    checks++;
    if (got.size() != 2 || got[0] != 4 || got[1] != 0) begin
      failures++; $display("FAIL example: %0d corrections", got.size());
    end
    rd_idx = data_qubit(EID_W'(0), R, C).idx; #0.1;
    checks++; if (rd_pauli != 2'b00) begin failures++; $display("FAIL example: e0 qubit %b", rd_pauli); end
    rd_idx = data_qubit(EID_W'(4), R, C).idx; #0.1;
    checks++; if (rd_pauli != 2'b10) begin failures++; $display("FAIL example: e1 qubit %b", rd_pauli); end

    // ---------------- random trees
    for (int rep = 0; rep < 3000; rep++) begin
      for (int v = 0; v < NV; v++) begin vis[v] = 0; syn[v] = $urandom % 2; end
      ent.delete(); chd.delete(); prt.delete();
      from_b = $urandom % 2;
      root = $urandom % NV;
      if (from_b) begin
        root = ($urandom % (R * T)) * C;               // c = 0: has a left boundary edge
        vis[root] = 1;
        ent.push_back(mk(4 * root + 3, 1'b0, 1'b0, syn[root])); chd.push_back(root); prt.push_back(-1);
      end else vis[root] = 1;
      grow_tree(root, 2 + $urandom % 10);
      if (ent.size() == 0) continue;
      // defect count: even for a vertex-rooted tree (fix at the root) unless odd wanted
      nd = 0;
      for (int v = 0; v < NV; v++) if (vis[v] && syn[v]) nd++;
      odd = !from_b && ($urandom % 8 == 0);
      if (!from_b && ((nd % 2) != int'(odd))) syn[root] ^= 1;
      foreach (ent[i]) begin
        ent[i].s_chd = syn[chd[i]];
        ent[i].s_par = (prt[i] < 0) ? 1'b0 : syn[prt[i]];
      end
      // peeling model in pop order
      for (int v = 0; v < NV; v++) cur[v] = syn[v];
      exp_e.delete();
      for (int i = ent.size() - 1; i >= 0; i--)
        if (cur[chd[i]]) begin
          exp_e.push_back(int'(ent[i].eid));
          cur[chd[i]] = 0;
          if (prt[i] >= 0) cur[prt[i]] ^= 1;
        end
      drop = ($urandom % 10 == 0);
      split = ($urandom % 2) ? ($urandom % ent.size()) : ent.size();
      begin
        bit b0;
        b0 = $urandom % 2;
        foreach (ent[i]) q[(i < split) ? b0 : !b0].push_back(ent[i]);
        got.delete();
        n_odd = 0;
        run_cluster((split < ent.size()) ? !b0 : b0, split < ent.size(), drop);
      end
      checks++;
      cnt_bad = (q[0].size() != 0 || q[1].size() != 0);
      if (drop) begin if (got.size() != 0) cnt_bad++; end
      else if (got != exp_e) cnt_bad++;
      if (cnt_bad != 0) begin
        failures++;
        if (failures < 10) $display("FAIL rep %0d: %0d corrections, %0d expected (drop %0d)", rep, got.size(), exp_e.size(), drop);
      end
      checks++;
      if (!drop && (n_odd != 0) != odd) begin failures++; if (failures < 10) $display("FAIL rep %0d: ev_odd %0d expected %0d", rep, n_odd, odd); end
    end
    checks++;
    if (n_hovf != 0) begin failures++; $display("FAIL: hold overflow with four registers"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
