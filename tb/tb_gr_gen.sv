// tb_gr_gen: self-checking test of the Graph Generator with its root/size
// tables.
//
// Part 1 is the worked growth example on a 3 x 3 single-round lattice with
// defects at vertices 4 and 5: after growth the edge 4-5 is full, the six
// other edges of the two vertices are half grown, all others empty; the root
// table is [0 1 2 3 4 4 6 7 8] and the size table has 2 at vertex 4 and 0
// elsewhere.
// Part 2 repeats random syndromes at distance 5 (5 x 4 x 5 vertices). After
// growth the testbench builds the clusters from the fully grown edges on its
// own and checks that every cluster holds an even number of defects or
// touches the boundary, that vertices share a table root exactly when they
// share a cluster, and that the size of a cluster's root is its defect count.
// The block is then released and reloaded, so unit reuse is tested too.
`timescale 1ns/100ps
module tb_gr_gen;
  import uf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  // ---------------------------------------------------------------- example
  localparam int ER = 3, EC = 3, ET = 1, ENV = 9;
  logic            e_ldv, e_ldr, e_grown, e_rel;
  logic [0:0]      e_layer;
  logic [8:0]      e_bits;
  logic            e_req, e_init, e_rwe, e_swe;
  logic [ENV-1:0]  e_isyn;
  logic [VID_W-1:0] e_ra, e_rb, e_roa, e_rob, e_sa, e_sb, e_rwa, e_rwd, e_swa, e_swd, e_sra, e_srb;
  stm_word_t       e_sda, e_sdb;
  logic [ER*ET-1:0] e_zdr;
  logic e_ev0, e_ev1, e_ev2, e_ev3;

  gr_gen #(.D(3), .R(ER), .C(EC), .T(ET), .FES_DEPTH(4)) u_ex (
    .clk, .rst_n, .flush(1'b0), .ld_valid(e_ldv), .ld_ready(e_ldr), .ld_layer(e_layer), .ld_bits(e_bits),
    .tab_req(e_req), .tab_gnt(e_req), .tab_init(e_init), .tab_init_syn(e_isyn),
    .tab_rd_a(e_ra), .tab_rd_b(e_rb), .tab_root_a(e_roa), .tab_root_b(e_rob),
    .tab_size_a(e_sa), .tab_size_b(e_sb),
    .tab_root_we(e_rwe), .tab_root_wa(e_rwa), .tab_root_wd(e_rwd),
    .tab_size_we(e_swe), .tab_size_wa(e_swa), .tab_size_wd(e_swd),
    .grown(e_grown), .release_i(e_rel), .stm_ra(e_sra), .stm_rda(e_sda), .stm_rb(e_srb), .stm_rdb(e_sdb),
    .zdr(e_zdr), .ev_round(e_ev0), .ev_union(e_ev1), .ev_fes_full(e_ev2), .ev_boundary(e_ev3));
  uf_tables #(.NV(ENV)) u_etab (
    .clk, .init(e_init), .init_syn(e_isyn), .rd_a(e_ra), .rd_b(e_rb),
    .root_a(e_roa), .root_b(e_rob), .size_a(e_sa), .size_b(e_sb),
    .root_we(e_rwe), .root_wa(e_rwa), .root_wd(e_rwd),
    .size_we(e_swe), .size_wa(e_swa), .size_wd(e_swd));

  // ---------------------------------------------------------------- d = 5
  localparam int D = 5, R = D, C = D - 1, T = D, NV = R * C * T;
  logic            ldv, ldr, grown, rel;
  logic [2:0]      layer;
  logic [R*C-1:0]  bits;
  logic            req, init, rwe, swe;
  logic [NV-1:0]   isyn;
  logic [VID_W-1:0] ra, rb, roa, rob, sa, sb, rwa, rwd, swa, swd, sra, srb;
  stm_word_t       sda, sdb;
  logic [R*T-1:0]  zdr;
  logic ev_round, ev_union, ev_fes, ev_bnd;
  int n_union = 0, n_fes = 0, n_bnd = 0;

  gr_gen #(.D(D), .FES_DEPTH(3)) dut (
    .clk, .rst_n, .flush(1'b0), .ld_valid(ldv), .ld_ready(ldr), .ld_layer(layer), .ld_bits(bits),
    .tab_req(req), .tab_gnt(req), .tab_init(init), .tab_init_syn(isyn),
    .tab_rd_a(ra), .tab_rd_b(rb), .tab_root_a(roa), .tab_root_b(rob),
    .tab_size_a(sa), .tab_size_b(sb),
    .tab_root_we(rwe), .tab_root_wa(rwa), .tab_root_wd(rwd),
    .tab_size_we(swe), .tab_size_wa(swa), .tab_size_wd(swd),
    .grown, .release_i(rel), .stm_ra(sra), .stm_rda(sda), .stm_rb(srb), .stm_rdb(sdb),
    .zdr, .ev_round, .ev_union, .ev_fes_full(ev_fes), .ev_boundary(ev_bnd));
  uf_tables #(.NV(NV)) u_tab (
    .clk, .init, .init_syn(isyn), .rd_a(ra), .rd_b(rb),
    .root_a(roa), .root_b(rob), .size_a(sa), .size_b(sb),
    .root_we(rwe), .root_wa(rwa), .root_wd(rwd),
    .size_we(swe), .size_wa(swa), .size_wd(swd));

  always @(posedge clk) begin
    n_union += int'(ev_union); n_fes += int'(ev_fes); n_bnd += int'(ev_bnd);
  end

  // tb-side union-find over vertices 0..NV-1 and the boundary NV
  int par [NV + 1];
  function automatic int tfind(int x);
    while (par[x] != x) x = par[x];
    return x;
  endfunction

  function automatic int table_root(int v);
    int x = v, n = 0;
    while (int'(u_tab.root_tab[x]) != x && n < NV) begin x = int'(u_tab.root_tab[x]); n++; end
    return x;
  endfunction

  initial begin
    far_end_t f;
    logic syn [NV];
    int nodd, nd [NV + 1], rt [NV + 1], nhalf, nfull, bad;
    int exp_root [9];
    exp_root = '{0, 1, 2, 3, 4, 4, 6, 7, 8};
    e_ldv = 0; e_layer = 0; e_bits = 0; e_rel = 0; e_sra = 0; e_srb = 0;
    ldv = 0; layer = 0; bits = 0; rel = 0; sra = 0; srb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---------------- worked example
    wait (e_ldr);
    @(negedge clk); e_bits = 9'b000110000; e_ldv = 1;
    @(negedge clk); e_ldv = 0;
    wait (e_grown);
    @(negedge clk);
    for (int v = 0; v < 9; v++) begin
      checks++;
      if (int'(u_etab.root_tab[v]) != exp_root[v] || int'(u_etab.size_tab[v]) != ((v == 4) ? 2 : 0)) begin
        failures++;
        $display("FAIL example vertex %0d: root %0d size %0d", v, u_etab.root_tab[v], u_etab.size_tab[v]);
      end
    end
    nhalf = 0; nfull = 0;
    for (int v = 0; v < 9; v++) begin
      e_sra = VID_W'(v);
      #0.1;
      for (int d = 0; d < 4; d++) begin
        if (e_sda.es[d] == ES_HALF) nhalf++;
        if (e_sda.es[d] == ES_FULL) begin
          nfull++;
          checks++;
          if (!(v == 4 && d == 0)) begin failures++; $display("FAIL example: full edge %0d/%0d", v, d); end
        end
      end
    end
    checks++;
    if (nhalf != 6 || nfull != 1) begin failures++; $display("FAIL example: %0d half %0d full", nhalf, nfull); end
    checks++;
    if (e_zdr != 3'b111) begin failures++; $display("FAIL example: zdr %b", e_zdr); end

    // ---------------- random syndromes at d = 5
    for (int rep = 0; rep < 40; rep++) begin
      for (int v = 0; v < NV; v++) syn[v] = 0;
      for (int v = 0; v < NV; v++)
        for (int d = 0; d < 4; d++) begin
          f = far_end(VID_W'(v), 2'(d), R, C, T);
          if (f.valid && ($urandom % 1000) < ((rep % 4 == 3) ? 60 : 20)) begin
            syn[v] ^= 1;
            if (!f.isb) syn[f.vid] ^= 1;
          end
        end
      wait (ldr);
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        for (int i = 0; i < R * C; i++) bits[i] = syn[t * R * C + i];
        layer = 3'(t); ldv = 1;
        @(negedge clk); ldv = 0;
      end
      wait (grown);
      @(negedge clk);
      // clusters from the full edges
      for (int x = 0; x <= NV; x++) begin par[x] = x; nd[x] = 0; end
      for (int v = 0; v < NV; v++) begin
        sra = VID_W'(v);
        #0.1;
        for (int d = 0; d < 4; d++)
          if (sda.es[d] == ES_FULL) begin
            int a, b;
            f = far_end(VID_W'(v), 2'(d), R, C, T);
            a = tfind(v);
            b = tfind(f.isb ? NV : int'(f.vid));
            if (a != b) par[a] = b;
          end
      end
      for (int v = 0; v < NV; v++) if (syn[v]) nd[tfind(v)]++;
      bad = 0;
      for (int x = 0; x < NV; x++)
        if (tfind(x) == x && x != tfind(NV) && (nd[x] % 2) != 0) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL rep %0d: %0d odd clusters off the boundary", rep, bad); end
      // same cluster <=> same table root, size = defect count
      for (int x = 0; x <= NV; x++) rt[x] = -1;
      bad = 0;
      for (int v = 0; v < NV; v++) begin
        int c, r;
        c = tfind(v); r = table_root(v);
        if (tfind(NV) == c) continue;          // boundary clusters can span several roots
        if (rt[c] == -1) rt[c] = r;
        else if (rt[c] != r) bad++;
        if (r == v && int'(u_tab.size_tab[r]) != nd[c]) bad++;
      end
      for (int v = 0; v < NV; v++)
        for (int w = v + 1; w < NV; w++)
          if (table_root(v) == table_root(w) && tfind(v) != tfind(w)) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL rep %0d: %0d root/size mismatches", rep, bad); end
      @(negedge clk); rel = 1; @(negedge clk); rel = 0;
    end
    checks++; if (n_union == 0) begin failures++; $display("FAIL: no union"); end
    checks++; if (n_fes == 0)   begin failures++; $display("FAIL: FES never full"); end
    checks++; if (n_bnd == 0)   begin failures++; $display("FAIL: no boundary"); end
    $display("unions %0d fes_full %0d boundary %0d", n_union, n_fes, n_bnd);
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
