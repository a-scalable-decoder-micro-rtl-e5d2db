// tb_dfs_engine: self-checking test of the Depth First Search engine.
//
// A Graph Generator (with its tables) grows random syndromes on a distance-5
// lattice and so fills the STM; the DFS engine then walks it into two small
// edge stacks (depth 4), and the testbench itself plays the Correction engine:
// it takes each cluster descriptor, pops the banks in the order given, slowly
// and at random, and peels the tree with a full syndrome array.
// Checked: every stacked edge is fully grown in the STM and carries the right
// end-point syndromes; no vertex is reached twice; after a pass without a
// dropped cluster the peeled correction has exactly the input syndrome; a
// dropped cluster comes with an overflow event. Alternate-bank use, a stall
// on a busy bank and an overflow must each happen at least once.
`timescale 1ns/100ps
module tb_dfs_engine;
  import uf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int D = 5, R = D, C = D - 1, T = D, NV = R * C * T, DEPTH = 4;
  logic            ldv, ldr, grown, rel;
  logic [2:0]      layer;
  logic [R*C-1:0]  bits;
  logic            req, init, rwe, swe;
  logic [NV-1:0]   isyn;
  logic [VID_W-1:0] ra, rb, roa, rob, sa, sb, rwa, rwd, swa, swd, sra, srb;
  stm_word_t       sda, sdb;
  logic [R*T-1:0]  zdr;
  logic ev0, ev1, ev2, ev3;

  gr_gen #(.D(D), .FES_DEPTH(8)) u_gg (
    .clk, .rst_n, .flush(1'b0), .ld_valid(ldv), .ld_ready(ldr), .ld_layer(layer), .ld_bits(bits),
    .tab_req(req), .tab_gnt(req), .tab_init(init), .tab_init_syn(isyn),
    .tab_rd_a(ra), .tab_rd_b(rb), .tab_root_a(roa), .tab_root_b(rob),
    .tab_size_a(sa), .tab_size_b(sb),
    .tab_root_we(rwe), .tab_root_wa(rwa), .tab_root_wd(rwd),
    .tab_size_we(swe), .tab_size_wa(swa), .tab_size_wd(swd),
    .grown, .release_i(rel), .stm_ra(sra), .stm_rda(sda), .stm_rb(srb), .stm_rdb(sdb),
    .zdr, .ev_round(ev0), .ev_union(ev1), .ev_fes_full(ev2), .ev_boundary(ev3));
  uf_tables #(.NV(NV)) u_tab (
    .clk, .init, .init_syn(isyn), .rd_a(ra), .rd_b(rb),
    .root_a(roa), .root_b(rob), .size_a(sa), .size_b(sb),
    .root_we(rwe), .root_wa(rwa), .root_wd(rwd),
    .size_we(swe), .size_wa(swa), .size_wd(swd));

  logic start, done, busy, cl_valid, cl_ready, cl_first, cl_two, cl_drop, ev_switch, ev_stall, ev_overflow;
  logic [1:0] stk_push, stk_full, stk_empty, corr_own, pop, sovf;
  stk_entry_t stk_data, pd [2], top [2];
  logic [$clog2(DEPTH+1)-1:0] cnt [2];
  assign pd[0] = stk_data;
  assign pd[1] = stk_data;

  dfs_engine #(.D(D), .PEND_DEPTH(24)) dut (
    .clk, .rst_n, .flush(1'b0), .start, .done, .busy,
    .stm_ra(sra), .stm_rda(sda), .stm_rb(srb), .stm_rdb(sdb), .zdr,
    .stk_push, .stk_data, .stk_full, .stk_empty, .corr_own,
    .cl_valid, .cl_ready, .cl_first, .cl_two, .cl_drop,
    .ev_switch, .ev_stall, .ev_overflow);
  edge_stacks #(.DEPTH(DEPTH)) u_stk (
    .clk, .rst_n, .clear(1'b0), .push(stk_push), .push_data(pd), .pop,
    .top, .cnt, .full(stk_full), .empty(stk_empty), .ovf(sovf));

  int n_sw = 0, n_stall = 0, n_ovf = 0, n_drop = 0, n_cl = 0;
  always @(posedge clk) begin
    n_sw += int'(ev_switch); n_stall += int'(ev_stall); n_ovf += int'(ev_overflow);
  end

  logic syn [NV];
  int   cur [NV + 1];
  int   seen [NV + 1];
  bit   pass_drop;

  // ------------------------------------------------------------ consumer
  bit go;
  logic c_busy = 0, c_second = 0, c_drop = 0, c_bank = 0;
  assign cl_ready = !c_busy;
  always_comb begin
    corr_own = '0;
    if (c_busy) begin corr_own[c_bank] = 1'b1; if (c_second) corr_own[!c_bank] = 1'b1; end
  end
  always_comb begin
    pop = '0;
    if (c_busy && !stk_empty[c_bank] && go) pop[c_bank] = 1'b1;
  end
  always @(negedge clk) go = ($urandom % 3) == 0;

  always @(posedge clk) if (rst_n) begin
    if (!c_busy && cl_valid) begin
      c_busy <= 1; c_bank <= cl_first; c_second <= cl_two; c_drop <= cl_drop;
      n_cl++;
      if (cl_drop) begin n_drop++; pass_drop = 1; end
    end else if (c_busy) begin
      if (stk_empty[c_bank]) begin
        if (c_second) begin c_bank <= !c_bank; c_second <= 0; end
        else c_busy <= 0;
      end else if (pop[c_bank] && !c_drop) begin
        stk_entry_t e;
        far_end_t f;
        int ch, pa;
        e = top[c_bank];
        f = far_end(VID_W'(e.eid >> 2), e.eid[1:0], R, C, T);
        ch = e.fwd ? int'(f.vid) : int'(e.eid >> 2);
        pa = e.fwd ? int'(e.eid >> 2) : (f.isb ? NV : int'(f.vid));
        checks++;
        if (u_gg.stm[e.eid >> 2].es[e.eid[1:0]] != ES_FULL || !f.valid ||
            e.s_chd != syn[ch] || (pa < NV && e.s_par != syn[pa]) || (e.fwd && f.isb)) begin
          failures++;
          if (failures < 10) $display("FAIL entry eid %0d fwd %0d", e.eid, e.fwd);
        end
        seen[ch]++;
        if (cur[ch] != 0) begin
          cur[ch] = 0;
          if (pa < NV) cur[pa] ^= 1;
        end
      end
    end
  end

  initial begin
    far_end_t f;
    int bad;
    start = 0; ldv = 0; layer = 0; bits = 0; rel = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 60; rep++) begin
      for (int v = 0; v < NV; v++) syn[v] = 0;
      for (int v = 0; v < NV; v++)
        for (int d = 0; d < 4; d++) begin
          f = far_end(VID_W'(v), 2'(d), R, C, T);
          if (f.valid && ($urandom % 1000) < ((rep % 3 == 2) ? 50 : 15)) begin
            syn[v] ^= 1;
            if (!f.isb) syn[f.vid] ^= 1;
          end
        end
      for (int v = 0; v <= NV; v++) begin cur[v] = (v < NV) ? int'(syn[v]) : 0; seen[v] = 0; end
      pass_drop = 0;
      wait (ldr);
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        for (int i = 0; i < R * C; i++) bits[i] = syn[t * R * C + i];
        layer = 3'(t); ldv = 1;
        @(negedge clk); ldv = 0;
      end
      wait (grown);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      while (c_busy || cl_valid) @(negedge clk);
      repeat (2) @(negedge clk);
      bad = 0;
      for (int v = 0; v < NV; v++) if (seen[v] > 1) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL rep %0d: %0d vertices reached twice", rep, bad); end
      if (!pass_drop) begin
        bad = 0;
        for (int v = 0; v < NV; v++) if (cur[v] != 0) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("FAIL rep %0d: %0d defects left after peeling", rep, bad); end
      end
      @(negedge clk); rel = 1; @(negedge clk); rel = 0;
    end
    checks++; if (n_sw == 0)    begin failures++; $display("FAIL: no alternate-bank use"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL: no stall"); end
    checks++; if (n_ovf == 0 || n_ovf != n_drop) begin failures++; $display("FAIL: overflow %0d drop %0d", n_ovf, n_drop); end
    $display("clusters %0d switch %0d stall %0d overflow %0d", n_cl, n_sw, n_stall, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
