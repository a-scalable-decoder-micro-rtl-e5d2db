// uf_decoder_block: the (4,2,1,1) Union-Find decoder block.
//
// What it does. It decodes the X-type and Z-type syndromes of NQ = 2 logical
// qubits of distance D = 11, four error configurations per logical cycle,
// with two Graph Generators (one per logical qubit, X then Z), one DFS engine
// and one Correction engine, and keeps the Pauli frame of each qubit in an
// error log. Syndrome rounds arrive compressed and are decompressed on entry.
// This is the paper's optimised decoder block (alpha = 0.5, beta = 1) in its
// cheaper form, with one root table and one size table shared by the two
// Graph Generators (SHARED_TABLES = 1): only one of them grows at a time,
// while the other one's STM is read by the DFS engine.
//
// How it works. Select logic (round-robin, first ready first) gives the
// tables to a Graph Generator for a whole growth, and gives the DFS engine to
// a Graph Generator whose clusters are grown; when the DFS engine has walked
// that STM the Graph Generator is released to load its next syndrome. The DFS
// engine and the Correction engine share the two edge stacks, so that the
// Correction engine peels one cluster while the DFS engine walks the next.
// The Correction engine's error-log writes are routed to the qubit and type
// of the cluster it is working on (the demultiplexer of the paper's block).
//
// Timeout. cyc_start opens a logical cycle. If the four configurations are
// not all corrected TIMEOUT cycles later, every engine is aborted and
// timeout_fail pulses (the paper interrupts the block after 325 ns; at its
// 4 GHz clock that is 1300 cycles). The units here handle one vertex or one
// edge slot per cycle, so at D = 11 a logical cycle with a few errors takes
// several thousand cycles and ends in a timeout at the default TIMEOUT; only
// error-free cycles finish within 1300. Meeting the paper's budget would need
// wider (row-parallel) growth and DFS datapaths.
//
// Interface and timing:
//  tx_syn -> tx_mode/tx_len/tx_pkt  qubit-side compression of one round
//                     (combinational), to be sent over the link.
//  in_valid/in_ready  one compressed syndrome round: configuration in_cfg =
//                     {qubit, type} (type 0 = X, 1 = Z), round in_layer, code
//                     in_mode, in_len, in_pkt. Each Graph Generator takes its
//                     qubit's X rounds first, then its Z rounds; a round for
//                     the other type waits (in_ready low).
//  cyc_done           pulses when all four configurations of the cycle are
//                     corrected; cyc_cycles is then the cycle count since
//                     cyc_start.
//  cor_valid/cor_eid/cor_cfg  every corrected edge (also measurement edges).
//  el_rd_q/el_rd_idx/el_rd_pauli  read port of the error logs, {z, x}.
//  ev_*               one-cycle event pulses for statistics.
// Which parts are this design's own choices is said in each unit's header.
module uf_decoder_block #(
  parameter int D             = 11,
  parameter int TIMEOUT       = 1300,
  parameter int STACK_DEPTH   = 40,
  parameter int FES_DEPTH     = 16,
  parameter int PEND_DEPTH    = 32,
  parameter int HOLD_N        = 4,
  parameter bit SHARED_TABLES = 1'b1,
  parameter int W             = 5,
  parameter int GB            = 2,
  // derived sizes, not meant to be set
  parameter int R    = D,
  parameter int C    = D - 1,
  parameter int T    = D,
  parameter int L    = R * C,
  parameter int NB   = (L + W - 1) / W,
  parameter int NG   = ((R + GB - 1) / GB) * ((C + GB - 1) / GB),
  parameter int PKTW = ((NB * (W + 1)) > (NG * (GB * GB + 1))) ?
                       ((NB * (W + 1)) > L ? NB * (W + 1) : L) :
                       ((NG * (GB * GB + 1)) > L ? NG * (GB * GB + 1) : L),
  parameter int LW   = (T > 1) ? $clog2(T) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // qubit-side compressor of this block's link (combinational)
  input  logic [L-1:0]              tx_syn,
  output logic [1:0]                tx_mode,
  output logic [$clog2(PKTW+1)-1:0] tx_len,
  output logic [PKTW-1:0]           tx_pkt,
  input  logic                      cyc_start,
  // compressed syndrome input
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [1:0]                in_cfg,
  input  logic [LW-1:0]             in_layer,
  input  logic [1:0]                in_mode,
  input  logic [$clog2(PKTW+1)-1:0] in_len,
  input  logic [PKTW-1:0]           in_pkt,
  // cycle status
  output logic                      cyc_done,
  output logic [31:0]               cyc_cycles,
  output logic                      timeout_fail,
  // corrections
  output logic                      cor_valid,
  output logic [uf_pkg::EID_W-1:0]  cor_eid,
  output logic [1:0]                cor_cfg,
  input  logic                      el_rd_q,
  input  logic [15:0]               el_rd_idx,
  output logic [1:0]                el_rd_pauli,
  // statistics
  output logic                      ev_round,
  output logic                      ev_union,
  output logic                      ev_fes_full,
  output logic                      ev_boundary,
  output logic                      ev_stack_switch,
  output logic                      ev_dfs_stall,
  output logic                      ev_stack_ovf,
  output logic                      ev_hold_ovf,
  output logic                      ev_odd,
  output logic                      ev_tab_wait
);
  import uf_pkg::*;

  localparam int NGG = 2;    // Graph Generators = logical qubits in the block
  localparam int NV  = R * C * T;

  logic flush;

  // ------------------------------------------------------------ link
  // The compressor belongs to the qubit side; it is kept here so that both
  // ends of the link come with the block. Its packet goes out on tx_* and
  // comes back in on in_* after transmission.
  logic [$clog2(PKTW+1)-1:0] tx_ls, tx_ld, tx_lg;
  syn_compressor #(.D(D), .R(R), .C(C), .W(W), .GB(GB)) u_cmp (
    .syn(tx_syn), .mode(tx_mode), .len(tx_len), .pkt(tx_pkt),
    .len_sparse(tx_ls), .len_dzc(tx_ld), .len_geo(tx_lg)
  );

  // ------------------------------------------------------------ decompress
  logic [L-1:0] in_bits;
  syn_decompressor #(.D(D), .R(R), .C(C), .W(W), .GB(GB)) u_dec (
    .mode(in_mode), .len(in_len), .pkt(in_pkt), .syn(in_bits)
  );

  // ------------------------------------------------------------ Gr-Gens
  logic [NGG-1:0] gg_ld_ready, gg_ld_valid, gg_type;
  logic [NGG-1:0] gg_tab_req, gg_tab_gnt, gg_tab_init;
  logic [NV-1:0]  gg_tab_init_syn [NGG];
  logic [VID_W-1:0] gg_rd_a [NGG], gg_rd_b [NGG];
  logic [VID_W-1:0] gg_root_a [NGG], gg_root_b [NGG], gg_size_a [NGG], gg_size_b [NGG];
  logic [NGG-1:0] gg_root_we, gg_size_we;
  logic [VID_W-1:0] gg_root_wa [NGG], gg_root_wd [NGG], gg_size_wa [NGG], gg_size_wd [NGG];
  logic [NGG-1:0] gg_grown, gg_release;
  logic [VID_W-1:0] dfs_ra, dfs_rb;
  stm_word_t      gg_rda [NGG], gg_rdb [NGG];
  logic [R*T-1:0] gg_zdr [NGG];
  logic [NGG-1:0] gg_ev_round, gg_ev_union, gg_ev_fes, gg_ev_bnd;

  assign in_ready = gg_ld_ready[in_cfg[1]] && (gg_type[in_cfg[1]] == in_cfg[0]);

  for (genvar g = 0; g < NGG; g++) begin : g_gg
    assign gg_ld_valid[g] = in_valid && in_ready && (in_cfg[1] == 1'(g));

    gr_gen #(.D(D), .R(R), .C(C), .T(T), .FES_DEPTH(FES_DEPTH)) u_gg (
      .clk, .rst_n, .flush,
      .ld_valid(gg_ld_valid[g]), .ld_ready(gg_ld_ready[g]),
      .ld_layer(in_layer), .ld_bits(in_bits),
      .tab_req(gg_tab_req[g]), .tab_gnt(gg_tab_gnt[g]),
      .tab_init(gg_tab_init[g]), .tab_init_syn(gg_tab_init_syn[g]),
      .tab_rd_a(gg_rd_a[g]), .tab_rd_b(gg_rd_b[g]),
      .tab_root_a(gg_root_a[g]), .tab_root_b(gg_root_b[g]),
      .tab_size_a(gg_size_a[g]), .tab_size_b(gg_size_b[g]),
      .tab_root_we(gg_root_we[g]), .tab_root_wa(gg_root_wa[g]), .tab_root_wd(gg_root_wd[g]),
      .tab_size_we(gg_size_we[g]), .tab_size_wa(gg_size_wa[g]), .tab_size_wd(gg_size_wd[g]),
      .grown(gg_grown[g]), .release_i(gg_release[g]),
      .stm_ra(dfs_ra), .stm_rda(gg_rda[g]), .stm_rb(dfs_rb), .stm_rdb(gg_rdb[g]),
      .zdr(gg_zdr[g]),
      .ev_round(gg_ev_round[g]), .ev_union(gg_ev_union[g]),
      .ev_fes_full(gg_ev_fes[g]), .ev_boundary(gg_ev_bnd[g])
    );

    // X first, then Z, for each logical qubit
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)                         gg_type[g] <= 1'b0;
      else if (flush || cyc_start)        gg_type[g] <= 1'b0;
      else if (gg_release[g])             gg_type[g] <= ~gg_type[g];
  end

  // ------------------------------------------------------------ tables
  if (SHARED_TABLES) begin : g_shared
    logic sel;
    rr_arbiter #(.N(NGG)) u_tab_arb (.clk, .rst_n, .req(gg_tab_req), .gnt(gg_tab_gnt));
    assign sel = gg_tab_gnt[1];
    uf_tables #(.NV(NV)) u_tab (
      .clk,
      .init(gg_tab_init[sel] && gg_tab_gnt[sel]), .init_syn(gg_tab_init_syn[sel]),
      .rd_a(gg_rd_a[sel]), .rd_b(gg_rd_b[sel]),
      .root_a(gg_root_a[0]), .root_b(gg_root_b[0]),
      .size_a(gg_size_a[0]), .size_b(gg_size_b[0]),
      .root_we(gg_root_we[sel] && gg_tab_gnt[sel]), .root_wa(gg_root_wa[sel]), .root_wd(gg_root_wd[sel]),
      .size_we(gg_size_we[sel] && gg_tab_gnt[sel]), .size_wa(gg_size_wa[sel]), .size_wd(gg_size_wd[sel])
    );
    assign gg_root_a[1] = gg_root_a[0];
    assign gg_root_b[1] = gg_root_b[0];
    assign gg_size_a[1] = gg_size_a[0];
    assign gg_size_b[1] = gg_size_b[0];
    assign ev_tab_wait = |(gg_tab_req & ~gg_tab_gnt & {gg_tab_gnt[0], gg_tab_gnt[1]});
  end else begin : g_private
    for (genvar g = 0; g < NGG; g++) begin : g_t
      assign gg_tab_gnt[g] = gg_tab_req[g];
      uf_tables #(.NV(NV)) u_tab (
        .clk,
        .init(gg_tab_init[g]), .init_syn(gg_tab_init_syn[g]),
        .rd_a(gg_rd_a[g]), .rd_b(gg_rd_b[g]),
        .root_a(gg_root_a[g]), .root_b(gg_root_b[g]),
        .size_a(gg_size_a[g]), .size_b(gg_size_b[g]),
        .root_we(gg_root_we[g]), .root_wa(gg_root_wa[g]), .root_wd(gg_root_wd[g]),
        .size_we(gg_size_we[g]), .size_wa(gg_size_wa[g]), .size_wd(gg_size_wd[g])
      );
    end
    assign ev_tab_wait = 1'b0;
  end

  // ------------------------------------------------------------ DFS select
  logic [NGG-1:0] dfs_gnt;
  logic           dfs_active, dfs_src, dfs_start, dfs_done, dfs_busy;
  logic [1:0]     dfs_cfg;

  rr_arbiter #(.N(NGG)) u_dfs_arb (.clk, .rst_n, .req(gg_grown), .gnt(dfs_gnt));

  assign dfs_start = !dfs_active && |(dfs_gnt & gg_grown);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dfs_active <= 1'b0; dfs_src <= 1'b0; dfs_cfg <= '0;
    end else if (flush) begin
      dfs_active <= 1'b0;
    end else if (dfs_start) begin
      dfs_active <= 1'b1;
      dfs_src <= dfs_gnt[1];
      dfs_cfg <= {dfs_gnt[1], gg_type[dfs_gnt[1]]};
    end else if (dfs_done) begin
      dfs_active <= 1'b0;
    end
  end

  for (genvar g = 0; g < NGG; g++) begin : g_rel
    assign gg_release[g] = dfs_done && (dfs_src == 1'(g));
  end

  // ------------------------------------------------------------ DFS engine
  logic [1:0]  stk_push, stk_pop, stk_full, stk_empty, stk_ovf, corr_own;
  stk_entry_t  stk_data;
  stk_entry_t  stk_pd [2];
  stk_entry_t  stk_top [2];
  logic [$clog2(STACK_DEPTH+1)-1:0] stk_cnt [2];
  logic        cl_valid, cl_ready, cl_first, cl_two, cl_drop;

  assign stk_pd[0] = stk_data;
  assign stk_pd[1] = stk_data;

  dfs_engine #(.D(D), .R(R), .C(C), .T(T), .PEND_DEPTH(PEND_DEPTH)) u_dfs (
    .clk, .rst_n, .flush,
    .start(dfs_start), .done(dfs_done), .busy(dfs_busy),
    .stm_ra(dfs_ra), .stm_rda(gg_rda[dfs_src]),
    .stm_rb(dfs_rb), .stm_rdb(gg_rdb[dfs_src]),
    .zdr(gg_zdr[dfs_src]),
    .stk_push, .stk_data, .stk_full, .stk_empty, .corr_own,
    .cl_valid, .cl_ready, .cl_first, .cl_two, .cl_drop,
    .ev_switch(ev_stack_switch), .ev_stall(ev_dfs_stall), .ev_overflow(ev_stack_ovf)
  );

  edge_stacks #(.DEPTH(STACK_DEPTH)) u_stk (
    .clk, .rst_n, .clear(flush),
    .push(stk_push), .push_data(stk_pd), .pop(stk_pop),
    .top(stk_top), .cnt(stk_cnt), .full(stk_full), .empty(stk_empty), .ovf(stk_ovf)
  );

  // ------------------------------------------------------------ Corr engine
  logic        el_we, corr_busy;
  logic [15:0] el_dq;
  logic [1:0]  corr_cfg;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                    corr_cfg <= '0;
    else if (cl_valid && cl_ready) corr_cfg <= dfs_cfg;

  corr_engine #(.D(D), .R(R), .C(C), .T(T), .HOLD_N(HOLD_N)) u_corr (
    .clk, .rst_n, .flush,
    .cl_valid, .cl_ready, .cl_first, .cl_two, .cl_drop,
    .stk_pop, .stk_top, .stk_empty, .corr_own,
    .el_we, .el_dq, .cor_valid, .cor_eid, .busy(corr_busy),
    .ev_hold_ovf, .ev_odd
  );
  assign cor_cfg = corr_cfg;

  // ------------------------------------------------------------ error logs
  logic [1:0] el_pauli [NGG];
  for (genvar g = 0; g < NGG; g++) begin : g_el
    error_log #(.D(D)) u_el (
      .clk, .rst_n,
      .tog_en(el_we && (corr_cfg[1] == 1'(g))), .tog_z(corr_cfg[0]), .tog_idx(el_dq),
      .rd_idx(el_rd_idx), .rd_pauli(el_pauli[g])
    );
  end
  assign el_rd_pauli = el_pauli[el_rd_q];

  // ------------------------------------------------------------ cycle control
  logic [3:0]  dfs_fin;      // DFS pass of the configuration finished
  logic [3:0]  complete;
  logic        in_cycle;
  logic [31:0] cnt;

  always_comb
    for (int i = 0; i < 4; i++)
      complete[i] = dfs_fin[i] && !(corr_busy && corr_cfg == 2'(i)) &&
                    !(cl_valid && dfs_cfg == 2'(i));

  assign flush = in_cycle && !(&complete) && (int'(cnt) >= TIMEOUT - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dfs_fin <= '0; in_cycle <= 1'b0; cnt <= '0;
      cyc_done <= 1'b0; cyc_cycles <= '0; timeout_fail <= 1'b0;
    end else begin
      cyc_done <= 1'b0;
      timeout_fail <= 1'b0;
      if (cyc_start) begin
        dfs_fin <= '0; in_cycle <= 1'b1; cnt <= '0;
      end else if (in_cycle) begin
        cnt <= cnt + 1'b1;
        if (dfs_done) dfs_fin[dfs_cfg] <= 1'b1;
        if (&complete) begin
          in_cycle <= 1'b0;
          cyc_done <= 1'b1;
          cyc_cycles <= cnt + 1'b1;
        end else if (flush) begin
          in_cycle <= 1'b0;
          timeout_fail <= 1'b1;
          cyc_cycles <= cnt + 1'b1;
        end
      end
    end
  end

  assign ev_round    = |gg_ev_round;
  assign ev_union    = |gg_ev_union;
  assign ev_fes_full = |gg_ev_fes;
  assign ev_boundary = |gg_ev_bnd;

endmodule
