// tb_uf_full: the decoder block at its default size (distance 11, default
// timeout, stack, FES and hold sizes), run through a few logical cycles.
//
// Each cycle draws random edge errors for both qubits and both error types
// (none, then about one and two errors per configuration, then a rate of one
// per thousand edges), compresses every round and feeds it in. For every cycle
// that completes without a stack overflow the correction of each
// configuration must have exactly the syndrome that was sent, and after every
// cycle, completed or timed out, the error logs must equal the XOR of all
// data-qubit corrections. At least one cycle must complete and unions must
// happen. Timeouts are counted and printed: at this size they are the
// block's reported failure, not a testbench error.
`timescale 1ns/100ps
module tb_uf_full;
  import uf_pkg::*;

  localparam int D = 11, R = D, C = D - 1, T = D;
  localparam int NV = R * C * T, NE = 4 * NV, L = R * C;
  localparam int NDQ = D * D + (D - 1) * (D - 1);
  localparam int W = 5, GB = 2;
  localparam int NB = (L + W - 1) / W;
  localparam int NG = ((R + GB - 1) / GB) * ((C + GB - 1) / GB);
  localparam int PKTW = ((NB * (W + 1)) > (NG * (GB * GB + 1))) ?
                        ((NB * (W + 1)) > L ? NB * (W + 1) : L) :
                        ((NG * (GB * GB + 1)) > L ? NG * (GB * GB + 1) : L);
  localparam int LENW = $clog2(PKTW + 1);
  localparam int NCYC = 4;
  localparam int TO = 1300;   // default timeout of the block

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic            cyc_start, in_valid, in_ready;
  logic [1:0]      in_cfg, in_mode;
  logic [3:0]      in_layer;
  logic [LENW-1:0] in_len;
  logic [PKTW-1:0] in_pkt;
  logic            cyc_done, timeout_fail, cor_valid;
  logic [31:0]     cyc_cycles;
  logic [EID_W-1:0] cor_eid;
  logic [1:0]      cor_cfg, el_rd_pauli;
  logic            el_rd_q;
  logic [15:0]     el_rd_idx;
  logic ev_round, ev_union, ev_fes_full, ev_boundary, ev_stack_switch,
        ev_dfs_stall, ev_stack_ovf, ev_hold_ovf, ev_odd, ev_tab_wait;

  uf_decoder_block dut (.*);

  // qubit-side compressor inside the block
  logic [L-1:0]    tx_syn;
  logic [1:0]      tx_mode;
  logic [LENW-1:0] tx_len;
  logic [PKTW-1:0] tx_pkt;

  int checks = 0, failures = 0;
  logic err  [4][NE];
  logic syn  [4][NV];
  logic corr [4][NE];
  logic [1:0] log_m [2][NDQ];
  int n_union = 0, n_fes = 0, n_bnd = 0, n_sw = 0, n_stall = 0, n_ovf = 0,
      n_tab = 0, n_round = 0, n_done = 0, n_to = 0, n_valid = 0, n_hold = 0;
  int n_mode [4];
  int ovf_in_cycle;

  // --------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    if (cor_valid) corr[cor_cfg][cor_eid] = ~corr[cor_cfg][cor_eid];
    n_union += int'(ev_union);  n_fes += int'(ev_fes_full); n_bnd += int'(ev_boundary);
    n_sw += int'(ev_stack_switch); n_stall += int'(ev_dfs_stall);
    n_tab += int'(ev_tab_wait); n_round += int'(ev_round); n_hold += int'(ev_hold_ovf);
    if (ev_stack_ovf || ev_hold_ovf) begin n_ovf++; ovf_in_cycle++; end
  end

  function automatic far_end_t fe(int v, int dir);
    return far_end(VID_W'(v), 2'(dir), R, C, T);
  endfunction

  task automatic make_errors(int cfg, int permille);
    far_end_t f;
    for (int v = 0; v < NV; v++) syn[cfg][v] = 1'b0;
    for (int e = 0; e < NE; e++) begin
      f = fe(e >> 2, e & 3);
      if (permille < 0 && f.valid && ($urandom % NE) < -permille * 2) begin
        // a few single errors: about -permille of them
        err[cfg][e] = 1'b1; corr[cfg][e] = 1'b0;
        syn[cfg][e >> 2] ^= 1'b1;
        if (!f.isb) syn[cfg][f.vid] ^= 1'b1;
        continue;
      end
      err[cfg][e] = f.valid && (permille > 0) && (($urandom % 1000) < permille);
      corr[cfg][e] = 1'b0;
      if (err[cfg][e]) begin
        syn[cfg][e >> 2] ^= 1'b1;
        if (!f.isb) syn[cfg][f.vid] ^= 1'b1;
      end
    end
  endtask

  // syndrome of the correction must equal the syndrome sent
  task automatic check_valid(int cfg);
    logic s [NV];
    far_end_t f;
    int bad;
    for (int v = 0; v < NV; v++) s[v] = 1'b0;
    for (int e = 0; e < NE; e++)
      if (corr[cfg][e]) begin
        f = fe(e >> 2, e & 3);
        s[e >> 2] ^= 1'b1;
        if (!f.isb) s[f.vid] ^= 1'b1;
      end
    bad = 0;
    for (int v = 0; v < NV; v++) if (s[v] != syn[cfg][v]) bad++;
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL cfg %0d: correction syndrome differs at %0d vertices", cfg, bad);
    end
  endtask

  task automatic update_log_model(int cfg);
    dq_t q;
    for (int e = 0; e < NE; e++)
      if (corr[cfg][e]) begin
        q = data_qubit(EID_W'(e), R, C);
        if (q.valid) log_m[cfg >> 1][q.idx][cfg & 1] ^= 1'b1;
      end
  endtask

  task automatic check_log();
    int bad = 0;
    for (int q = 0; q < 2; q++)
      for (int i = 0; i < NDQ; i++) begin
        el_rd_q = 1'(q); el_rd_idx = 16'(i);
        #0.1;
        if (el_rd_pauli != log_m[q][i]) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL error log: %0d entries differ", bad); end
  endtask

  // --------------------------------------------------------- stimulus
  bit over;
  initial begin
    int permille, cfgs [4];
    cfgs = '{0, 2, 1, 3};
    cyc_start = 0; in_valid = 0; in_cfg = 0; in_layer = 0; in_mode = 0;
    in_len = 0; in_pkt = 0; el_rd_q = 0; el_rd_idx = 0;
    for (int m = 0; m < 4; m++) n_mode[m] = 0;
    for (int q = 0; q < 2; q++) for (int i = 0; i < NDQ; i++) log_m[q][i] = 2'b00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      // mostly sparse errors, some dense cycles to stress the block
      permille = (cyc == 0) ? 0 : (cyc < 3) ? -cyc : 1;
      for (int k = 0; k < 4; k++) make_errors(k, permille);
      ovf_in_cycle = 0;
      over = 0;
      @(negedge clk); cyc_start = 1; @(negedge clk); cyc_start = 0;
      fork
        begin : feeder
          for (int k = 0; k < 4 && !over; k++)
            for (int t = 0; t < T && !over; t++) begin
              for (int r = 0; r < R; r++)
                for (int c = 0; c < C; c++)
                  tx_syn[r * C + c] = syn[cfgs[k]][(t * R + r) * C + c];
              #0.1;
              in_cfg = 2'(cfgs[k]); in_layer = 4'(t);
              in_mode = tx_mode; in_len = tx_len; in_pkt = tx_pkt; in_valid = 1;
              n_mode[tx_mode]++;
              @(posedge clk);
              while (!in_ready && !over) @(posedge clk);
              @(negedge clk);
              in_valid = 0;
            end
        end
        begin : waiter
          while (!cyc_done && !timeout_fail) @(posedge clk);
          over = 1;
          if (timeout_fail) n_to++; else n_done++;
        end
      join
      @(negedge clk);
      // check the cycle
      if (ovf_in_cycle == 0 && last_done) begin
        for (int k = 0; k < 4; k++) check_valid(k);
        n_valid++;
      end
      for (int k = 0; k < 4; k++) update_log_model(k);
      check_log();
      repeat (2) @(posedge clk);
    end

    // every mechanism must have happened
    checks++; if (n_union == 0) begin failures++; $display("FAIL: no cluster union"); end
    checks++; if (n_done == 0)  begin failures++; $display("FAIL: no completed cycle"); end
    $display("cycles done %0d timeout %0d checked %0d | unions %0d rounds %0d fes_full %0d boundary %0d switch %0d stall %0d overflow %0d hold_ovf %0d tab_wait %0d | modes raw %0d sparse %0d dzc %0d geo %0d",
             n_done, n_to, n_valid, n_union, n_round, n_fes, n_bnd, n_sw, n_stall, n_ovf, n_hold, n_tab,
             n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // last cycle ended by cyc_done (not by a timeout)
  bit last_done;
  always @(posedge clk) begin
    if (cyc_done) last_done <= 1'b1;
    if (timeout_fail) last_done <= 1'b0;
  end

  // cycle count of completed cycles stays within the timeout
  always @(posedge clk) if (cyc_done) begin
    checks++;
    if (cyc_cycles > TO) begin failures++; $display("FAIL: cycle took %0d", cyc_cycles); end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
