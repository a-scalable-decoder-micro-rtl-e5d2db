// tb_syn_codec: self-checking test of the syndrome compressor.
//
// First the worked example of a 6-bit round with 3-bit blocks: the round
// 000010 must give the DZC code 10010 and the sparse code 1001, and the
// sparse code, being the shortest, is sent. Then random rounds of all
// weights at distance 5: the three code lengths must match their formulas
// (sparse 1 + w*IW, DZC NB + nonzero blocks * W, Geo NG + nonzero squares * 4),
// the sent length must be the least of the usable ones, and the packet, read
// back bit by bit by a decoder written here, must give the round again.
`timescale 1ns/100ps
module tb_syn_codec;
  int checks = 0, failures = 0;

  // ------------------------------------------------ worked example
  localparam int LE = 6;
  logic [LE-1:0] e_syn;
  logic [1:0] e_mode;
  logic [3:0] e_len, e_ls, e_ld, e_lg;
  logic [9:0] e_pkt;   // PKTW of the small instance
  syn_compressor #(.D(2), .R(2), .C(3), .W(3), .GB(2)) u_ex (
    .syn(e_syn), .mode(e_mode), .len(e_len), .pkt(e_pkt),
    .len_sparse(e_ls), .len_dzc(e_ld), .len_geo(e_lg));

  // ------------------------------------------------ distance 5
  localparam int D = 5, R = D, C = D - 1, L = R * C, W = 5, GB = 2;
  localparam int NB = (L + W - 1) / W, NBC = (C + GB - 1) / GB, NG = ((R + GB - 1) / GB) * NBC;
  localparam int IW = $clog2(L);
  localparam int PKTW = ((NB * (W + 1)) > (NG * (GB * GB + 1))) ?
                        ((NB * (W + 1)) > L ? NB * (W + 1) : L) :
                        ((NG * (GB * GB + 1)) > L ? NG * (GB * GB + 1) : L);
  localparam int LENW = $clog2(PKTW + 1);
  logic [L-1:0] syn;
  logic [1:0] mode;
  logic [LENW-1:0] len, ls, ld, lg;
  logic [PKTW-1:0] pkt;
  syn_compressor #(.D(D), .W(W), .GB(GB)) dut (
    .syn, .mode, .len, .pkt, .len_sparse(ls), .len_dzc(ld), .len_geo(lg));

  function automatic logic nth(int k);   // k-th bit sent
    return pkt[int'(len) - 1 - k];
  endfunction

  function automatic logic [L-1:0] tb_decode();
    logic [L-1:0] s;
    int p, idx, rr, cc, blk;
    s = '0;
    case (mode)
      2'd0: s = pkt[L-1:0];
      2'd1: if (nth(0)) for (p = 1; p + IW <= int'(len); p += IW) begin
              idx = 0;
              for (int b = 0; b < IW; b++) idx = idx * 2 + int'(nth(p + b));
              s[idx] = 1'b1;
            end
      2'd2: begin
        p = NB;
        for (int j = NB - 1; j >= 0; j--)
          if (!nth(NB - 1 - j))
            for (int b = W - 1; b >= 0; b--) begin
              if (j * W + b < L) s[j * W + b] = nth(p);
              p++;
            end
      end
      default: begin
        p = NG;
        for (int j = NG - 1; j >= 0; j--)
          if (!nth(NG - 1 - j))
            for (int b = GB * GB - 1; b >= 0; b--) begin
              rr = (j / NBC) * GB + b / GB; cc = (j % NBC) * GB + b % GB;
              if (rr < R && cc < C) s[rr * C + cc] = nth(p);
              p++;
            end
      end
    endcase
    return s;
  endfunction

  initial begin
    int w, nzb, nzg, best, rr, cc;
    int pct;
    bit any;
    e_syn = 6'b000010;
    #1;
    checks++;
    if (e_ld != 5 || e_ls != 4 || e_mode != 2'd1 || e_len != 4 || e_pkt[3:0] != 4'b1001) begin
      failures++;
      $display("FAIL example: dzc len %0d sparse len %0d mode %0d len %0d pkt %b", e_ld, e_ls, e_mode, e_len, e_pkt);
    end
    // the DZC code itself: force DZC by a round where it is shortest is not
    // possible at this size, so read it from a round with two blocks set
    e_syn = 6'b101010;
    #1;
    checks++;
    if (e_ld != 8 || e_ls != 10) begin failures++; $display("FAIL example 2 lengths %0d %0d", e_ld, e_ls); end

    for (int k = 0; k < 20000; k++) begin
      pct = (k % 5 == 0) ? 50 : (k % 5) * 3;
      for (int i = 0; i < L; i++) syn[i] = ($urandom % 100) < pct;
      #1;
      w = $countones(syn);
      nzb = 0;
      for (int j = 0; j < NB; j++) begin
        any = 0;
        for (int b = 0; b < W; b++) if (j * W + b < L && syn[j * W + b]) any = 1;
        nzb += int'(any);
      end
      nzg = 0;
      for (int j = 0; j < NG; j++) begin
        any = 0;
        for (int b = 0; b < GB * GB; b++) begin
          rr = (j / NBC) * GB + b / GB; cc = (j % NBC) * GB + b % GB;
          if (rr < R && cc < C && syn[rr * C + cc]) any = 1;
        end
        nzg += int'(any);
      end
      checks++;
      if (ld != NB + nzb * W || lg != NG + nzg * GB * GB ||
          ((1 + w * IW <= PKTW) && ls != 1 + w * IW)) begin
        failures++;
        if (failures < 10) $display("FAIL lengths w=%0d: %0d %0d %0d", w, ls, ld, lg);
      end
      best = L;
      if (NG + nzg * GB * GB < best) best = NG + nzg * GB * GB;
      if (NB + nzb * W < best) best = NB + nzb * W;
      if (1 + w * IW <= PKTW && 1 + w * IW < best) best = 1 + w * IW;
      checks++;
      if (len != best) begin failures++; if (failures < 10) $display("FAIL len %0d expected %0d", len, best); end
      checks++;
      if (tb_decode() !== syn) begin failures++; if (failures < 10) $display("FAIL decode mode %0d", mode); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
