// tb_syn_decompressor: self-checking test of the syndrome decompressor.
//
// Packets of all four modes (raw, sparse, DZC, Geo) are built here by an
// encoder written independently of the compressor, one bit at a time in the
// order they are sent, for random rounds of all weights at distance 5 and for
// the small worked example (round 000010 as DZC 10010 and sparse 1001). The
// decompressor must return the round each time.
`timescale 1ns/100ps
module tb_syn_decompressor;
  int checks = 0, failures = 0;

  localparam int D = 5, R = D, C = D - 1, L = R * C, W = 5, GB = 2;
  localparam int NB = (L + W - 1) / W, NBC = (C + GB - 1) / GB, NG = ((R + GB - 1) / GB) * NBC;
  localparam int IW = $clog2(L);
  localparam int PKTW = ((NB * (W + 1)) > (NG * (GB * GB + 1))) ?
                        ((NB * (W + 1)) > L ? NB * (W + 1) : L) :
                        ((NG * (GB * GB + 1)) > L ? NG * (GB * GB + 1) : L);
  localparam int LENW = $clog2(PKTW + 1);
  logic [1:0] mode;
  logic [LENW-1:0] len;
  logic [PKTW-1:0] pkt;
  logic [L-1:0] syn, ref_syn;
  syn_decompressor #(.D(D), .W(W), .GB(GB)) dut (.mode, .len, .pkt, .syn);

  // worked example instance: 2 x 3 round, 3-bit blocks
  logic [1:0] e_mode;
  logic [3:0] e_len;
  logic [9:0] e_pkt;
  logic [5:0] e_syn;
  syn_decompressor #(.D(2), .R(2), .C(3), .W(3), .GB(2)) u_ex (
    .mode(e_mode), .len(e_len), .pkt(e_pkt), .syn(e_syn));

  bit bits [$];   // bits in the order sent

  task automatic put(int v, int n);
    for (int b = n - 1; b >= 0; b--) bits.push_back(((v >> b) & 1) != 0);
  endtask

  task automatic pack();
    pkt = '0;
    foreach (bits[k]) pkt[bits.size() - 1 - k] = bits[k];
    len = LENW'(bits.size());
  endtask

  task automatic encode(int m);
    int rr, cc, v;
    bits.delete();
    mode = 2'(m);
    case (m)
      0: begin bits.delete(); pkt = PKTW'(ref_syn); len = LENW'(L); return; end
      1: begin
        put(int'(ref_syn != 0), 1);
        for (int i = L - 1; i >= 0; i--) if (ref_syn[i]) put(i, IW);
      end
      2: begin
        for (int j = NB - 1; j >= 0; j--) begin
          v = 0;
          for (int b = 0; b < W; b++) if (j * W + b < L && ref_syn[j * W + b]) v |= 1 << b;
          put(int'(v == 0), 1);
        end
        for (int j = NB - 1; j >= 0; j--) begin
          v = 0;
          for (int b = 0; b < W; b++) if (j * W + b < L && ref_syn[j * W + b]) v |= 1 << b;
          if (v != 0) put(v, W);
        end
      end
      default: begin
        for (int pass = 0; pass < 2; pass++)
          for (int j = NG - 1; j >= 0; j--) begin
            v = 0;
            for (int b = 0; b < GB * GB; b++) begin
              rr = (j / NBC) * GB + b / GB; cc = (j % NBC) * GB + b % GB;
              if (rr < R && cc < C && ref_syn[rr * C + cc]) v |= 1 << b;
            end
            if (pass == 0) put(int'(v == 0), 1);
            else if (v != 0) put(v, GB * GB);
          end
      end
    endcase
    pack();
  endtask

  initial begin
    int pct, w;
    // worked example
    e_mode = 2'd2; e_len = 4'd5; e_pkt = 10'b10010;
    #1;
    checks++;
    if (e_syn != 6'b000010) begin failures++; $display("FAIL example DZC: %b", e_syn); end
    e_mode = 2'd1; e_len = 4'd4; e_pkt = 10'b1001;
    #1;
    checks++;
    if (e_syn != 6'b000010) begin failures++; $display("FAIL example sparse: %b", e_syn); end

    for (int k = 0; k < 8000; k++) begin
      pct = (k % 5 == 0) ? 50 : (k % 5) * 3;
      for (int i = 0; i < L; i++) ref_syn[i] = ($urandom % 100) < pct;
      w = $countones(ref_syn);
      for (int m = 0; m < 4; m++) begin
        if (m == 1 && 1 + w * IW > PKTW) continue;
        encode(m);
        #1;
        checks++;
        if (syn !== ref_syn) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d: %b expected %b", m, syn, ref_syn);
        end
      end
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
