// syn_decompressor: syndrome decompression at the decoder side of the link.
//
// Rebuilds one syndrome round (R x C bits, bit r*C + c) from a packet of the
// format made by syn_compressor: mode 0 raw, 1 sparse representation, 2
// Dynamic Zero Compression over blocks of W bits, 3 geometry-based DZC over
// GB x GB squares. pkt[len-1] is the first bit sent. The sparse decoder gets
// the number of indices from the length, (len-1)/IW. The codes are the
// paper's; the packet framing (mode tag and length) is this design's choice.
// Purely combinational.
module syn_decompressor #(
  parameter int D  = 11,
  parameter int R  = D,
  parameter int C  = D - 1,
  parameter int W  = 5,
  parameter int GB = 2,
  // derived sizes, not meant to be set
  parameter int L    = R * C,
  parameter int NB   = (L + W - 1) / W,
  parameter int NBR  = (R + GB - 1) / GB,
  parameter int NBC  = (C + GB - 1) / GB,
  parameter int NG   = NBR * NBC,
  parameter int IW   = $clog2(L),
  parameter int PKTW = ((NB * (W + 1)) > (NG * (GB * GB + 1))) ?
                       ((NB * (W + 1)) > L ? NB * (W + 1) : L) :
                       ((NG * (GB * GB + 1)) > L ? NG * (GB * GB + 1) : L)
) (
  input  logic [1:0]                 mode,
  input  logic [$clog2(PKTW+1)-1:0]  len,
  input  logic [PKTW-1:0]            pkt,
  output logic [L-1:0]               syn
);

  localparam int WMAX = (PKTW - 1) / IW;

  // bit k of the packet counted from the first bit sent
  function automatic logic sent_bit(input logic [PKTW-1:0] p, input int ln, input int k);
    int pos;
    pos = ln - 1 - k;
    if (pos < 0 || pos >= PKTW) return 1'b0;
    return p[pos];
  endfunction

  always_comb begin
    int ln, nw, pos, idx, rr, cc;
    logic [W-1:0]     blk;
    logic [GB*GB-1:0] gblk;
    ln  = int'(len);
    syn = '0;
    unique case (mode)
      2'd0: syn = pkt[L-1:0];

      2'd1: begin
        nw = (ln - 1) / IW;
        if (sent_bit(pkt, ln, 0))
          for (int k = 0; k < WMAX; k++)
            if (k < nw) begin
              idx = 0;
              for (int b = 0; b < IW; b++)
                idx = (idx << 1) | int'(sent_bit(pkt, ln, 1 + k * IW + b));
              if (idx < L) syn[idx] = 1'b1;
            end
      end

      2'd2: begin
        pos = NB;
        for (int j = NB - 1; j >= 0; j--)
          if (!sent_bit(pkt, ln, NB - 1 - j)) begin
            blk = '0;
            for (int b = W - 1; b >= 0; b--) begin
              blk[b] = sent_bit(pkt, ln, pos);
              pos++;
            end
            for (int b = 0; b < W; b++)
              if (j * W + b < L) syn[j * W + b] = blk[b];
          end
      end

      default: begin
        pos = NG;
        for (int j = NG - 1; j >= 0; j--)
          if (!sent_bit(pkt, ln, NG - 1 - j)) begin
            gblk = '0;
            for (int b = GB * GB - 1; b >= 0; b--) begin
              gblk[b] = sent_bit(pkt, ln, pos);
              pos++;
            end
            for (int b = 0; b < GB * GB; b++) begin
              rr = (j / NBC) * GB + b / GB;
              cc = (j % NBC) * GB + b % GB;
              if (rr < R && cc < C) syn[rr * C + cc] = gblk[b];
            end
          end
      end
    endcase
  end

endmodule
