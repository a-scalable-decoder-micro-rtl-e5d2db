// syn_compressor: syndrome compression on the qubit side of the link.
//
// One syndrome round of one error type (R x C bits, bit r*C + c) is sent to
// the decoder as a variable-length packet. Three low-cost codes are built in
// parallel, as the paper proposes, and the shortest is sent:
//  * Sparse representation: a flag bit (1 = some bit is non-zero) followed by
//    the IW-bit index of every non-zero bit, highest index first; an all-zero
//    round is the single bit 0. Length 1 + w*IW.
//  * Dynamic Zero Compression (DZC): the round is cut into NB blocks of W
//    consecutive bits; first one zero-indicator bit per block, highest block
//    first, 1 marking an all-zero block, then the W bits of each non-zero
//    block, highest first. Length NB + w*W.
//  * Geometry-based compression: DZC over GB x GB squares of the lattice, so
//    that the two ends of a short error chain tend to share one block.
// The bit order and the ZIB polarity follow the paper's figure (there, ZIB 1
// marks a '000' block); the text calls the same vector an indicator of the
// non-trivial blocks, and the figure was followed. The mode tag, the raw
// fallback (mode 0, when nothing is shorter than R*C bits) and the block sizes
// W = 5 and GB = 2 are this design's choices.
//
// Packet format: pkt[len-1] is the first bit sent; bits above len are zero.
// Purely combinational.
module syn_compressor #(
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
  input  logic [L-1:0]               syn,
  output logic [1:0]                 mode,     // 0 raw, 1 sparse, 2 DZC, 3 Geo
  output logic [$clog2(PKTW+1)-1:0]  len,
  output logic [PKTW-1:0]            pkt,
  output logic [$clog2(PKTW+1)-1:0]  len_sparse,
  output logic [$clog2(PKTW+1)-1:0]  len_dzc,
  output logic [$clog2(PKTW+1)-1:0]  len_geo
);

  localparam int LW   = $clog2(PKTW + 1);
  localparam int WMAX = (PKTW - 1) / IW;   // largest weight sparse can carry

  logic [PKTW-1:0] p_sp, p_dz, p_ge;
  logic            sp_ok;

  // ---------------------------------------------------------- sparse
  always_comb begin
    int n, w;
    p_sp = '0;
    n = 0; w = 0;
    for (int i = L - 1; i >= 0; i--)
      if (syn[i]) w++;
    sp_ok = (w <= WMAX);
    p_sp = PKTW'(w != 0);
    n = 1;
    for (int i = L - 1; i >= 0; i--)
      if (syn[i] && sp_ok) begin
        p_sp = (p_sp << IW) | PKTW'(i);
        n = n + IW;
      end
    len_sparse = LW'(n);
  end

  // ---------------------------------------------------------- DZC
  always_comb begin
    logic [W-1:0] blk;
    int n;
    p_dz = '0;
    n = 0;
    for (int j = NB - 1; j >= 0; j--) begin
      blk = '0;
      for (int b = 0; b < W; b++)
        if (j * W + b < L) blk[b] = syn[j * W + b];
      p_dz = (p_dz << 1) | PKTW'(blk == '0);
      n++;
    end
    for (int j = NB - 1; j >= 0; j--) begin
      blk = '0;
      for (int b = 0; b < W; b++)
        if (j * W + b < L) blk[b] = syn[j * W + b];
      if (blk != '0) begin
        p_dz = (p_dz << W) | PKTW'(blk);
        n = n + W;
      end
    end
    len_dzc = LW'(n);
  end

  // ---------------------------------------------------------- Geo-Comp
  always_comb begin
    logic [GB*GB-1:0] blk;
    int n, rr, cc;
    p_ge = '0;
    n = 0;
    for (int j = NG - 1; j >= 0; j--) begin
      blk = '0;
      for (int b = 0; b < GB * GB; b++) begin
        rr = (j / NBC) * GB + b / GB;
        cc = (j % NBC) * GB + b % GB;
        if (rr < R && cc < C) blk[b] = syn[rr * C + cc];
      end
      p_ge = (p_ge << 1) | PKTW'(blk == '0);
      n++;
    end
    for (int j = NG - 1; j >= 0; j--) begin
      blk = '0;
      for (int b = 0; b < GB * GB; b++) begin
        rr = (j / NBC) * GB + b / GB;
        cc = (j % NBC) * GB + b % GB;
        if (rr < R && cc < C) blk[b] = syn[rr * C + cc];
      end
      if (blk != '0) begin
        p_ge = (p_ge << (GB * GB)) | PKTW'(blk);
        n = n + GB * GB;
      end
    end
    len_geo = LW'(n);
  end

  // ---------------------------------------------------------- choice
  always_comb begin
    mode = 2'd0;
    len  = LW'(L);
    pkt  = PKTW'(syn);
    if (len_geo < len)             begin mode = 2'd3; len = len_geo;    pkt = p_ge; end
    if (len_dzc <= len)            begin mode = 2'd2; len = len_dzc;    pkt = p_dz; end
    if (sp_ok && len_sparse <= len) begin mode = 2'd1; len = len_sparse; pkt = p_sp; end
  end

endmodule
