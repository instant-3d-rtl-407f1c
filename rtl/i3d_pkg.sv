// i3d_pkg -- shared types, constants and FP16 arithmetic of the Instant-3D
// grid-interpolation training accelerator.
//
// The accelerator keeps a NeRF embedding grid as a 1D hash table of
// two-feature FP16 entries spread over SRAM banks.  Four grid cores each own
// eight banks of 8192 entries (256 KB per core).  Two cores can be fused into
// a 512 KB table over 16 banks and all four into a 1 MB table over 32 banks.
// These numbers, the hash primes and the use of FP16 follow the paper; the
// coordinate format, the tag width and the rounding of the FP16 operators are
// this design's own choices.
//
// FP16 operators: IEEE binary16 layout, round to nearest even, subnormal
// inputs and results flushed to (signed) zero, overflow saturates to
// infinity, an infinite or NaN input yields infinity.  They are pure
// combinational functions; modules register their results.
package i3d_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NCORES      = 4;      // grid cores
  localparam int unsigned NVERT       = 8;      // vertices per queried point
  localparam int unsigned NFEAT       = 2;      // features per hash entry
  localparam int unsigned BANKS_CORE  = 8;      // SRAM banks per grid core
  localparam int unsigned BANK_AW     = 13;     // 8192 entries per bank
  localparam int unsigned CORE_LOG2T  = 16;     // 2^16 entries = 256 KB per core
  localparam int unsigned GADDR_W     = 18;     // 2^18 entries = 1 MB, level-2 fusion
  localparam int unsigned EMB_W       = NFEAT * 16;
  localparam int unsigned TAG_W       = 12;     // point index inside a batch
  localparam int unsigned COORD_W     = 16;     // normalised coordinate, UQ0.16
  localparam int unsigned RES_W       = 12;     // grid resolution per axis
  localparam int unsigned VC_W        = 12;     // integer vertex coordinate

  // Spatial hash primes (pi1 = 1).
  localparam logic [31:0] PI2 = 32'd2654435761;
  localparam logic [31:0] PI3 = 32'd805459861;

  // ---------------------------------------------------------------- types
  typedef logic [15:0] fp16_t;
  typedef logic [GADDR_W-1:0] gaddr_t;
  typedef logic [TAG_W-1:0] tag_t;

  typedef struct packed {
    fp16_t f1;
    fp16_t f0;
  } emb_t;

  // Fusion level: which FRM serves a core and how large the table is.
  typedef enum logic [1:0] {
    FUSE_L0 = 2'd0,   // standalone, 256 KB, FRM B8 inside each core
    FUSE_L1 = 2'd1,   // pairs fused, 512 KB, FRM B16 per pair
    FUSE_L2 = 2'd2    // all four fused, 1 MB, FRM B32
  } fuse_t;

  // One queried point after hashing: the eight vertex addresses, the eight
  // trilinear weights and the point's index.
  typedef struct packed {
    tag_t                    tag;
    fp16_t  [NVERT-1:0]      w;
    gaddr_t [NVERT-1:0]      addr;
  } pt_addr_t;

  localparam int unsigned META_W = TAG_W + NVERT * 16;

  // Address bits of a table of 2^(16+level) entries.
  function automatic int unsigned log2t(fuse_t lvl);
    return CORE_LOG2T + int'(lvl);
  endfunction

  // ---------------------------------------------------------------- FP16
  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;

  function automatic fp16_t fp16_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // Round an 11-bit significand with guard and sticky bits, then pack.
  function automatic fp16_t fp16_pack(logic s, int e, logic [10:0] m,
                                      logic g, logic st);
    logic [11:0] r;
    int          ee;
    r  = {1'b0, m} + ((g && (st || m[0])) ? 12'd1 : 12'd0);
    ee = e;
    if (r[11]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 31) return {s, 5'h1F, 10'h000};
    if (ee <= 0)  return {s, 15'h0000};
    return {s, ee[4:0], r[9:0]};
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) return {s, 5'h1F, 10'h000};
    if (a[14:10] == 5'h00 || b[14:10] == 5'h00) return {s, 15'h0000};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_pack(s, e + 1, p[21:11], p[10], |p[9:0]);
    return fp16_pack(s, e, p[20:10], p[9], |p[8:0]);
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       big, sml;
    logic [14:0] mb, ms, sum;
    logic        st;
    int          eb, d, lz;
    if (a[14:10] == 5'h1F) return {a[15], 5'h1F, 10'h000};
    if (b[14:10] == 5'h1F) return {b[15], 5'h1F, 10'h000};
    if (a[14:10] == 5'h00) a = {a[15], 15'h0000};
    if (b[14:10] == 5'h00) b = {b[15], 15'h0000};
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    if (sml[14:0] == 15'h0000) begin
      if (big[14:0] == 15'h0000) return {a[15] & b[15], 15'h0000};
      return big;
    end
    eb = int'(big[14:10]);
    d  = eb - int'(sml[14:10]);
    mb = {1'b0, 1'b1, big[9:0], 3'b000};
    ms = {1'b0, 1'b1, sml[9:0], 3'b000};
    if (d >= 14) begin
      ms = 15'd1;                       // only the sticky bit survives
    end else if (d > 0) begin
      st = |(ms & ((15'd1 << d) - 15'd1));
      ms = (ms >> d) | {14'd0, st};
    end
    if (big[15] == sml[15]) begin
      sum = mb + ms;
      if (sum[14]) begin
        sum = {1'b0, sum[14:2], sum[1] | sum[0]};
        eb  = eb + 1;
      end
    end else begin
      sum = mb - ms;
      if (sum == 15'd0) return FP16_ZERO;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      eb  = eb - lz;
    end
    return fp16_pack(big[15], eb, sum[13:3], sum[2], |sum[1:0]);
  endfunction

  // Unsigned fraction UQ0.16 to FP16 (truncating, values below 2^-14 become 0).
  function automatic fp16_t frac_to_fp16(logic [15:0] f);
    int          p;
    logic [15:0] sh;
    p = -1;
    for (int i = 0; i < 16; i++) if (f[i]) p = i;
    if (p < 2) return FP16_ZERO;
    sh = f << (15 - p);                 // leading one now at bit 15
    return {1'b0, 5'(p - 1), sh[14:5]};
  endfunction

endpackage
