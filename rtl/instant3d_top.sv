// instant3d_top -- Instant-3D accelerator for on-device NeRF training.
//
// The accelerator runs the embedding-grid steps of NeRF training, the part that
// dominates training time: interpolating point embeddings from a hash-table
// embedding grid (feed-forward) and updating the table from their gradients
// (back-propagation), plus the small MLP that follows.  A host SoC does the
// rest (sampling, ray marching, volume rendering, loss).
//
// Contents:
//  * four grid_core instances, each with a 256 KB hash table in eight banks,
//    its own FRM B8 and BUM;
//  * two FRM B16 (cores 0+1 and 2+3) and one FRM B32 (all four cores) for
//    multi-core fusion;
//  * the update router, which sends every BUM write-back (and host table
//    writes) to the bank that owns the address;
//  * one update_freq_ctrl per core, which skips back-propagation updates of a
//    grid with a reduced update frequency;
//  * the MLP units: a systolic array, a multiplier-adder tree and the MLP
//    on-chip buffer feeding them.
//
// `level` selects the hash-table size: FUSE_L0 = four independent 2^16-entry
// tables (256 KB each), FUSE_L1 = two 2^17-entry tables (512 KB) over core
// pairs, FUSE_L2 = one 2^18-entry table (1 MB) over all cores.  `bp` selects
// feed-forward (0) or back-propagation (1) for a pass; `start` starts a pass on
// every core with a non-zero count.  The MLP units are sequenced from outside:
// each mlp_rd_* read of the buffer becomes, one cycle later, one beat for the
// unit chosen by mlp_sel.  The block structure follows the paper's Fig. 11 and
// Fig. 14; all port protocols are this design's own.
module instant3d_top
  import i3d_pkg::*;
#(
  parameter int unsigned COORD_DEPTH = 4096,
  parameter int unsigned MLP_DEPTH   = 1024
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // configuration
  input  fuse_t                                  level,
  input  logic                                   bp,
  input  logic [NCORES-1:0][RES_W-1:0]           res,
  input  fp16_t                                  lr,
  input  logic [7:0]                             bum_thresh,
  input  logic [NCORES-1:0][3:0]                 upd_period,
  input  logic                                   iter_start,
  input  logic                                   iter_clear,
  // coordinates and passes
  input  logic [NCORES-1:0]                      cw_en,
  input  logic [NCORES-1:0][$clog2(COORD_DEPTH)-1:0] cw_idx,
  input  logic [NCORES-1:0][2:0][COORD_W-1:0]    cw_xyz,
  input  logic                                   start,
  input  logic [NCORES-1:0][$clog2(COORD_DEPTH):0] count,
  output logic                                   busy,
  // interpolated embeddings
  output logic [NCORES-1:0]                      ff_valid,
  input  logic [NCORES-1:0]                      ff_ready,
  output emb_t [NCORES-1:0]                      ff_feat,
  output tag_t [NCORES-1:0]                      ff_tag,
  // embedding gradients
  input  logic [NCORES-1:0]                      g_valid,
  output logic [NCORES-1:0]                      g_ready,
  input  emb_t [NCORES-1:0]                      g_feat,
  // host table writes
  input  logic                                   h_valid,
  output logic                                   h_ready,
  input  logic [1:0]                             h_core,
  input  logic                                   h_set,
  input  gaddr_t                                 h_addr,
  input  emb_t                                   h_data,
  // MLP units
  input  logic                                   mlp_wr_en,
  input  logic [$clog2(MLP_DEPTH)-1:0]           mlp_wr_addr,
  input  fp16_t [15:0]                           mlp_wr_data,
  input  logic                                   mlp_rd_en,
  input  logic [$clog2(MLP_DEPTH)-1:0]           mlp_rd_addr,
  input  logic                                   mlp_sel,      // 0 systolic, 1 tree
  input  logic                                   mlp_last,
  input  logic                                   mlp_start,
  input  fp16_t [2:0][15:0]                      tree_w,
  output logic                                   sa_done,
  output fp16_t [7:0][7:0]                       sa_c,
  output logic                                   tree_valid,
  output fp16_t [2:0]                            tree_y,
  // activity
  output logic [NCORES-1:0][3:0]                 stat_frm8_reads,
  output logic [1:0][4:0]                        stat_frm16_reads,
  output logic [5:0]                             stat_frm32_reads,
  output logic [NCORES-1:0]                      stat_bum_merge,
  output logic [NCORES-1:0]                      stat_bum_new,
  output logic [NCORES-1:0]                      stat_bum_timeout,
  output logic [NCORES-1:0]                      stat_bum_evict,
  output logic [NCORES-1:0]                      stat_bp_skipped
);
  // ------------------------------------------------------------ core signals
  logic   [NCORES-1:0]                  c_busy, bp_en;
  logic   [NCORES-1:0]                  xreq_valid, xreq_ready, xrsp_valid, xrsp_ready;
  gaddr_t [NCORES-1:0][NVERT-1:0]       xreq_addr;
  logic   [NCORES-1:0][META_W-1:0]      xreq_meta, xrsp_meta;
  emb_t   [NCORES-1:0][NVERT-1:0]       xrsp_emb;
  logic   [NCORES-1:0][BANKS_CORE-1:0]  b16_en, b32_en;
  logic   [NCORES-1:0][BANKS_CORE-1:0][BANK_AW-1:0] b16_addr, b32_addr;
  emb_t   [NCORES-1:0][BANKS_CORE-1:0]  rd_data;
  logic   [NCORES-1:0][BANKS_CORE-1:0]  upd_en, upd_set;
  logic   [NCORES-1:0][BANKS_CORE-1:0][BANK_AW-1:0] upd_addr;
  emb_t   [NCORES-1:0][BANKS_CORE-1:0]  upd_data;
  logic   [NCORES-1:0]                  bw_valid, bw_ready;
  gaddr_t [NCORES-1:0]                  bw_addr;
  emb_t   [NCORES-1:0]                  bw_delta;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    update_freq_ctrl u_freq (
      .clk, .rst_n, .clear(iter_clear), .period(upd_period[c]),
      .iter_start, .bp_enable(bp_en[c]), .skipped(stat_bp_skipped[c])
    );

    grid_core #(.COORD_DEPTH(COORD_DEPTH)) u_core (
      .clk, .rst_n,
      .level, .bp, .bp_enable(bp_en[c]), .res(res[c]), .lr, .bum_thresh,
      .cw_en(cw_en[c]), .cw_idx(cw_idx[c]), .cw_xyz(cw_xyz[c]),
      .start(start && count[c] != '0), .count(count[c]), .busy(c_busy[c]),
      .ff_valid(ff_valid[c]), .ff_ready(ff_ready[c]), .ff_feat(ff_feat[c]),
      .ff_tag(ff_tag[c]),
      .g_valid(g_valid[c]), .g_ready(g_ready[c]), .g_feat(g_feat[c]),
      .xreq_valid(xreq_valid[c]), .xreq_ready(xreq_ready[c]),
      .xreq_addr(xreq_addr[c]), .xreq_meta(xreq_meta[c]),
      .xrsp_valid(xrsp_valid[c]), .xrsp_ready(xrsp_ready[c]),
      .xrsp_emb(xrsp_emb[c]), .xrsp_meta(xrsp_meta[c]),
      .b16_rd_en(b16_en[c]), .b16_rd_addr(b16_addr[c]),
      .b32_rd_en(b32_en[c]), .b32_rd_addr(b32_addr[c]),
      .bank_rd_data(rd_data[c]),
      .upd_en(upd_en[c]), .upd_set(upd_set[c]), .upd_addr(upd_addr[c]),
      .upd_data(upd_data[c]),
      .bw_valid(bw_valid[c]), .bw_ready(bw_ready[c]), .bw_addr(bw_addr[c]),
      .bw_delta(bw_delta[c]),
      .stat_frm_reads(stat_frm8_reads[c]), .stat_bum_merge(stat_bum_merge[c]),
      .stat_bum_new(stat_bum_new[c]), .stat_bum_timeout(stat_bum_timeout[c]),
      .stat_bum_evict(stat_bum_evict[c])
    );
  end

  // ------------------------------------------------------------ FRM B16 (level 1)
  logic [1:0] f16_idle;
  logic [1:0][1:0] f16_out_valid, f16_in_ready;
  emb_t [1:0][1:0][NVERT-1:0] f16_emb;
  logic [1:0][1:0][META_W-1:0] f16_meta;
  logic [1:0][15:0] f16_en;
  logic [1:0][15:0][BANK_AW-1:0] f16_addr;

  for (genvar q = 0; q < 2; q++) begin : g_b16
    logic [1:0]                         in_valid, out_ready;
    logic [1:0][NVERT-1:0][BANK_AW+3:0] in_addr;
    logic [1:0][META_W-1:0]             in_meta;
    emb_t [15:0]                        bdata;
    logic [$clog2(16*NVERT+1)-1:0]      served;
    always_comb begin
      for (int p = 0; p < 2; p++) begin
        in_valid[p]  = (level == FUSE_L1) && xreq_valid[2*q+p];
        out_ready[p] = (level == FUSE_L1) && xrsp_ready[2*q+p];
        in_meta[p]   = xreq_meta[2*q+p];
        for (int v = 0; v < NVERT; v++) in_addr[p][v] = xreq_addr[2*q+p][v][BANK_AW+3:0];
      end
      for (int b = 0; b < 16; b++) bdata[b] = rd_data[2*q + b/8][b%8];
    end
    frm_unit #(.NBANKS(16), .NPORTS(2), .DEPTH(16)) u_frm16 (
      .clk, .rst_n,
      .in_valid, .in_ready(f16_in_ready[q]), .in_addr, .in_meta,
      .bank_rd_en(f16_en[q]), .bank_rd_addr(f16_addr[q]), .bank_rd_data(bdata),
      .out_valid(f16_out_valid[q]), .out_ready, .out_emb(f16_emb[q]),
      .out_meta(f16_meta[q]), .stat_reads(stat_frm16_reads[q]), .stat_served(served),
      .idle(f16_idle[q])
    );
  end

  // ------------------------------------------------------------ FRM B32 (level 2)
  logic                               f32_idle;
  logic [NCORES-1:0]                  f32_in_valid, f32_in_ready, f32_out_valid, f32_out_ready;
  logic [NCORES-1:0][NVERT-1:0][BANK_AW+4:0] f32_in_addr;
  emb_t [NCORES-1:0][NVERT-1:0]       f32_emb;
  logic [NCORES-1:0][META_W-1:0]      f32_meta;
  logic [31:0]                        f32_en;
  logic [31:0][BANK_AW-1:0]           f32_addr;
  emb_t [31:0]                        f32_data;
  logic [$clog2(16*NVERT+1)-1:0]      f32_served;

  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      f32_in_valid[c]  = (level == FUSE_L2) && xreq_valid[c];
      f32_out_ready[c] = (level == FUSE_L2) && xrsp_ready[c];
      for (int v = 0; v < NVERT; v++) f32_in_addr[c][v] = xreq_addr[c][v][BANK_AW+4:0];
    end
    for (int b = 0; b < 32; b++) f32_data[b] = rd_data[b/8][b%8];
  end

  frm_unit #(.NBANKS(32), .NPORTS(NCORES), .DEPTH(16)) u_frm32 (
    .clk, .rst_n,
    .in_valid(f32_in_valid), .in_ready(f32_in_ready), .in_addr(f32_in_addr),
    .in_meta(xreq_meta),
    .bank_rd_en(f32_en), .bank_rd_addr(f32_addr), .bank_rd_data(f32_data),
    .out_valid(f32_out_valid), .out_ready(f32_out_ready), .out_emb(f32_emb),
    .out_meta(f32_meta), .stat_reads(stat_frm32_reads), .stat_served(f32_served),
    .idle(f32_idle)
  );

  // ------------------------------------------------------------ fusion wiring
  always_comb begin
    for (int c = 0; c < NCORES; c++) begin
      xreq_ready[c] = (level == FUSE_L1) ? f16_in_ready[c/2][c%2] : f32_in_ready[c];
      xrsp_valid[c] = (level == FUSE_L1) ? f16_out_valid[c/2][c%2] :
                      (level == FUSE_L2) ? f32_out_valid[c] : 1'b0;
      xrsp_emb[c]   = (level == FUSE_L1) ? f16_emb[c/2][c%2]  : f32_emb[c];
      xrsp_meta[c]  = (level == FUSE_L1) ? f16_meta[c/2][c%2] : f32_meta[c];
      for (int b = 0; b < BANKS_CORE; b++) begin
        b16_en[c][b]   = f16_en[c/2][(c%2)*8 + b];
        b16_addr[c][b] = f16_addr[c/2][(c%2)*8 + b];
        b32_en[c][b]   = f32_en[c*8 + b];
        b32_addr[c][b] = f32_addr[c*8 + b];
      end
    end
  end

  // ------------------------------------------------------------ update router
  update_router u_router (
    .level,
    .s_valid(bw_valid), .s_ready(bw_ready), .s_addr(bw_addr), .s_data(bw_delta),
    .h_valid, .h_ready, .h_core, .h_set, .h_addr, .h_data,
    .upd_en, .upd_set, .upd_addr, .upd_data
  );

  assign busy = (|c_busy) || !(&f16_idle) || !f32_idle;

  // ------------------------------------------------------------ MLP units
  fp16_t [15:0] mlp_word;
  logic         beat_v, beat_last, beat_sel;

  mlp_buffer #(.DEPTH(MLP_DEPTH), .WORDS(16)) u_mlp_buf (
    .clk, .wr_en(mlp_wr_en), .wr_addr(mlp_wr_addr), .wr_data(mlp_wr_data),
    .rd_en(mlp_rd_en), .rd_addr(mlp_rd_addr), .rd_data(mlp_word)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_v    <= 1'b0;
      beat_last <= 1'b0;
      beat_sel  <= 1'b0;
    end else begin
      beat_v    <= mlp_rd_en;
      beat_last <= mlp_last;
      beat_sel  <= mlp_sel;
    end
  end

  systolic_array #(.ROWS(8), .COLS(8)) u_sa (
    .clk, .rst_n, .start(mlp_start),
    .in_valid(beat_v && !beat_sel), .in_last(beat_last),
    .in_a(mlp_word[7:0]), .in_b(mlp_word[15:8]),
    .done(sa_done), .out_c(sa_c)
  );

  mul_add_tree #(.LANES(16), .OUTS(3)) u_tree (
    .clk, .rst_n,
    .in_valid(beat_v && beat_sel), .in_last(beat_last),
    .in_x(mlp_word), .in_w(tree_w),
    .out_valid(tree_valid), .out_y(tree_y)
  );
endmodule
