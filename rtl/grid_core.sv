// grid_core -- one grid core of the accelerator: embedding-grid interpolation
// (feed-forward) and embedding-grid update (back-propagation) for a stream of
// queried points.
//
// Datapath, in the order of the paper:
//   coord_buffer -> interp_precompute -> hash_unit -> addr_double_buffer
//     feed-forward: -> FRM -> hash-table banks -> interp_grad_unit -> ff_out
//     back-prop.:   -> interp_grad_unit (paired with the point's gradient
//                      from g_*) -> bum_unit -> bw_* (to the update router)
// The core owns eight hash_bank instances (8 x 8192 entries = 256 KB).
//
// Fusion (Fig. 14 of the paper): at level 0 the core's own FRM B8 schedules its
// reads.  At level 1 or 2 the core's address groups leave through xreq_* to a
// shared FRM B16 or B32, the completed points come back through xrsp_*, and
// the core's banks take their read requests from that shared FRM (b16_* or
// b32_* inputs, selected by `level`).  Bank read data always leave through
// bank_rd_data for whichever FRM is reading.
//
// Control: `start` replays the first `count` points of the coordinate buffer
// in the current mode (`bp`).  `busy` stays high until the pass has drained,
// including the BUM.  In back-propagation the gradients are dropped when
// `bp_enable` is low (the grid skips this iteration's update).
//
// The order of stages follows the paper; handshakes, widths and the bypass of
// the FRM during back-propagation (gradients need the weights, not the stored
// embeddings) are this design's choices.
module grid_core
  import i3d_pkg::*;
#(
  parameter int unsigned COORD_DEPTH = 4096,
  parameter int unsigned FRM_DEPTH   = 16,
  parameter int unsigned BUM_NENT    = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  fuse_t                         level,
  input  logic                          bp,
  input  logic                          bp_enable,
  input  logic [RES_W-1:0]              res,
  input  fp16_t                         lr,
  input  logic [7:0]                    bum_thresh,
  // host: coordinates and pass control
  input  logic                          cw_en,
  input  logic [$clog2(COORD_DEPTH)-1:0] cw_idx,
  input  logic [2:0][COORD_W-1:0]       cw_xyz,
  input  logic                          start,
  input  logic [$clog2(COORD_DEPTH):0]  count,
  output logic                          busy,
  // feed-forward result
  output logic                          ff_valid,
  input  logic                          ff_ready,
  output emb_t                          ff_feat,
  output tag_t                          ff_tag,
  // back-propagation: gradient of each point's interpolated embedding
  input  logic                          g_valid,
  output logic                          g_ready,
  input  emb_t                          g_feat,
  // to / from a fused FRM
  output logic                          xreq_valid,
  input  logic                          xreq_ready,
  output gaddr_t [NVERT-1:0]            xreq_addr,
  output logic [META_W-1:0]             xreq_meta,
  input  logic                          xrsp_valid,
  output logic                          xrsp_ready,
  input  emb_t [NVERT-1:0]              xrsp_emb,
  input  logic [META_W-1:0]             xrsp_meta,
  // bank reads issued by the fused FRMs
  input  logic [BANKS_CORE-1:0]         b16_rd_en,
  input  logic [BANKS_CORE-1:0][BANK_AW-1:0] b16_rd_addr,
  input  logic [BANKS_CORE-1:0]         b32_rd_en,
  input  logic [BANKS_CORE-1:0][BANK_AW-1:0] b32_rd_addr,
  output emb_t [BANKS_CORE-1:0]         bank_rd_data,
  // bank updates from the update router
  input  logic [BANKS_CORE-1:0]         upd_en,
  input  logic [BANKS_CORE-1:0]         upd_set,
  input  logic [BANKS_CORE-1:0][BANK_AW-1:0] upd_addr,
  input  emb_t [BANKS_CORE-1:0]         upd_data,
  // BUM write-back to the update router
  output logic                          bw_valid,
  input  logic                          bw_ready,
  output gaddr_t                        bw_addr,
  output emb_t                          bw_delta,
  // activity
  output logic [3:0]                    stat_frm_reads,
  output logic                          stat_bum_merge,
  output logic                          stat_bum_new,
  output logic                          stat_bum_timeout,
  output logic                          stat_bum_evict
);
  // ------------------------------------------------------------ front end
  logic                    cb_valid, cb_ready, cb_done;
  logic [2:0][COORD_W-1:0] cb_xyz;
  tag_t                    cb_tag;

  coord_buffer #(.DEPTH(COORD_DEPTH)) u_cbuf (
    .clk, .rst_n,
    .wr_en(cw_en), .wr_idx(cw_idx), .wr_xyz(cw_xyz),
    .start, .count, .done(cb_done),
    .out_valid(cb_valid), .out_ready(cb_ready), .out_xyz(cb_xyz), .out_tag(cb_tag)
  );

  logic                            pc_valid, pc_ready;
  logic [NVERT-1:0][2:0][VC_W-1:0] pc_vc;
  fp16_t [NVERT-1:0]               pc_w;
  tag_t                            pc_tag;

  interp_precompute u_pre (
    .clk, .rst_n, .res,
    .in_valid(cb_valid), .in_ready(cb_ready), .in_xyz(cb_xyz), .in_tag(cb_tag),
    .out_valid(pc_valid), .out_ready(pc_ready), .out_vc(pc_vc), .out_w(pc_w),
    .out_tag(pc_tag)
  );

  logic     hs_valid, hs_ready;
  pt_addr_t hs_pt;

  hash_unit u_hash (
    .clk, .rst_n, .level,
    .in_valid(pc_valid), .in_ready(pc_ready), .in_vc(pc_vc), .in_w(pc_w),
    .in_tag(pc_tag),
    .out_valid(hs_valid), .out_ready(hs_ready), .out_pt(hs_pt)
  );

  logic     db_valid, db_ready, db_empty, db_flush;
  pt_addr_t db_pt;

  assign db_flush = cb_done && !pc_valid && !hs_valid;

  addr_double_buffer u_dbuf (
    .clk, .rst_n, .flush(db_flush),
    .in_valid(hs_valid), .in_ready(hs_ready), .in_pt(hs_pt),
    .out_valid(db_valid), .out_ready(db_ready), .out_pt(db_pt), .empty(db_empty)
  );

  // ------------------------------------------------------------ read path
  logic local_frm;
  assign local_frm = (level == FUSE_L0);

  logic                            f8_in_valid, f8_in_ready;
  logic [NVERT-1:0][CORE_LOG2T-1:0] f8_addr;
  logic [BANKS_CORE-1:0]           f8_rd_en;
  logic [BANKS_CORE-1:0][BANK_AW-1:0] f8_rd_addr;
  logic                            f8_out_valid, f8_out_ready;
  emb_t [NVERT-1:0]                f8_emb;
  logic [META_W-1:0]               f8_meta;
  logic [$clog2(FRM_DEPTH*NVERT+1)-1:0] f8_served;
  logic                            frm_idle;

  always_comb
    for (int v = 0; v < NVERT; v++) f8_addr[v] = db_pt.addr[v][CORE_LOG2T-1:0];

  assign f8_in_valid = db_valid && !bp && local_frm;
  assign xreq_valid  = db_valid && !bp && !local_frm;
  assign xreq_addr   = db_pt.addr;
  assign xreq_meta   = {db_pt.tag, db_pt.w};

  frm_unit #(.NBANKS(BANKS_CORE), .NPORTS(1), .DEPTH(FRM_DEPTH)) u_frm8 (
    .clk, .rst_n,
    .in_valid(f8_in_valid), .in_ready(f8_in_ready), .in_addr(f8_addr),
    .in_meta({db_pt.tag, db_pt.w}),
    .bank_rd_en(f8_rd_en), .bank_rd_addr(f8_rd_addr), .bank_rd_data(bank_rd_data),
    .out_valid(f8_out_valid), .out_ready(f8_out_ready), .out_emb(f8_emb),
    .out_meta(f8_meta), .stat_reads(stat_frm_reads), .stat_served(f8_served),
    .idle(frm_idle)
  );

  // bank read-port multiplexer: B8 / B16 / B32
  for (genvar b = 0; b < BANKS_CORE; b++) begin : g_bank
    logic               rd_en;
    logic [BANK_AW-1:0] rd_addr;
    always_comb begin
      unique case (level)
        FUSE_L1: begin rd_en = b16_rd_en[b]; rd_addr = b16_rd_addr[b]; end
        FUSE_L2: begin rd_en = b32_rd_en[b]; rd_addr = b32_rd_addr[b]; end
        default: begin rd_en = f8_rd_en[b];  rd_addr = f8_rd_addr[b];  end
      endcase
    end
    hash_bank u_bank (
      .clk, .rst_n,
      .rd_en, .rd_addr, .rd_data(bank_rd_data[b]),
      .upd_en(upd_en[b]), .upd_set(upd_set[b]), .upd_addr(upd_addr[b]),
      .upd_data(upd_data[b])
    );
  end

  // ------------------------------------------------------------ interpolation
  logic              ig_ff_valid, ig_ff_ready;
  emb_t [NVERT-1:0]  ig_emb;
  logic [META_W-1:0] ig_meta;
  fp16_t [NVERT-1:0] ig_w;
  tag_t              ig_tag;

  assign ig_ff_valid  = local_frm ? f8_out_valid : xrsp_valid;
  assign ig_emb       = local_frm ? f8_emb : xrsp_emb;
  assign ig_meta      = local_frm ? f8_meta : xrsp_meta;
  assign {ig_tag, ig_w} = ig_meta;
  assign f8_out_ready = local_frm && ig_ff_ready;
  assign xrsp_ready   = !local_frm && ig_ff_ready;

  logic   bp_valid, bp_ready;
  logic   upd_valid, upd_ready;
  gaddr_t ug_addr;
  emb_t   ug_grad;

  // back-propagation pairs an address group with the point's gradient
  assign bp_valid = bp && db_valid && g_valid;
  assign db_ready = bp ? (bp_ready && g_valid)
                       : (local_frm ? f8_in_ready : xreq_ready);
  assign g_ready  = bp && db_valid && bp_ready;

  interp_grad_unit u_ig (
    .clk, .rst_n, .bp,
    .ff_valid(ig_ff_valid), .ff_ready(ig_ff_ready), .ff_emb(ig_emb), .ff_w(ig_w),
    .ff_tag(ig_tag),
    .ff_out_valid(ff_valid), .ff_out_ready(ff_ready), .ff_out_feat(ff_feat),
    .ff_out_tag(ff_tag),
    .bp_valid, .bp_ready, .bp_pt(db_pt), .bp_grad(g_feat),
    .upd_valid, .upd_ready, .upd_addr(ug_addr), .upd_grad(ug_grad)
  );

  // ------------------------------------------------------------ update merger
  logic bum_in_valid, bum_in_ready, bum_empty, bum_flush;

  assign bum_in_valid = upd_valid && bp_enable;
  assign upd_ready    = bum_in_ready || !bp_enable;
  assign bum_flush    = bp && cb_done && db_empty && !upd_valid && !pc_valid && !hs_valid;

  bum_unit #(.NENT(BUM_NENT)) u_bum (
    .clk, .rst_n, .lr, .thresh(bum_thresh), .flush(bum_flush),
    .in_valid(bum_in_valid), .in_ready(bum_in_ready), .in_addr(ug_addr),
    .in_grad(ug_grad),
    .out_valid(bw_valid), .out_ready(bw_ready), .out_addr(bw_addr),
    .out_delta(bw_delta),
    .empty(bum_empty), .stat_merge(stat_bum_merge), .stat_new(stat_bum_new),
    .stat_timeout(stat_bum_timeout), .stat_evict(stat_bum_evict)
  );

  // ------------------------------------------------------------ status
  assign busy = !(cb_done && !pc_valid && !hs_valid && db_empty && !upd_valid &&
                  bum_empty && !ff_valid && frm_idle);
endmodule
