// interp_grad_unit -- Interpolation Unit / Gradient Compute Unit of a grid core.
//
// Feed-forward (`bp` low): a point's eight fetched embeddings e_i and trilinear
// weights w_i give its interpolated embedding, per feature f:
//     out[f] = sum_i w_i * e_i[f]
// computed by sixteen FP16 multipliers and a three-level FP16 adder tree per
// feature, the multiply-add tree the paper draws inside this unit.
//
// Back-propagation (`bp` high): the same sixteen multipliers form the gradient
// of every vertex embedding from the point's output gradient g:
//     grad_i[f] = w_i * g[f]
// The eight (address, gradient) pairs are then handed one per cycle to the
// Back-Propagation Update Merger.
//
// Interface: ff_* (embeddings from the FRM) and bp_* (addresses, weights and
// output gradient) are valid/ready inputs; ff_out_* and upd_* valid/ready
// outputs.  Feed-forward: one point per cycle, one register stage.
// Back-propagation: one point per eight cycles, the first pair one cycle after
// acceptance.  The sharing of the multipliers between the two modes follows
// the paper's "reconfigured" unit; the serial hand-over to the merger is this
// design's choice.
module interp_grad_unit
  import i3d_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   bp,
  // feed-forward input
  input  logic                   ff_valid,
  output logic                   ff_ready,
  input  emb_t  [NVERT-1:0]      ff_emb,
  input  fp16_t [NVERT-1:0]      ff_w,
  input  tag_t                   ff_tag,
  // feed-forward output
  output logic                   ff_out_valid,
  input  logic                   ff_out_ready,
  output emb_t                   ff_out_feat,
  output tag_t                   ff_out_tag,
  // back-propagation input
  input  logic                   bp_valid,
  output logic                   bp_ready,
  input  pt_addr_t               bp_pt,
  input  emb_t                   bp_grad,
  // per-vertex gradients to the BUM
  output logic                   upd_valid,
  input  logic                   upd_ready,
  output gaddr_t                 upd_addr,
  output emb_t                   upd_grad
);
  // -------------------------------------------------- shared multipliers
  fp16_t [NVERT-1:0] w_in;
  emb_t  [NVERT-1:0] prod;

  always_comb begin
    w_in = bp ? bp_pt.w : ff_w;
    for (int i = 0; i < NVERT; i++) begin
      prod[i].f0 = fp16_mul(w_in[i], bp ? bp_grad.f0 : ff_emb[i].f0);
      prod[i].f1 = fp16_mul(w_in[i], bp ? bp_grad.f1 : ff_emb[i].f1);
    end
  end

  // -------------------------------------------------- feed-forward adder tree
  function automatic fp16_t tree8(fp16_t [NVERT-1:0] p);
    return fp16_add(fp16_add(fp16_add(p[0], p[1]), fp16_add(p[2], p[3])),
                    fp16_add(fp16_add(p[4], p[5]), fp16_add(p[6], p[7])));
  endfunction

  fp16_t [NVERT-1:0] p0, p1;
  emb_t sum;
  always_comb begin
    for (int i = 0; i < NVERT; i++) begin
      p0[i] = prod[i].f0;
      p1[i] = prod[i].f1;
    end
    sum.f0 = tree8(p0);
    sum.f1 = tree8(p1);
  end

  assign ff_ready = !bp && (!ff_out_valid || ff_out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff_out_valid <= 1'b0;
      ff_out_feat  <= '0;
      ff_out_tag   <= '0;
    end else if (!ff_out_valid || ff_out_ready) begin
      ff_out_valid <= ff_valid && ff_ready;
      if (ff_valid && ff_ready) begin
        ff_out_feat <= sum;
        ff_out_tag  <= ff_tag;
      end
    end
  end

  // -------------------------------------------------- back-propagation serialiser
  emb_t   [NVERT-1:0] g_q;
  gaddr_t [NVERT-1:0] a_q;
  logic   [2:0]       vidx;
  logic               busy;
  logic               last;

  assign last      = upd_valid && upd_ready && (vidx == 3'd7);
  assign bp_ready  = bp && (!busy || last);
  assign upd_valid = busy;
  assign upd_addr  = a_q[vidx];
  assign upd_grad  = g_q[vidx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      vidx <= '0;
      g_q  <= '0;
      a_q  <= '0;
    end else begin
      if (upd_valid && upd_ready) vidx <= vidx + 1'b1;
      if (last) busy <= 1'b0;
      if (bp_valid && bp_ready) begin
        busy <= 1'b1;
        vidx <= '0;
        g_q  <= prod;
        a_q  <= bp_pt.addr;
      end
    end
  end
endmodule
