// hash_unit -- Hash Function Compute Unit of a grid core.
//
// Maps the eight vertex coordinates of a point to hash-table addresses with
// the spatial hash h = (x*pi1 xor y*pi2 xor z*pi3) mod T, pi1 = 1,
// pi2 = 2654435761, pi3 = 805459861, as the paper gives it.  Products are
// taken modulo 2^32 and T = 2^(16+level) is the table size of the current
// fusion level (256 KB, 512 KB or 1 MB of two-feature FP16 entries), so the
// modulo keeps the low 16, 17 or 18 bits.  The weights and the point tag ride
// along unchanged.
//
// Interface: valid/ready in and out, one point (eight addresses) per cycle,
// one register stage.  The 32-bit product width is this design's choice.
module hash_unit
  import i3d_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  fuse_t                            level,
  input  logic                             in_valid,
  output logic                             in_ready,
  input  logic [NVERT-1:0][2:0][VC_W-1:0]  in_vc,
  input  fp16_t [NVERT-1:0]                in_w,
  input  tag_t                             in_tag,
  output logic                             out_valid,
  input  logic                             out_ready,
  output pt_addr_t                         out_pt
);
  pt_addr_t pt_d;
  logic [GADDR_W-1:0] mask;

  assign mask = GADDR_W'((32'd1 << log2t(level)) - 32'd1);

  always_comb begin
    pt_d.tag = in_tag;
    pt_d.w   = in_w;
    for (int v = 0; v < NVERT; v++) begin
      logic [31:0] h;
      h = 32'(in_vc[v][0]) ^ (32'(in_vc[v][1]) * PI2) ^ (32'(in_vc[v][2]) * PI3);
      pt_d.addr[v] = h[GADDR_W-1:0] & mask;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pt    <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_pt <= pt_d;
    end
  end
endmodule
