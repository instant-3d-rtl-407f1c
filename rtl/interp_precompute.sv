// interp_precompute -- Interpolation Coordinate Pre-Compute Unit of a grid core.
//
// For one queried point it finds the cube of the embedding grid that holds the
// point and returns the integer coordinates of the cube's eight corner vertices
// together with their trilinear interpolation weights.  The point arrives as a
// normalised coordinate per axis (UQ0.16, i.e. [0,1)) and is scaled by the grid
// resolution `res`: p = x*res, vertex = floor(p) + bit, fraction f = p - floor(p).
// The weight of vertex i = {bx,by,bz} is the product of f (bit set) or 1-f
// (bit clear) over the three axes, formed as FP16.  Vertex index bit 2 is the x
// axis, bit 0 the z axis, as in the labels 000..111 of the paper.
//
// Interface: valid/ready in and out; one point per cycle; one register stage,
// so results appear the cycle after acceptance.  The coordinate format and the
// FP16 weight products are this design's choices; the paper states only that
// the unit computes the eight neighbouring vertices.
module interp_precompute
  import i3d_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [RES_W-1:0]             res,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [2:0][COORD_W-1:0]      in_xyz,    // [0]=x [1]=y [2]=z
  input  tag_t                         in_tag,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [NVERT-1:0][2:0][VC_W-1:0] out_vc, // [vertex][axis]
  output fp16_t [NVERT-1:0]            out_w,
  output tag_t                         out_tag
);
  logic [2:0][VC_W-1:0] base;
  fp16_t [2:0]          wf, wc;          // weight for bit=1 (f) and bit=0 (1-f)
  logic [NVERT-1:0][2:0][VC_W-1:0] vc_d;
  fp16_t [NVERT-1:0]    w_d;

  always_comb begin
    for (int a = 0; a < 3; a++) begin
      logic [COORD_W+RES_W-1:0] p;
      logic [15:0] f;
      p       = in_xyz[a] * res;
      base[a] = p[COORD_W +: VC_W];
      f       = p[COORD_W-1:0];
      wf[a]   = frac_to_fp16(f);
      wc[a]   = (f == 16'd0) ? FP16_ONE : frac_to_fp16(16'(-f));
    end
    for (int v = 0; v < NVERT; v++) begin
      fp16_t wx, wy, wz;
      wx = v[2] ? wf[0] : wc[0];
      wy = v[1] ? wf[1] : wc[1];
      wz = v[0] ? wf[2] : wc[2];
      vc_d[v][0] = base[0] + VC_W'(v[2]);
      vc_d[v][1] = base[1] + VC_W'(v[1]);
      vc_d[v][2] = base[2] + VC_W'(v[0]);
      w_d[v]     = fp16_mul(fp16_mul(wx, wy), wz);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vc    <= '0;
      out_w     <= '0;
      out_tag   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_vc  <= vc_d;
        out_w   <= w_d;
        out_tag <= in_tag;
      end
    end
  end
endmodule
