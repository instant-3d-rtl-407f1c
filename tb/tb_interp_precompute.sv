// tb_interp_precompute -- random points at random grid resolutions: checks the
// eight corner vertices exactly and the trilinear weights against real
// arithmetic (FP16 tolerance), that the weights sum to one, and the one-cycle
// latency.
module tb_interp_precompute;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [RES_W-1:0] res;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [2:0][COORD_W-1:0] in_xyz;
  tag_t in_tag, out_tag;
  logic [NVERT-1:0][2:0][VC_W-1:0] out_vc;
  fp16_t [NVERT-1:0] out_w;

  interp_precompute dut (.*);

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; res = 16; in_xyz = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      longint unsigned p[3];
      int  base[3];
      real f[3], wsum;
      @(negedge clk);
      res = RES_W'(($urandom % 2047) + 1);
      for (int a = 0; a < 3; a++) in_xyz[a] = COORD_W'($urandom);
      if (n == 1) in_xyz = '0;                  // exact grid vertex
      in_tag = tag_t'(n);
      in_valid = 1;
      for (int a = 0; a < 3; a++) begin
        p[a]    = longint'(in_xyz[a]) * longint'(res);
        base[a] = int'(p[a] >> 16);
        f[a]    = real'(p[a] & 64'hFFFF) / 65536.0;
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != tag_t'(n)) begin
        failures++; $display("FAIL: no result one cycle after point %0d", n);
      end
      wsum = 0.0;
      for (int v = 0; v < NVERT; v++) begin
        int  bx, by, bz;
        real w;
        bx = (v >> 2) & 1; by = (v >> 1) & 1; bz = v & 1;
        w = (bx ? f[0] : 1.0 - f[0]) * (by ? f[1] : 1.0 - f[1]) * (bz ? f[2] : 1.0 - f[2]);
        wsum += fp16_to_real(out_w[v]);
        checks++;
        if (out_vc[v][0] != VC_W'(base[0] + bx) || out_vc[v][1] != VC_W'(base[1] + by) ||
            out_vc[v][2] != VC_W'(base[2] + bz)) begin
          failures++; $display("FAIL: point %0d vertex %0d coords", n, v);
        end
        checks++;
        if (!close(fp16_to_real(out_w[v]), w, 0.004, 0.0002)) begin
          failures++;
          $display("FAIL: point %0d vertex %0d weight %f exp %f", n, v, fp16_to_real(out_w[v]), w);
        end
      end
      checks++;
      if (!close(wsum, 1.0, 0.0, 0.01)) begin failures++; $display("FAIL: weight sum %f", wsum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
