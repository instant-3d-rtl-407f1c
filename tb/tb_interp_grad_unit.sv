// tb_interp_grad_unit -- feed-forward: random weights and embeddings, checks
// sum_i w_i*e_i per feature against real arithmetic and the one-point-per-
// cycle rate; back-propagation: checks the eight (address, w_i*g) pairs of
// each point, their order and the eight-cycle spacing of points.
module tb_interp_grad_unit;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bp, ff_valid, ff_ready, ff_out_valid, ff_out_ready;
  emb_t [NVERT-1:0] ff_emb;
  fp16_t [NVERT-1:0] ff_w;
  tag_t ff_tag, ff_out_tag;
  emb_t ff_out_feat;
  logic bp_valid, bp_ready, upd_valid, upd_ready;
  pt_addr_t bp_pt;
  emb_t bp_grad, upd_grad;
  gaddr_t upd_addr;

  interp_grad_unit dut (.*);

  real    e0 [$], e1 [$];
  gaddr_t ea [$];
  real    eg0 [$], eg1 [$];
  int ff_out_n, ff_first, ff_last, upd_n;

  initial begin
    #400000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (ff_out_valid && ff_out_ready) begin
      real x0, x1;
      x0 = e0.pop_front(); x1 = e1.pop_front();
      checks++;
      if (!close(fp16_to_real(ff_out_feat.f0), x0, 0.01, 0.02) ||
          !close(fp16_to_real(ff_out_feat.f1), x1, 0.01, 0.02) ||
          ff_out_tag != tag_t'(ff_out_n)) begin
        failures++;
        $display("FAIL: ff point %0d got %f %f exp %f %f", ff_out_n,
                 fp16_to_real(ff_out_feat.f0), fp16_to_real(ff_out_feat.f1), x0, x1);
      end
      if (ff_out_n == 0) ff_first = $time;
      ff_last = $time;
      ff_out_n++;
    end
    if (upd_valid && upd_ready) begin
      gaddr_t a;
      real g0, g1;
      a = ea.pop_front(); g0 = eg0.pop_front(); g1 = eg1.pop_front();
      checks++;
      if (upd_addr != a || !close(fp16_to_real(upd_grad.f0), g0, 0.002, 1e-5) ||
          !close(fp16_to_real(upd_grad.f1), g1, 0.002, 1e-5)) begin
        failures++; $display("FAIL: bp pair %0d", upd_n);
      end
      upd_n++;
    end
  end

  initial begin
    bp = 0; ff_valid = 0; ff_out_ready = 1; bp_valid = 0; upd_ready = 1;
    ff_emb = '0; ff_w = '0; ff_tag = '0; bp_pt = '0; bp_grad = '0;
    ff_out_n = 0; upd_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // feed-forward, back-to-back
    for (int n = 0; n < 200; n++) begin
      real s0, s1;
      @(negedge clk);
      ff_valid = 1; ff_tag = tag_t'(n);
      s0 = 0; s1 = 0;
      for (int v = 0; v < NVERT; v++) begin
        real w, a, b;
        w = real'($urandom % 1000) / 1000.0 + 0.001;
        a = real'(int'($urandom % 2000) - 1000) / 100.0;
        b = real'(int'($urandom % 2000) - 1000) / 100.0;
        ff_w[v] = real_to_fp16(w); ff_emb[v].f0 = real_to_fp16(a); ff_emb[v].f1 = real_to_fp16(b);
        s0 += fp16_to_real(ff_w[v]) * fp16_to_real(ff_emb[v].f0);
        s1 += fp16_to_real(ff_w[v]) * fp16_to_real(ff_emb[v].f1);
      end
      e0.push_back(s0); e1.push_back(s1);
    end
    @(negedge clk) ff_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ff_out_n != 200 || (ff_last - ff_first) != 199 * 10) begin
      failures++; $display("FAIL: ff rate: %0d points in %0d ns", ff_out_n, ff_last - ff_first);
    end
    // back-propagation with random stalls
    bp = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      bp_valid = 1;
      bp_grad.f0 = real_to_fp16(real'(int'($urandom % 2000) - 1000) / 1000.0);
      bp_grad.f1 = real_to_fp16(real'(int'($urandom % 2000) - 1000) / 1000.0);
      for (int v = 0; v < NVERT; v++) begin
        bp_pt.addr[v] = GADDR_W'($urandom);
        bp_pt.w[v] = real_to_fp16(real'($urandom % 1000) / 1000.0 + 0.001);
        ea.push_back(bp_pt.addr[v]);
        eg0.push_back(fp16_to_real(bp_pt.w[v]) * fp16_to_real(bp_grad.f0));
        eg1.push_back(fp16_to_real(bp_pt.w[v]) * fp16_to_real(bp_grad.f1));
      end
      @(posedge clk);
      while (!bp_ready) @(posedge clk);
    end
    @(negedge clk) bp_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (upd_n != 400) begin failures++; $display("FAIL: %0d gradient pairs", upd_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
