// tb_instant3d_top -- end-to-end test of the accelerator at its full size
// (no parameter override: 4 cores x 256 KB tables, 4096-point coordinate
// buffers, 1024-word MLP buffer).
//
// A reference model keeps the hash table as real numbers per physical entry
// (owner core, entry).  For every pass the testbench writes the coordinates of
// ray-like point batches (neighbouring points share cells, so addresses
// repeat), writes every table entry the batch touches through the host port,
// runs the pass on all four cores and checks:
//  * feed-forward at fusion levels 0, 1 and 2: every point's interpolated
//    two-feature embedding against sum_v w_v * table(hash(v));
//  * back-propagation: after BP passes, a feed-forward pass reads back the
//    updated table, which must equal table - lr * sum(w_v * g) in the model;
//    core 3 runs with update period 2, so its second BP iteration is skipped;
//  * the MLP units: an 8 x 8 x 8 systolic product and a 3-channel tree dot
//    product fed from the MLP buffer.
// It counts that every mechanism occurs at least once: FRM read merge and
// multi-point packing in B8, B16 and B32; passes at L0, L1, L2; BUM merge,
// timeout and eviction; a skipped back-propagation; systolic-array and
// multiplier-adder-tree results.  Watchdog: 20 ms of simulated time.
module tb_instant3d_top;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fuse_t level;
  logic bp, iter_start, iter_clear, start, busy, h_valid, h_ready, h_set;
  logic [3:0][11:0] res;
  fp16_t lr;
  logic [7:0] bum_thresh;
  logic [3:0][3:0] upd_period;
  logic [3:0] cw_en, ff_valid, ff_ready, g_valid, g_ready;
  logic [3:0][11:0] cw_idx;
  logic [3:0][2:0][15:0] cw_xyz;
  logic [3:0][12:0] count;
  emb_t [3:0] ff_feat, g_feat;
  tag_t [3:0] ff_tag;
  logic [1:0] h_core;
  gaddr_t h_addr;
  emb_t h_data;
  logic mlp_wr_en, mlp_rd_en, mlp_sel, mlp_last, mlp_start, sa_done, tree_valid;
  logic [9:0] mlp_wr_addr, mlp_rd_addr;
  fp16_t [15:0] mlp_wr_data;
  fp16_t [2:0][15:0] tree_w;
  fp16_t [7:0][7:0] sa_c;
  fp16_t [2:0] tree_y;
  logic [3:0][3:0] stat_frm8_reads;
  logic [1:0][4:0] stat_frm16_reads;
  logic [5:0] stat_frm32_reads;
  logic [3:0] stat_bum_merge, stat_bum_new, stat_bum_timeout, stat_bum_evict, stat_bp_skipped;

  instant3d_top dut (.*);

  // ------------------------------------------------------------ model
  localparam int NPTS = 256;
  real tab0 [int], tab1 [int];           // key = owner * 65536 + entry
  logic [15:0] px [4][NPTS], py [4][NPTS], pz [4][NPTS];
  real gx0 [4][NPTS], gx1 [4][NPTS];

  function automatic int owner(fuse_t l, int src, int a);
    if (l == FUSE_L2) return (a >> 16) & 3;
    if (l == FUSE_L1) return (src & 2) | ((a >> 16) & 1);
    return src;
  endfunction

  // vertex addresses and weights of a point, as the hardware forms them
  function automatic void vertices(fuse_t l, int r, logic [15:0] x, logic [15:0] y,
                                   logic [15:0] z, output int a [8], output real w [8]);
    logic [27:0] p [3];
    logic [11:0] b [3];
    real f [3];
    p[0] = 28'(x) * 28'(r); p[1] = 28'(y) * 28'(r); p[2] = 28'(z) * 28'(r);
    for (int k = 0; k < 3; k++) begin b[k] = p[k][27:16]; f[k] = real'(p[k][15:0]) / 65536.0; end
    for (int v = 0; v < 8; v++) begin
      logic [11:0] vx, vy, vz;
      logic [31:0] h;
      vx = b[0] + 12'(v[2]); vy = b[1] + 12'(v[1]); vz = b[2] + 12'(v[0]);
      h = 32'(vx) ^ (32'(vy) * 32'd2654435761) ^ (32'(vz) * 32'd805459861);
      a[v] = int'(h & ((32'd1 << (16 + int'(l))) - 1));
      w[v] = (v[2] ? f[0] : 1.0 - f[0]) * (v[1] ? f[1] : 1.0 - f[1]) * (v[0] ? f[2] : 1.0 - f[2]);
    end
  endfunction

  function automatic int key(fuse_t l, int c, int a);
    return owner(l, c, a) * 65536 + (a & 16'hFFFF);
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_merge8, n_merge16, n_merge32, n_pack8, n_pack16, n_pack32;
  int n_lvl [3];
  int n_bmerge, n_bnew, n_bto, n_bev, n_skip, n_sa, n_tree;
  int ff_cnt [4], g_cnt [4];

  function automatic int slots_active(logic [15:0][7:0] s);
    int n = 0;
    for (int i = 0; i < 16; i++) n += (|s[i]) ? 1 : 0;
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      n_bmerge += stat_bum_merge[c]; n_bnew += stat_bum_new[c];
      n_bto += stat_bum_timeout[c]; n_bev += stat_bum_evict[c]; n_skip += stat_bp_skipped[c];
    end
    n_sa += sa_done; n_tree += tree_valid;
    if (dut.g_core[0].u_core.u_frm8.stat_served > 5'(stat_frm8_reads[0])) n_merge8++;
    if (slots_active(dut.g_core[0].u_core.u_frm8.serve) > 1) n_pack8++;
    if (dut.g_b16[0].u_frm16.stat_served > 8'(stat_frm16_reads[0])) n_merge16++;
    if (slots_active(dut.g_b16[0].u_frm16.serve) > 1) n_pack16++;
    if (dut.u_frm32.stat_served > 8'(stat_frm32_reads)) n_merge32++;
    if (slots_active(dut.u_frm32.serve) > 1) n_pack32++;
  end

  initial begin
    #20ms failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ tasks
  task automatic make_points(int seed_scale);
    for (int c = 0; c < 4; c++) begin
      int i = 0;
      while (i < NPTS) begin
        int ox, oy, oz, dx, dy, dz;
        ox = $urandom % 65536; oy = $urandom % 65536; oz = $urandom % 65536;
        dx = int'($urandom % 161) - 80; dy = int'($urandom % 161) - 80; dz = int'($urandom % 161) - 80;
        for (int s = 0; s < 32 && i < NPTS; s++, i++) begin
          px[c][i] = 16'(ox + s * dx * seed_scale);
          py[c][i] = 16'(oy + s * dy * seed_scale);
          pz[c][i] = 16'(oz + s * dz * seed_scale);
        end
      end
    end
  endtask

  task automatic load_points();
    for (int i = 0; i < NPTS; i++) begin
      @(negedge clk);
      cw_en = '1;
      for (int c = 0; c < 4; c++) begin cw_idx[c] = 12'(i); cw_xyz[c] = {pz[c][i], py[c][i], px[c][i]}; end
    end
    @(negedge clk) cw_en = '0;
  endtask

  task automatic host_write(int c, int a, real v0, real v1);
    @(negedge clk);
    h_valid = 1; h_core = 2'(c); h_set = 1; h_addr = gaddr_t'(a);
    h_data.f0 = real_to_fp16(v0); h_data.f1 = real_to_fp16(v1);
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    @(negedge clk) h_valid = 0;
  endtask

  // write every table entry the batch touches that the model does not hold yet
  task automatic init_entries();
    for (int c = 0; c < 4; c++)
      for (int i = 0; i < NPTS; i++) begin
        int a [8]; real w [8];
        vertices(level, int'(res[c]), px[c][i], py[c][i], pz[c][i], a, w);
        for (int v = 0; v < 8; v++) begin
          int k = key(level, c, a[v]);
          if (!tab0.exists(k)) begin
            real v0, v1;
            v0 = fp16_to_real(real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0));
            v1 = fp16_to_real(real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0));
            tab0[k] = v0; tab1[k] = v1;
            host_write(c, a[v], v0, v1);
          end
        end
      end
  endtask

  task automatic run_pass(logic is_bp);
    int guard = 0;
    for (int c = 0; c < 4; c++) begin ff_cnt[c] = 0; g_cnt[c] = 0; end
    @(negedge clk);
    bp = is_bp;
    count = {4{13'(NPTS)}};
    start = 1;
    @(negedge clk) start = 0;
    repeat (4) @(negedge clk);
    while (busy && guard < 200000) begin @(negedge clk); guard++; end
    repeat (4) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: pass did not finish"); end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (!is_bp && ff_cnt[c] != NPTS) begin failures++; $display("FAIL: core %0d gave %0d points", c, ff_cnt[c]); end
      if (is_bp && g_cnt[c] != NPTS) begin failures++; $display("FAIL: core %0d took %0d gradients", c, g_cnt[c]); end
    end
  endtask

  // feed-forward checker
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      if (ff_valid[c] && ff_ready[c]) begin
        int a [8]; real w [8]; real e0, e1, m; int i;
        i = int'(ff_tag[c]);
        vertices(level, int'(res[c]), px[c][i], py[c][i], pz[c][i], a, w);
        e0 = 0; e1 = 0; m = 0;
        for (int v = 0; v < 8; v++) begin
          int k;
          k = key(level, c, a[v]);
          e0 += w[v] * tab0[k]; e1 += w[v] * tab1[k];
          m += w[v] * ((tab0[k] < 0 ? -tab0[k] : tab0[k]) + (tab1[k] < 0 ? -tab1[k] : tab1[k]));
        end
        checks++;
        if (i != ff_cnt[c] || !close(fp16_to_real(ff_feat[c].f0), e0, 0.0, 0.01 * m + 0.004) ||
            !close(fp16_to_real(ff_feat[c].f1), e1, 0.0, 0.01 * m + 0.004)) begin
          failures++;
          if (failures < 20)
            $display("FAIL: lvl %0d core %0d point %0d (tag %0d) got %f %f exp %f %f", level, c,
                     ff_cnt[c], i, fp16_to_real(ff_feat[c].f0), fp16_to_real(ff_feat[c].f1), e0, e1);
        end
        ff_cnt[c]++;
        n_lvl[int'(level)]++;
      end
      if (g_valid[c] && g_ready[c]) g_cnt[c]++;
    end
  end

  // gradients: one per point, in point order
  always_comb
    for (int c = 0; c < 4; c++) begin
      int i;
      i = (g_cnt[c] < NPTS) ? g_cnt[c] : 0;
      g_feat[c].f0 = real_to_fp16(gx0[c][i]);
      g_feat[c].f1 = real_to_fp16(gx1[c][i]);
      g_valid[c] = bp && (g_cnt[c] < NPTS);
    end

  // model of one BP iteration (enabled cores only)
  task automatic model_bp(logic [3:0] en);
    for (int c = 0; c < 4; c++) if (en[c])
      for (int i = 0; i < NPTS; i++) begin
        int a [8]; real w [8];
        vertices(level, int'(res[c]), px[c][i], py[c][i], pz[c][i], a, w);
        for (int v = 0; v < 8; v++) begin
          int k = key(level, c, a[v]);
          tab0[k] -= 0.5 * w[v] * gx0[c][i];
          tab1[k] -= 0.5 * w[v] * gx1[c][i];
        end
      end
  endtask

  task automatic make_grads();
    for (int c = 0; c < 4; c++)
      for (int i = 0; i < NPTS; i++) begin
        gx0[c][i] = fp16_to_real(real_to_fp16(real'(int'($urandom % 201) - 100) / 400.0));
        gx1[c][i] = fp16_to_real(real_to_fp16(real'(int'($urandom % 201) - 100) / 400.0));
      end
  endtask

  task automatic bp_iteration(logic [3:0] expect_en);
    @(negedge clk) iter_start = 1;
    @(negedge clk) iter_start = 0;
    make_grads();
    run_pass(1'b1);
    model_bp(expect_en);
  endtask

  // ------------------------------------------------------------ MLP check
  task automatic mlp_test();
    real a [8][8], b [8][8], x [16], wt [3][16];
    // systolic: 8 beats, word = {b row k, a column k}
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      mlp_wr_en = 1; mlp_wr_addr = 10'(k);
      for (int i = 0; i < 8; i++) begin
        a[i][k] = real'(int'($urandom % 201) - 100) / 100.0;
        b[k][i] = real'(int'($urandom % 201) - 100) / 100.0;
        mlp_wr_data[i] = real_to_fp16(a[i][k]); a[i][k] = fp16_to_real(mlp_wr_data[i]);
        mlp_wr_data[8 + i] = real_to_fp16(b[k][i]); b[k][i] = fp16_to_real(mlp_wr_data[8 + i]);
      end
    end
    @(negedge clk);
    mlp_wr_addr = 10'd1000;
    for (int l = 0; l < 16; l++) begin
      x[l] = fp16_to_real(real_to_fp16(real'(int'($urandom % 201) - 100) / 100.0));
      mlp_wr_data[l] = real_to_fp16(x[l]);
      for (int o = 0; o < 3; o++) begin
        tree_w[o][l] = real_to_fp16(real'(int'($urandom % 201) - 100) / 100.0);
        wt[o][l] = fp16_to_real(tree_w[o][l]);
      end
    end
    @(negedge clk) mlp_wr_en = 0; mlp_start = 1;
    @(negedge clk) mlp_start = 0;
    for (int k = 0; k < 8; k++) begin
      mlp_rd_en = 1; mlp_rd_addr = 10'(k); mlp_sel = 0; mlp_last = (k == 7);
      @(negedge clk);
    end
    mlp_rd_en = 0; mlp_last = 0;
    while (!sa_done) @(negedge clk);
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
      real e = 0, m = 0;
      for (int k = 0; k < 8; k++) begin e += a[i][k] * b[k][j]; m += (a[i][k] * b[k][j] < 0) ? -a[i][k] * b[k][j] : a[i][k] * b[k][j]; end
      checks++;
      if (!close(fp16_to_real(sa_c[i][j]), e, 0.0, 0.003 * m + 0.002)) begin
        failures++; $display("FAIL: sa c[%0d][%0d] %f exp %f", i, j, fp16_to_real(sa_c[i][j]), e);
      end
    end
    // tree: a single beat
    mlp_rd_en = 1; mlp_rd_addr = 10'd1000; mlp_sel = 1; mlp_last = 1;
    @(negedge clk) mlp_rd_en = 0; mlp_last = 0;
    while (!tree_valid) @(negedge clk);
    for (int o = 0; o < 3; o++) begin
      real e = 0, m = 0;
      for (int l = 0; l < 16; l++) begin e += x[l] * wt[o][l]; m += (x[l] * wt[o][l] < 0) ? -x[l] * wt[o][l] : x[l] * wt[o][l]; end
      checks++;
      if (!close(fp16_to_real(tree_y[o]), e, 0.0, 0.003 * m + 0.002)) begin
        failures++; $display("FAIL: tree y[%0d] %f exp %f", o, fp16_to_real(tree_y[o]), e);
      end
    end
  endtask

  // ------------------------------------------------------------ sequence
  initial begin
    level = FUSE_L0; bp = 0; iter_start = 0; iter_clear = 0; start = 0; h_valid = 0;
    h_set = 0; h_core = 0; h_addr = '0; h_data = '0;
    res = {12'd200, 12'd96, 12'd160, 12'd128};
    lr = 16'h3800;                        // 0.5
    bum_thresh = 8'd255;
    upd_period = {4'd2, 4'd0, 4'd0, 4'd0}; // core 3: update every second iteration
    cw_en = '0; cw_idx = '0; cw_xyz = '0; count = '0; ff_ready = '1;
    mlp_wr_en = 0; mlp_rd_en = 0; mlp_sel = 0; mlp_last = 0; mlp_start = 0;
    mlp_wr_addr = '0; mlp_rd_addr = '0; mlp_wr_data = '0; tree_w = '0;
    n_merge8 = 0; n_merge16 = 0; n_merge32 = 0; n_pack8 = 0; n_pack16 = 0; n_pack32 = 0;
    n_lvl = '{0, 0, 0}; n_bmerge = 0; n_bnew = 0; n_bto = 0; n_bev = 0; n_skip = 0;
    n_sa = 0; n_tree = 0;
    for (int c = 0; c < 4; c++) begin ff_cnt[c] = 0; g_cnt[c] = NPTS; end
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(negedge clk) iter_clear = 1;
    @(negedge clk) iter_clear = 0;

    // feed-forward at each fusion level
    for (int l = 0; l < 3; l++) begin
      level = fuse_t'(l);
      tab0.delete(); tab1.delete();
      make_points(1);
      load_points();
      init_entries();
      run_pass(1'b0);
      $display("level %0d feed-forward done at %0t", l, $time);
    end

    // back-propagation at level 0: two iterations, core 3 skips the second,
    // first with a large merge threshold (evictions), then a small one (timeouts)
    level = FUSE_L0;
    tab0.delete(); tab1.delete();
    make_points(1);
    load_points();
    init_entries();
    bum_thresh = 8'd255;
    bp_iteration(4'b1111);
    bum_thresh = 8'd3;
    bp_iteration(4'b0111);
    run_pass(1'b0);
    $display("level 0 back-propagation done at %0t", $time);

    // back-propagation at level 2 (updates cross cores through the router)
    level = FUSE_L2;
    upd_period = '0;
    tab0.delete(); tab1.delete();
    make_points(1);
    load_points();
    init_entries();
    bum_thresh = 8'd8;
    bp_iteration(4'b1111);
    run_pass(1'b0);
    $display("level 2 back-propagation done at %0t", $time);

    mlp_test();
    repeat (3) @(negedge clk);

    $display("mechanisms: frm merge B8/B16/B32 %0d/%0d/%0d, packing %0d/%0d/%0d", n_merge8,
             n_merge16, n_merge32, n_pack8, n_pack16, n_pack32);
    $display("  points L0/L1/L2 %0d/%0d/%0d, bum merge/new/timeout/evict %0d/%0d/%0d/%0d",
             n_lvl[0], n_lvl[1], n_lvl[2], n_bmerge, n_bnew, n_bto, n_bev);
    $display("  bp skipped %0d, systolic results %0d, tree results %0d", n_skip, n_sa, n_tree);
    checks++;
    if (n_merge8 == 0 || n_merge16 == 0 || n_merge32 == 0 || n_pack8 == 0 || n_pack16 == 0 ||
        n_pack32 == 0 || n_lvl[0] == 0 || n_lvl[1] == 0 || n_lvl[2] == 0 || n_bmerge == 0 ||
        n_bto == 0 || n_bev == 0 || n_skip == 0 || n_sa == 0 || n_tree == 0) begin
      failures++; $display("FAIL: a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
