// tb_grid_core -- one grid core at fusion level 0 (its own FRM B8).  The
// testbench plays the update router: it initialises the touched table entries
// through the bank update ports (set) and feeds the core's BUM write-backs
// back into its own banks (add).  Checks: every feed-forward point against a
// real-valued model, back-pressure on ff_ready, the gradient hand-shake of a
// back-propagation pass, the table contents after it (read back by a second
// feed-forward pass), the skipped update when bp_enable is low, and `busy`.
module tb_grid_core;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NPTS = 200;

  fuse_t level;
  logic bp, bp_enable, cw_en, start, busy, ff_valid, ff_ready, g_valid, g_ready;
  logic [11:0] res;
  fp16_t lr;
  logic [7:0] bum_thresh;
  logic [7:0] cw_idx;
  logic [2:0][15:0] cw_xyz;
  logic [8:0] count;
  emb_t ff_feat, g_feat, bw_delta;
  tag_t ff_tag;
  logic xreq_valid, xreq_ready, xrsp_valid, xrsp_ready;
  gaddr_t [7:0] xreq_addr;
  logic [META_W-1:0] xreq_meta, xrsp_meta;
  emb_t [7:0] xrsp_emb, bank_rd_data, upd_data;
  logic [7:0] b16_rd_en, b32_rd_en, upd_en, upd_set;
  logic [7:0][12:0] b16_rd_addr, b32_rd_addr, upd_addr;
  logic bw_valid, bw_ready;
  gaddr_t bw_addr;
  logic [3:0] stat_frm_reads;
  logic stat_bum_merge, stat_bum_new, stat_bum_timeout, stat_bum_evict;

  grid_core #(.COORD_DEPTH(256)) dut (.*);

  real tab0 [int], tab1 [int];
  logic [15:0] px [NPTS], py [NPTS], pz [NPTS];
  real gx0 [NPTS], gx1 [NPTS];
  int ff_cnt, g_cnt, n_merge, n_wb;
  logic hv;
  gaddr_t ha;
  emb_t hd;

  function automatic void vertices(int r, logic [15:0] x, logic [15:0] y, logic [15:0] z,
                                   output int a [8], output real w [8]);
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
      a[v] = int'(h & 32'hFFFF);
      w[v] = (v[2] ? f[0] : 1.0 - f[0]) * (v[1] ? f[1] : 1.0 - f[1]) * (v[0] ? f[2] : 1.0 - f[2]);
    end
  endfunction

  // router stand-in: host set has priority over the BUM write-back
  always_comb begin
    upd_en = '0; upd_set = '0; upd_addr = '0; upd_data = '0;
    bw_ready = 1'b0;
    if (hv) begin
      upd_en[ha[15:13]] = 1'b1; upd_set[ha[15:13]] = 1'b1;
      upd_addr[ha[15:13]] = ha[12:0]; upd_data[ha[15:13]] = hd;
    end else if (bw_valid) begin
      bw_ready = 1'b1;
      upd_en[bw_addr[15:13]] = 1'b1;
      upd_addr[bw_addr[15:13]] = bw_addr[12:0]; upd_data[bw_addr[15:13]] = bw_delta;
    end
  end

  always_comb begin
    int i;
    i = (g_cnt < NPTS) ? g_cnt : 0;
    g_feat.f0 = real_to_fp16(gx0[i]);
    g_feat.f1 = real_to_fp16(gx1[i]);
    g_valid = bp && (g_cnt < NPTS);
  end

  always @(posedge clk) if (rst_n) begin
    if (ff_valid && ff_ready) begin
      int a [8]; real w [8]; real e0, e1, m; int i;
      i = int'(ff_tag);
      vertices(int'(res), px[i], py[i], pz[i], a, w);
      e0 = 0; e1 = 0; m = 0;
      for (int v = 0; v < 8; v++) begin
        e0 += w[v] * tab0[a[v]]; e1 += w[v] * tab1[a[v]];
        m += w[v] * ((tab0[a[v]] < 0 ? -tab0[a[v]] : tab0[a[v]]) + (tab1[a[v]] < 0 ? -tab1[a[v]] : tab1[a[v]]));
      end
      checks++;
      if (i != ff_cnt || !close(fp16_to_real(ff_feat.f0), e0, 0.0, 0.01 * m + 0.004) ||
          !close(fp16_to_real(ff_feat.f1), e1, 0.0, 0.01 * m + 0.004)) begin
        failures++;
        $display("FAIL: point %0d tag %0d got %f %f exp %f %f", ff_cnt, i,
                 fp16_to_real(ff_feat.f0), fp16_to_real(ff_feat.f1), e0, e1);
      end
      ff_cnt++;
    end
    if (g_valid && g_ready) g_cnt++;
    if (bw_valid && bw_ready) n_wb++;
    n_merge += stat_bum_merge;
    ff_ready <= ($urandom % 3) != 0;
  end

  initial begin
    #5ms failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass(logic is_bp);
    int guard = 0;
    ff_cnt = 0; g_cnt = 0;
    @(negedge clk) bp = is_bp; count = 9'(NPTS); start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL: not busy after start"); end
    while (busy && guard < 100000) begin @(negedge clk); guard++; end
    checks++;
    if (busy || (!is_bp && ff_cnt != NPTS) || (is_bp && g_cnt != NPTS)) begin
      failures++; $display("FAIL: pass ff=%0d g=%0d", ff_cnt, g_cnt);
    end
    repeat (2) @(negedge clk);
  endtask

  task automatic model_bp();
    for (int i = 0; i < NPTS; i++) begin
      int a [8]; real w [8];
      vertices(int'(res), px[i], py[i], pz[i], a, w);
      for (int v = 0; v < 8; v++) begin
        tab0[a[v]] -= 0.5 * w[v] * gx0[i];
        tab1[a[v]] -= 0.5 * w[v] * gx1[i];
      end
    end
  endtask

  initial begin
    level = FUSE_L0; bp = 0; bp_enable = 1; res = 12'd100; lr = 16'h3800; bum_thresh = 8'd16;
    cw_en = 0; cw_idx = '0; cw_xyz = '0; start = 0; count = '0; ff_ready = 1;
    xreq_ready = 0; xrsp_valid = 0; xrsp_emb = '0; xrsp_meta = '0;
    b16_rd_en = '0; b16_rd_addr = '0; b32_rd_en = '0; b32_rd_addr = '0;
    hv = 0; ha = '0; hd = '0; ff_cnt = 0; g_cnt = NPTS; n_merge = 0; n_wb = 0;
    // ray-like points
    for (int i = 0; i < NPTS; i += 25) begin
      int ox, oy, oz, dx, dy, dz;
      ox = $urandom % 65536; oy = $urandom % 65536; oz = $urandom % 65536;
      dx = int'($urandom % 161) - 80; dy = int'($urandom % 161) - 80; dz = int'($urandom % 161) - 80;
      for (int s = 0; s < 25; s++) begin
        px[i+s] = 16'(ox + s * dx); py[i+s] = 16'(oy + s * dy); pz[i+s] = 16'(oz + s * dz);
      end
    end
    for (int i = 0; i < NPTS; i++) begin
      gx0[i] = fp16_to_real(real_to_fp16(real'(int'($urandom % 201) - 100) / 400.0));
      gx1[i] = fp16_to_real(real_to_fp16(real'(int'($urandom % 201) - 100) / 400.0));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NPTS; i++) begin
      @(negedge clk) cw_en = 1; cw_idx = 8'(i); cw_xyz = {pz[i], py[i], px[i]};
    end
    @(negedge clk) cw_en = 0;
    for (int i = 0; i < NPTS; i++) begin
      int a [8]; real w [8];
      vertices(int'(res), px[i], py[i], pz[i], a, w);
      for (int v = 0; v < 8; v++) if (!tab0.exists(a[v])) begin
        tab0[a[v]] = fp16_to_real(real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0));
        tab1[a[v]] = fp16_to_real(real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0));
        @(negedge clk) hv = 1; ha = gaddr_t'(a[v]);
        hd.f0 = real_to_fp16(tab0[a[v]]); hd.f1 = real_to_fp16(tab1[a[v]]);
      end
    end
    @(negedge clk) hv = 0;
    run_pass(1'b0);
    run_pass(1'b1);
    model_bp();
    run_pass(1'b0);
    // skipped update: the table must not change
    bp_enable = 0;
    n_wb = 0;
    run_pass(1'b1);
    checks++;
    if (n_wb != 0) begin failures++; $display("FAIL: %0d write-backs with bp_enable low", n_wb); end
    bp_enable = 1;
    run_pass(1'b0);
    checks++;
    if (n_merge == 0) begin failures++; $display("FAIL: no BUM merge"); end
    $display("bum merges %0d", n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
