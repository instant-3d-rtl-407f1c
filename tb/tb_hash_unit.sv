// tb_hash_unit -- checks the eight spatial-hash addresses of random vertices
// against a 64-bit reference at all three table sizes, with random output
// stalls, and the one-cycle latency.
module tb_hash_unit;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fuse_t level;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [NVERT-1:0][2:0][VC_W-1:0] in_vc;
  fp16_t [NVERT-1:0] in_w;
  tag_t in_tag;
  pt_addr_t out_pt;

  hash_unit dut (.*);

  initial begin
    #200000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue
  pt_addr_t exp_q[$];

  initial begin
    level = FUSE_L0; in_valid = 0; out_ready = 1; in_vc = '0; in_w = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      level = fuse_t'(l);
      for (int n = 0; n < 200; n++) begin
        pt_addr_t e;
        @(negedge clk);
        in_valid = 1;
        for (int v = 0; v < NVERT; v++) begin
          for (int a = 0; a < 3; a++) in_vc[v][a] = VC_W'($urandom);
          in_w[v] = 16'($urandom);
        end
        in_tag = tag_t'(n);
        e.tag = in_tag; e.w = in_w;
        for (int v = 0; v < NVERT; v++)
          e.addr[v] = GADDR_W'(ref_hash(in_vc[v][0], in_vc[v][1], in_vc[v][2], 16 + l));
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        exp_q.push_back(e);
        if (n == 0 && l == 0) begin
          // latency: the result is registered on the accepting edge
          #1 checks++;
          if (!(out_valid && out_pt.tag == 0)) begin failures++; $display("FAIL: latency"); end
        end
      end
      @(negedge clk) in_valid = 0;
      repeat (10) @(posedge clk);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random output stalls
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pt_addr_t e;
    e = exp_q.pop_front();
    checks++;
    if (out_pt !== e) begin
      failures++;
      $display("FAIL: point %0d addr0 got %h exp %h", e.tag, out_pt.addr[0], e.addr[0]);
    end
  end
endmodule
