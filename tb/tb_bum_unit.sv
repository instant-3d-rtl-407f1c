// tb_bum_unit -- drives random gradient streams into the BUM with random
// write-back stalls and checks, per address, that the deltas written out sum
// to -lr * (sum of gradients) (exactly representable values are used, so the
// sums are exact), that flush empties the buffer, and that merge, create-new,
// timeout and eviction all occur.  Also checks that fewer writes than inputs
// leave when the stream has locality.
module tb_bum_unit;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp16_t lr;
  logic [7:0] thresh;
  logic flush, in_valid, in_ready, out_valid, out_ready;
  gaddr_t in_addr, out_addr;
  emb_t in_grad, out_delta;
  logic empty, stat_merge, stat_new, stat_timeout, stat_evict;

  bum_unit dut (.*);

  real exp0 [gaddr_t], exp1 [gaddr_t], got0 [gaddr_t], got1 [gaddr_t];
  int n_in, n_out, n_merge, n_new, n_to, n_ev;

  initial begin
    #2000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (!got0.exists(out_addr)) begin got0[out_addr] = 0; got1[out_addr] = 0; end
      got0[out_addr] += fp16_to_real(out_delta.f0);
      got1[out_addr] += fp16_to_real(out_delta.f1);
      n_out++;
    end
    n_merge += stat_merge; n_new += stat_new; n_to += stat_timeout; n_ev += stat_evict;
    out_ready <= ($urandom % 4) != 0;
  end

  task automatic send(gaddr_t a, int k0, int k1);
    @(negedge clk);
    in_valid = 1; in_addr = a;
    in_grad.f0 = real_to_fp16(real'(k0) / 16.0);
    in_grad.f1 = real_to_fp16(real'(k1) / 16.0);
    if (!exp0.exists(a)) begin exp0[a] = 0; exp1[a] = 0; end
    exp0[a] -= 0.5 * real'(k0) / 16.0;
    exp1[a] -= 0.5 * real'(k1) / 16.0;
    n_in++;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
  endtask

  task automatic idle(int n);
    @(negedge clk) in_valid = 0;
    repeat (n) @(negedge clk);
  endtask

  task automatic drain();
    idle(0);
    flush = 1;
    while (!(empty && !out_valid)) @(negedge clk);
    repeat (2) @(negedge clk);
    flush = 0;
  endtask

  task automatic compare(string what);
    foreach (exp0[a]) begin
      checks++;
      if (!got0.exists(a) || got0[a] != exp0[a] || got1[a] != exp1[a]) begin
        failures++;
        $display("FAIL %s: addr %h exp %f %f got %f %f", what, a, exp0[a], exp1[a],
                 got0.exists(a) ? got0[a] : -999.0, got1.exists(a) ? got1[a] : -999.0);
      end
    end
    checks++;
    if (got0.num() != exp0.num()) begin failures++; $display("FAIL %s: extra addresses", what); end
    exp0.delete(); exp1.delete(); got0.delete(); got1.delete();
  endtask

  initial begin
    lr = 16'h3800;              // 0.5
    thresh = 8'd60; flush = 0; in_valid = 0; in_addr = '0; in_grad = '0; out_ready = 1;
    n_in = 0; n_out = 0; n_merge = 0; n_new = 0; n_to = 0; n_ev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1) locality: 12 hot addresses, 600 updates
    for (int i = 0; i < 600; i++) send(gaddr_t'(100 + $urandom % 12), int'($urandom % 15) - 7, int'($urandom % 15) - 7);
    drain();
    compare("locality");
    checks++;
    if (n_out >= n_in / 4) begin failures++; $display("FAIL: %0d writes for %0d inputs", n_out, n_in); end
    $display("locality: %0d inputs -> %0d writes", n_in, n_out);
    // 2) no locality: 300 random addresses -> eviction
    thresh = 8'd255;
    for (int i = 0; i < 300; i++) send(gaddr_t'($urandom), int'($urandom % 15) - 7, 3);
    drain();
    compare("random");
    // 3) timeout: a few addresses then a gap
    thresh = 8'd6;
    for (int r = 0; r < 20; r++) begin
      for (int i = 0; i < 3; i++) send(gaddr_t'(5000 + i), 1, -1);
      idle(12);
    end
    drain();
    compare("timeout");
    // 4) mixed, random throttle
    thresh = 8'd10;
    for (int i = 0; i < 2000; i++) begin
      send(gaddr_t'(($urandom % 4 == 0) ? $urandom : (300 + $urandom % 40)), int'($urandom % 15) - 7, int'($urandom % 15) - 7);
      if ($urandom % 8 == 0) idle($urandom % 15);
    end
    drain();
    compare("mixed");
    checks++;
    if (n_merge == 0 || n_new == 0 || n_to == 0 || n_ev == 0) failures++;
    $display("merge=%0d new=%0d timeout=%0d evict=%0d", n_merge, n_new, n_to, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
