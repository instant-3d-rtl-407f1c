// tb_frm_unit -- runs the Feed-Forward Read Mapper in its three forms (B8 with
// one port, B16 with two, B32 with four) on points with the locality of hashed
// grid vertices.  Checks every returned entry and the per-port order; checks
// that B8 needs fewer cycles than reading one point at a time, that the fused
// forms issue more reads in one cycle than a single core's banks could, and
// that same-address requests are served by one read.
module tb_frm_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic f8, f16, f32;
  int c8, x8, k8, n8, r8, m8;
  int c16, x16, k16, n16, r16, m16;
  int c32, x32, k32, n32, r32, m32;

  frm_harness #(.NBANKS(8),  .NPORTS(1), .DEPTH(16)) h8  (.clk, .rst_n, .finished(f8),
    .checks(c8),  .failures(x8),  .cycles(k8),  .naive_cycles(n8),  .max_reads(r8),  .merged(m8));
  frm_harness #(.NBANKS(16), .NPORTS(2), .DEPTH(16)) h16 (.clk, .rst_n, .finished(f16),
    .checks(c16), .failures(x16), .cycles(k16), .naive_cycles(n16), .max_reads(r16), .merged(m16));
  frm_harness #(.NBANKS(32), .NPORTS(4), .DEPTH(16)) h32 (.clk, .rst_n, .finished(f32),
    .checks(c32), .failures(x32), .cycles(k32), .naive_cycles(n32), .max_reads(r32), .merged(m32));

  initial begin
    #2000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (f8 && f16 && f32);
    checks   = c8 + c16 + c32;
    failures = x8 + x16 + x32;
    $display("B8 : %0d cycles, one-point-at-a-time schedule %0d, max reads/cycle %0d, merges %0d",
             k8, n8, r8, m8);
    $display("B16: %0d cycles for 2 ports, max reads/cycle %0d, merges %0d", k16, r16, m16);
    $display("B32: %0d cycles for 4 ports, max reads/cycle %0d, merges %0d", k32, r32, m32);
    checks++;
    if (!(k8 < n8)) begin failures++; $display("FAIL: B8 not faster than serial reads"); end
    checks++;
    if (!(r8 > 4)) begin failures++; $display("FAIL: B8 never packs points"); end
    checks++;
    if (!(r16 > 8 && r32 > 16)) begin failures++; $display("FAIL: fused FRMs never use the extra banks"); end
    checks++;
    if (!(m8 > 0 && m16 > 0 && m32 > 0)) begin failures++; $display("FAIL: no same-address merge"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
