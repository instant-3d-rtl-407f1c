// tb_hash_bank -- random mix of initialising writes, accumulating updates
// (including back-to-back updates of one entry) and reads, checked against a
// reference model.  Values are multiples of 1/4 below 512, which FP16 holds
// exactly, so the model can use real arithmetic and compare exactly.  Also
// checks the one-cycle read latency.
module tb_hash_bank;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rd_en, upd_en, upd_set;
  logic [5:0] rd_addr, upd_addr;
  emb_t rd_data, upd_data;

  hash_bank #(.DEPTH(DEPTH)) dut (.*);

  real m0 [DEPTH], m1 [DEPTH];

  initial begin
    #400000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_read(int a);
    @(negedge clk) rd_en = 1; rd_addr = 6'(a); upd_en = 0;
    @(negedge clk) rd_en = 0;
    checks++;
    if (fp16_to_real(rd_data.f0) != m0[a] || fp16_to_real(rd_data.f1) != m1[a]) begin
      failures++;
      $display("FAIL: entry %0d = %f,%f exp %f,%f", a, fp16_to_real(rd_data.f0),
               fp16_to_real(rd_data.f1), m0[a], m1[a]);
    end
  endtask

  initial begin
    rd_en = 0; upd_en = 0; upd_set = 0; rd_addr = '0; upd_addr = '0; upd_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      upd_en = 1; upd_set = 1; upd_addr = 6'(a);
      m0[a] = real'(int'($urandom % 256)) - 128.0;
      m1[a] = real'(int'($urandom % 256)) - 128.0;
      upd_data.f0 = real_to_fp16(m0[a]); upd_data.f1 = real_to_fp16(m1[a]);
    end
    @(negedge clk) upd_en = 0;
    repeat (2) @(negedge clk);
    for (int a = 0; a < DEPTH; a++) do_read(a);
    for (int n = 0; n < 2000; n++) begin
      int a;
      real d0, d1;
      @(negedge clk);
      // few distinct addresses so that back-to-back hits are frequent
      a  = (n % 50 < 25) ? ($urandom % 4) : ($urandom % DEPTH);
      d0 = real'(int'($urandom % 9) - 4) / 4.0;
      d1 = real'(int'($urandom % 9) - 4) / 4.0;
      upd_en = ($urandom % 5) != 0; upd_set = 0; upd_addr = 6'(a);
      upd_data.f0 = real_to_fp16(d0); upd_data.f1 = real_to_fp16(d1);
      if (upd_en) begin m0[a] += d0; m1[a] += d1; end
    end
    @(negedge clk) upd_en = 0;
    repeat (3) @(negedge clk);
    for (int a = 0; a < DEPTH; a++) do_read(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
