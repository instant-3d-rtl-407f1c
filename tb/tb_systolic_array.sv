// tb_systolic_array -- random 8 x K times K x 8 products (K = 1..40) checked
// element-wise against real arithmetic; checks that `done` pulses exactly
// ROWS+COLS-1 cycles after the last beat and that `start` clears the array
// between products.
module tb_systolic_array;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, in_last, done;
  fp16_t [7:0] in_a, in_b;
  fp16_t [7:0][7:0] out_c;

  systolic_array dut (.*);

  initial begin
    #2000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; in_valid = 0; in_last = 0; in_a = '0; in_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      real c [8][8], m [8][8];
      int k, lat;
      k = 1 + $urandom % 40;
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin c[i][j] = 0; m[i][j] = 0; end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int b = 0; b < k; b++) begin
        in_valid = 1; in_last = (b == k - 1);
        for (int i = 0; i < 8; i++) in_a[i] = real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0);
        for (int j = 0; j < 8; j++) in_b[j] = real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0);
        for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
          real p; p = fp16_to_real(in_a[i]) * fp16_to_real(in_b[j]);
          c[i][j] += p; m[i][j] += (p < 0) ? -p : p;
        end
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      lat = 0;
      while (!done && lat < 40) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 15) begin failures++; $display("FAIL: done after %0d cycles", lat + 1); end
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) begin
        checks++;
        if (!close(fp16_to_real(out_c[i][j]), c[i][j], 0.0, 0.003 * m[i][j] + 0.002)) begin
          failures++; $display("FAIL t=%0d c[%0d][%0d] got %f exp %f", t, i, j, fp16_to_real(out_c[i][j]), c[i][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
