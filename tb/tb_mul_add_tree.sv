// tb_mul_add_tree -- random dot products of 1..6 beats (16 lanes each) on
// three output channels, back-to-back, checked against real arithmetic with
// an FP16-accumulation tolerance; also checks the one-cycle result latency.
module tb_mul_add_tree;
  import i3d_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_last, out_valid;
  fp16_t [15:0] in_x;
  fp16_t [2:0][15:0] in_w;
  fp16_t [2:0] out_y;

  mul_add_tree dut (.*);

  real exq0 [$], exq1 [$], exq2 [$];
  real mag [$];
  int nres;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    real e [3];
    real m;
    e[0] = exq0.pop_front(); e[1] = exq1.pop_front(); e[2] = exq2.pop_front(); m = mag.pop_front();
    for (int o = 0; o < 3; o++) begin
      checks++;
      if (!close(fp16_to_real(out_y[o]), e[o], 0.0, 0.004 * m + 0.002)) begin
        failures++; $display("FAIL dot %0d ch %0d got %f exp %f", nres, o, fp16_to_real(out_y[o]), e[o]);
      end
    end
    nres++;
  end

  initial begin
    in_valid = 0; in_last = 0; in_x = '0; in_w = '0; nres = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 300; d++) begin
      real acc [3];
      real m;
      int nb;
      nb = 1 + $urandom % 6;
      acc[0] = 0; acc[1] = 0; acc[2] = 0; m = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 1; in_last = (b == nb - 1);
        for (int l = 0; l < 16; l++) begin
          in_x[l] = real_to_fp16(real'(int'($urandom % 2001) - 1000) / 500.0);
          for (int o = 0; o < 3; o++) begin
            in_w[o][l] = real_to_fp16(real'(int'($urandom % 2001) - 1000) / 1000.0);
            acc[o] += fp16_to_real(in_x[l]) * fp16_to_real(in_w[o][l]);
            m += 1.0 / 3.0 * ((fp16_to_real(in_x[l]) * fp16_to_real(in_w[o][l]) < 0) ?
                 -fp16_to_real(in_x[l]) * fp16_to_real(in_w[o][l]) :
                  fp16_to_real(in_x[l]) * fp16_to_real(in_w[o][l]));
          end
        end
        if (in_last) begin exq0.push_back(acc[0]); exq1.push_back(acc[1]); exq2.push_back(acc[2]); mag.push_back(m); end
      end
      // latency: result appears at the next edge
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: latency"); end
      in_valid = 0; in_last = 0;
      if ($urandom % 2) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (nres != 300) begin failures++; $display("FAIL: %0d results", nres); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
