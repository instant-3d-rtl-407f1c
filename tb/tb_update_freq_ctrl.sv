// tb_update_freq_ctrl -- for periods 0..6 runs 40 iterations and checks that
// exactly the iterations with index % period == period-1 have their update
// skipped (bp_enable low, one `skipped` pulse) and that clear restarts the
// count; period 0 never skips.
module tb_update_freq_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear, iter_start, bp_enable, skipped;
  logic [3:0] period;

  update_freq_ctrl dut (.*);

  int nskip;
  always @(posedge clk) if (rst_n && skipped) nskip++;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; iter_start = 0; period = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 7; p++) begin
      @(negedge clk) period = 4'(p); clear = 1;
      @(negedge clk) clear = 0;
      for (int i = 0; i < 40; i++) begin
        logic expskip;
        nskip = 0;
        @(negedge clk) iter_start = 1;
        @(negedge clk) iter_start = 0;
        repeat (1 + $urandom % 5) @(negedge clk);
        expskip = (p > 0) && (i % p == p - 1);
        checks++;
        if (bp_enable == expskip || nskip != int'(expskip)) begin
          failures++; $display("FAIL p=%0d i=%0d bp_enable=%b skipped=%0d", p, i, bp_enable, nskip);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
