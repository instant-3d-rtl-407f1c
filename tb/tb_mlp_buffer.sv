// tb_mlp_buffer -- random writes and reads against a model memory; checks the
// one-cycle read latency, that the output holds when rd_en is low, and
// read-after-write on the next cycle.
module tb_mlp_buffer;
  import i3d_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, rd_en;
  logic [9:0] wr_addr, rd_addr;
  fp16_t [15:0] wr_data, rd_data;

  mlp_buffer dut (.*);

  logic [255:0] model [1024];
  logic [255:0] expq;

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(a);
      for (int w = 0; w < 16; w++) wr_data[w] = 16'($urandom);
      model[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    expq = '0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      if (i > 0 && rd_en) begin
        checks++;
        if (rd_data !== expq) begin failures++; $display("FAIL read %0d", i); end
      end else if (i > 0) begin
        checks++;
        if (rd_data !== expq) begin failures++; $display("FAIL hold %0d", i); end
      end
      rd_en = 1'($urandom); rd_addr = 10'($urandom);
      wr_en = 1'($urandom); wr_addr = 10'($urandom);
      for (int w = 0; w < 16; w++) wr_data[w] = 16'($urandom);
      if (rd_en) expq = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
