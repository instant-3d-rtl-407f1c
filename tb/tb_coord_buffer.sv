// tb_coord_buffer -- writes a batch of coordinates, replays it twice with
// random back-pressure and checks order, data, tags, the point count, `done`
// and the two-cycle start-up latency.
module tb_coord_buffer;
  import i3d_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, start, done, out_valid, out_ready;
  logic [$clog2(DEPTH)-1:0] wr_idx;
  logic [2:0][COORD_W-1:0] wr_xyz, out_xyz;
  logic [$clog2(DEPTH):0] count;
  tag_t out_tag;

  coord_buffer #(.DEPTH(DEPTH)) dut (.*);

  logic [2:0][COORD_W-1:0] model [DEPTH];
  int got;

  initial begin
    #200000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_tag != tag_t'(got) || out_xyz != model[got]) begin
      failures++; $display("FAIL: item %0d tag %0d", got, out_tag);
    end
    got++;
  end

  initial begin
    wr_en = 0; start = 0; count = '0; wr_idx = '0; wr_xyz = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 6'(i);
      for (int a = 0; a < 3; a++) wr_xyz[a] = COORD_W'($urandom);
      model[i] = wr_xyz;
    end
    @(negedge clk) wr_en = 0;
    for (int pass = 0; pass < 2; pass++) begin
      int n;
      n = (pass == 0) ? 40 : DEPTH;
      got = 0;
      @(negedge clk) begin start = 1; count = 7'(n); end
      @(negedge clk) start = 0;
      checks++;
      if (done) begin failures++; $display("FAIL: done while replaying"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: first point not out after two cycles"); end
      while (!done) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (got != n) begin failures++; $display("FAIL: pass %0d got %0d of %0d", pass, got, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
