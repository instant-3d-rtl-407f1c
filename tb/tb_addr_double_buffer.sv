// tb_addr_double_buffer -- pushes batches of point records with random valid
// and ready, ends each batch with `flush`, and checks that every record comes
// out once, in order, that a half is handed over only when full or flushed,
// and that `empty` is reported at the end.
module tb_addr_double_buffer;
  import i3d_pkg::*;

  localparam int PTS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush, in_valid, in_ready, out_valid, out_ready, empty;
  pt_addr_t in_pt, out_pt;

  addr_double_buffer #(.PTS(PTS)) dut (.*);

  pt_addr_t exp_q[$];
  int sent, rcvd;

  initial begin
    #400000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pt_addr_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: extra output"); end
    else begin
      e = exp_q.pop_front();
      if (out_pt !== e) begin failures++; $display("FAIL: record %0d out of order", rcvd); end
    end
    rcvd++;
  end

  initial begin
    flush = 0; in_valid = 0; in_pt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // a partial half must not be drained before flush
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) in_valid = 1; in_pt = pt_addr_t'({$urandom, $urandom, $urandom});
      in_pt.tag = tag_t'(i);
      @(posedge clk) exp_q.push_back(in_pt);
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL: partial half drained before flush"); end
    flush = 1; @(negedge clk) flush = 0;
    repeat (10) @(negedge clk);
    for (int batch = 0; batch < 6; batch++) begin
      int n;
      n = 5 + ($urandom % 30);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        in_pt = pt_addr_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                            $urandom, $urandom, $urandom});
        in_pt.tag = tag_t'(sent);
        @(posedge clk);
        if (in_valid && in_ready) begin exp_q.push_back(in_pt); sent++; end
        else i--;
      end
      @(negedge clk) in_valid = 0; flush = 1;
      @(negedge clk) flush = 0;
      repeat (60) @(negedge clk);
      checks++;
      if (exp_q.size() != 0 || !empty) begin
        failures++; $display("FAIL: batch %0d left %0d records", batch, exp_q.size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
