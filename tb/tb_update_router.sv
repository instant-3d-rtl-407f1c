// tb_update_router -- random sources at all three fusion levels; checks with a
// reference model that every accepted update lands on the owning core and
// bank with the right entry address, data and set flag, that nothing else is
// written, that no bank gets two updates, and that the host has priority and
// BUMs are served in index order.
module tb_update_router;
  import i3d_pkg::*;

  int checks = 0, failures = 0;
  fuse_t level;
  logic [NCORES-1:0] s_valid, s_ready;
  gaddr_t [NCORES-1:0] s_addr;
  emb_t [NCORES-1:0] s_data;
  logic h_valid, h_ready, h_set;
  logic [1:0] h_core;
  gaddr_t h_addr;
  emb_t h_data;
  logic [NCORES-1:0][BANKS_CORE-1:0] upd_en, upd_set;
  logic [NCORES-1:0][BANKS_CORE-1:0][BANK_AW-1:0] upd_addr;
  emb_t [NCORES-1:0][BANKS_CORE-1:0] upd_data;

  update_router dut (.*);

  function automatic int own(fuse_t l, int src, gaddr_t a);
    if (l == FUSE_L2) return int'(a[17:16]);
    if (l == FUSE_L1) return (src & 2) | int'(a[16]);
    return src;
  endfunction

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      logic [NCORES-1:0][BANKS_CORE-1:0] used, expen;
      level = fuse_t'($urandom % 3);
      h_valid = ($urandom % 4) == 0; h_core = 2'($urandom); h_set = 1'($urandom);
      h_addr = gaddr_t'($urandom); h_data = emb_t'($urandom);
      for (int s = 0; s < NCORES; s++) begin
        s_valid[s] = 1'($urandom);
        // small address range to force collisions
        s_addr[s] = gaddr_t'($urandom) & (($urandom % 2) ? 18'h3FFFF : 18'h32000);
        s_data[s] = emb_t'($urandom);
      end
      #1;
      used = '0; expen = '0;
      if (h_valid) begin
        int c; c = own(level, h_core, h_addr);
        expen[c][h_addr[15:13]] = 1;
        used[c][h_addr[15:13]] = 1;
        checks++;
        if (!h_ready || !upd_en[c][h_addr[15:13]] || upd_set[c][h_addr[15:13]] != h_set ||
            upd_addr[c][h_addr[15:13]] != h_addr[12:0] || upd_data[c][h_addr[15:13]] != h_data) begin
          failures++; $display("FAIL host it=%0d", it);
        end
      end
      for (int s = 0; s < NCORES; s++) begin
        int c; logic expect_ready;
        c = own(level, s, s_addr[s]);
        expect_ready = s_valid[s] && !used[c][s_addr[s][15:13]];
        checks++;
        if (s_ready[s] != expect_ready) begin failures++; $display("FAIL ready s=%0d it=%0d", s, it); end
        if (expect_ready) begin
          used[c][s_addr[s][15:13]] = 1;
          expen[c][s_addr[s][15:13]] = 1;
          checks++;
          if (upd_set[c][s_addr[s][15:13]] || upd_addr[c][s_addr[s][15:13]] != s_addr[s][12:0] ||
              upd_data[c][s_addr[s][15:13]] != s_data[s]) begin
            failures++; $display("FAIL data s=%0d it=%0d", s, it);
          end
        end
      end
      checks++;
      if (upd_en != expen) begin failures++; $display("FAIL enables it=%0d", it); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
