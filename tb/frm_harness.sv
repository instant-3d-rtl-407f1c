// frm_harness -- drives one frm_unit configuration for tb_frm_unit: a model of
// NBANKS one-cycle SRAM banks, NPORTS point sources with the address locality
// of hashed grid vertices (four far-apart pairs of near addresses per point),
// random valid/ready, and a scoreboard that checks every committed point's
// eight entries and the per-port order.  It also measures the cycles taken
// against a schedule that reads one point at a time.
module frm_harness
  import i3d_pkg::*;
#(
  parameter int NBANKS = 8,
  parameter int NPORTS = 1,
  parameter int DEPTH  = 16,
  parameter int NPTS   = 300
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cycles,
  output int   naive_cycles,
  output int   max_reads,
  output int   merged
);
  localparam int AW = BANK_AW + $clog2(NBANKS);

  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [NPORTS-1:0][NVERT-1:0][AW-1:0] in_addr;
  logic [NPORTS-1:0][META_W-1:0] in_meta, out_meta;
  logic [NBANKS-1:0] bank_rd_en;
  logic [NBANKS-1:0][BANK_AW-1:0] bank_rd_addr;
  emb_t [NBANKS-1:0] bank_rd_data;
  emb_t [NPORTS-1:0][NVERT-1:0] out_emb;
  logic [$clog2(NBANKS+1)-1:0] stat_reads;
  logic [$clog2(DEPTH*NVERT+1)-1:0] stat_served;
  logic idle;

  frm_unit #(.NBANKS(NBANKS), .NPORTS(NPORTS), .DEPTH(DEPTH)) dut (.*);

  function automatic emb_t model(int unsigned a);
    emb_t e;
    e.f0 = 16'(a * 7 + 3);
    e.f1 = 16'(a >> 3);
    return e;
  endfunction

  // banks
  always_ff @(posedge clk)
    for (int b = 0; b < NBANKS; b++)
      if (bank_rd_en[b]) bank_rd_data[b] <= model((b << BANK_AW) | int'(bank_rd_addr[b]));

  // points per port
  logic [AW-1:0] pts [NPORTS][NPTS][NVERT];
  int sent [NPORTS], rcvd [NPORTS];
  int total_rcvd;

  initial begin
    naive_cycles = 0;
    for (int p = 0; p < NPORTS; p++)
      for (int n = 0; n < NPTS; n++) begin
        int cnt [NBANKS];
        int mx;
        for (int b = 0; b < NBANKS; b++) cnt[b] = 0;
        for (int g = 0; g < 4; g++) begin
          int unsigned a, d;
          a = $urandom % (1 << AW);
          d = $urandom % 5;                    // 0 .. 4 apart, 0 = same entry
          pts[p][n][2*g]   = AW'(a);
          pts[p][n][2*g+1] = AW'(a + d);
        end
        for (int v = 0; v < NVERT; v++) cnt[pts[p][n][v] >> BANK_AW]++;
        mx = 0;
        for (int b = 0; b < NBANKS; b++) if (cnt[b] > mx) mx = cnt[b];
        naive_cycles += mx;
      end
  end

  always_comb
    for (int p = 0; p < NPORTS; p++) begin
      for (int v = 0; v < NVERT; v++)
        in_addr[p][v] = (sent[p] < NPTS) ? pts[p][sent[p]][v] : '0;
      in_meta[p] = META_W'(sent[p]);
    end

  logic go;
  always @(negedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      in_valid[p]  = go && sent[p] < NPTS && (($urandom % 8) != 0);
      out_ready[p] = ($urandom % 8) != 0;
    end
  end

  always @(posedge clk) if (rst_n && go && !finished) begin
    cycles++;
    if (int'(stat_reads) > max_reads) max_reads = int'(stat_reads);
    if (stat_served > stat_reads) merged++;
    for (int p = 0; p < NPORTS; p++) begin
      if (in_valid[p] && in_ready[p]) sent[p] <= sent[p] + 1;
      if (out_valid[p] && out_ready[p]) begin
        checks++;
        if (out_meta[p] != META_W'(rcvd[p])) begin
          failures++; $display("FAIL: port %0d got point %0d exp %0d", p, out_meta[p], rcvd[p]);
        end else begin
          for (int v = 0; v < NVERT; v++) begin
            checks++;
            if (out_emb[p][v] != model(pts[p][rcvd[p]][v])) begin
              failures++; $display("FAIL: port %0d point %0d vertex %0d data", p, rcvd[p], v);
            end
          end
        end
        rcvd[p]++;
        total_rcvd++;
      end
    end
    if (total_rcvd == NPORTS * NPTS) finished <= 1'b1;
  end

  initial begin
    finished = 0; checks = 0; failures = 0; cycles = 0; max_reads = 0; merged = 0;
    total_rcvd = 0; go = 0;
    for (int p = 0; p < NPORTS; p++) begin sent[p] = 0; rcvd[p] = 0; end
    wait (rst_n);
    @(negedge clk) go = 1;
  end
endmodule
