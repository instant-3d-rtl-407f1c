// frm_unit -- Feed-Forward Read Mapper (FRM), in its B8, B16 and B32 forms.
//
// Problem: the eight vertex addresses of one point fall into four pairs; the
// two addresses of a pair lie close together (they differ only along x, where
// the hash multiplies by 1) while the pairs lie far apart.  With the table cut
// into equal contiguous banks, one point therefore touches only two to four of
// the banks, and issuing one point per cycle leaves most banks idle.
//
// The FRM keeps a reordering window of DEPTH point read requests (eight
// addresses each) and, every cycle, issues at most one read to each of NBANKS
// banks, taken from any request in the window: reads of different points are
// packed into one cycle as long as they do not collide on a bank.  A pending
// read whose address equals one already chosen for this cycle is served by
// that same read.  Data return one cycle after the read.  A point whose eight
// entries have all returned is committed, in the order its port delivered the
// points.
//
// Sub-blocks, named as in the paper's schematic:
//  * Addr Generator: moves whole point requests (8 addresses + meta data) from
//    up to NPORTS address buffers into free window slots, rotating port
//    priority; a slot freed by a commit is refilled in the same cycle.
//  * Bank Collision Detector: per bank, picks one pending read (rotating slot
//    priority) and marks every pending read with the same address.
//  * Read Commit Unit: drives the bank reads, captures the returned entries and
//    hands completed points back to their port in order.
//
// Bank of an address: its top log2(NBANKS) bits (contiguous banks).  B8 serves
// one grid core (NPORTS = 1), B16 a fused pair (2), B32 all four (4).  The
// window depth of 16 is the paper's "reordering pipeline depth"; reading it as
// 16 point requests (a request spans several banks in the paper's Fig. 12(a))
// is this design's interpretation.  Issuing at the granularity of single
// addresses, the slot and port priorities, the same-address merge and the
// in-order commit are this design's choices.
module frm_unit
  import i3d_pkg::*;
#(
  parameter int unsigned NBANKS = 8,
  parameter int unsigned NPORTS = 1,
  parameter int unsigned DEPTH  = 16
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // address buffers (one point = eight addresses per transfer)
  input  logic  [NPORTS-1:0]                     in_valid,
  output logic  [NPORTS-1:0]                     in_ready,
  input  logic  [NPORTS-1:0][NVERT-1:0][BANK_AW+$clog2(NBANKS)-1:0] in_addr,
  input  logic  [NPORTS-1:0][META_W-1:0]         in_meta,
  // SRAM banks
  output logic  [NBANKS-1:0]                     bank_rd_en,
  output logic  [NBANKS-1:0][BANK_AW-1:0]        bank_rd_addr,
  input  emb_t  [NBANKS-1:0]                     bank_rd_data,
  // completed points
  output logic  [NPORTS-1:0]                     out_valid,
  input  logic  [NPORTS-1:0]                     out_ready,
  output emb_t  [NPORTS-1:0][NVERT-1:0]          out_emb,
  output logic  [NPORTS-1:0][META_W-1:0]         out_meta,
  // activity of this cycle
  output logic  [$clog2(NBANKS+1)-1:0]           stat_reads,
  output logic  [$clog2(DEPTH*NVERT+1)-1:0]      stat_served,
  output logic                                   idle
);
  localparam int unsigned BW  = $clog2(NBANKS);
  localparam int unsigned AW  = BANK_AW + BW;
  localparam int unsigned NPS = DEPTH;              // point request slots
  localparam int unsigned SW  = (NPS > 1) ? $clog2(NPS) : 1;
  localparam int unsigned PW  = (NPORTS > 1) ? $clog2(NPORTS) : 1;
  localparam int unsigned QW  = 8;                  // per-port sequence number

  // ------------------------------------------------------------ window state
  logic [NPS-1:0]                 s_valid;
  logic [NPS-1:0][PW-1:0]         s_port;
  logic [NPS-1:0][QW-1:0]         s_seq;
  logic [NPS-1:0][META_W-1:0]     s_meta;
  logic [NPS-1:0][NVERT-1:0][AW-1:0] s_addr;
  logic [NPS-1:0][NVERT-1:0]      s_pend;   // not yet read
  logic [NPS-1:0][NVERT-1:0]      s_fly;    // read issued last cycle
  logic [NPS-1:0][NVERT-1:0]      s_done;   // entry captured
  emb_t [NPS-1:0][NVERT-1:0]      s_emb;

  logic [NPORTS-1:0][QW-1:0]      in_seq;   // next sequence to hand out
  logic [NPORTS-1:0][QW-1:0]      out_seq;  // next sequence to commit
  logic [SW-1:0]                  rr_slot;
  logic [PW-1:0]                  rr_port;

  function automatic logic [BW-1:0] bank_of(logic [AW-1:0] a);
    return a[AW-1:BANK_AW];
  endfunction

  // ------------------------------------------------ bank collision detector
  logic [NBANKS-1:0]              b_sel;
  logic [NBANKS-1:0][AW-1:0]      b_addr;
  logic [NPS-1:0][NVERT-1:0]      serve;

  always_comb begin
    b_sel  = '0;
    b_addr = '0;
    serve  = '0;
    for (int k = 0; k < NPS; k++) begin
      int s;
      s = (int'(rr_slot) + k) % NPS;
      for (int v = 0; v < NVERT; v++) begin
        if (s_valid[s] && s_pend[s][v] && !b_sel[bank_of(s_addr[s][v])]) begin
          b_sel[bank_of(s_addr[s][v])]  = 1'b1;
          b_addr[bank_of(s_addr[s][v])] = s_addr[s][v];
        end
      end
    end
    for (int s = 0; s < NPS; s++)
      for (int v = 0; v < NVERT; v++)
        serve[s][v] = s_valid[s] && s_pend[s][v] &&
                      (b_addr[bank_of(s_addr[s][v])] == s_addr[s][v]) &&
                      b_sel[bank_of(s_addr[s][v])];
  end

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      bank_rd_en[b]   = b_sel[b];
      bank_rd_addr[b] = b_addr[b][BANK_AW-1:0];
    end
    stat_reads  = '0;
    stat_served = '0;
    for (int b = 0; b < NBANKS; b++) stat_reads = stat_reads + b_sel[b];
    for (int s = 0; s < NPS; s++)
      for (int v = 0; v < NVERT; v++) stat_served = stat_served + serve[s][v];
  end

  // ------------------------------------------------------ read commit unit
  logic [NPORTS-1:0][SW-1:0] c_slot;
  logic [NPS-1:0]            s_free;   // slot released this cycle

  always_comb begin
    out_valid = '0;
    c_slot    = '0;
    s_free    = '0;
    for (int p = 0; p < NPORTS; p++) begin
      for (int s = 0; s < NPS; s++) begin
        if (s_valid[s] && s_port[s] == PW'(p) && s_seq[s] == out_seq[p] &&
            (&s_done[s])) begin
          out_valid[p] = 1'b1;
          c_slot[p]    = SW'(s);
        end
      end
      out_emb[p]  = s_emb[c_slot[p]];
      out_meta[p] = s_meta[c_slot[p]];
      if (out_valid[p] && out_ready[p]) s_free[c_slot[p]] = 1'b1;
    end
  end

  // -------------------------------------------------------- addr generator
  logic [NPORTS-1:0][SW-1:0] a_slot;

  always_comb begin
    logic [NPS-1:0] taken;
    taken    = '0;
    in_ready = '0;
    a_slot   = '0;
    for (int k = 0; k < NPORTS; k++) begin
      int p;
      p = (int'(rr_port) + k) % NPORTS;
      for (int s = 0; s < NPS; s++) begin
        if (in_valid[p] && !in_ready[p] && (!s_valid[s] || s_free[s]) && !taken[s]) begin
          taken[s]    = 1'b1;
          in_ready[p] = 1'b1;
          a_slot[p]   = SW'(s);
        end
      end
    end
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= '0;
      s_port  <= '0;
      s_seq   <= '0;
      s_meta  <= '0;
      s_addr  <= '0;
      s_pend  <= '0;
      s_fly   <= '0;
      s_done  <= '0;
      s_emb   <= '0;
      in_seq  <= '0;
      out_seq <= '0;
      rr_slot <= '0;
      rr_port <= '0;
    end else begin
      rr_slot <= (NPS > 1) ? SW'((int'(rr_slot) + 1) % NPS) : '0;
      rr_port <= (NPORTS > 1) ? PW'((int'(rr_port) + 1) % NPORTS) : '0;
      for (int s = 0; s < NPS; s++) begin
        for (int v = 0; v < NVERT; v++) begin
          if (s_fly[s][v]) begin
            s_emb[s][v]  <= bank_rd_data[bank_of(s_addr[s][v])];
            s_done[s][v] <= 1'b1;
          end
        end
        s_fly[s]  <= serve[s];
        s_pend[s] <= s_pend[s] & ~serve[s];
        if (s_free[s]) s_valid[s] <= 1'b0;   // a refill below takes precedence
      end
      for (int p = 0; p < NPORTS; p++) begin
        if (out_valid[p] && out_ready[p]) out_seq[p] <= out_seq[p] + 1'b1;
        if (in_valid[p] && in_ready[p]) begin
          s_valid[a_slot[p]] <= 1'b1;
          s_port[a_slot[p]]  <= PW'(p);
          s_seq[a_slot[p]]   <= in_seq[p];
          s_meta[a_slot[p]]  <= in_meta[p];
          s_addr[a_slot[p]]  <= in_addr[p];
          s_pend[a_slot[p]]  <= '1;
          s_fly[a_slot[p]]   <= '0;
          s_done[a_slot[p]]  <= '0;
          in_seq[p]          <= in_seq[p] + 1'b1;
        end
      end
    end
  end

  assign idle = (s_valid == '0);

  // A committed point has all eight entries.  (The assertion samples rst_n
  // synchronously for `disable iff`; lint reports rst_n as used both
  // synchronously and asynchronously because of it, which is harmless.)
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    a_commit_complete: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[p] |-> (&s_done[c_slot[p]]));
  end
endmodule
