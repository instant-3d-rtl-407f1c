// hash_bank -- one SRAM bank of a grid core's hash table, with its access logic.
//
// Stores DEPTH two-feature FP16 embeddings.  The read port serves the
// Feed-Forward Read Mapper: a request in cycle t returns its entry in cycle t+1.
// The update port serves the Back-Propagation Update Merger and the host:
// with `upd_set` the entry is overwritten (table initialisation), otherwise
// the two FP16 deltas are added to it.  The add is a two-stage
// read-modify-write; a write that is still in flight is forwarded, so
// back-to-back updates of one address accumulate correctly.  One update is
// accepted per cycle.
//
// The paper gives eight banks per grid core and a per-bank "FRM SRAM Logic";
// the separate read and update ports (a 2-read 1-write array) and the
// forwarding are this design's choices.
module hash_bank
  import i3d_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << BANK_AW
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output emb_t                      rd_data,
  input  logic                      upd_en,
  input  logic                      upd_set,
  input  logic [$clog2(DEPTH)-1:0]  upd_addr,
  input  emb_t                      upd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  emb_t          mem [DEPTH];
  // stage 1 of the update
  logic          s1_v, s1_set;
  logic [AW-1:0] s1_addr;
  emb_t          s1_data, s1_old;
  // last write, for forwarding
  logic          lw_v;
  logic [AW-1:0] lw_addr;
  emb_t          lw_data;
  emb_t          old_fwd, new_val;

  always_ff @(posedge clk) begin
    if (rd_en)  rd_data <= mem[rd_addr];
    if (upd_en) s1_old  <= mem[upd_addr];
    if (s1_v)   mem[s1_addr] <= new_val;
  end

  always_comb begin
    old_fwd    = (lw_v && lw_addr == s1_addr) ? lw_data : s1_old;
    new_val.f0 = s1_set ? s1_data.f0 : fp16_add(old_fwd.f0, s1_data.f0);
    new_val.f1 = s1_set ? s1_data.f1 : fp16_add(old_fwd.f1, s1_data.f1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v    <= 1'b0;
      s1_set  <= 1'b0;
      s1_addr <= '0;
      s1_data <= '0;
      lw_v    <= 1'b0;
      lw_addr <= '0;
      lw_data <= '0;
    end else begin
      s1_v    <= upd_en;
      s1_set  <= upd_set;
      s1_addr <= upd_addr;
      s1_data <= upd_data;
      lw_v    <= s1_v;
      lw_addr <= s1_addr;
      lw_data <= new_val;
    end
  end
endmodule
