// update_router -- routes embedding updates to the hash-table bank that owns
// the address under the current fusion level.
//
// Sources: the four BUM write-back ports (address, FP16 delta, added to the
// entry) and one host port (table initialisation: `h_set` overwrites the
// entry, else the data are added).  Destination of an address a:
//   level 0 (256 KB per core): the source's own core (the host names the core)
//   level 1 (512 KB per pair): core (src & ~1) + a[16]
//   level 2 (1 MB):            core a[17:16]
//   bank a[15:13], entry a[12:0] within the core.
// Every bank takes one update per cycle.  When several sources want the same
// bank, the host wins, then the BUMs in index order; the others wait (ready
// low).  The routing follows the banked, fused table of the paper; the
// arbitration is this design's choice.  Purely combinational.
module update_router
  import i3d_pkg::*;
(
  input  fuse_t                                   level,
  // BUM write-backs
  input  logic  [NCORES-1:0]                      s_valid,
  output logic  [NCORES-1:0]                      s_ready,
  input  gaddr_t [NCORES-1:0]                     s_addr,
  input  emb_t  [NCORES-1:0]                      s_data,
  // host writes
  input  logic                                    h_valid,
  output logic                                    h_ready,
  input  logic  [1:0]                             h_core,
  input  logic                                    h_set,
  input  gaddr_t                                  h_addr,
  input  emb_t                                    h_data,
  // bank update ports
  output logic  [NCORES-1:0][BANKS_CORE-1:0]      upd_en,
  output logic  [NCORES-1:0][BANKS_CORE-1:0]      upd_set,
  output logic  [NCORES-1:0][BANKS_CORE-1:0][BANK_AW-1:0] upd_addr,
  output emb_t  [NCORES-1:0][BANKS_CORE-1:0]      upd_data
);
  function automatic logic [1:0] owner(fuse_t lvl, logic [1:0] src, gaddr_t a);
    unique case (lvl)
      FUSE_L1: return {src[1], a[16]};
      FUSE_L2: return a[17:16];
      default: return src;
    endcase
  endfunction

  always_comb begin
    logic [1:0] c;
    logic [2:0] b;
    upd_en   = '0;
    upd_set  = '0;
    upd_addr = '0;
    upd_data = '0;
    s_ready  = '0;
    h_ready  = 1'b0;
    if (h_valid) begin
      c = owner(level, h_core, h_addr);
      b = h_addr[15:13];
      h_ready        = 1'b1;
      upd_en[c][b]   = 1'b1;
      upd_set[c][b]  = h_set;
      upd_addr[c][b] = h_addr[BANK_AW-1:0];
      upd_data[c][b] = h_data;
    end
    for (int s = 0; s < NCORES; s++) begin
      c = owner(level, 2'(s), s_addr[s]);
      b = s_addr[s][15:13];
      if (s_valid[s] && !upd_en[c][b]) begin
        s_ready[s]     = 1'b1;
        upd_en[c][b]   = 1'b1;
        upd_set[c][b]  = 1'b0;
        upd_addr[c][b] = s_addr[s][BANK_AW-1:0];
        upd_data[c][b] = s_data[s];
      end
    end
  end
endmodule
