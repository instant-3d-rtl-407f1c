// bum_unit -- Back-Propagation Update Merger (BUM).
//
// During back-propagation many vertices of the grid hash onto the same table
// entry, so the same address is updated several times within a short time.
// The BUM collects updates in an NENT-entry buffer and writes each address to
// SRAM once, carrying the sum of its updates.
//
// Each input (address, two-feature gradient) is first scaled by the learning
// rate and negated (plain SGD step: delta = -lr * grad) and registered.  The
// next cycle the One-to-All-Match compares its address with every buffered
// entry:
//  * match   -> the delta is added to that entry's feature register and the
//               entry's idle counter restarts (merge);
//  * no match -> the delta goes into an empty entry (create new).
// Every valid entry's counter counts cycles since its last update.  The
// Counter & Controller writes back one entry per cycle, chosen in this order:
// an entry whose counter has reached `thresh`; any entry while `flush` is high
// (end of the back-propagation pass); the oldest entry when the buffer is full
// and an unmatched address waits for room.  The write goes out through a
// register as (address, delta) for the SRAM bank to add.
//
// Interface: valid/ready input and output.  One input per cycle when it
// merges or finds room.  The 16 entries, the learning-rate multiply, the match
// and the per-entry counter with a pre-set threshold follow the paper.  The
// paper's Fig. 13(a) also describes a queue whose tail pops; this design
// follows the counter of the schematic in Fig. 13(b).  The shared adder (one
// merge per cycle), the eviction of the oldest entry on overflow and the flush
// are this design's choices.
module bum_unit
  import i3d_pkg::*;
#(
  parameter int unsigned NENT = 16,
  parameter int unsigned CW   = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fp16_t         lr,
  input  logic [CW-1:0] thresh,
  input  logic          flush,
  // gradients
  input  logic          in_valid,
  output logic          in_ready,
  input  gaddr_t        in_addr,
  input  emb_t          in_grad,
  // write-back to SRAM
  output logic          out_valid,
  input  logic          out_ready,
  output gaddr_t        out_addr,
  output emb_t          out_delta,
  // status
  output logic          empty,
  output logic          stat_merge,
  output logic          stat_new,
  output logic          stat_timeout,
  output logic          stat_evict
);
  localparam int unsigned EW = $clog2(NENT);

  // input register (after the learning-rate multiply)
  logic   r_v;
  gaddr_t r_addr;
  emb_t   r_delta;
  logic   r_take;

  // buffer entries
  logic   [NENT-1:0]         e_v;
  gaddr_t [NENT-1:0]         e_addr;
  emb_t   [NENT-1:0]         e_acc;
  logic   [NENT-1:0][CW-1:0] e_cnt;

  // one-to-all match, free entry, write-back choice
  logic          hit, has_free, wo, wo_timeout, wo_evict;
  logic [EW-1:0] hit_i, free_i, wo_i, old_i;
  logic          out_room;

  assign out_room = !out_valid || out_ready;

  always_comb begin
    hit = 1'b0;  hit_i = '0;
    has_free = 1'b0; free_i = '0;
    for (int i = NENT - 1; i >= 0; i--) begin
      if (r_v && e_v[i] && e_addr[i] == r_addr) begin hit = 1'b1; hit_i = EW'(i); end
      if (!e_v[i]) begin has_free = 1'b1; free_i = EW'(i); end
    end
    old_i = '0;
    for (int i = 1; i < NENT; i++)
      if (e_cnt[i] > e_cnt[old_i]) old_i = EW'(i);
    wo = 1'b0; wo_timeout = 1'b0; wo_evict = 1'b0; wo_i = '0;
    if (out_room) begin
      for (int i = NENT - 1; i >= 0; i--)
        if (e_v[i] && e_cnt[i] >= thresh && !(hit && hit_i == EW'(i))) begin
          wo = 1'b1; wo_timeout = 1'b1; wo_i = EW'(i);
        end
      if (!wo && flush) begin
        for (int i = NENT - 1; i >= 0; i--)
          if (e_v[i] && !(hit && hit_i == EW'(i))) begin wo = 1'b1; wo_i = EW'(i); end
      end
      if (!wo && r_v && !hit && !has_free) begin
        wo = 1'b1; wo_evict = 1'b1; wo_i = old_i;
      end
    end
    r_take = r_v && (hit || has_free || wo);
  end

  assign in_ready = !r_v || r_take;

  emb_t merged;
  always_comb begin
    merged.f0 = fp16_add(e_acc[hit_i].f0, r_delta.f0);
    merged.f1 = fp16_add(e_acc[hit_i].f1, r_delta.f1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v       <= 1'b0;
      r_addr    <= '0;
      r_delta   <= '0;
      e_v       <= '0;
      e_addr    <= '0;
      e_acc     <= '0;
      e_cnt     <= '0;
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_delta <= '0;
    end else begin
      // learning-rate scaling into the input register
      if (in_ready) begin
        r_v <= in_valid;
        if (in_valid) begin
          r_addr     <= in_addr;
          r_delta.f0 <= fp16_neg(fp16_mul(in_grad.f0, lr));
          r_delta.f1 <= fp16_neg(fp16_mul(in_grad.f1, lr));
        end
      end
      // idle counters
      for (int i = 0; i < NENT; i++)
        if (e_v[i] && e_cnt[i] != '1) e_cnt[i] <= e_cnt[i] + 1'b1;
      // write-back
      if (out_ready) out_valid <= 1'b0;
      if (wo) begin
        out_valid <= 1'b1;
        out_addr  <= e_addr[wo_i];
        out_delta <= e_acc[wo_i];
        e_v[wo_i] <= 1'b0;
      end
      // merge or create
      if (r_take) begin
        if (hit) begin
          e_acc[hit_i] <= merged;
          e_cnt[hit_i] <= '0;
        end else begin
          logic [EW-1:0] n;
          n = has_free ? free_i : wo_i;
          e_v[n]    <= 1'b1;
          e_addr[n] <= r_addr;
          e_acc[n]  <= r_delta;
          e_cnt[n]  <= '0;
        end
      end
    end
  end

  assign empty        = !r_v && (e_v == '0) && !out_valid;
  assign stat_merge   = r_take && hit;
  assign stat_new     = r_take && !hit;
  assign stat_timeout = wo && wo_timeout;
  assign stat_evict   = wo && wo_evict;
endmodule
