// mul_add_tree -- multiplier-adder-tree MLP unit.
//
// Used for the matrix products of the small MLP whose output has few channels
// (three or fewer, e.g. the RGB or density head), where a systolic array would
// sit mostly idle.  OUTS dot products run side by side over a shared input
// vector: each beat brings LANES inputs x and, per output channel, LANES
// weights; LANES FP16 multipliers per channel feed a balanced FP16 adder tree
// whose sum is added to the channel's accumulator.  `in_last` marks the last
// beat of a dot product; the results leave through a register one cycle later
// and the accumulators restart.
//
// Interface: in_valid / in_last; out_valid pulses with out_y.  One beat per
// cycle, no back-pressure.  The paper gives the unit's purpose (outputs <= 3);
// LANES = 16, OUTS = 3 and the accumulate-over-beats scheme are this design's
// choices.
module mul_add_tree
  import i3d_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned OUTS  = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_last,
  input  fp16_t [LANES-1:0]             in_x,
  input  fp16_t [OUTS-1:0][LANES-1:0]   in_w,
  output logic                          out_valid,
  output fp16_t [OUTS-1:0]              out_y
);
  fp16_t [OUTS-1:0] acc, beat_sum, nxt;

  always_comb begin
    for (int o = 0; o < OUTS; o++) begin
      fp16_t [2*LANES-1:0] t;       // heap-ordered tree, leaves at LANES..2*LANES-1
      t = '0;
      for (int l = 0; l < LANES; l++) t[LANES + l] = fp16_mul(in_x[l], in_w[o][l]);
      for (int n = LANES - 1; n >= 1; n--) t[n] = fp16_add(t[2*n], t[2*n+1]);
      beat_sum[o] = t[1];
      nxt[o]      = fp16_add(acc[o], beat_sum[o]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          acc   <= '0;
          out_y <= nxt;
        end else begin
          acc <= nxt;
        end
      end
    end
  end
endmodule
