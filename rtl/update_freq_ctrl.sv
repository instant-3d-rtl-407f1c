// update_freq_ctrl -- update-frequency control of one embedding grid.
//
// The accelerator gives a grid with update frequency F its lower rate by
// skipping one back-propagation every 1/(1-F) training iterations.  Software
// programs `period` = 1/(1-F); period 0 means F = 1 (update every iteration).
// With the paper's F_D : F_C = 1 : 0.5 the density grid uses period 0 and the
// color grid period 2, so the color grid is updated every second iteration.
//
// `iter_start` pulses once at the beginning of each training iteration;
// `bp_enable` then holds for the whole iteration.  The iteration counter is
// cleared by `clear`.  The rule is the paper's; the register interface is this
// design's choice.
module update_freq_ctrl #(
  parameter int unsigned PW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [PW-1:0] period,
  input  logic          iter_start,
  output logic          bp_enable,
  output logic          skipped      // pulses when an iteration's update is skipped
);
  logic [PW-1:0] cnt;        // index of the next iteration within the period
  logic [PW-1:0] nxt;

  assign nxt = (period == '0 || cnt + 1'b1 >= period) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      bp_enable <= 1'b1;
      skipped   <= 1'b0;
    end else begin
      skipped <= 1'b0;
      if (clear) begin
        cnt       <= '0;
        bp_enable <= 1'b1;
      end else if (iter_start) begin
        // the iteration that starts now has index cnt; the last of a period is skipped
        cnt       <= nxt;
        bp_enable <= !(period != '0 && cnt == period - 1'b1);
        skipped   <=  (period != '0 && cnt == period - 1'b1);
      end
    end
  end
endmodule
