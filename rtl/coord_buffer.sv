// coord_buffer -- 3D Coordinate Buffer SRAM of a grid core.
//
// Holds the normalised (UQ0.16 per axis) coordinates of all queried points of
// the current batch.  The host writes point i at index i.  A `start` pulse with
// a point count then replays points 0..count-1 in order as a valid/ready stream
// tagged with their index; the grid core replays the batch once for the
// feed-forward pass and once more for back-propagation, which recomputes the
// same vertex addresses.  `done` is high once the replay has drained.
//
// Timing: the array is read synchronously into the output register, so the
// first point appears two cycles after `start` and then one per cycle.  The
// paper says only that this SRAM caches the batch's coordinates; the depth of
// 4096 points, the write port and the replay control are this design's own.
module coord_buffer
  import i3d_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host write port
  input  logic                    wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_idx,
  input  logic [2:0][COORD_W-1:0] wr_xyz,
  // replay control
  input  logic                    start,
  input  logic [$clog2(DEPTH):0]  count,
  output logic                    done,
  // point stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [2:0][COORD_W-1:0] out_xyz,
  output tag_t                    out_tag
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [2:0][COORD_W-1:0] mem [DEPTH];
  logic [IW:0] rd_ptr, cnt_q;
  logic        busy;
  logic        fetch;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_xyz;
  end

  assign fetch = busy && (rd_ptr < cnt_q) && (!out_valid || out_ready);
  assign done  = !busy;

  always_ff @(posedge clk) begin
    if (fetch) out_xyz <= mem[rd_ptr[IW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      rd_ptr    <= '0;
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else if (start) begin
      busy      <= (count != 0);
      rd_ptr    <= '0;
      cnt_q     <= count;
      out_valid <= 1'b0;
    end else begin
      if (fetch) begin
        out_valid <= 1'b1;
        out_tag   <= tag_t'(rd_ptr);
        rd_ptr    <= rd_ptr + 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      if (busy && rd_ptr == cnt_q && (!out_valid || out_ready) && !fetch)
        busy <= 1'b0;
    end
  end
endmodule
