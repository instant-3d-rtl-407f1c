// systolic_array -- systolic-array MLP unit (output stationary, FP16).
//
// Computes C = A * B for an ROWS x K block of A and a K x COLS block of B,
// where K is the number of beats streamed in, for the MLP layers with many
// output channels (the 64-wide hidden layers).  Each beat brings one column
// of A (ROWS values) and one row of B (COLS values).  Row i of A enters the
// array i cycles late and column j of B j cycles late (input skew registers),
// values travel right (A) and down (B) one PE per cycle, and PE(i,j)
// accumulates A[i,k]*B[k,j] in FP16.  `start` clears the accumulators;
// `in_last` marks the last beat; `done` is high for one cycle starting
// ROWS+COLS-1 clock edges after the edge that takes the last beat, when
// PE(ROWS-1, COLS-1) has added its last product, and `out_c` then holds C.
//
// Interface: one beat per cycle, no back-pressure.  The paper states only that
// a systolic array serves the layers with large output channel counts; the
// dataflow (output stationary), the 8 x 8 size and the timing are this
// design's choices.
module systolic_array
  import i3d_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          in_valid,
  input  logic                          in_last,
  input  fp16_t [ROWS-1:0]              in_a,
  input  fp16_t [COLS-1:0]              in_b,
  output logic                          done,
  output fp16_t [ROWS-1:0][COLS-1:0]    out_c
);
  // skewed operands entering the array edge
  fp16_t [ROWS-1:0] a_edge;
  logic  [ROWS-1:0] av_edge;
  fp16_t [COLS-1:0] b_edge;
  logic  [COLS-1:0] bv_edge;

  // skew delay lines: row i delayed by i cycles, column j by j cycles
  fp16_t [ROWS-1:0][ROWS-1:0] a_dl;
  logic  [ROWS-1:0][ROWS-1:0] av_dl;
  fp16_t [COLS-1:0][COLS-1:0] b_dl;
  logic  [COLS-1:0][COLS-1:0] bv_dl;

  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      a_edge[i]  = (i == 0) ? in_a[0]  : a_dl[i][i-1];
      av_edge[i] = (i == 0) ? in_valid : av_dl[i][i-1];
    end
    for (int j = 0; j < COLS; j++) begin
      b_edge[j]  = (j == 0) ? in_b[0]  : b_dl[j][j-1];
      bv_edge[j] = (j == 0) ? in_valid : bv_dl[j][j-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_dl <= '0; av_dl <= '0; b_dl <= '0; bv_dl <= '0;
    end else begin
      for (int i = 1; i < ROWS; i++) begin
        a_dl[i][0]  <= in_a[i];
        av_dl[i][0] <= in_valid;
        for (int d = 1; d < i; d++) begin
          a_dl[i][d]  <= a_dl[i][d-1];
          av_dl[i][d] <= av_dl[i][d-1];
        end
      end
      for (int j = 1; j < COLS; j++) begin
        b_dl[j][0]  <= in_b[j];
        bv_dl[j][0] <= in_valid;
        for (int d = 1; d < j; d++) begin
          b_dl[j][d]  <= b_dl[j][d-1];
          bv_dl[j][d] <= bv_dl[j][d-1];
        end
      end
    end
  end

  // processing elements
  fp16_t [ROWS-1:0][COLS-1:0] a_pe, b_pe;    // operands held in each PE
  logic  [ROWS-1:0][COLS-1:0] v_pe;          // operands valid in each PE

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_pe <= '0; b_pe <= '0; v_pe <= '0; out_c <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        for (int j = 0; j < COLS; j++) begin
          a_pe[i][j] <= (j == 0) ? a_edge[i] : a_pe[i][j-1];
          b_pe[i][j] <= (i == 0) ? b_edge[j] : b_pe[i-1][j];
          v_pe[i][j] <= (j == 0) ? (av_edge[i] && ((i == 0) ? bv_edge[j] : 1'b1))
                                 : v_pe[i][j-1];
          if (start)
            out_c[i][j] <= FP16_ZERO;
          else if (v_pe[i][j])
            out_c[i][j] <= fp16_add(out_c[i][j], fp16_mul(a_pe[i][j], b_pe[i][j]));
        end
      end
    end
  end

  // completion: the last beat reaches PE(ROWS-1,COLS-1) ROWS+COLS-1 cycles
  // after entering, and is accumulated on the following edge
  localparam int unsigned LAT = ROWS + COLS - 1;
  logic [LAT:0] last_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_sr <= '0;
    else        last_sr <= {last_sr[LAT-1:0], in_valid && in_last};
  end
  assign done = last_sr[LAT];
endmodule
