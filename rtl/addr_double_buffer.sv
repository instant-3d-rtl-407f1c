// addr_double_buffer -- Interpolation Address Multi-Output Double Buffer.
//
// Sits between the hash unit and the Feed-Forward Read Mapper.  It has two
// halves, A and B, of PTS point records each (eight hashed addresses, eight
// weights and a tag per record).  The hash unit fills one half while the FRM
// drains the other; a half is handed over when it is full or when `flush`
// marks the end of a batch.  "Multi-output": each output record presents all
// eight addresses of a point at once, so the FRM can take the whole group in
// one cycle.
//
// Interface: valid/ready in and out, one record per cycle each way.  The
// output is read combinationally from the draining half.  The paper names the
// buffer and Fig. 12 shows its two halves A and B; the half size PTS = 8 and
// the hand-over rule are this design's choices.
module addr_double_buffer
  import i3d_pkg::*;
#(
  parameter int unsigned PTS = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     flush,       // seal a partly filled half (end of batch)
  input  logic     in_valid,
  output logic     in_ready,
  input  pt_addr_t in_pt,
  output logic     out_valid,
  input  logic     out_ready,
  output pt_addr_t out_pt,
  output logic     empty
);
  localparam int unsigned CW = $clog2(PTS + 1);

  pt_addr_t          buf_q [2][PTS];
  logic [1:0]        sealed;
  logic [1:0][CW-1:0] cnt;
  logic [CW-1:0]     rpos;
  logic              wsel, rsel;
  logic              wr, rd;

  assign in_ready  = !sealed[wsel];
  assign wr        = in_valid && in_ready;
  assign out_valid = sealed[rsel];
  assign out_pt    = buf_q[rsel][rpos[$clog2(PTS)-1:0]];
  assign rd        = out_valid && out_ready;
  assign empty     = (sealed == 2'b00) && (cnt[wsel] == '0);

  always_ff @(posedge clk) begin
    if (wr) buf_q[wsel][cnt[wsel][$clog2(PTS)-1:0]] <= in_pt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sealed <= '0;
      cnt    <= '0;
      rpos   <= '0;
      wsel   <= 1'b0;
      rsel   <= 1'b0;
    end else begin
      // drain side
      if (rd) begin
        if (rpos + 1'b1 == cnt[rsel]) begin
          sealed[rsel] <= 1'b0;
          cnt[rsel]    <= '0;
          rpos         <= '0;
          rsel         <= ~rsel;
        end else begin
          rpos <= rpos + 1'b1;
        end
      end
      // fill side
      if (wr) begin
        cnt[wsel] <= cnt[wsel] + 1'b1;
        if (cnt[wsel] + 1'b1 == CW'(PTS)) begin
          sealed[wsel] <= 1'b1;
          wsel         <= ~wsel;
        end
      end else if (flush && !sealed[wsel] && cnt[wsel] != '0) begin
        sealed[wsel] <= 1'b1;
        wsel         <= ~wsel;
      end
    end
  end
endmodule
