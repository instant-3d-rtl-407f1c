// mlp_buffer -- MLP on-chip buffer.
//
// Holds the small MLP's weights and activations next to the MLP units.  It is
// a simple dual-port SRAM of DEPTH words of WORDS FP16 values: one write port
// (loaded from DRAM through the host side) and one read port feeding the MLP
// units; a read in cycle t returns its word in cycle t+1.  A read and a write
// of the same word in one cycle return the old word.  The paper only names the
// buffer; its organisation (1024 words of 16 FP16 values, 32 KB) is this
// design's choice.
module mlp_buffer
  import i3d_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WORDS = 16
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  fp16_t [WORDS-1:0]          wr_data,
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output fp16_t [WORDS-1:0]          rd_data
);
  fp16_t [WORDS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
