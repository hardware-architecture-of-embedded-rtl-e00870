// weight_memory: the filter weight memory (2,048 KB).
//
// Each word holds W_BYTES = PE_NUM 8-bit weights, one per convolution core, for
// one kernel position: in regular mode the weights of PE_NUM output channels,
// in depthwise mode those of PE_NUM channels. A read port (one-cycle latency)
// serves the address generator; a write port loads weights from outside. The
// size is the paper's; the word layout, port count and latency are this
// design's choices. Written as an array, to be mapped onto SRAM macros.
module weight_memory #(
  parameter int WORDS = cnn_pkg::W_WORDS,
  parameter int DW    = cnn_pkg::W_DW,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic           clk,
  input  logic           rd_en,
  input  logic [AW-1:0]  rd_addr,
  output logic [DW-1:0]  rd_data,
  input  logic           wr_en,
  input  logic [AW-1:0]  wr_addr,
  input  logic [DW-1:0]  wr_data
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
