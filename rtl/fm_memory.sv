// fm_memory: the feature map memory (4,096 KB), holding the input feature maps
// of a layer and the output feature maps it produces.
//
// One read port and one write port, both FM_BYTES (32) bytes wide, so that the
// address generator can fetch input blocks while the activation and pooling
// unit writes results back. Reads are synchronous: rd_data is valid the cycle
// after rd_en. Writes take a byte enable per byte. The size is the paper's;
// the two-port organisation, word width and one-cycle latency are this
// design's choices. It is written as an array, to be mapped onto SRAM macros.
module fm_memory #(
  parameter int WORDS = cnn_pkg::FM_WORDS,
  parameter int BYTES = cnn_pkg::FM_BYTES,
  parameter int AW    = $clog2(WORDS)
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [BYTES*8-1:0]   rd_data,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [BYTES*8-1:0]   wr_data,
  input  logic [BYTES-1:0]     wr_be
);
  logic [BYTES*8-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int b = 0; b < BYTES; b++)
        if (wr_be[b]) mem[wr_addr][b*8 +: 8] <= wr_data[b*8 +: 8];
    end
  end
endmodule
