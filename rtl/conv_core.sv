// conv_core: one convolution core of the convolution layer processing unit.
//
// MAC_PE (64) multipliers and adders, one per output pixel of an OB x OB
// block, each with an accumulator (the core's "buffer"). Each cycle the core
// receives one filter weight and the MAC_PE input pixels that this weight
// multiplies, one kernel position after another, so a K x K kernel takes K*K
// cycles whatever K is. Two pipeline stages, as in the paper's time chart:
// the products are registered in the multiplication stage and added to the
// accumulators in the accumulation stage.
//
// Timing: inputs with en=1 at cycle t are multiplied at t and accumulated at
// t+1. clear=1 starts a new sum with this product instead of adding to the
// old one; final=1 marks the last product of a sum, and done pulses at t+2
// while acc holds the finished sums (they stay there until the next
// accumulation). Pixel and weight are signed 8-bit, the accumulators ACC_W
// bits: the multiplier-adder-buffer loop is the paper's, the widths and
// pipeline registers are this design's choices.
module conv_core
  import cnn_pkg::*;
#(
  parameter int N = MAC_PE
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clear,
  input  logic  final_in,
  input  pix_t  pix [N],
  input  pix_t  weight,
  output acc_t  acc [N],
  output logic  done
);
  logic signed [15:0] prod [N];
  logic               p_en, p_clear, p_final;

  // Multiplication stage
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) prod[i] <= pix[i] * weight;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_en <= 1'b0; p_clear <= 1'b0; p_final <= 1'b0; done <= 1'b0;
    end else begin
      p_en    <= en;
      p_clear <= en & clear;
      p_final <= en & final_in;
      done    <= p_en & p_final;
    end
  end

  // Accumulation stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
    end else if (p_en) begin
      for (int i = 0; i < N; i++)
        acc[i] <= (p_clear ? acc_t'(0) : acc[i]) + acc_t'(prod[i]);
    end
  end
endmodule
