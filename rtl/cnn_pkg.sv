// cnn_pkg: constants and types shared by the inference accelerator.
//
// The accelerator computes convolution layers block by block. A block is an
// OB x OB tile of output pixels (OB*OB = MAC_PE = 64, one pixel per MAC of a
// convolution core); PE_NUM = 8 cores run in parallel, giving 512 MACs per
// cycle. In regular mode the eight cores share one input channel and compute
// eight output channels; in depthwise mode each core has its own channel.
// PE_NUM, MAC_PE, the 7x7 kernel limit, 8-bit data and the memory sizes
// (4,096 KB feature maps, 2,048 KB weights) are the paper's numbers. The word
// widths (32 bytes per feature map word, PE_NUM bytes per weight word), the
// accumulator width, the layer descriptor and its field widths are this
// design's own choices.
package cnn_pkg;

  // Parallelism
  parameter int PE_NUM = 8;            // convolution cores
  parameter int OB     = 8;            // output block edge
  parameter int MAC_PE = OB * OB;      // MACs per core
  parameter int KMAX   = 7;            // largest kernel edge
  parameter int KK_MAX = KMAX * KMAX;
  // Input block edge: (OB-1)*stride + (K-1)*dilation + 1 must not exceed it.
  // 21 covers 7x7 at stride 2 and dilation 1, and 3x3 at stride 2, dilation 3.
  parameter int IB     = 21;

  // Memories
  parameter int FM_BYTES = 32;                     // feature map word, bytes
  parameter int FM_DW    = FM_BYTES * 8;
  parameter int FM_WORDS = 4096 * 1024 / FM_BYTES; // 4,096 KB
  parameter int FM_AW    = $clog2(FM_WORDS);
  parameter int W_BYTES  = PE_NUM;                 // one weight per core
  parameter int W_DW     = W_BYTES * 8;
  parameter int W_WORDS  = 2048 * 1024 / W_BYTES;  // 2,048 KB
  parameter int W_AW     = $clog2(W_WORDS);

  parameter int ACC_W      = 32;
  parameter int MAX_LAYERS = 16;
  parameter int LAYER_AW   = $clog2(MAX_LAYERS);

  typedef logic signed [7:0]       pix_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef enum logic {MODE_REGULAR = 1'b0, MODE_DEPTHWISE = 1'b1} mode_e;

  // Network information for one convolution layer.
  typedef struct packed {
    mode_e             mode;
    logic              relu;          // ReLU before quantization
    logic              pool;          // 2x2 max pooling after activation
    logic [2:0]        k;             // kernel edge 1..7
    logic [1:0]        dil;           // dilation 1..3
    logic [1:0]        stride;        // 1 or 2
    logic [1:0]        pad;           // zero padding 0..3
    logic [10:0]       in_h;
    logic [10:0]       in_w;
    logic [10:0]       ic;            // input channels (= oc in depthwise)
    logic [10:0]       oc;
    logic [FM_AW-1:0]  in_base;       // word address of channel 0, row 0
    logic [FM_AW-1:0]  in_row_pitch;  // words per row
    logic [FM_AW-1:0]  in_ch_pitch;   // words per channel plane
    logic [FM_AW-1:0]  out_base;
    logic [FM_AW-1:0]  out_row_pitch;
    logic [FM_AW-1:0]  out_ch_pitch;
    logic [W_AW-1:0]   w_base;
    logic [4:0]        shift;         // quantization right shift
  } layer_t;

  // One step of the loop nest: an input block (regular: one input channel;
  // depthwise: PE_NUM channels) with its weights.
  typedef struct packed {
    logic [6:0]  by;     // block row
    logic [6:0]  bx;     // block column
    logic [7:0]  grp;    // group of PE_NUM output channels
    logic [10:0] n;      // input channel (regular mode)
    logic        first;  // first step of this output block: clear accumulators
    logic        last;   // last step: results complete
  } step_t;

  // Tag of a feature map read: where the returned word goes in the buffer.
  typedef struct packed {
    logic                  bank;
    logic [2:0]            slot;
    logic [4:0]            row;
    logic signed [7:0]     col_base;  // buffer column of byte 0
    logic [FM_BYTES-1:0]   mask;      // bytes inside the feature map
  } fm_tag_t;

  // Output size of a convolution along one axis.
  function automatic int out_dim(input logic [10:0] in, input logic [2:0] k,
                                 input logic [1:0] d, input logic [1:0] s,
                                 input logic [1:0] p);
    int span;
    span = (int'(k) - 1) * int'(d) + 1;
    if (int'(in) + 2 * int'(p) < span || s == 0) return 0;
    return (int'(in) + 2 * int'(p) - span) / int'(s) + 1;
  endfunction

  // Edge of the input block that one OB x OB output block needs.
  function automatic int in_block(input logic [2:0] k, input logic [1:0] d,
                                  input logic [1:0] s);
    return (OB - 1) * int'(s) + (int'(k) - 1) * int'(d) + 1;
  endfunction

  function automatic logic layer_ok(input layer_t l);
    return l.k >= 1 && l.dil >= 1 && (l.stride == 1 || l.stride == 2) &&
           in_block(l.k, l.dil, l.stride) <= IB && l.ic != 0 && l.oc != 0 &&
           (l.mode == MODE_REGULAR || l.ic == l.oc) &&
           out_dim(l.in_h, l.k, l.dil, l.stride, l.pad) != 0 &&
           out_dim(l.in_w, l.k, l.dil, l.stride, l.pad) != 0;
  endfunction

endpackage
