// tb_fig_comparison: the layer shapes of the kernel-size comparison, run on
// the whole accelerator at its default size.
//
// The comparison sets the number of input channels equal to the number of
// output channels and counts the cycles of one layer for regular and
// depthwise convolution with 3x3 and 5x5 kernels. This test runs those four
// cases with IC = OC = 64 on one 8x8 output block each:
//   L0 regular   5x5  64 -> 64 channels, 12x12 input, no padding
//   L1 depthwise 5x5  64 channels on the same input
//   L2 regular   3x3  64 -> 64 channels on L0's 8x8 output, pad 1
//   L3 depthwise 3x3  64 channels on L0's output, pad 1
// It compares every output pixel with a reference model written here, checks
// that the cycles in which the cores are busy equal the computational time
// T_C (K*K*IC*ceil(OC/8) regular, K*K*ceil(OC/8) depthwise: 12800, 200, 4608
// and 72 cycles), and prints each layer's total cycles from start to the last
// write-back, which also contain the time to fetch the input blocks.
module tb_fig_comparison;
  import cnn_pkg::*;

  localparam int NL = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                host_fm_we = 1'b0;
  logic [FM_AW-1:0]    host_fm_waddr = '0;
  logic [FM_DW-1:0]    host_fm_wdata = '0;
  logic [FM_BYTES-1:0] host_fm_be = '0;
  logic                host_fm_re = 1'b0;
  logic [FM_AW-1:0]    host_fm_raddr = '0;
  logic [FM_DW-1:0]    host_fm_rdata;
  logic                host_w_we = 1'b0;
  logic [W_AW-1:0]     host_w_addr = '0;
  logic [W_DW-1:0]     host_w_wdata = '0;
  logic                cfg_we = 1'b0;
  logic [LAYER_AW-1:0] cfg_addr = '0;
  layer_t              cfg_data = '0;
  logic                start = 1'b0;
  logic [LAYER_AW:0]   num_layers = '0;
  logic busy, done, error, mac_active, stall, mode_switch, sat;
  logic [LAYER_AW-1:0] layer_idx;

  accel_top dut (.*);

  int checks = 0, failures = 0;

  // Reference tensors: [tensor][channel][y][x]; tensor 0 is the input,
  // tensor l+1 the output of layer l.
  localparam int MC = 64, MS = 12, KW = 25;
  int ref_t [NL+1][MC][MS][MS];
  int t_c [NL+1], t_h [NL+1], t_w [NL+1];
  int wref [NL][MC][MC][KW];   // [layer][oc][ic][kpos]
  layer_t L [NL];
  int src [NL];                    // input tensor of each layer
  int base [NL+1];                 // word address of each tensor

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int pitch(input int w);
    return (w + FM_BYTES - 1) / FM_BYTES;
  endfunction

  task automatic define_layer(input int l, input mode_e mode, input int k, input int d,
                              input int s, input int p, input int ic, input int oc,
                              input bit relu, input bit pool, input int shift,
                              input int source);
    int oh, ow;
    src[l] = source;
    L[l] = '0;
    L[l].mode = mode; L[l].k = 3'(k); L[l].dil = 2'(d); L[l].stride = 2'(s);
    L[l].pad = 2'(p); L[l].ic = 11'(ic); L[l].oc = 11'(oc);
    L[l].relu = relu; L[l].pool = pool; L[l].shift = 5'(shift);
    L[l].in_h = 11'(t_h[source]); L[l].in_w = 11'(t_w[source]);
    L[l].in_base = FM_AW'(base[source]);
    L[l].in_row_pitch = FM_AW'(pitch(t_w[source]));
    L[l].in_ch_pitch = FM_AW'(pitch(t_w[source]) * t_h[source]);
    oh = out_dim(11'(t_h[source]), 3'(k), 2'(d), 2'(s), 2'(p));
    ow = out_dim(11'(t_w[source]), 3'(k), 2'(d), 2'(s), 2'(p));
    if (pool) begin oh = oh / 2; ow = ow / 2; end
    t_c[l+1] = oc; t_h[l+1] = oh; t_w[l+1] = ow;
    base[l+1] = base[l] + 4096;   // every tensor gets its own 128 KB region
    L[l].out_base = FM_AW'(base[l+1]);
    L[l].out_row_pitch = FM_AW'(pitch(ow));
    L[l].out_ch_pitch = FM_AW'(pitch(ow) * oh);
    L[l].w_base = W_AW'(l * 16384);
  endtask

  // Reference model of one layer
  task automatic run_ref(input int l);
    int s, k, d, p, ch, cw, oh, ow, kk;
    int conv [MC][MS][MS];
    s = src[l]; k = int'(L[l].k); d = int'(L[l].dil); p = int'(L[l].pad);
    kk = k * k;
    oh = out_dim(L[l].in_h, L[l].k, L[l].dil, L[l].stride, L[l].pad);
    ow = out_dim(L[l].in_w, L[l].k, L[l].dil, L[l].stride, L[l].pad);
    for (int o = 0; o < int'(L[l].oc); o++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint acc;
          acc = 0;
          for (int n = 0; n < int'(L[l].ic); n++) begin
            if (L[l].mode == MODE_DEPTHWISE && n != o) continue;
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int iy, ix, pv, wv;
                iy = y * int'(L[l].stride) + ky * d - p;
                ix = x * int'(L[l].stride) + kx * d - p;
                pv = (iy >= 0 && iy < t_h[s] && ix >= 0 && ix < t_w[s]) ? ref_t[s][n][iy][ix] : 0;
                wv = (L[l].mode == MODE_DEPTHWISE) ? wref[l][o][0][ky*k+kx] : wref[l][o][n][ky*k+kx];
                acc += longint'(pv * wv);
              end
          end
          if (L[l].relu && acc < 0) acc = 0;
          if (L[l].shift != 0) acc = (acc + (longint'(1) << (L[l].shift - 1))) >>> L[l].shift;
          conv[o][y][x] = sat8(acc);
        end
    for (int o = 0; o < int'(L[l].oc); o++)
      for (int y = 0; y < t_h[l+1]; y++)
        for (int x = 0; x < t_w[l+1]; x++)
          if (L[l].pool) begin
            int m;
            m = conv[o][2*y][2*x];
            if (conv[o][2*y][2*x+1] > m) m = conv[o][2*y][2*x+1];
            if (conv[o][2*y+1][2*x] > m) m = conv[o][2*y+1][2*x];
            if (conv[o][2*y+1][2*x+1] > m) m = conv[o][2*y+1][2*x+1];
            ref_t[l+1][o][y][x] = m;
          end else ref_t[l+1][o][y][x] = conv[o][y][x];
  endtask

  task automatic host_write_fm(input int addr, input logic [FM_DW-1:0] data);
    @(negedge clk);
    host_fm_we = 1'b1; host_fm_waddr = FM_AW'(addr); host_fm_wdata = data; host_fm_be = '1;
    @(negedge clk);
    host_fm_we = 1'b0;
  endtask

  task automatic host_read_fm(input int addr, output logic [FM_DW-1:0] data);
    @(negedge clk);
    host_fm_re = 1'b1; host_fm_raddr = FM_AW'(addr);
    @(negedge clk);
    host_fm_re = 1'b0;
    data = host_fm_rdata;
  endtask

  task automatic host_write_w(input int addr, input logic [W_DW-1:0] data);
    @(negedge clk);
    host_w_we = 1'b1; host_w_addr = W_AW'(addr); host_w_wdata = data;
    @(negedge clk);
    host_w_we = 1'b0;
  endtask

  // Cycle accounting
  longint mac_cycles [NL];
  longint layer_cycles [NL];
  int n_stall = 0, n_switch = 0, n_sat = 0;
  int n_reg_cycles = 0, n_dw_cycles = 0;
  always @(posedge clk) if (rst_n && busy) begin
    layer_cycles[layer_idx] += 1;
    if (mac_active) begin
      mac_cycles[layer_idx] += 1;
      if (dut.cfg.mode == MODE_DEPTHWISE) n_dw_cycles++; else n_reg_cycles++;
    end
    if (stall) n_stall++;
    if (mode_switch) n_switch++;
    if (sat) n_sat++;
  end

  initial begin
    logic [FM_DW-1:0] word;
    int cycles;
    for (int l = 0; l < NL; l++) begin mac_cycles[l] = 0; layer_cycles[l] = 0; end
    t_c[0] = 64; t_h[0] = 12; t_w[0] = 12; base[0] = 0;
    define_layer(0, MODE_REGULAR,   5, 1, 1, 0, 64, 64, 1'b1, 1'b0, 7, 0);
    define_layer(1, MODE_DEPTHWISE, 5, 1, 1, 0, 64, 64, 1'b1, 1'b0, 4, 0);
    define_layer(2, MODE_REGULAR,   3, 1, 1, 1, 64, 64, 1'b0, 1'b0, 6, 1);
    define_layer(3, MODE_DEPTHWISE, 3, 1, 1, 1, 64, 64, 1'b0, 1'b0, 3, 1);

    // Data
    for (int c = 0; c < t_c[0]; c++)
      for (int y = 0; y < t_h[0]; y++)
        for (int x = 0; x < t_w[0]; x++) ref_t[0][c][y][x] = int'($urandom_range(0, 31)) - 16;
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < MC; o++)
        for (int n = 0; n < MC; n++)
          for (int kp = 0; kp < KW; kp++) wref[l][o][n][kp] = int'($urandom_range(0, 15)) - 8;

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // Input map
    for (int c = 0; c < t_c[0]; c++)
      for (int y = 0; y < t_h[0]; y++)
        for (int wd = 0; wd < pitch(t_w[0]); wd++) begin
          word = '0;
          for (int b = 0; b < FM_BYTES; b++)
            if (wd * FM_BYTES + b < t_w[0]) word[b*8 +: 8] = 8'(ref_t[0][c][y][wd*FM_BYTES+b]);
          host_write_fm(base[0] + c * pitch(t_w[0]) * t_h[0] + y * pitch(t_w[0]) + wd, word);
        end
    // Weights
    for (int l = 0; l < NL; l++) begin
      int kk, ng;
      kk = int'(L[l].k) * int'(L[l].k);
      ng = (int'(L[l].oc) + PE_NUM - 1) / PE_NUM;
      for (int g = 0; g < ng; g++)
        for (int n = 0; n < ((L[l].mode == MODE_DEPTHWISE) ? 1 : int'(L[l].ic)); n++)
          for (int kp = 0; kp < kk; kp++) begin
            logic [W_DW-1:0] w;
            for (int j = 0; j < PE_NUM; j++)
              w[j*8 +: 8] = 8'((L[l].mode == MODE_DEPTHWISE) ? wref[l][g*PE_NUM+j][0][kp]
                                                             : wref[l][g*PE_NUM+j][n][kp]);
            host_write_w(int'(L[l].w_base) + ((L[l].mode == MODE_DEPTHWISE) ? g * kk + kp
                                                  : (g * int'(L[l].ic) + n) * kk + kp), w);
          end
    end
    // Layer table
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = LAYER_AW'(l); cfg_data = L[l];
    end
    @(negedge clk);
    cfg_we = 1'b0;

    for (int l = 0; l < NL; l++) run_ref(l);

    // Run
    @(negedge clk);
    start = 1'b1; num_layers = (LAYER_AW+1)'(NL);
    @(negedge clk);
    start = 1'b0;
    cycles = 0;
    while (!done) begin
      @(posedge clk);
      cycles++;
    end
    $display("network finished in %0d cycles", cycles);
    checks++;
    if (error) begin failures++; $display("FAIL: error flag set"); end

    // Compare every layer output
    for (int l = 0; l < NL; l++) begin
      int bad;
      bad = 0;
      for (int c = 0; c < t_c[l+1]; c++)
        for (int y = 0; y < t_h[l+1]; y++)
          for (int wd = 0; wd < pitch(t_w[l+1]); wd++) begin
            host_read_fm(base[l+1] + c * pitch(t_w[l+1]) * t_h[l+1] + y * pitch(t_w[l+1]) + wd, word);
            for (int b = 0; b < FM_BYTES; b++) begin
              int x;
              x = wd * FM_BYTES + b;
              if (x < t_w[l+1]) begin
                checks++;
                if (int'($signed(word[b*8 +: 8])) != ref_t[l+1][c][y][x]) begin
                  failures++; bad++;
                  if (bad < 5) $display("FAIL: layer %0d ch %0d (%0d,%0d): got %0d want %0d", l, c, y, x,
                                        $signed(word[b*8 +: 8]), ref_t[l+1][c][y][x]);
                end
              end
            end
          end
      $display("layer %0d: %0dx%0dx%0d output, %0d mismatches", l, t_c[l+1], t_h[l+1], t_w[l+1], bad);
    end

    // Computational time against the paper's T_C
    for (int l = 0; l < NL; l++) begin
      longint tc;
      int oh, ow, nb, kk, ng;
      oh = out_dim(L[l].in_h, L[l].k, L[l].dil, L[l].stride, L[l].pad);
      ow = out_dim(L[l].in_w, L[l].k, L[l].dil, L[l].stride, L[l].pad);
      nb = ((oh + OB - 1) / OB) * ((ow + OB - 1) / OB);
      kk = int'(L[l].k) * int'(L[l].k);
      ng = (int'(L[l].oc) + PE_NUM - 1) / PE_NUM;
      tc = (L[l].mode == MODE_REGULAR) ? longint'(kk) * int'(L[l].ic) * ng * nb : longint'(kk) * ng * nb;
      checks++;
      if (mac_cycles[l] != tc) begin
        failures++;
        $display("FAIL: layer %0d busy cycles %0d, T_C %0d", l, mac_cycles[l], tc);
      end else $display("layer %0d: %0d MAC cycles = T_C, %0d cycles in all", l, mac_cycles[l], layer_cycles[l]);
    end

    $display("events: regular=%0d depthwise=%0d switches=%0d stalls=%0d saturations=%0d",
             n_reg_cycles, n_dw_cycles, n_switch, n_stall, n_sat);
    checks++; if (n_switch != 3) begin failures++; $display("FAIL: %0d mode switches, want 3", n_switch); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
