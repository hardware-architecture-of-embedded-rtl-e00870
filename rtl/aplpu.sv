// aplpu: activation and pooling layer processing unit.
//
// Takes one block of convolution results (PE_NUM channels x OB x OB sums)
// from the convolution layer processing unit, applies the activation and
// writes the 8-bit output block back into the feature map memory, where it
// becomes an input of the next layer. The paper names ReLU and quantization
// as the activation functions and pooling in the unit's name; this design's
// versions of them are:
//   ReLU          negative sums become 0 (cfg.relu);
//   quantization  round half up and shift right by cfg.shift, then saturate
//                 to signed 8 bits;
//   pooling       2x2 max pooling with stride 2 over the block (cfg.pool),
//                 giving a 4x4 block per channel.
// Output rows that fall outside the output map (right and bottom edge blocks)
// and channels beyond OC are not written; the byte enables cover only the
// pixels inside the map. Output channel c, row y, column x is byte x%32 of
// word out_base + c*out_ch_pitch + y*out_row_pitch + x/32.
// Timing: res_ready is high while idle; after a handshake one cycle computes
// the activation, then one cycle per (channel, row) of the block issues the
// write or skips it (PE_NUM*8 cycles, PE_NUM*4 with pooling). idle is high
// when no block is held. sat pulses once for a block in which some value was
// saturated.
module aplpu
  import cnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  layer_t           cfg,
  input  logic             res_valid,
  output logic             res_ready,
  input  acc_t             res [PE_NUM][MAC_PE],
  input  step_t            res_meta,
  output logic             wr_en,
  output logic [FM_AW-1:0] wr_addr,
  output logic [FM_DW-1:0] wr_data,
  output logic [FM_BYTES-1:0] wr_be,
  output logic             idle,
  output logic             sat
);
  typedef enum logic [1:0] {A_IDLE, A_ACT, A_WRITE} state_e;
  state_e state;

  acc_t  hold [PE_NUM][MAC_PE];
  step_t meta;
  pix_t  act  [PE_NUM][MAC_PE];
  logic  [2:0] wc;   // channel within the group
  logic  [2:0] wr;   // row within the block

  // Activation of the held block
  pix_t  act_d [PE_NUM][MAC_PE];
  logic  sat_d;
  always_comb begin
    sat_d = 1'b0;
    for (int p = 0; p < PE_NUM; p++)
      for (int i = 0; i < MAC_PE; i++) begin
        logic signed [ACC_W:0] v;
        v = (ACC_W+1)'(hold[p][i]);
        if (cfg.relu && v < 0) v = '0;
        if (cfg.shift != 0) v = (v + ((ACC_W+1)'(1) <<< (cfg.shift - 5'd1))) >>> cfg.shift;
        if (v > 127)       begin act_d[p][i] = 8'sd127;  sat_d = 1'b1; end
        else if (v < -128) begin act_d[p][i] = -8'sd128; sat_d = 1'b1; end
        else                     act_d[p][i] = pix_t'(v);
      end
  end

  // Output geometry
  int oh, ow, rows, cols, oc, oy, ox0, jj, pos;
  logic row_ok;
  pix_t line [OB];
  pix_t pa, pb, pc, pd, m1, m2;
  always_comb begin
    oh = out_dim(cfg.in_h, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    ow = out_dim(cfg.in_w, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    rows = cfg.pool ? OB / 2 : OB;
    cols = rows;
    if (cfg.pool) begin
      oh = oh / 2; ow = ow / 2;
    end
    oc  = int'(meta.grp) * PE_NUM + int'(wc);
    oy  = int'(meta.by) * rows + int'(wr);
    ox0 = int'(meta.bx) * cols;
    row_ok = (oc < int'(cfg.oc)) && (oy < oh);
    for (int j = 0; j < OB; j++) begin
      // pooled pixel j (j < OB/2) takes the 2x2 window at columns 2j, 2j+1
      jj = (j < OB / 2) ? j : 0;
      pa = act[wc][(2*int'(wr[1:0]))*OB + 2*jj];
      pb = act[wc][(2*int'(wr[1:0]))*OB + 2*jj + 1];
      pc = act[wc][(2*int'(wr[1:0])+1)*OB + 2*jj];
      pd = act[wc][(2*int'(wr[1:0])+1)*OB + 2*jj + 1];
      m1 = (pa > pb) ? pa : pb;
      m2 = (pc > pd) ? pc : pd;
      line[j] = cfg.pool ? ((m1 > m2) ? m1 : m2) : act[wc][int'(wr)*OB + j];
    end
    wr_en   = (state == A_WRITE) && row_ok;
    wr_addr = FM_AW'(int'(cfg.out_base) + oc * int'(cfg.out_ch_pitch) +
                     oy * int'(cfg.out_row_pitch) + ox0 / FM_BYTES);
    wr_data = '0;
    wr_be   = '0;
    for (int j = 0; j < OB; j++) begin
      pos = ox0 % FM_BYTES + j;
      if (j < cols && ox0 + j < ow && pos < FM_BYTES) begin
        wr_data[pos*8 +: 8] = line[j];
        wr_be[pos]          = 1'b1;
      end
    end
  end

  assign res_ready = (state == A_IDLE);
  assign idle      = (state == A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; wc <= '0; wr <= '0; sat <= 1'b0; meta <= '0;
    end else begin
      sat <= 1'b0;
      case (state)
        A_IDLE: if (res_valid) begin
          meta  <= res_meta;
          state <= A_ACT;
        end
        A_ACT: begin
          sat   <= sat_d;
          wc <= '0; wr <= '0;
          state <= A_WRITE;
        end
        A_WRITE: begin
          if (int'(wr) == rows - 1) begin
            wr <= '0;
            if (int'(wc) == PE_NUM - 1) state <= A_IDLE;
            else wc <= wc + 3'd1;
          end else begin
            wr <= wr + 3'd1;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == A_IDLE && res_valid) hold <= res;
    if (state == A_ACT) act <= act_d;
  end
endmodule
