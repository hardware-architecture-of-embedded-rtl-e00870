// address_generator: walks the loop nest of one convolution layer and
// generates the read addresses of the feature map memory and the weight
// memory.
//
// Loop order, after the paper's algorithm:
//   regular mode:   for each group of PE_NUM output channels
//                     for each output block (row-major)
//                       for each input channel n          -> one step
//   depthwise mode: for each output block
//                     for each group of PE_NUM channels   -> one step
// For each step it waits for a free buffer bank, clears it, then streams two
// sets of reads in parallel, one request per cycle each: the rows of the input
// block (one slot in regular mode, up to PE_NUM slots in depthwise mode) from
// the feature map memory, and the K*K weight words from the weight memory.
// Rows above or below the map are not read and columns outside it are masked,
// which leaves the cleared zeros as padding. When both streams are done it
// commits the bank with the step's description (block, group, channel and
// whether it is the first or last step of its output block).
//
// Memory layout, this design's choice (the paper does not give one): channel
// c, row y of a feature map starts at word in_base + c*in_ch_pitch +
// y*in_row_pitch and holds 32 pixels per word; the weight word of kernel
// position p is at w_base + (g*IC + n)*K*K + p in regular mode (byte j: output
// channel g*PE_NUM+j, input channel n) and at w_base + g*K*K + p in depthwise
// mode (byte j: channel g*PE_NUM+j).
// Timing: start is a pulse; busy stays high until the last step is committed
// and done pulses then. A step costs rows x words-per-row feature map cycles
// (or K*K weight cycles if more) plus three cycles of bank handling.
module address_generator
  import cnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_t           cfg,
  output logic             busy,
  output logic             done,
  // feature map memory
  output logic             fm_rd_en,
  output logic [FM_AW-1:0] fm_rd_addr,
  output fm_tag_t          fm_tag,
  // weight memory
  output logic             w_rd_en,
  output logic [W_AW-1:0]  w_rd_addr,
  output logic             w_bank,
  output logic [5:0]       w_kpos,
  // buffer
  input  logic [1:0]       bank_full,
  output logic             clear,
  output logic             clear_bank,
  output logic             commit,
  output logic             commit_bank,
  output step_t            commit_meta
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_CLEAR, S_LOAD, S_COMMIT} state_e;
  state_e state;

  // Layer constants, latched at start
  logic [10:0] nby, nbx, ngrp;
  logic [5:0]  kk;
  logic [4:0]  ibu;
  // Loop counters
  logic [7:0]  grp;
  logic [6:0]  by, bx;
  logic [10:0] n;
  logic        ld_bank;
  // Stream counters
  logic [2:0]  slot;
  logic [4:0]  r;
  logic [1:0]  woff;
  logic        fm_done, w_done;
  logic [5:0]  kp;

  logic dw;
  assign dw = (cfg.mode == MODE_DEPTHWISE);

  // Step descriptors
  logic last_n, last_grp, last_bx, last_by, last_step;
  always_comb begin
    last_n   = dw || (n == cfg.ic - 11'd1);
    last_grp = (11'(grp) == ngrp - 11'd1);
    last_bx  = (11'(bx) == nbx - 11'd1);
    last_by  = (11'(by) == nby - 11'd1);
    last_step = last_n && last_grp && last_bx && last_by;
  end

  // Feature map stream, combinational part
  int x0, y0, iy, xlo, xhi, wlo, whi, wcur, nslots, ch;
  logic row_ok, fm_issue, row_end;
  always_comb begin
    x0 = int'(bx) * OB * int'(cfg.stride) - int'(cfg.pad);
    y0 = int'(by) * OB * int'(cfg.stride) - int'(cfg.pad);
    iy = y0 + int'(r);
    row_ok = (iy >= 0) && (iy < int'(cfg.in_h));
    xlo = (x0 < 0) ? 0 : x0;
    xhi = x0 + int'(ibu) - 1;
    if (xhi > int'(cfg.in_w) - 1) xhi = int'(cfg.in_w) - 1;
    wlo = xlo / FM_BYTES;
    whi = xhi / FM_BYTES;
    wcur = wlo + int'(woff);
    if (dw) begin
      nslots = int'(cfg.ic) - int'(grp) * PE_NUM;
      if (nslots > PE_NUM) nslots = PE_NUM;
      ch = int'(grp) * PE_NUM + int'(slot);
    end else begin
      nslots = 1;
      ch = int'(n);
    end
    fm_issue = (state == S_LOAD) && !fm_done && row_ok;
    row_end  = !row_ok || (wcur >= whi);

    fm_rd_en   = fm_issue;
    fm_rd_addr = FM_AW'(int'(cfg.in_base) + ch * int'(cfg.in_ch_pitch) +
                        iy * int'(cfg.in_row_pitch) + wcur);
    fm_tag.bank     = ld_bank;
    fm_tag.slot     = slot;
    fm_tag.row      = r;
    fm_tag.col_base = 8'(wcur * FM_BYTES - x0);
    for (int i = 0; i < FM_BYTES; i++)
      fm_tag.mask[i] = (wcur * FM_BYTES + i) < int'(cfg.in_w);
  end

  // Weight stream, combinational part
  always_comb begin
    int wstep;
    if (dw) wstep = int'(grp) * int'(kk);
    else    wstep = (int'(grp) * int'(cfg.ic) + int'(n)) * int'(kk);
    w_rd_en   = (state == S_LOAD) && !w_done;
    w_rd_addr = W_AW'(int'(cfg.w_base) + wstep + int'(kp));
    w_bank    = ld_bank;
    w_kpos    = kp;
  end

  always_comb begin
    clear       = (state == S_CLEAR);
    clear_bank  = ld_bank;
    commit      = (state == S_COMMIT);
    commit_bank = ld_bank;
    commit_meta.by    = by;
    commit_meta.bx    = bx;
    commit_meta.grp   = grp;
    commit_meta.n     = dw ? 11'(0) : n;
    commit_meta.first = dw || (n == 11'd0);
    commit_meta.last  = last_n;
    // done still counts as busy: the last commit reaches the buffer then.
    busy        = (state != S_IDLE) || done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0;
      nby <= '0; nbx <= '0; ngrp <= '0; kk <= '0; ibu <= '0;
      grp <= '0; by <= '0; bx <= '0; n <= '0; ld_bank <= 1'b0;
      slot <= '0; r <= '0; woff <= '0; fm_done <= 1'b0; w_done <= 1'b0; kp <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          nby  <= 11'((out_dim(cfg.in_h, cfg.k, cfg.dil, cfg.stride, cfg.pad) + OB - 1) / OB);
          nbx  <= 11'((out_dim(cfg.in_w, cfg.k, cfg.dil, cfg.stride, cfg.pad) + OB - 1) / OB);
          ngrp <= 11'((int'(cfg.oc) + PE_NUM - 1) / PE_NUM);
          kk   <= 6'(cfg.k) * 6'(cfg.k);
          ibu  <= 5'(in_block(cfg.k, cfg.dil, cfg.stride));
          grp <= '0; by <= '0; bx <= '0; n <= '0;
          state <= S_WAIT;
        end
        S_WAIT: if (!bank_full[ld_bank]) state <= S_CLEAR;
        S_CLEAR: begin
          slot <= '0; r <= '0; woff <= '0; kp <= '0;
          fm_done <= 1'b0; w_done <= 1'b0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (!fm_done) begin
            if (row_end) begin
              woff <= '0;
              if (r == ibu - 5'd1) begin
                r <= '0;
                if (int'(slot) >= nslots - 1) fm_done <= 1'b1;
                else slot <= slot + 3'd1;
              end else begin
                r <= r + 5'd1;
              end
            end else begin
              woff <= woff + 2'd1;
            end
          end
          if (!w_done) begin
            if (kp == kk - 6'd1) w_done <= 1'b1;
            else kp <= kp + 6'd1;
          end
          if (fm_done && w_done) state <= S_COMMIT;
        end
        S_COMMIT: begin
          ld_bank <= ~ld_bank;
          if (last_step) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_WAIT;
            if (dw) begin
              // blocks outer, channel groups inner
              if (last_grp) begin
                grp <= '0;
                if (last_bx) begin bx <= '0; by <= by + 7'd1; end
                else bx <= bx + 7'd1;
              end else grp <= grp + 8'd1;
            end else begin
              // output groups outer, blocks, input channels inner
              if (last_n) begin
                n <= '0;
                if (last_bx) begin
                  bx <= '0;
                  if (last_by) begin by <= '0; grp <= grp + 8'd1; end
                  else by <= by + 7'd1;
                end else bx <= bx + 7'd1;
              end else n <= n + 11'd1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
