// clpu_buffer: input block and filter weight buffer in front of the
// convolution cores.
//
// The paper names this buffer as the cost of its depthwise mode: to keep all
// PE_NUM cores busy it must hold one input block for each of PE_NUM channels
// (regular mode needs only one block, shared by all cores). Here it has two
// banks, so that the next step's blocks and weights are transferred while the
// cores work on the current step, as in the paper's time chart. Each bank
// holds PE_NUM slots of IB x IB pixels and KMAX*KMAX weight words.
//
// Write side (driven by the address generator, through the memories):
//   clear      zeroes every slot of a bank before it is filled, which also
//              supplies the zero padding around the feature map;
//   fm_req     a feature map read was issued this cycle; its tag says which
//              bank, slot, row and columns the word returned next cycle
//              (fm_rdata) belongs to;
//   w_req      a weight read was issued; w_rdata next cycle is the word of
//              kernel position w_kpos;
//   commit     the bank's transfer is complete; it becomes full one cycle
//              later, after the last returned word has been written.
// Read side (the convolution layer processing unit): bank rd_bank, kernel
// position (ky, kx) gives each core its MAC_PE pixels and its weight,
// combinationally; release empties a bank.
// The double banking, the slot layout and the clear-for-padding are this
// design's choices; the paper gives only the buffer's purpose.
// Lint reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET): the synchronous use is only the assertion's disable iff,
// which is not logic, so the warning stands.
module clpu_buffer
  import cnn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  // fill
  input  logic          clear,
  input  logic          clear_bank,
  input  logic          fm_req,
  input  fm_tag_t       fm_tag,
  input  logic [FM_DW-1:0] fm_rdata,
  input  logic          w_req,
  input  logic          w_bank,
  input  logic [5:0]    w_kpos,
  input  logic [W_DW-1:0] w_rdata,
  input  logic          commit,
  input  logic          commit_bank,
  input  step_t         commit_meta,
  // state
  output logic [1:0]    bank_full,
  output step_t         bank_meta [2],
  // read
  input  logic          release_en,
  input  logic          release_bank,
  input  logic          rd_bank,
  input  mode_e         mode,
  input  logic [2:0]    ky,
  input  logic [2:0]    kx,
  input  logic [1:0]    dil,
  input  logic [1:0]    stride,
  input  logic [5:0]    kpos,
  output pix_t          win [PE_NUM][MAC_PE],
  output pix_t          wt  [PE_NUM]
);
  pix_t              fm [2][PE_NUM][IB][IB];
  logic [W_DW-1:0]   wb [2][KK_MAX];

  logic              fm_q, w_q, commit_q;
  fm_tag_t           fm_tag_q;
  logic              w_bank_q, commit_bank_q;
  logic [5:0]        w_kpos_q;
  step_t             commit_meta_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fm_q <= 1'b0; w_q <= 1'b0; commit_q <= 1'b0;
    end else begin
      fm_q <= fm_req; w_q <= w_req; commit_q <= commit;
    end
  end

  always_ff @(posedge clk) begin
    fm_tag_q      <= fm_tag;
    w_bank_q      <= w_bank;
    w_kpos_q      <= w_kpos;
    commit_bank_q <= commit_bank;
    commit_meta_q <= commit_meta;
  end

  // Pixel storage
  always_ff @(posedge clk) begin
    if (clear) begin
      for (int s = 0; s < PE_NUM; s++)
        for (int r = 0; r < IB; r++)
          for (int c = 0; c < IB; c++)
            fm[clear_bank][s][r][c] <= '0;
    end
    if (fm_q) begin
      for (int i = 0; i < FM_BYTES; i++) begin
        int col;
        col = int'(fm_tag_q.col_base) + i;
        if (fm_tag_q.mask[i] && col >= 0 && col < IB && int'(fm_tag_q.row) < IB)
          fm[fm_tag_q.bank][fm_tag_q.slot][fm_tag_q.row][col] <= fm_rdata[i*8 +: 8];
      end
    end
  end

  // Weight storage
  always_ff @(posedge clk) begin
    if (w_q && int'(w_kpos_q) < KK_MAX) wb[w_bank_q][w_kpos_q] <= w_rdata;
  end

  // Bank state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
      bank_meta[0] <= '0;
      bank_meta[1] <= '0;
    end else begin
      if (release_en) bank_full[release_bank] <= 1'b0;
      if (commit_q) begin
        bank_full[commit_bank_q] <= 1'b1;
        bank_meta[commit_bank_q] <= commit_meta_q;
      end
    end
  end

  // Windows for the cores
  always_comb begin
    for (int p = 0; p < PE_NUM; p++) begin
      int slot;
      slot = (mode == MODE_DEPTHWISE) ? p : 0;
      for (int oy = 0; oy < OB; oy++)
        for (int ox = 0; ox < OB; ox++) begin
          int r, c;
          r = oy * int'(stride) + int'(ky) * int'(dil);
          c = ox * int'(stride) + int'(kx) * int'(dil);
          if (r < IB && c < IB) win[p][oy*OB+ox] = fm[rd_bank][slot][r][c];
          else                  win[p][oy*OB+ox] = '0;
        end
      wt[p] = (int'(kpos) < KK_MAX) ? pix_t'(wb[rd_bank][kpos][p*8 +: 8]) : pix_t'(0);
    end
  end

  // A bank is filled only while empty.
  assert property (@(posedge clk) disable iff (!rst_n) commit_q |-> !bank_full[commit_bank_q]);
endmodule
