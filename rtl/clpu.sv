// clpu: convolution layer processing unit.
//
// PE_NUM convolution cores fed by a double-banked input buffer. A step is one
// bank's worth of data: in regular mode one input channel's block, which all
// cores share, with the weights of PE_NUM output channels; in depthwise mode
// the blocks of PE_NUM channels, one per core, with one kernel per channel.
// Once a bank is full the unit walks the kernel positions, one per cycle
// (K*K cycles per step), and the cores multiply and accumulate. In regular
// mode the sums run over all input channels of the layer (the step marked
// first clears the accumulators, the one marked last completes them); in
// depthwise mode every step is both first and last. The same cores and the
// same cycle count per step serve both modes, which is the paper's point:
// all 512 multipliers are busy in either mode.
//
// The finished sums of PE_NUM x MAC_PE outputs are copied into a result
// register and offered to the activation and pooling unit with a valid/ready
// handshake (res_valid/res_ready). The unit stalls the last kernel position
// of a step that would complete new sums while an earlier result is still
// waiting: stall pulses for each cycle lost this way. mac_active is high in
// each cycle whose kernel position is issued to the cores.
// Timing: a step's first kernel position issues the cycle after its bank is
// full (or right after the previous step); res_valid rises three cycles after
// the last kernel position is issued.
// Lint reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET): the synchronous use is only the assertion's disable iff,
// which is not logic, so the warning stands.
module clpu
  import cnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // layer information
  input  mode_e            mode,
  input  logic [2:0]       k,
  input  logic [1:0]       dil,
  input  logic [1:0]       stride,
  // buffer fill, from the address generator and the memories
  input  logic             clear,
  input  logic             clear_bank,
  input  logic             fm_req,
  input  fm_tag_t          fm_tag,
  input  logic [FM_DW-1:0] fm_rdata,
  input  logic             w_req,
  input  logic             w_bank,
  input  logic [5:0]       w_kpos,
  input  logic [W_DW-1:0]  w_rdata,
  input  logic             commit,
  input  logic             commit_bank,
  input  step_t            commit_meta,
  output logic [1:0]       bank_full,
  // results
  output logic             res_valid,
  input  logic             res_ready,
  output acc_t             res [PE_NUM][MAC_PE],
  output step_t            res_meta,
  // status
  output logic             idle,
  output logic             mac_active,
  output logic             stall
);
  step_t  bank_meta [2];
  pix_t   win [PE_NUM][MAC_PE];
  pix_t   wt  [PE_NUM];
  acc_t   acc [PE_NUM][MAC_PE];
  logic   [PE_NUM-1:0] core_done;

  logic        cb;          // bank being computed
  logic [5:0]  kp;
  logic [2:0]  ky, kx;
  logic        res_resv;    // a completed sum is on its way or waiting
  step_t       final_meta;

  step_t  m;
  logic   [5:0] kk;
  logic   last_kp, is_final, issue;

  always_comb begin
    m        = bank_meta[cb];
    kk       = 6'(k) * 6'(k);
    last_kp  = (kp == kk - 6'd1);
    is_final = m.last && last_kp;
    issue    = bank_full[cb] && !(is_final && res_resv);
    stall    = bank_full[cb] && is_final && res_resv;
    mac_active = issue;
  end

  clpu_buffer u_buf (
    .clk, .rst_n,
    .clear, .clear_bank, .fm_req, .fm_tag, .fm_rdata,
    .w_req, .w_bank, .w_kpos, .w_rdata,
    .commit, .commit_bank, .commit_meta,
    .bank_full, .bank_meta,
    .release_en(issue && last_kp), .release_bank(cb),
    .rd_bank(cb), .mode, .ky, .kx, .dil, .stride, .kpos(kp),
    .win, .wt
  );

  for (genvar p = 0; p < PE_NUM; p++) begin : g_core
    conv_core #(.N(MAC_PE)) u_core (
      .clk, .rst_n,
      .en(issue), .clear(m.first && kp == 6'd0), .final_in(is_final),
      .pix(win[p]), .weight(wt[p]),
      .acc(acc[p]), .done(core_done[p])
    );
  end

  // Kernel position sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cb <= 1'b0; kp <= '0; ky <= '0; kx <= '0;
    end else if (issue) begin
      if (last_kp) begin
        kp <= '0; ky <= '0; kx <= '0;
        cb <= ~cb;
      end else begin
        kp <= kp + 6'd1;
        if (kx == k - 3'd1) begin
          kx <= '0;
          ky <= ky + 3'd1;
        end else begin
          kx <= kx + 3'd1;
        end
      end
    end
  end

  // Result register and handshake
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_resv   <= 1'b0;
      res_valid  <= 1'b0;
      final_meta <= '0;
      res_meta   <= '0;
    end else begin
      if (issue && is_final) begin
        res_resv   <= 1'b1;
        final_meta <= m;
      end
      if (core_done[0]) begin
        res_valid <= 1'b1;
        res_meta  <= final_meta;
      end
      if (res_valid && res_ready) begin
        res_valid <= 1'b0;
        res_resv  <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (core_done[0]) res <= acc;
  end

  assign idle = !bank_full[0] && !bank_full[1] && !res_resv;

  // A result is never overwritten before it is taken.
  assert property (@(posedge clk) disable iff (!rst_n) core_done[0] |-> !res_valid);
endmodule
