// tb_clpu_buffer: fills both banks of the input buffer the way the memories
// do (a tag with each request, the data one cycle later), with word offsets
// that start left of the block, inside it and past its right edge, and with
// random byte masks. It then checks every core's window for many kernel
// positions, dilations, strides and both modes against a model of the
// buffer, checks the weights, the one-cycle commit delay of bank_full,
// release, and that clear zeroes a bank.
module tb_clpu_buffer;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear = 0, clear_bank = 0, fm_req = 0, w_req = 0, w_bank = 0, commit = 0, commit_bank = 0;
  fm_tag_t fm_tag = '0;
  logic [FM_DW-1:0] fm_rdata = '0;
  logic [5:0] w_kpos = '0;
  logic [W_DW-1:0] w_rdata = '0;
  step_t commit_meta = '0;
  logic [1:0] bank_full;
  step_t bank_meta [2];
  logic release_en = 0, release_bank = 0, rd_bank = 0;
  mode_e mode = MODE_REGULAR;
  logic [2:0] ky = 0, kx = 0;
  logic [1:0] dil = 1, stride = 1;
  logic [5:0] kpos = 0;
  pix_t win [PE_NUM][MAC_PE];
  pix_t wt [PE_NUM];

  clpu_buffer dut (.*);

  int checks = 0, failures = 0;
  int model [2][PE_NUM][IB][IB];
  logic [W_DW-1:0] wmodel [2][KK_MAX];

  task automatic fill_bank(input int b);
    logic [FM_DW-1:0] pend;
    logic have;
    have = 0;
    @(negedge clk);
    clear = 1; clear_bank = b[0];
    for (int s = 0; s < PE_NUM; s++)
      for (int r = 0; r < IB; r++)
        for (int c = 0; c < IB; c++) model[b][s][r][c] = 0;
    for (int s = 0; s < PE_NUM; s++)
      for (int r = 0; r < IB; r++)
        for (int part = 0; part < 2; part++) begin
          fm_tag_t t;
          logic [FM_DW-1:0] d;
          @(negedge clk);
          clear = 0;
          fm_rdata = have ? pend : '0;
          t.bank = b[0]; t.slot = 3'(s); t.row = 5'(r);
          t.col_base = (part == 0) ? 8'(-int'($urandom_range(0, 12))) : 8'($urandom_range(8, 24));
          t.mask = {$urandom};
          for (int j = 0; j < FM_DW / 32; j++) d[j*32 +: 32] = $urandom;
          for (int i = 0; i < FM_BYTES; i++) begin
            int c;
            c = int'(t.col_base) + i;
            if (t.mask[i] && c >= 0 && c < IB) model[b][s][r][c] = int'($signed(d[i*8 +: 8]));
          end
          fm_req = 1; fm_tag = t;
          pend = d; have = 1;
          // the weight stream runs alongside
          if ((s * IB + r) * 2 + part < KK_MAX) begin
            w_req = 1; w_bank = b[0]; w_kpos = 6'((s * IB + r) * 2 + part);
          end else w_req = 0;
        end
    @(negedge clk);
    fm_req = 0; w_req = 0;
    fm_rdata = pend;
  endtask

  // weights: the data lags the request by one cycle
  always @(posedge clk) begin
    if (w_req) begin
      logic [W_DW-1:0] d;
      d = {$urandom, $urandom};
      wmodel[w_bank][w_kpos] = d;
      #1 w_rdata = d;
    end
  end

  task automatic check_windows(input int b, input int reps);
    for (int t = 0; t < reps; t++) begin
      int s, d, k;
      @(negedge clk);
      rd_bank = b[0];
      mode = ($urandom_range(0, 1) != 0) ? MODE_DEPTHWISE : MODE_REGULAR;
      s = $urandom_range(1, 2); d = $urandom_range(1, 3);
      stride = 2'(s); dil = 2'(d);
      // keep (OB-1)*s + ky*d within the block
      k = $urandom_range(0, 6);
      while ((OB - 1) * s + k * d >= IB) k--;
      ky = 3'(k);
      k = $urandom_range(0, 6);
      while ((OB - 1) * s + k * d >= IB) k--;
      kx = 3'(k);
      kpos = 6'($urandom_range(0, KK_MAX - 1));
      #1;
      for (int p = 0; p < PE_NUM; p++) begin
        int sl;
        sl = (mode == MODE_DEPTHWISE) ? p : 0;
        for (int oy = 0; oy < OB; oy++)
          for (int ox = 0; ox < OB; ox++) begin
            checks++;
            if (int'(win[p][oy*OB+ox]) != model[b][sl][oy*s+int'(ky)*d][ox*s+int'(kx)*d]) begin
              failures++;
              if (failures < 6) $display("FAIL: bank %0d core %0d pixel (%0d,%0d)", b, p, oy, ox);
            end
          end
        checks++;
        if (wt[p] !== pix_t'(wmodel[b][kpos][p*8 +: 8])) begin
          failures++; $display("FAIL: weight core %0d kpos %0d", p, kpos);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill_bank(0);
    @(negedge clk);
    fm_rdata = '0;
    commit = 1; commit_bank = 0; commit_meta = '{by: 7'd3, bx: 7'd5, grp: 8'd2, n: 11'd7, first: 1'b1, last: 1'b0};
    @(negedge clk);
    commit = 0;
    checks++; if (bank_full != 2'b00) begin failures++; $display("FAIL: full too early"); end
    @(negedge clk);
    checks++; if (bank_full != 2'b01) begin failures++; $display("FAIL: bank 0 not full"); end
    checks++; if (bank_meta[0].bx != 7'd5 || bank_meta[0].n != 11'd7) begin failures++; $display("FAIL: meta"); end
    fill_bank(1);
    @(negedge clk);
    commit = 1; commit_bank = 1; commit_meta = '0;
    @(negedge clk);
    commit = 0;
    @(negedge clk);
    checks++; if (bank_full != 2'b11) begin failures++; $display("FAIL: bank 1 not full"); end
    check_windows(0, 60);
    check_windows(1, 60);
    // release bank 0, clear it, and check zeros
    @(negedge clk);
    release_en = 1; release_bank = 0;
    @(negedge clk);
    release_en = 0;
    checks++; if (bank_full != 2'b10) begin failures++; $display("FAIL: release"); end
    clear = 1; clear_bank = 0;
    @(negedge clk);
    clear = 0;
    for (int s = 0; s < PE_NUM; s++)
      for (int r = 0; r < IB; r++)
        for (int c = 0; c < IB; c++) model[0][s][r][c] = 0;
    check_windows(0, 10);
    check_windows(1, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
