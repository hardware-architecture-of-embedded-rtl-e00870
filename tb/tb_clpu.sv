// tb_clpu: runs the convolution layer processing unit on its own, filling
// its buffer banks directly (tag now, data one cycle later, as the memories
// deliver it). Phase 1, regular mode, 3x3: two output blocks of three input
// channels each (six steps), so sums run across steps and banks alternate.
// Phase 2, depthwise mode, 5x5 with dilation 1 and a 3x3 step with dilation
// 2 and stride 2: each core works on its own channel. Every result block is
// compared with sums computed here. The APLPU side holds res_ready low for a
// while, so the unit must stall; the test checks that it did, that no result
// was lost, and that the cores were busy exactly K*K cycles per step.
module tb_clpu;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode = MODE_REGULAR;
  logic [2:0] k = 3;
  logic [1:0] dil = 1, stride = 1;
  logic clear = 0, clear_bank = 0, fm_req = 0, w_req = 0, w_bank = 0, commit = 0, commit_bank = 0;
  fm_tag_t fm_tag = '0;
  logic [FM_DW-1:0] fm_rdata = '0;
  logic [5:0] w_kpos = 0;
  logic [W_DW-1:0] w_rdata = '0;
  step_t commit_meta = '0;
  logic [1:0] bank_full;
  logic res_valid, res_ready = 0;
  acc_t res [PE_NUM][MAC_PE];
  step_t res_meta;
  logic idle, mac_active, stall;

  clpu dut (.*);

  int checks = 0, failures = 0;
  int px [PE_NUM][IB][IB];
  int wv [KK_MAX][PE_NUM];
  longint acc_m [PE_NUM][MAC_PE];
  longint exp_q [$][PE_NUM][MAC_PE];
  step_t  meta_q [$];
  logic   ld_bank = 0;
  int n_mac = 0, n_stall = 0, n_res = 0;

  always @(posedge clk) if (rst_n) begin
    if (mac_active) n_mac++;
    if (stall) n_stall++;
  end

  // One step: fill a bank and update the model sums.
  task automatic load_step(input int nslots, input int kk, input bit first, input bit last,
                           input int tagn);
    step_t m;
    while (bank_full[ld_bank]) @(negedge clk);
    for (int s = 0; s < PE_NUM; s++)
      for (int r = 0; r < IB; r++)
        for (int c = 0; c < IB; c++) px[s][r][c] = (s < nslots) ? int'($urandom_range(0, 255)) - 128 : 0;
    for (int q = 0; q < KK_MAX; q++)
      for (int p = 0; p < PE_NUM; p++) wv[q][p] = int'($urandom_range(0, 255)) - 128;
    clear = 1; clear_bank = ld_bank;
    @(negedge clk);
    clear = 0;
    for (int s = 0; s < nslots; s++)
      for (int r = 0; r < IB; r++) begin
        fm_req = 1;
        fm_tag = '{bank: ld_bank, slot: 3'(s), row: 5'(r), col_base: 8'd0, mask: 32'h001f_ffff};
        @(negedge clk);
        fm_req = 0;
        for (int c = 0; c < IB; c++) fm_rdata[c*8 +: 8] = 8'(px[s][r][c]);
      end
    for (int q = 0; q < kk; q++) begin
      w_req = 1; w_bank = ld_bank; w_kpos = 6'(q);
      @(negedge clk);
      w_req = 0;
      for (int p = 0; p < PE_NUM; p++) w_rdata[p*8 +: 8] = 8'(wv[q][p]);
    end
    m = '0; m.first = first; m.last = last; m.n = 11'(tagn);
    commit = 1; commit_bank = ld_bank; commit_meta = m;
    @(negedge clk);
    commit = 0;
    ld_bank = ~ld_bank;
    // model
    for (int p = 0; p < PE_NUM; p++) begin
      int sl;
      sl = (mode == MODE_DEPTHWISE) ? p : 0;
      for (int oy = 0; oy < OB; oy++)
        for (int ox = 0; ox < OB; ox++) begin
          if (first) acc_m[p][oy*OB+ox] = 0;
          for (int ky = 0; ky < int'(k); ky++)
            for (int kx = 0; kx < int'(k); kx++)
              acc_m[p][oy*OB+ox] += longint'(px[sl][oy*int'(stride)+ky*int'(dil)][ox*int'(stride)+kx*int'(dil)])
                                    * wv[ky*int'(k)+kx][p];
        end
    end
    if (last) begin exp_q.push_back(acc_m); meta_q.push_back(m); end
  endtask

  // APLPU side: ready is withheld during the first part of the test.
  logic hold_off = 1;
  always @(negedge clk) res_ready = !hold_off && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    n_res++;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected result"); end
    else begin
      int bad;
      bad = 0;
      for (int p = 0; p < PE_NUM; p++)
        for (int i = 0; i < MAC_PE; i++) begin
          checks++;
          if (longint'(res[p][i]) != exp_q[0][p][i]) begin failures++; bad++; end
        end
      if (bad != 0) $display("FAIL: result %0d has %0d wrong sums", n_res, bad);
      checks++;
      if (res_meta.n != meta_q[0].n) begin failures++; $display("FAIL: result meta"); end
      void'(exp_q.pop_front());
      void'(meta_q.pop_front());
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Phase 1: regular 3x3, two blocks of three input channels
    mode = MODE_REGULAR; k = 3; dil = 1; stride = 1;
    for (int b = 0; b < 2; b++)
      for (int n = 0; n < 3; n++) begin
        load_step(1, 9, n == 0, n == 2, b * 10 + n);
        if (b == 1 && n == 0) hold_off = 1;
      end
    repeat (30) @(negedge clk);
    hold_off = 0;
    while (!idle) @(negedge clk);
    checks++;
    if (n_mac != 6 * 9) begin failures++; $display("FAIL: regular busy cycles %0d, want 54", n_mac); end
    // Phase 2: depthwise
    mode = MODE_DEPTHWISE; k = 5; dil = 1; stride = 1;
    hold_off = 1;
    load_step(PE_NUM, 25, 1, 1, 100);
    load_step(PE_NUM, 25, 1, 1, 101);
    load_step(PE_NUM, 25, 1, 1, 102);
    repeat (20) @(negedge clk);
    hold_off = 0;
    while (!idle) @(negedge clk);
    mode = MODE_DEPTHWISE; k = 3; dil = 2; stride = 2;
    load_step(5, 9, 1, 1, 103);
    repeat (10) @(negedge clk);
    while (!idle) @(negedge clk);
    checks++;
    if (n_mac != 54 + 75 + 9) begin failures++; $display("FAIL: busy cycles %0d, want 138", n_mac); end
    checks++;
    if (n_res != 6) begin failures++; $display("FAIL: %0d results, want 6", n_res); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL: no stall"); end
    $display("busy=%0d stall=%0d results=%0d", n_mac, n_stall, n_res);
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
