// tb_address_generator: runs the address generator on a regular layer (3x3,
// pad 1, 13x13, 3 -> 10 channels) and a depthwise layer (3x3, dilation 2,
// stride 2, pad 2, 40x17, 10 channels, so block rows cross word boundaries),
// with a model of the buffer banks that frees a bank after a random delay.
// For every step it compares, in order, the feature map requests (address
// and tag), the weight requests and the committed step description with
// lists built here from the loop nest and the memory layout.
module tb_address_generator;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0;
  layer_t cfg = '0;
  logic busy, done;
  logic fm_rd_en;
  logic [FM_AW-1:0] fm_rd_addr;
  fm_tag_t fm_tag;
  logic w_rd_en;
  logic [W_AW-1:0] w_rd_addr;
  logic w_bank;
  logic [5:0] w_kpos;
  logic [1:0] bank_full = 0;
  logic clear, clear_bank, commit, commit_bank;
  step_t commit_meta;

  address_generator dut (.*);

  int checks = 0, failures = 0;
  // observed in the current step
  longint fm_obs [$];
  longint w_obs [$];
  int n_steps = 0, n_clear = 0;

  typedef struct { longint fm [$]; longint w [$]; step_t m; } step_exp_t;
  step_exp_t exp_q [$];

  function automatic longint fm_key(input int addr, input fm_tag_t t);
    return (longint'(addr) << 48) ^ longint'(t);
  endfunction

  // Expected requests of one step
  task automatic expect_step(input int by, input int bx, input int grp, input int n,
                             input bit first, input bit last, input bit bank);
    step_exp_t e;
    int s, d, p, k, ibu, x0, y0, nsl;
    s = int'(cfg.stride); d = int'(cfg.dil); p = int'(cfg.pad); k = int'(cfg.k);
    ibu = (OB - 1) * s + (k - 1) * d + 1;
    x0 = bx * OB * s - p; y0 = by * OB * s - p;
    nsl = (cfg.mode == MODE_DEPTHWISE) ? ((int'(cfg.ic) - grp * PE_NUM < PE_NUM) ? int'(cfg.ic) - grp * PE_NUM : PE_NUM) : 1;
    for (int sl = 0; sl < nsl; sl++) begin
      int ch;
      ch = (cfg.mode == MODE_DEPTHWISE) ? grp * PE_NUM + sl : n;
      for (int r = 0; r < ibu; r++) begin
        int iy, lo, hi;
        iy = y0 + r;
        if (iy < 0 || iy >= int'(cfg.in_h)) continue;
        lo = (x0 < 0) ? 0 : x0;
        hi = x0 + ibu - 1;
        if (hi > int'(cfg.in_w) - 1) hi = int'(cfg.in_w) - 1;
        for (int w = lo / FM_BYTES; w <= hi / FM_BYTES; w++) begin
          fm_tag_t t;
          t.bank = bank; t.slot = 3'(sl); t.row = 5'(r); t.col_base = 8'(w * FM_BYTES - x0);
          for (int i = 0; i < FM_BYTES; i++) t.mask[i] = (w * FM_BYTES + i < int'(cfg.in_w));
          e.fm.push_back(fm_key(int'(cfg.in_base) + ch * int'(cfg.in_ch_pitch) +
                                iy * int'(cfg.in_row_pitch) + w, t));
        end
      end
    end
    for (int q = 0; q < k * k; q++)
      e.w.push_back(longint'(int'(cfg.w_base) +
                    ((cfg.mode == MODE_DEPTHWISE) ? grp * k * k : (grp * int'(cfg.ic) + n) * k * k) + q));
    e.m = '0; e.m.by = 7'(by); e.m.bx = 7'(bx); e.m.grp = 8'(grp); e.m.n = 11'(n);
    e.m.first = first; e.m.last = last;
    exp_q.push_back(e);
  endtask

  // Buffer bank model
  int free_at [2];
  always @(posedge clk) if (rst_n) begin
    if (fm_rd_en) fm_obs.push_back(fm_key(int'(fm_rd_addr), fm_tag));
    if (w_rd_en) w_obs.push_back(longint'(w_rd_addr));
    if (clear) n_clear++;
    for (int b = 0; b < 2; b++)
      if (bank_full[b] && $time / 10 >= free_at[b]) bank_full[b] <= 1'b0;
    if (commit) begin
      checks++;
      if (bank_full[commit_bank]) begin failures++; $display("FAIL: commit into a full bank"); end
      bank_full[commit_bank] <= 1'b1;
      free_at[commit_bank] = $time / 10 + $urandom_range(0, 40);
      if (exp_q.size() == 0) begin failures++; $display("FAIL: extra step"); end
      else begin
        checks++;
        if (fm_obs != exp_q[0].fm) begin
          failures++;
          $display("FAIL: step %0d feature map requests (%0d, want %0d)", n_steps, fm_obs.size(), exp_q[0].fm.size());
        end
        checks++;
        if (w_obs != exp_q[0].w) begin failures++; $display("FAIL: step %0d weight requests", n_steps); end
        checks++;
        if (commit_meta != exp_q[0].m) begin failures++; $display("FAIL: step %0d description", n_steps); end
        void'(exp_q.pop_front());
      end
      fm_obs.delete();
      w_obs.delete();
      n_steps++;
    end
  end

  task automatic run_layer();
    int oh, ow, nby, nbx, ng, steps0;
    bit bank;
    oh = out_dim(cfg.in_h, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    ow = out_dim(cfg.in_w, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    nby = (oh + OB - 1) / OB; nbx = (ow + OB - 1) / OB;
    ng = (int'(cfg.oc) + PE_NUM - 1) / PE_NUM;
    bank = dut.ld_bank;
    steps0 = n_steps;
    if (cfg.mode == MODE_REGULAR) begin
      for (int g = 0; g < ng; g++)
        for (int by = 0; by < nby; by++)
          for (int bx = 0; bx < nbx; bx++)
            for (int n = 0; n < int'(cfg.ic); n++) begin
              expect_step(by, bx, g, n, n == 0, n == int'(cfg.ic) - 1, bank);
              bank = ~bank;
            end
    end else begin
      for (int by = 0; by < nby; by++)
        for (int bx = 0; bx < nbx; bx++)
          for (int g = 0; g < ng; g++) begin
            expect_step(by, bx, g, 0, 1, 1, bank);
            bank = ~bank;
          end
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: still busy after done"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d steps missing", exp_q.size()); end
    $display("layer: %0d steps", n_steps - steps0);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    cfg = '0;
    cfg.mode = MODE_REGULAR; cfg.k = 3; cfg.dil = 1; cfg.stride = 1; cfg.pad = 1;
    cfg.in_h = 13; cfg.in_w = 13; cfg.ic = 3; cfg.oc = 10;
    cfg.in_base = 17'd500; cfg.in_row_pitch = 1; cfg.in_ch_pitch = 13; cfg.w_base = 18'd77;
    run_layer();
    cfg = '0;
    cfg.mode = MODE_DEPTHWISE; cfg.k = 3; cfg.dil = 2; cfg.stride = 2; cfg.pad = 2;
    cfg.in_h = 17; cfg.in_w = 40; cfg.ic = 10; cfg.oc = 10;
    cfg.in_base = 17'd9000; cfg.in_row_pitch = 2; cfg.in_ch_pitch = 34; cfg.w_base = 18'd1234;
    run_layer();
    checks++;
    if (n_clear != n_steps) begin failures++; $display("FAIL: %0d clears for %0d steps", n_clear, n_steps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
