// tb_aplpu: offers blocks of random convolution sums to the activation and
// pooling unit and checks what it writes into a model of the feature map
// memory: ReLU, rounding shift, saturation to 8 bits, 2x2 max pooling, the
// output addresses and byte enables, and that nothing outside the output map
// (edge blocks, channels beyond OC) is written. Also checks the handshake and
// the unit's cycle count per block (1 + PE_NUM*8, or 1 + PE_NUM*4 with
// pooling) and that sat reports saturation.
module tb_aplpu;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_t cfg;
  logic res_valid = 0, res_ready;
  acc_t res [PE_NUM][MAC_PE];
  step_t res_meta = '0;
  logic wr_en;
  logic [FM_AW-1:0] wr_addr;
  logic [FM_DW-1:0] wr_data;
  logic [FM_BYTES-1:0] wr_be;
  logic idle, sat;

  aplpu dut (.*);

  int checks = 0, failures = 0, n_sat = 0;
  int mem [int];      // byte address -> value
  always @(posedge clk) if (rst_n) begin
    if (sat) n_sat++;
    if (wr_en)
      for (int b = 0; b < FM_BYTES; b++)
        if (wr_be[b]) mem[int'(wr_addr) * FM_BYTES + b] = int'($signed(wr_data[b*8 +: 8]));
  end

  function automatic int act(input longint v, input layer_t c);
    if (c.relu && v < 0) v = 0;
    if (c.shift != 0) v = (v + (longint'(1) << (c.shift - 1))) >>> c.shift;
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  task automatic run_block(input int by, input int bx, input int grp, input int range_lo,
                           input int range_hi);
    int oh, ow, rows, cols, t0, t1, q[PE_NUM][MAC_PE];
    for (int p = 0; p < PE_NUM; p++)
      for (int i = 0; i < MAC_PE; i++) begin
        res[p][i] = acc_t'($urandom_range(0, range_hi - range_lo) + range_lo);
        q[p][i] = act(longint'(res[p][i]), cfg);
      end
    mem.delete();
    res_meta = '0; res_meta.by = 7'(by); res_meta.bx = 7'(bx); res_meta.grp = 8'(grp);
    while (!res_ready) @(negedge clk);
    res_valid = 1;
    t0 = $time / 10;
    @(negedge clk);
    res_valid = 0;
    for (int p = 0; p < PE_NUM; p++) res[p] = '{default: 0};
    @(negedge clk);
    while (!res_ready) @(negedge clk);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 != 2 + PE_NUM * (cfg.pool ? 4 : 8)) begin
      failures++; $display("FAIL: block took %0d cycles", t1 - t0);
    end
    oh = out_dim(cfg.in_h, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    ow = out_dim(cfg.in_w, cfg.k, cfg.dil, cfg.stride, cfg.pad);
    rows = OB; cols = OB;
    if (cfg.pool) begin oh /= 2; ow /= 2; rows = OB / 2; cols = OB / 2; end
    begin
      int expected;
      expected = 0;
      for (int p = 0; p < PE_NUM; p++)
        for (int r = 0; r < rows; r++)
          for (int c = 0; c < cols; c++) begin
            int oc, y, x, a, v;
            oc = grp * PE_NUM + p; y = by * rows + r; x = bx * cols + c;
            if (oc >= int'(cfg.oc) || y >= oh || x >= ow) continue;
            if (cfg.pool) begin
              v = q[p][2*r*OB + 2*c];
              if (q[p][2*r*OB + 2*c + 1] > v) v = q[p][2*r*OB + 2*c + 1];
              if (q[p][(2*r+1)*OB + 2*c] > v) v = q[p][(2*r+1)*OB + 2*c];
              if (q[p][(2*r+1)*OB + 2*c + 1] > v) v = q[p][(2*r+1)*OB + 2*c + 1];
            end else v = q[p][r*OB + c];
            a = (int'(cfg.out_base) + oc * int'(cfg.out_ch_pitch) + y * int'(cfg.out_row_pitch)) * FM_BYTES + x;
            expected++;
            checks++;
            if (!mem.exists(a) || mem[a] != v) begin
              failures++;
              if (failures < 8) $display("FAIL: ch %0d (%0d,%0d) got %0d want %0d", oc, y, x,
                                         mem.exists(a) ? mem[a] : 999, v);
            end
          end
      checks++;
      if (mem.num() != expected) begin
        failures++; $display("FAIL: %0d bytes written, %0d expected", mem.num(), expected);
      end
    end
  endtask

  initial begin
    cfg = '0;
    cfg.k = 1; cfg.dil = 1; cfg.stride = 1; cfg.pad = 0;
    cfg.in_h = 13; cfg.in_w = 30; cfg.ic = 10; cfg.oc = 10;
    cfg.out_base = 17'd1000; cfg.out_row_pitch = 1; cfg.out_ch_pitch = 13;
    cfg.relu = 1; cfg.shift = 4; cfg.pool = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_block(0, 0, 0, -2000, 2000);
    run_block(1, 3, 1, -2000, 2000);     // bottom-right edge, 2 of 8 channels
    run_block(0, 2, 0, -200000, 200000); // saturating
    cfg.relu = 0; cfg.shift = 0;
    run_block(1, 1, 0, -200, 200);
    cfg.pool = 1; cfg.shift = 2;
    run_block(0, 0, 0, -1000, 1000);
    run_block(1, 3, 1, -1000, 1000);
    cfg.relu = 1; cfg.shift = 7;
    run_block(0, 1, 0, -50000, 50000);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: sat never reported"); end
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
