// tb_control_unit: programs four layer descriptors (regular, depthwise, one
// the hardware cannot run, regular) and runs them against a model of the
// datapath that stays busy for a random time after each start and keeps the
// APLPU busy a little longer. Checks that each runnable layer is started once
// and in order with its own descriptor, that no layer starts before the
// previous one has drained, that the bad layer is skipped with error set,
// that mode_switch pulses at the two mode changes, and that done pulses once.
module tb_control_unit;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [LAYER_AW-1:0] cfg_addr = 0;
  layer_t cfg_data = '0;
  logic start = 0;
  logic [LAYER_AW:0] num_layers = 0;
  layer_t cfg;
  logic [LAYER_AW-1:0] layer_idx;
  logic agen_start, agen_busy = 0, clpu_idle = 1, aplpu_idle = 1;
  logic busy, done, error, mode_switch;

  control_unit dut (.*);

  int checks = 0, failures = 0;
  layer_t tbl [4];
  int started [$];
  int n_switch = 0, n_done = 0, drain_left = 0, busy_left = 0;

  always @(posedge clk) if (rst_n) begin
    if (mode_switch) n_switch++;
    if (done) n_done++;
    if (agen_start) begin
      started.push_back(int'(layer_idx));
      checks++;
      if (cfg != tbl[layer_idx]) begin failures++; $display("FAIL: wrong descriptor for layer %0d", layer_idx); end
      checks++;
      if (agen_busy || !aplpu_idle) begin failures++; $display("FAIL: started while busy"); end
      busy_left = $urandom_range(3, 30);
    end
    if (busy_left > 0) begin
      agen_busy <= 1; busy_left--;
      if (busy_left == 0) drain_left = $urandom_range(1, 20);
    end else agen_busy <= 0;
    if (drain_left > 0) begin aplpu_idle <= 0; drain_left--; end
    else aplpu_idle <= 1;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      tbl[i] = '0;
      tbl[i].k = 3; tbl[i].dil = 1; tbl[i].stride = 1; tbl[i].pad = 1;
      tbl[i].in_h = 20; tbl[i].in_w = 20; tbl[i].ic = 8; tbl[i].oc = 8;
      tbl[i].out_base = 17'(i * 100);
    end
    tbl[0].mode = MODE_REGULAR; tbl[0].oc = 16;
    tbl[1].mode = MODE_DEPTHWISE; tbl[1].k = 5;
    tbl[2].mode = MODE_DEPTHWISE; tbl[2].k = 7; tbl[2].stride = 2; tbl[2].dil = 2; // input block too large
    tbl[3].mode = MODE_REGULAR; tbl[3].k = 1; tbl[3].pad = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = LAYER_AW'(i); cfg_data = tbl[i];
    end
    @(negedge clk);
    cfg_we = 0;
    start = 1; num_layers = 4;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (started.size() != 3 || started[0] != 0 || started[1] != 1 || started[2] != 3) begin
      failures++; $display("FAIL: layers started: %p", started);
    end
    checks++; if (!error) begin failures++; $display("FAIL: error not set"); end
    checks++; if (n_switch != 2) begin failures++; $display("FAIL: %0d mode switches, want 2", n_switch); end
    checks++; if (n_done != 1) begin failures++; $display("FAIL: %0d done pulses", n_done); end
    // a second run of the first layer alone clears error
    start = 1; num_layers = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    checks++; if (error) begin failures++; $display("FAIL: error not cleared"); end
    checks++; if (started.size() != 4) begin failures++; $display("FAIL: second run"); end
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
