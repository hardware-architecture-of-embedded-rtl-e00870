// tb_conv_core: drives one convolution core with random pixels and weights
// and compares its 64 accumulators with sums computed here. Sums of several
// lengths (1, 9, 25, 49 products, and 3x9 products spread over several
// "input channels") are run back to back, with idle cycles in between for
// some. Checks that done comes exactly two cycles after the final product and
// that a new sum started right after the final one does not disturb it.
module tb_conv_core;
  import cnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en = 1'b0, clear = 1'b0, final_in = 1'b0;
  pix_t pix [MAC_PE];
  pix_t weight;
  acc_t acc [MAC_PE];
  logic done;
  conv_core dut (.*);

  int checks = 0, failures = 0;
  longint model [MAC_PE];
  int last_final_cycle = -100, cycle = 0, done_seen = 0;
  always @(posedge clk) cycle++;

  // done must follow the final product by two cycles; compare then.
  longint expect_q [$][MAC_PE];
  int     expect_t [$];
  always @(negedge clk) if (rst_n) begin
    if (done) begin
      done_seen++;
      checks++;
      if (expect_t.size() == 0 || cycle - expect_t[0] != 2) begin
        failures++; $display("FAIL: done at wrong cycle");
      end
      if (expect_q.size() > 0) begin
        for (int i = 0; i < MAC_PE; i++) begin
          checks++;
          if (longint'(acc[i]) != expect_q[0][i]) begin
            failures++;
            if (failures < 5) $display("FAIL: acc[%0d]=%0d want %0d", i, acc[i], expect_q[0][i]);
          end
        end
        void'(expect_q.pop_front());
        void'(expect_t.pop_front());
      end
    end
  end

  task automatic run_sum(input int len, input int gap);
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      en = 1'b1; clear = (t == 0); final_in = (t == len - 1);
      weight = pix_t'($urandom_range(0, 255));
      for (int i = 0; i < MAC_PE; i++) begin
        pix[i] = pix_t'($urandom_range(0, 255));
        if (t == 0) model[i] = 0;
        model[i] += longint'(pix[i]) * longint'(weight);
      end
      if (t == len - 1) begin
        expect_q.push_back(model);
        expect_t.push_back(cycle);
      end
    end
    repeat (gap) begin
      @(negedge clk);
      en = 1'b0; clear = 1'b0; final_in = 1'b0;
    end
  endtask

  initial begin
    weight = '0;
    for (int i = 0; i < MAC_PE; i++) pix[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_sum(9, 0);
    run_sum(1, 0);
    run_sum(25, 3);
    run_sum(49, 0);
    run_sum(27, 5);
    run_sum(1, 1);
    run_sum(9, 4);
    @(negedge clk);
    en = 1'b0; final_in = 1'b0; clear = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (done_seen != 7) begin failures++; $display("FAIL: %0d results, want 7", done_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
