// tb_weight_memory: checks the weight memory against a model array, at the
// bottom and the top of its 2,048 KB, with the one-cycle read latency and
// simultaneous read and write.
module tb_weight_memory;
  import cnn_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [W_AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [W_DW-1:0] rd_data, wr_data = '0;
  weight_memory dut (.*);

  int checks = 0, failures = 0;
  logic [W_DW-1:0] model [64];

  function automatic logic [W_AW-1:0] a_of(input int i);
    return (i < 32) ? W_AW'(i) : W_AW'(W_WORDS - 64 + i);
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) begin
      model[i] = {$urandom, $urandom};
      @(negedge clk);
      wr_en = 1'b1; wr_addr = a_of(i); wr_data = model[i];
      // read the previous word while writing this one
      rd_en = (i > 0); rd_addr = a_of(i > 0 ? i - 1 : 0);
      @(negedge clk);
      wr_en = 1'b0; rd_en = 1'b0;
      if (i > 0) begin
        checks++;
        if (rd_data !== model[i-1]) begin failures++; $display("FAIL: word %0d", i - 1); end
      end
    end
    for (int i = 0; i < 64; i++) begin
      rd_en = 1'b1; rd_addr = a_of(63 - i);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== model[63-i]) begin failures++; $display("FAIL: reread %0d", 63 - i); end
    end
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
