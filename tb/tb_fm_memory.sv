// tb_fm_memory: checks the feature map memory against a model array.
// Random full and partial (byte-enabled) writes to a window of addresses at
// the bottom and the top of the 4,096 KB memory, then reads with a one-cycle
// latency check, including a read and a write to the same word in one cycle
// (the read returns the old contents).
module tb_fm_memory;
  import cnn_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rd_en = 1'b0, wr_en = 1'b0;
  logic [FM_AW-1:0] rd_addr = '0, wr_addr = '0;
  logic [FM_DW-1:0] rd_data, wr_data = '0;
  logic [FM_BYTES-1:0] wr_be = '0;
  fm_memory dut (.*);

  int checks = 0, failures = 0;
  logic [FM_DW-1:0] model [64];

  function automatic logic [FM_AW-1:0] a_of(input int i);
    return (i < 32) ? FM_AW'(i) : FM_AW'(FM_WORDS - 64 + i);
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) begin
      logic [FM_DW-1:0] d;
      for (int j = 0; j < FM_DW / 32; j++) d[j*32 +: 32] = $urandom;
      model[i] = d;
      @(negedge clk);
      wr_en = 1'b1; wr_addr = a_of(i); wr_data = d; wr_be = '1;
    end
    // partial writes
    for (int t = 0; t < 100; t++) begin
      int i;
      logic [FM_DW-1:0] d;
      logic [FM_BYTES-1:0] be;
      i = $urandom_range(0, 63);
      for (int j = 0; j < FM_DW / 32; j++) d[j*32 +: 32] = $urandom;
      be = $urandom;
      for (int b = 0; b < FM_BYTES; b++) if (be[b]) model[i][b*8 +: 8] = d[b*8 +: 8];
      @(negedge clk);
      wr_en = 1'b1; wr_addr = a_of(i); wr_data = d; wr_be = be;
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int i = 0; i < 64; i++) begin
      rd_en = 1'b1; rd_addr = a_of(i);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== model[i]) begin failures++; $display("FAIL: word %0d", i); end
    end
    // read-during-write returns old data
    rd_en = 1'b1; rd_addr = a_of(5); wr_en = 1'b1; wr_addr = a_of(5); wr_data = ~model[5]; wr_be = '1;
    @(negedge clk);
    rd_en = 1'b0; wr_en = 1'b0;
    checks++;
    if (rd_data !== model[5]) begin failures++; $display("FAIL: read during write"); end
    rd_en = 1'b1;
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_data !== ~model[5]) begin failures++; $display("FAIL: write after read"); end
    // rd_en low holds the output
    rd_addr = a_of(6);
    @(negedge clk);
    checks++;
    if (rd_data !== ~model[5]) begin failures++; $display("FAIL: output not held"); end
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
