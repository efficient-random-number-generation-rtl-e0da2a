// tb_bit_packer -- random bursts of valid bits on a 15-input packer are
// mirrored into a queue in index order; every word leaving the packer must
// equal the next 16 queued bits (first bit in bit 0).  word_ready is
// toggled randomly; in a last phase ready is held low until the
// accumulator overflows, which must raise the sticky overflow flag.
module tb_bit_packer;
  timeunit 1ns; timeprecision 1ps;

  localparam int N = 15, W = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid = '0, in_bit = '0;
  logic [W-1:0] word;
  logic word_valid, word_ready = 0, overflow;
  int checks = 0, failures = 0, words = 0;
  bit q[$];

  bit_packer #(.N_IN(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word taken at an edge where valid and ready are both high
  always @(posedge clk) if (rst_n && word_valid && word_ready) begin
    logic [W-1:0] exp;
    for (int k = 0; k < W; k++) exp[k] = q.pop_front();
    checks++; words++;
    if (exp != word) begin
      failures++;
      if (failures < 5) $display("FAIL word %h exp %h", word, exp);
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      in_valid = '0;
      if ($urandom_range(3) == 0) in_valid = N'($urandom) & N'($urandom);
      in_bit   = N'($urandom);
      word_ready = ($urandom_range(3) != 0);
      for (int i = 0; i < N; i++) if (in_valid[i]) q.push_back(in_bit[i]);
      @(posedge clk); #1;
    end
    in_valid = '0;
    word_ready = 1;
    repeat (20) @(posedge clk);
    #1;
    checks++;
    if (overflow || words < 100) begin failures++; $display("FAIL overflow early or few words %0d", words); end
    // overflow phase
    word_ready = 0;
    for (int c = 0; c < 10; c++) begin
      in_valid = '1; in_bit = N'($urandom);
      @(posedge clk); #1;
    end
    in_valid = '0;
    checks++;
    if (!overflow) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
