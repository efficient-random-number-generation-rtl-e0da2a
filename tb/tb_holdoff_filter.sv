// tb_holdoff_filter -- random sparse 1s with idle cycles go through the
// hold-off filter (HOLDOFF = 18, the single-SPAD setting).  A reference
// model removes the HOLDOFF valid samples after every 1, restarting on 1s
// inside the window, and the surviving stream is compared sample by sample,
// one cycle after input.  Also checks drop_one and that surviving 1s are
// at least HOLDOFF + 1 valid input samples apart.
module tb_holdoff_filter;
  timeunit 1ns; timeprecision 1ps;

  localparam int HOLD = 18;
  logic clk = 0, rst_n = 0, in_valid = 0, in_bit = 0;
  logic out_valid, out_bit, drop_one;
  int checks = 0, failures = 0;
  int remain = 0;
  bit exp_v, exp_b, exp_d;
  int last_one = -1000, nsurv = 0, min_gap = 1 << 30, drops = 0;

  holdoff_filter #(.HOLDOFF(HOLD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 40000; c++) begin
      in_valid = ($urandom_range(4) != 0);
      in_bit   = in_valid && ($urandom_range(30) == 0);
      // reference
      exp_v = in_valid && remain == 0;
      exp_b = exp_v && in_bit;
      exp_d = in_valid && in_bit && remain != 0;
      if (in_valid) begin
        if (in_bit) remain = HOLD;
        else if (remain > 0) remain--;
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid != exp_v || out_bit != exp_b || drop_one != exp_d) begin
        failures++;
        if (failures < 5) $display("FAIL c=%0d v %0d/%0d b %0d/%0d", c, out_valid, exp_v, out_bit, exp_b);
      end
      // nsurv counts valid input samples; gap between surviving 1s
      if (out_valid && out_bit) begin
        if (nsurv - last_one < min_gap) min_gap = nsurv - last_one;
        last_one = nsurv;
      end
      if (in_valid) nsurv++;
      drops += int'(drop_one);
    end
    checks++;
    if (min_gap < HOLD + 1 || drops == 0) begin
      failures++;
      $display("FAIL min gap %0d drops %0d", min_gap, drops);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
