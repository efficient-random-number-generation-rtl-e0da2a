// tb_tdc_channel -- thermometer codes are driven straight onto the taps.
// For each hit the testbench chooses the number of high taps (1..140) and
// the clock period; the channel must report fine = 140 - ones, coarse =
// the period index counted from frame_start and tag = coarse * 140 + fine,
// on the second edge after the sample.  A level that stays high must not
// be reported twice.  Finally frame_start is withheld until the coarse
// count passes the 2^28-bin range, where hits must raise out_of_range.
module tb_tdc_channel;
  timeunit 1ns; timeprecision 1ps;
  import qrng_pkg::*;

  logic clk = 0, rst_n = 0, frame_start = 0;
  logic [N_TAPS-1:0] taps = '0;
  logic hit_valid, out_of_range;
  tdc_hit_t hit;
  logic [TAG_W-1:0] tag;
  int checks = 0, failures = 0;
  int cyc = 0;

  tdc_channel dut (.*);
  always #1.25 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (2_100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hits_seen = 0;
  always @(posedge clk) if (hit_valid) hits_seen++;

  initial begin
    int fs_cyc;
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    frame_start = 1;
    @(posedge clk); #0.1;
    frame_start = 0;
    fs_cyc = cyc;            // coarse counter is 0 after this edge
    for (int n = 0; n < 300; n++) begin
      int ones, period, fine, start;
      repeat ($urandom_range(2, 20)) begin @(posedge clk); #0.1; end
      ones = $urandom_range(1, N_TAPS);
      taps = N_TAPS'((141'(1) << ones) - 1);
      @(posedge clk); #0.1;       // sampled here
      period = cyc - fs_cyc;      // counter value after the sampling edge
      start = hits_seen;
      taps = '1;                  // level stays high: no second hit
      @(posedge clk); #0.1;
      @(posedge clk); #0.1;
      fine = N_TAPS - ones;
      check(hit_valid, "hit reported on second edge");
      check(hit.fine == FINE_W'(fine) && hit.coarse == COARSE_W'(period),
            $sformatf("fine %0d/%0d coarse %0d/%0d", hit.fine, fine, hit.coarse, period));
      check(tag == TAG_W'(period * N_TAPS + fine), "tag = coarse*140 + fine");
      repeat (3) begin @(posedge clk); #0.1; end
      check(hits_seen == start + 1, "single hit per pulse");
      taps = '0;
    end
    // run past the 2^28-bin range without a new frame
    while (cyc - fs_cyc < COARSE_MAX + 5) @(posedge clk);
    #0.1;
    taps = '1;
    @(posedge clk); #0.1;
    taps = '0;
    @(posedge clk); #0.1;
    @(posedge clk); #0.1;
    check(out_of_range && !hit_valid, "out of range beyond 2^28 bins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
