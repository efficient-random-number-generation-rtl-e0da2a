// tb_randy_qrng -- the single-SPAD generator: one detector sampled at
// 100 MHz, the 18-sample (180 ns) hold-off and a Peres tree, built from the
// same blocks as one coarse channel of the array.
//
// The detector is modelled at about 200 kcounts/s: exponential waiting
// times between detections, a 30 ns dead time, 10 ns pulses and a 20%
// chance of an afterpulse 40-170 ns after a detection.  Two million clock
// periods (20 ms) are run.  The sampled string, taken from the sampler
// output, is passed through a reference hold-off and a reference block
// Peres; the number of words delivered must equal floor(bits / 32).  (The
// bit-exact comparison of the Peres tree is done in tb_peres_extractor.)
// The testbench prints
// the share of 1s, the share of samples removed and the extracted bits
// per sample against the binary entropy of the surviving string.
module tb_randy_qrng;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;

  localparam int HOLD = 18, PD = 6, PN = (1 << PD) - 1, W = 32;
  localparam int CYCLES = 2_000_000;

  logic clk = 0, rst_n = 0, spad = 0;
  logic x_valid, x_bit, h_valid, h_bit, h_drop, ovf;
  logic [PN-1:0] p_valid, p_bit;
  logic [W-1:0] word;
  logic word_valid;
  int checks = 0, failures = 0;

  edge_sampler #(.SYNC_STAGES(2)) u_samp (.clk, .rst_n, .spad_in(spad), .x_valid, .x_bit);
  holdoff_filter #(.HOLDOFF(HOLD)) u_hold (.clk, .rst_n, .in_valid(x_valid), .in_bit(x_bit),
                                          .out_valid(h_valid), .out_bit(h_bit), .drop_one(h_drop));
  peres_extractor #(.DEPTH(PD)) u_peres (.clk, .rst_n, .in_valid(h_valid), .in_bit(h_bit),
                                         .out_valid(p_valid), .out_bit(p_bit));
  bit_packer #(.N_IN(PN), .W(W)) u_pack (.clk, .rst_n, .in_valid(p_valid), .in_bit(p_bit),
                                         .word, .word_valid, .word_ready(1'b1), .overflow(ovf));

  always #5 clk = ~clk;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (CYCLES + 100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // detector model
  initial begin
    #100ns;
    forever begin
      real u;
      int wait_ns;
      u = real'($urandom_range(1, 1000000)) / 1.0e6;
      wait_ns = 30 + int'(-$ln(u) * 5000.0);     // ~200 kcounts/s incl. dead time
      #(wait_ns * 1ns);
      spad = 1; #10ns; spad = 0;
      if ($urandom_range(4) == 0) begin
        #($urandom_range(30, 160) * 1ns);
        spad = 1; #10ns; spad = 0;
      end
    end
  end

  bitq_t xs;
  int nwords = 0;
  always @(negedge clk) if (rst_n) begin
    if (x_valid) xs.push_back(x_bit);
    if (word_valid) nwords++;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (CYCLES) @(posedge clk);
    #1;
    begin
      bitq_t filt, out;
      int remain, ones_x, ones_f, bits;
      real p1, h, eff;
      remain = 0; ones_x = 0; ones_f = 0;
      foreach (xs[k]) begin
        ones_x += int'(xs[k]);
        if (remain == 0) begin filt.push_back(xs[k]); ones_f += int'(xs[k]); end
        if (xs[k]) remain = HOLD; else if (remain > 0) remain--;
      end
      bits = 0;
      for (int i = 0; i < PN; i++) bits += node_output(filt, i).size();
      p1 = real'(ones_f) / real'(filt.size());
      h = -p1 * $ln(p1) / $ln(2.0) - (1.0 - p1) * $ln(1.0 - p1) / $ln(2.0);
      eff = real'(bits) / (h * real'(filt.size()));
      $display("samples %0d ones %0d (%.3f%% zeros); after hold-off %0d samples, %0d ones (%.1f%% of 1s removed)",
               xs.size(), ones_x, 100.0 * (1.0 - real'(ones_x) / real'(xs.size())),
               filt.size(), ones_f, 100.0 * (1.0 - real'(ones_f) / real'(ones_x)));
      $display("extracted %0d bits = %.5f bits/sample; entropy %.5f bits/sample; Peres depth %0d efficiency %.3f; %.3f Mbit/s at 100 MHz",
               bits, real'(bits) / real'(xs.size()), h, PD, eff, 100.0 * real'(bits) / real'(xs.size()));
      check(nwords == bits / W, $sformatf("words %0d vs floor(%0d/32)", nwords, bits));
      check(ones_x > 2000 && real'(ones_x) / real'(xs.size()) < 0.004, "detection rate near 200 kcounts/s");
      check(ones_f < ones_x, "hold-off removed 1s");
      check(!ovf, "no overflow");
      check(nwords > 0, "words produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
