// tb_lino_workload -- rate test of one LinoSPAD pixel at the illumination
// of the array measurements: 320 us frames at 400 MHz, about 400
// detections per frame, every module at its default size.  A frame timer,
// the behavioural delay line and one pixel_slice are connected as in the
// top.  Detections are a Poisson process (probability 1/320 per period)
// with a 40 ns dead time, arriving at random offsets inside the clock
// period.  The test runs NFR frames and reports per frame the stored tags
// and the random bits of the coarse (Peres) and fine (Zhou-Bruck) paths,
// and compares them with the per-pixel rates of the array measurements:
// 3.95 Mbit/s coarse for an uncorrelated pixel (1264 bits per frame) and
// 3.48 Mbit/s fine (1114 bits per frame).
//
// Checks: no frame saturates its 512-tag memory at this rate, no code is
// refused by the Zhou-Bruck extractor, the coarse output does not exceed
// the entropy of the sample string and the fine output does not exceed
// log2(140) bits per tag, and both paths reach at least the measured
// per-pixel rates.  The measurements used 8000 frames; 100 are simulated
// here (about 20 s).
module tb_lino_workload;
  timeunit 1ns; timeprecision 1ps;
  import qrng_pkg::*;

  localparam int NFR = 100;

  logic clk = 0, rst_n = 0;
  logic frame_start;
  logic [31:0] frame_count;
  logic line_in = 0;
  logic [N_TAPS-1:0] taps;
  logic [$clog2(BUF_DEPTH)-1:0] rd_addr = '0;
  logic [TAG_W-1:0] rd_data;
  logic [$clog2(BUF_DEPTH):0] rd_count;
  logic rd_saturated;
  logic [WORD_W-1:0] coarse_word, fine_word;
  logic coarse_valid, fine_valid;
  logic ev_hit, ev_stored, ev_out_of_range, ev_holdoff_drop, ev_zb_drop, overflow;

  always #1.25ns clk = ~clk;   // 400 MHz

  frame_timer    u_timer (.clk, .rst_n, .frame_start, .frame_count);
  tdc_delay_line u_line  (.line_in, .taps);
  pixel_slice    dut (
    .clk, .rst_n, .frame_start, .taps, .coarse_enable(1'b1),
    .rd_addr, .rd_data, .rd_count, .rd_saturated,
    .coarse_word, .coarse_valid, .coarse_ready(1'b1),
    .fine_word, .fine_valid, .fine_ready(1'b1),
    .ev_hit, .ev_stored, .ev_out_of_range, .ev_holdoff_drop, .ev_zb_drop, .overflow);

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", w); end
  endtask

  // event counters, per frame
  int n_stored = 0, n_cw = 0, n_fw = 0, n_zb = 0, n_sat = 0;
  int tot_stored = 0, tot_cb = 0, tot_fb = 0, frames_done = 0;
  real h_bits = 0.0;

  function automatic real h2(input real p);
    if (p <= 0.0 || p >= 1.0) return 0.0;
    return -p * $ln(p) / $ln(2.0) - (1.0 - p) * $ln(1.0 - p) / $ln(2.0);
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (ev_stored) n_stored <= n_stored + 1;
      if (coarse_valid) n_cw <= n_cw + 1;
      if (fine_valid) n_fw <= n_fw + 1;
      if (ev_zb_drop) n_zb <= n_zb + 1;
    end
  end

  // per-frame report at each frame boundary after the first
  initial begin
    int s0, c0, f0;
    s0 = 0; c0 = 0; f0 = 0;
    @(posedge rst_n);
    @(posedge clk iff frame_start);
    forever begin
      @(posedge clk iff frame_start);
      #0.1;
      if (rd_saturated) n_sat++;
      begin
        int st, cb, fb, samples;
        st = n_stored - s0; cb = (n_cw - c0) * WORD_W; fb = (n_fw - f0) * WORD_W;
        s0 = n_stored; c0 = n_cw; f0 = n_fw;
        // coarse samples left after the hold-off windows
        samples = FRAME_CYCLES - st * HOLDOFF_LINO;
        h_bits += real'(samples) * h2(real'(st) / real'(samples));
        if (frames_done % 20 == 0) $display("frame %0d: tags %0d coarse bits %0d fine bits %0d", frames_done, st, cb, fb);
        tot_stored += st; tot_cb += cb; tot_fb += fb;
      end
      frames_done++;
      if (frames_done == NFR) begin
        real cpf, fpf;
        cpf = real'(tot_cb) / NFR;
        fpf = real'(tot_fb) / NFR;
        $display("per frame: tags %0.1f  coarse %0.1f bits (%0.2f Mbit/s, entropy %0.1f bits)  fine %0.1f bits (%0.2f Mbit/s, %0.2f bits/tag)",
                 real'(tot_stored) / NFR, cpf, cpf / 320.0, h_bits / NFR, fpf, fpf / 320.0,
                 real'(tot_fb) / real'(tot_stored));
        check(n_sat == 0, "no frame saturated at 400 counts per frame");
        check(n_zb == 0, "no Zhou-Bruck code refused");
        check(!overflow, "no packer overflow");
        check(tot_stored > NFR * 300 && tot_stored < NFR * 500, "about 400 tags per frame");
        check(real'(tot_cb) <= h_bits + 64.0 * NFR, "coarse bits within the entropy");
        check(real'(tot_fb) <= real'(tot_stored) * 7.13, "fine bits within log2(140) per tag");
        check(cpf >= 1264.0, "coarse rate at least 3.95 Mbit/s");
        check(fpf >= 1114.0, "fine rate at least 3.48 Mbit/s");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  // detections: Poisson, 1/320 per period, 16-period dead time
  initial begin
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    forever begin
      @(posedge clk);
      if ($urandom_range(319) == 0) begin
        int off;
        off = $urandom_range(1, 2499);
        #(off * 1ps);
        line_in = 1;
        #5ns;
        line_in = 0;
        repeat (14) @(posedge clk);
      end
    end
  end

  // watchdog
  initial begin
    repeat (FRAME_CYCLES * (NFR + 3)) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
