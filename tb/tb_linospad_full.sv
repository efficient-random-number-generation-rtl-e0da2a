// tb_linospad_full -- the end-to-end test of tb_linospad_qrng at the
// design's full size: 64 channels, four banks of 64 pixels, 128000-period
// (320 us) frames and 512-tag frame memories.  The random pixels fire on
// average every 320 periods, about 400 detections per pixel and frame,
// the illumination used in the measurements the design follows.  One
// complete frame is acquired and read back from all 64 channels, with a
// bright pixel that saturates its memory and afterpulses; then the bank
// is switched, one pair of pulses comes faster than the Zhou-Bruck
// extractor accepts, and a final output stall makes a packer overflow.
// (A second frame would take the simulation past ten minutes; the reduced
// end-to-end test covers several frames.)  See tb_linospad_qrng for how the expected tags are
// derived.
module tb_linospad_full;
  timeunit 1ns; timeprecision 1ps;
  import qrng_pkg::*;

  localparam int NP = N_PIX, NB = N_BANKS, FL = FRAME_CYCLES, BD = BUF_DEPTH, NFRAMES = 1;
  localparam int AW = $clog2(BD);

  logic clk = 0, rst_n = 0;
  logic [NB-1:0][NP-1:0] spad_out = '0;
  logic [1:0] bank_sel = 0;
  logic [NP-1:0] line_in;
  logic [NP-1:0][N_TAPS-1:0] taps;
  logic [NP-1:0] coarse_enable = '1;
  logic [$clog2(NP)-1:0] rd_pix = '0;
  logic [AW-1:0] rd_addr = '0;
  logic [TAG_W-1:0] rd_data;
  logic [AW:0] rd_count;
  logic rd_saturated, frame_start;
  logic [31:0] frame_count;
  logic [WORD_W-1:0] rng_word;
  logic [$clog2(2*NP)-1:0] rng_src;
  logic rng_valid, rng_ready = 1;
  logic [NP-1:0] ev_hit, ev_stored, ev_out_of_range, ev_holdoff_drop, ev_zb_drop;
  logic overflow;

  linospad_qrng dut (.*);

  for (genvar p = 0; p < NP; p++) begin : g_line
    tdc_delay_line u_line (.line_in(line_in[p]), .taps(taps[p]));
  end

  always #1.25 clk = ~clk;

  int checks = 0, failures = 0;
  int pcyc = 0, f0 = -1;
  always @(posedge clk) pcyc <= pcyc + 1;
  always @(posedge clk) if (rst_n && frame_start && f0 < 0) f0 <= pcyc;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 12) $display("FAIL %s", w); end
  endtask

  // mechanism counters
  int n_hit = 0, n_stored = 0, n_hold = 0, n_zb = 0, n_sat = 0, n_cw = 0, n_fw = 0;
  int n_cw_masked = 0, n_switch = 0, n_oor = 0;
  always @(posedge clk) if (rst_n) begin
    n_hit    += $countones(ev_hit);
    n_stored += $countones(ev_stored);
    n_hold   += $countones(ev_holdoff_drop);
    n_zb     += $countones(ev_zb_drop);
    n_oor    += $countones(ev_out_of_range);
    if (rng_valid && rng_ready) begin
      if (int'(rng_src) < NP) n_cw++; else n_fw++;
      if (int'(rng_src) == 3) n_cw_masked++;
    end
  end

  // cumulative delay-line cell delays (must match the model)
  int cum[N_TAPS];
  initial begin
    int a;
    a = 0;
    for (int k = 0; k < N_TAPS; k++) begin
      case (k % 4) 0: a += 10; 1: a += 24; 2: a += 13; default: a += 25; endcase
      cum[k] = a;
    end
  end

  // expected tags per frame and pixel; hits per frame and pixel
  int exp_tag[NFRAMES+2][NP][$];
  int nexp[NFRAMES+2][NP];
  int bright = 1;     // pixel 1 of the current bank fires fast while set
  bit stop_pulses = 0;

  // record a pulse that starts `off` ps after the posedge counted as c
  function automatic void record(input int b, input int p, input int c, input int off);
    int s, d, ones, fr, pos;
    if (b != int'(bank_sel)) return;
    s = (2500 - off > 10) ? c + 1 : c + 2;
    d = (s - c) * 2500 - off;
    ones = 0;
    for (int k = 0; k < N_TAPS; k++) if (cum[k] < d) ones++;
    fr  = (s - f0) / FL;
    pos = (s - f0) % FL;
    if (fr < NFRAMES + 2) begin
      if (nexp[fr][p] < BD) exp_tag[fr][p].push_back(pos * N_TAPS + (N_TAPS - ones));
      nexp[fr][p]++;
    end
  endfunction

  function automatic bit tie(input int off);
    int d1, d2;
    d1 = 2500 - off; d2 = 5000 - off;
    for (int k = 0; k < N_TAPS; k++) if (cum[k] == d1 || cum[k] == d2) return 1;
    return (d1 == 10);
  endfunction

  // one pulse: start off ps after the current posedge, 5 ns wide
  task automatic pulse(input int b, input int p);
    int c, off;
    c = pcyc;
    do off = $urandom_range(1, 2499); while (tie(off));
    record(b, p, c, off);
    #(off * 1ps);
    spad_out[b][p] = 1;
    #5ns;
    spad_out[b][p] = 0;
  endtask

  function automatic bit near_boundary(input int c);
    int pos;
    if (f0 < 0) return 1;
    pos = (c - f0) % FL;
    return (pos < 8) || (pos > FL - 12);
  endfunction

  // pixel processes
  for (genvar b = 0; b < NB; b++) begin : g_bank
    for (genvar p = 0; p < NP; p++) begin : g_px
      initial begin
        @(posedge rst_n);
        forever begin
          int gap;
          gap = (bright != 0 && p == 1) ? $urandom_range(16, 24) : $urandom_range(16, 624);
          repeat (gap) @(posedge clk);
          if (stop_pulses) begin
            @(posedge clk);
          end else if (!near_boundary(pcyc) && !near_boundary(pcyc + 30)) begin
            pulse(b, p);
            // afterpulse inside the hold-off window
            if ($urandom_range(4) == 0) begin
              repeat ($urandom_range(20, 70)) @(posedge clk);
              if (!near_boundary(pcyc) && !stop_pulses) pulse(b, p);
            end
          end
        end
      end
    end
  end

  // watchdog
  initial begin
    repeat (FL * (NFRAMES + 3)) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_frame(input int fr);
    for (int p = 0; p < NP; p++) begin
      rd_pix = p[$clog2(NP)-1:0];
      #0.1;
      check(int'(rd_count) == exp_tag[fr][p].size(),
            $sformatf("frame %0d pixel %0d count %0d exp %0d", fr, p, rd_count, exp_tag[fr][p].size()));
      check(rd_saturated == (nexp[fr][p] > BD), $sformatf("frame %0d pixel %0d saturation", fr, p));
      if (rd_saturated) n_sat++;
      foreach (exp_tag[fr][p][k]) begin
        rd_addr = k[AW-1:0];
        @(posedge clk); #0.1;
        if (rd_data != TAG_W'(exp_tag[fr][p][k])) begin
          check(0, $sformatf("frame %0d pixel %0d tag %0d: %0d exp %0d", fr, p, k, rd_data, exp_tag[fr][p][k]));
          break;
        end
        checks++;
      end
    end
  endtask

  initial begin
    int fr;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    coarse_enable[3] = 0;           // pixel 3 excluded from the coarse path
    for (fr = 0; fr < NFRAMES; fr++) begin
      // wait for the end of frame fr: frame_start seen at its last cycle
      while (f0 < 0 || pcyc < f0 + (fr + 1) * FL - 4) @(posedge clk);
      // bank switch and bright pixel changes happen in the quiet margin
      if (fr == 0) begin bank_sel = 2; n_switch++; end
      bright = 0;                     // bright during frame 0 only
      while (pcyc < f0 + (fr + 1) * FL + 1) @(posedge clk);
      #0.1;
      $display("[%0t] frame %0d done, reading back", $time, fr);
      read_frame(fr);
      if (fr == 0) begin
        // two pulses 6 periods apart on pixel 0 of the current bank,
        // with the random pulses paused around them
        stop_pulses = 1;
        repeat (100) @(posedge clk);
        while (near_boundary(pcyc) || near_boundary(pcyc + 20)) @(posedge clk);
        fork
          pulse(int'(bank_sel), 0);
          begin repeat (6) @(posedge clk); pulse(int'(bank_sel), 0); end
        join
        repeat (20) @(posedge clk);
        stop_pulses = 0;
      end
    end
    // stall the output until a packer overflows
    stop_pulses = 0;
    rng_ready = 0;
    bright = 1;
    repeat (5000) @(posedge clk);
    #0.1;
    check(n_switch == 1, "bank switch");
    check(frame_count >= 32'(NFRAMES), "frame counter");
    $display("hits %0d stored %0d holdoff-drops %0d saturated %0d zb-drops %0d coarse-words %0d fine-words %0d masked %0d overflow %0d",
             n_hit, n_stored, n_hold, n_sat, n_zb, n_cw, n_fw, n_cw_masked, overflow);
    check(n_hit > 0 && n_stored > 0, "hits stored");
    check(n_hold > 0, "hold-off removed afterpulses");
    check(n_sat > 0, "a frame saturated");
    check(n_zb > 0, "Zhou-Bruck refused a code");
    check(n_cw > 0 && n_fw > 0, "coarse and fine words");
    check(n_cw_masked == 0, "masked pixel gives no coarse words");
    check(overflow, "overflow under a stalled output");
    check(n_oor == 0, "no tag beyond range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
