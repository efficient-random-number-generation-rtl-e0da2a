// tb_pixel_slice -- one pixel with a 16-tag frame memory and the default
// hold-off (80 periods), coarse Peres depth 6 and Zhou-Bruck depth 4.
// Hits are driven as thermometer codes on the taps at random periods
// (at least 16 periods apart, the 40 ns dead time, and sometimes closer
// than the hold-off window).  Checked:
//   * the frame memory read back after each frame holds exactly the tags
//     coarse * 140 + fine computed by the testbench, with the right count
//     and saturation flag (one frame is overfilled);
//   * the number of coarse words equals floor(B/32), B being the number of
//     bits a block Peres reference extracts from the testbench's own
//     sample string after the hold-off rule;
//   * likewise for the fine words and a Zhou-Bruck reference on the codes;
//   * every coarse and fine word equals the one built from a streaming
//     model of the same extractors (a tree of pending bits, node outputs
//     of one input bit taken in node order, first bit in word bit 0);
//   * the hold-off actually removed some 1s.
module tb_pixel_slice;
  timeunit 1ns; timeprecision 1ps;
  import qrng_pkg::*;
  import tb_ref_pkg::*;

  localparam int BD = 16, HOLD = 80, PD = 6, ZD = 4, W = 32;
  localparam int PN = (1 << PD) - 1, ZN = (1 << ZD) - 1;

  logic clk = 0, rst_n = 0, frame_start = 0, coarse_enable = 0;
  logic [N_TAPS-1:0] taps = '0;
  logic [$clog2(BD)-1:0] rd_addr = '0;
  logic [TAG_W-1:0] rd_data;
  logic [$clog2(BD):0] rd_count;
  logic rd_saturated;
  logic [W-1:0] coarse_word, fine_word;
  logic coarse_valid, fine_valid, coarse_ready = 1, fine_ready = 1;
  logic ev_hit, ev_stored, ev_out_of_range, ev_holdoff_drop, ev_zb_drop, overflow;
  int checks = 0, failures = 0, cyc = 0;

  pixel_slice #(.HOLDOFF(HOLD), .BUF_D(BD), .PERES_DEPTH(PD), .ZB_DEPTH(ZD), .W(W)) dut (.*);

  always #1.25 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench view of the coarse sample string and the stored codes
  bitq_t samples;
  int stored_in_frame = 0;
  int codes[$];
  int ncw = 0, nfw = 0, nhd = 0, fill = 0;
  logic [W-1:0] cwords[$], fwords[$];
  always @(negedge clk) if (rst_n) begin
    // a period is a coarse sample unless the frame memory is already full;
    // the fill level restarts with the frame_start cycle
    if (frame_start) fill = 0;
    if (coarse_enable && fill < BD) samples.push_back(ev_stored);
    if (ev_stored) fill++;
    if (coarse_valid && coarse_ready) begin ncw++; cwords.push_back(coarse_word); end
    if (fine_valid && fine_ready) begin nfw++; fwords.push_back(fine_word); end
    nhd += int'(ev_holdoff_drop);
  end

  int exp_tags[$];
  int frame_fs_cyc;

  // streaming Peres model: the tree of `nodes` nodes whose state starts at
  // index base of pend/pb takes one bit; a node holding a pending bit
  // completes a pair, emits the first bit of an unequal pair and passes
  // the XOR to node 2i+1 and the common bit of an equal pair to 2i+2
  function automatic void peres_feed(ref bit pend[], ref bit pb[], input int base,
                                     input int nodes, input bit b, ref bitq_t out);
    bit iv[] = new[nodes];
    bit ib[] = new[nodes];
    iv[0] = 1; ib[0] = b;
    for (int i = 0; i < nodes; i++) if (iv[i]) begin
      if (!pend[base+i]) begin
        pend[base+i] = 1; pb[base+i] = ib[i];
      end else begin
        bit a;
        a = pb[base+i];
        pend[base+i] = 0;
        if (a != ib[i]) out.push_back(a);
        if (2*i+1 < nodes) begin iv[2*i+1] = 1; ib[2*i+1] = a ^ ib[i]; end
        if (a == ib[i] && 2*i+2 < nodes) begin iv[2*i+2] = 1; ib[2*i+2] = a; end
      end
    end
  endfunction

  task automatic check_words(input bitq_t bits, input logic [W-1:0] words[$], input string what);
    foreach (words[k]) begin
      logic [W-1:0] e;
      for (int j = 0; j < W; j++) e[j] = bits[k*W+j];
      check(words[k] == e, $sformatf("%s word %0d %h exp %h", what, k, words[k], e));
    end
  endtask

  int prev_stored = 0;
  task automatic new_frame();
    prev_stored = stored_in_frame;
    frame_start = 1;
    @(posedge clk); #0.1;
    frame_start = 0;
    stored_in_frame = 0;
    frame_fs_cyc = cyc;
  endtask

  task automatic hit(input int ones);
    int period, fine;
    taps = N_TAPS'((141'(1) << ones) - 1);
    @(posedge clk); #0.1;
    period = cyc - frame_fs_cyc;
    fine = N_TAPS - ones;
    taps = '1;
    @(posedge clk); #0.1;
    taps = '0;
    if (stored_in_frame < BD) begin
      exp_tags.push_back(period * N_TAPS + fine);
      codes.push_back(fine);
    end
    stored_in_frame++;
  endtask

  task automatic check_frame(input int f);
    check(rd_count == ($clog2(BD)+1)'(exp_tags.size()), $sformatf("frame %0d count %0d exp %0d", f, rd_count, exp_tags.size()));
    check(rd_saturated == (prev_stored > BD), $sformatf("frame %0d saturation", f));
    foreach (exp_tags[k]) begin
      rd_addr = k[$clog2(BD)-1:0];
      @(posedge clk); #0.1;
      check(rd_data == TAG_W'(exp_tags[k]), $sformatf("frame %0d tag %0d", f, k));
    end
  endtask

  initial begin
    int nh[4] = '{10, 25, 12, 14};   // frame 1 overfills the memory
    int sat_seen = 0;
    repeat (2) @(posedge clk);
    #0.1 rst_n = 1;
    coarse_enable = 1;
    for (int f = 0; f < 4; f++) begin
      new_frame();
      if (f > 0) begin
        check_frame(f - 1);
        sat_seen += int'(rd_saturated);
      end
      exp_tags.delete();
      // the frame_start edge may already be past; hits follow
      for (int h = 0; h < nh[f]; h++) begin
        repeat ($urandom_range(0, 1) ? $urandom_range(14, 60) : $urandom_range(100, 400)) begin
          @(posedge clk); #0.1;
        end
        hit($urandom_range(1, N_TAPS));
      end
      repeat (20) begin @(posedge clk); #0.1; end
    end
    new_frame();
    check_frame(3);
    check(sat_seen == 1, "one saturated frame");
    repeat (200) begin @(posedge clk); #0.1; end
    coarse_enable = 0;
    repeat (10) begin @(posedge clk); #0.1; end
    begin
      bitq_t filt;
      int remain, cbits, fbits;
      remain = 0;
      foreach (samples[k]) begin
        if (remain == 0) filt.push_back(samples[k]);
        if (samples[k]) remain = HOLD; else if (remain > 0) remain--;
      end
      cbits = 0;
      for (int i = 0; i < PN; i++) cbits += node_output(filt, i).size();
      begin
        bitq_t seqs[255];
        foreach (codes[n]) for (int i = 0; i < 8; i++) begin
          int prefix;
          prefix = (i == 0) ? 0 : (codes[n] >> (8 - i));
          seqs[(1 << i) - 1 + prefix].push_back(codes[n][7-i]);
        end
        fbits = 0;
        for (int s = 0; s < 255; s++) for (int i = 0; i < ZN; i++) fbits += node_output(seqs[s], i).size();
      end
      $display("coarse bits %0d words %0d, fine bits %0d words %0d, holdoff drops %0d", cbits, ncw, fbits, nfw, nhd);
      begin
        bit cp[] = new[PN];
        bit cb[] = new[PN];
        bit zp[] = new[255*ZN];
        bit zb[] = new[255*ZN];
        bitq_t cstream, fstream;
        foreach (filt[k]) peres_feed(cp, cb, 0, PN, filt[k], cstream);
        foreach (codes[n]) for (int i = 0; i < 8; i++) begin
          int prefix;
          prefix = (i == 0) ? 0 : (codes[n] >> (8 - i));
          peres_feed(zp, zb, ((1 << i) - 1 + prefix) * ZN, ZN, codes[n][7-i], fstream);
        end
        check(cstream.size() == cbits && fstream.size() == fbits, "streaming and block models agree on bit counts");
        check_words(cstream, cwords, "coarse");
        check_words(fstream, fwords, "fine");
      end
      check(ncw == cbits / W && ncw > 0, "coarse word count");
      check(nfw == fbits / W && nfw > 0, "fine word count");
      check(nhd > 0, "hold-off removed 1s");
      check(!overflow && !ev_out_of_range, "no overflow");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
