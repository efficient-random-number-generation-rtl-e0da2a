// tb_frame_buffer -- a small buffer (DEPTH 8, 28-bit tags) is filled over
// several frames with random numbers of random tags, some frames beyond
// its capacity.  After each frame_start the previous frame is read back
// through the readout port and compared with the tags the testbench sent;
// rd_count, rd_saturated and rd_lost must match, and wr_accept must drop
// exactly when the page is full.  A tag written in the frame_start cycle
// must land in the new frame.
module tb_frame_buffer;
  timeunit 1ns; timeprecision 1ps;

  localparam int D = 8, TW = 28;
  logic clk = 0, rst_n = 0, frame_start = 0, wr_valid = 0;
  logic [TW-1:0] wr_tag = '0;
  logic wr_accept, full;
  logic [$clog2(D)-1:0] rd_addr = '0;
  logic [TW-1:0] rd_data;
  logic [$clog2(D):0] rd_count;
  logic rd_saturated;
  logic [15:0] rd_lost;
  int checks = 0, failures = 0, sat_frames = 0;

  frame_buffer #(.DEPTH(D), .TW(TW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TW-1:0] sent[$];
    int lost;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      int n;
      n = $urandom_range(0, 12);
      // frame_start cycle carries the first tag of the new frame
      frame_start = 1;
      wr_valid = (n > 0);
      wr_tag = TW'($urandom);
      if (f > 0) begin
        // the previous frame is checked after this edge
      end
      @(posedge clk); #1;
      frame_start = 0;
      wr_valid = 0;
      if (f > 0) begin
        check(rd_count == ($clog2(D)+1)'(sent.size()), $sformatf("count f%0d %0d vs %0d", f, rd_count, sent.size()));
        check(rd_saturated == (lost > 0) && rd_lost == 16'(lost), "saturation flag");
        foreach (sent[k]) begin
          rd_addr = k[$clog2(D)-1:0];
          @(posedge clk); #1;
          check(rd_data == sent[k], $sformatf("tag f%0d k%0d", f, k));
        end
        if (lost > 0) sat_frames++;
      end
      sent.delete();
      lost = 0;
      if (n > 0) sent.push_back(wr_tag);
      for (int k = 1; k < n; k++) begin
        wr_valid = 1;
        wr_tag = TW'($urandom);
        #0;
        check(wr_accept == (sent.size() < D), "accept");
        if (sent.size() < D) sent.push_back(wr_tag); else lost++;
        @(posedge clk); #1;
        wr_valid = 0;
        if ($urandom_range(1)) begin @(posedge clk); #1; end
      end
      wr_valid = 0;
      check(full == (sent.size() == D), "full flag");
      repeat (2) @(posedge clk); #1;
    end
    check(sat_frames > 0, "some frame saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
