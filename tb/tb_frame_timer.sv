// tb_frame_timer -- checks that frame_start pulses on the first cycle after
// reset and then exactly every FRAME_CYCLES cycles, and that frame_count
// follows.  Uses a short period of 100 cycles.
module tb_frame_timer;
  timeunit 1ns; timeprecision 1ps;

  localparam int P = 100;
  logic clk = 0, rst_n = 0, frame_start;
  logic [31:0] frame_count;
  int checks = 0, failures = 0, last = -1, n = 0;

  frame_timer #(.FRAME_CYCLES(P)) dut (.*);
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
    #0;
    checks++;
    if (!frame_start) begin failures++; $display("FAIL no first pulse"); end
    for (int c = 0; c < 10 * P; c++) begin
      if (frame_start) begin
        if (last >= 0) begin
          checks++;
          if (c - last != P) begin failures++; $display("FAIL period %0d", c - last); end
        end
        last = c;
        n++;
      end
      @(posedge clk); #1;
    end
    checks++;
    if (n != 10 || frame_count != 32'(n)) begin failures++; $display("FAIL n %0d count %0d", n, frame_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
