// tb_tdc_delay_line -- an edge is launched into the delay-line model at a
// random picosecond offset and the taps are inspected a random time later.
// The number of high taps must equal the number of cells whose cumulative
// delay (10, 24, 13, 25 ps repeating) has elapsed, the code must be a clean
// thermometer code, and after the falling edge the line must empty.
module tb_tdc_delay_line;
  timeunit 1ns; timeprecision 1ps;

  localparam int T = 140;
  logic line_in = 0;
  logic [T-1:0] taps;
  int checks = 0, failures = 0;

  tdc_delay_line #(.N_TAPS(T)) dut (.*);

  function automatic int cell_delay(input int k);
    case (k % 4) 0: return 10; 1: return 24; 2: return 13; default: return 25; endcase
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ns;
    for (int n = 0; n < 200; n++) begin
      int wait_ps, exp, acc, ones;
      bit tie;
      // avoid sampling exactly when a tap switches
      do begin
        wait_ps = $urandom_range(0, 2600);
        exp = 0; acc = 0; tie = 0;
        for (int k = 0; k < T; k++) begin
          acc += cell_delay(k);
          if (acc < wait_ps) exp++;
          if (acc == wait_ps) tie = 1;
        end
      end while (tie);
      line_in = 1;
      #(wait_ps * 1ps);
      ones = $countones(taps);
      checks++;
      if (ones != exp || taps != T'((141'(1) << ones) - 1)) begin
        failures++;
        if (failures < 5) $display("FAIL wait %0d ones %0d exp %0d", wait_ps, ones, exp);
      end
      #3ns;
      line_in = 0;
      #3ns;
      checks++;
      if (taps != '0) begin failures++; $display("FAIL line not empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
