// tdc_delay_line -- behavioural model of the carry-chain delay line of one TDC.
//
// This is a behavioural model, not synthesizable logic: in the real device
// the line is built from the FPGA's dedicated carry primitives, 35 carry
// elements of 4 bits each, giving 140 taps whose delays are set by the
// silicon.  An edge entering line_in travels down the chain; tap k goes
// high once the edge has passed the first k+1 delay cells and falls the
// same way when line_in falls.  Sampled at a clock edge, the taps form a
// thermometer code that tells how long ago the edge entered.
//
// The cell delays are not given by the paper.  The model repeats a fixed
// unequal pattern of 10, 24, 13 and 25 ps inside each carry element
// (72 ps per element, 2.52 ns for the line, slightly more than the 2.5 ns
// clock period), which reproduces the kind of non-linearity the paper
// reports for the fine codes.
//
// Interface: line_in (the SPAD pulse), taps[N_TAPS-1:0] (tap 0 nearest the
// input).  The pulse must stay high longer than the line (about 2.5 ns).
module tdc_delay_line #(
  parameter int unsigned N_TAPS = 140
) (
  input  logic              line_in,
  output logic [N_TAPS-1:0] taps
);
  timeunit 1ns; timeprecision 1ps;

  // Delay of cell k in picoseconds, repeating per 4-bit carry element.
  function automatic int unsigned cell_ps(input int unsigned k);
    case (k % 4)
      0:       return 10;
      1:       return 24;
      2:       return 13;
      default: return 25;
    endcase
  endfunction

  initial taps = '0;

  always @(posedge line_in) begin
    for (int unsigned k = 0; k < N_TAPS; k++) begin
      #(cell_ps(k) * 1ps);
      taps[k] = 1'b1;
    end
  end

  always @(negedge line_in) begin
    for (int unsigned k = 0; k < N_TAPS; k++) begin
      #(cell_ps(k) * 1ps);
      taps[k] = 1'b0;
    end
  end
endmodule
