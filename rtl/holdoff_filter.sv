// holdoff_filter -- removal of SPAD dead time and afterpulses.
//
// After every sample x_j = 1 the next HOLDOFF samples are removed from the
// stream, because the detector cannot fire during its dead time and the
// events it produces shortly afterwards are afterpulses correlated with the
// first one.  The paper removes 18 samples at 100 MHz for the discrete SPAD
// (180 ns); for the array it names a 40 ns dead time and an afterpulse
// region reaching 200 ns, i.e. 80 samples at 400 MHz.  A 1 that falls inside
// the removed window is dropped and restarts the window ("following any
// value x_j = 1"); this reading is this design's choice.
//
// Interface: in_valid/in_bit is the sample stream (one sample per valid),
// out_valid/out_bit the surviving samples, one cycle later; drop_one pulses
// (same cycle as out_valid would) when a 1 was removed.  Samples with
// in_valid low are not counted.
module holdoff_filter #(
  parameter int unsigned HOLDOFF = 18
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_bit,
  output logic out_valid,
  output logic out_bit,
  output logic drop_one
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CW = $clog2(HOLDOFF + 1);
  logic [CW-1:0] remain_q;    // samples still to be removed

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain_q  <= '0;
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      drop_one  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
      drop_one  <= in_valid && in_bit && (remain_q != '0);
      if (in_valid) begin
        if (remain_q == '0) begin
          out_valid <= 1'b1;
          out_bit   <= in_bit;
        end
        if (in_bit)               remain_q <= CW'(HOLDOFF);
        else if (remain_q != '0)  remain_q <= remain_q - 1'b1;
      end
    end
  end
endmodule
