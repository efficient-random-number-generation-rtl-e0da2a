// frame_timer -- reference signal that sets the integration time of a frame.
//
// Tags are measured from a periodic reference; its period is the exposure
// of one frame, 320 us in the paper's measurements, i.e. 128000 periods of
// the 400 MHz clock.  The timer emits a one-cycle frame_start pulse on the
// first cycle after reset and then every FRAME_CYCLES cycles, and counts
// the frames.  The period is the paper's; generating it on chip from the
// sampling clock is this design's choice.
module frame_timer #(
  parameter int unsigned FRAME_CYCLES = qrng_pkg::FRAME_CYCLES
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        frame_start,
  output logic [31:0] frame_count
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CW = $clog2(FRAME_CYCLES);
  logic [CW-1:0] cnt_q;

  assign frame_start = (cnt_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q       <= '0;
      frame_count <= '0;
    end else begin
      cnt_q <= (cnt_q == CW'(FRAME_CYCLES - 1)) ? '0 : cnt_q + 1'b1;
      if (frame_start) frame_count <= frame_count + 1'b1;
    end
  end
endmodule
