// frame_buffer -- per-pixel tag memory of one frame (512 tags).
//
// The device keeps at most 512 tags per pixel per frame.  Tags are written
// in arrival order into one page of a two-page memory while the other page,
// holding the previous complete frame, is available for readout.  At
// frame_start the pages swap, the number of tags of the finished frame is
// latched into rd_count and the write pointer restarts.  Once a page holds
// DEPTH tags the pixel is saturated: later tags of that frame are refused
// (wr_accept low), counted in rd_lost and the frame is flagged in
// rd_saturated.  The 512-tag limit and 28-bit tags are the paper's; the
// double buffering and the readout port are this design's choices.
//
// Timing: wr_accept is combinational with wr_valid; rd_data is registered,
// one cycle after rd_addr.  A tag written in the frame_start cycle belongs
// to the new frame.
module frame_buffer #(
  parameter int unsigned DEPTH = qrng_pkg::BUF_DEPTH,
  parameter int unsigned TW    = qrng_pkg::TAG_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_start,
  input  logic                     wr_valid,
  input  logic [TW-1:0]            wr_tag,
  output logic                     wr_accept,
  output logic                     full,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [TW-1:0]            rd_data,
  output logic [$clog2(DEPTH):0]   rd_count,
  output logic                     rd_saturated,
  output logic [15:0]              rd_lost
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned AW = $clog2(DEPTH);

  logic [TW-1:0] mem [2*DEPTH];
  logic          wpage_q;
  logic [AW:0]   wcnt_q, wcnt_eff;
  logic [15:0]   lost_q, lost_eff;

  // In the frame_start cycle the counters of the new frame start at zero.
  assign wcnt_eff  = frame_start ? '0 : wcnt_q;
  assign lost_eff  = frame_start ? '0 : lost_q;
  assign full      = (wcnt_eff == (AW+1)'(DEPTH));
  assign wr_accept = wr_valid && (wcnt_eff != (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_accept) mem[{wpage_q ^ frame_start, wcnt_eff[AW-1:0]}] <= wr_tag;
    rd_data <= mem[{~wpage_q, rd_addr}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wpage_q      <= 1'b0;
      wcnt_q       <= '0;
      lost_q       <= '0;
      rd_count     <= '0;
      rd_saturated <= 1'b0;
      rd_lost      <= '0;
    end else begin
      if (frame_start) begin
        wpage_q      <= ~wpage_q;
        rd_count     <= wcnt_q;
        rd_saturated <= (lost_q != '0);
        rd_lost      <= lost_q;
      end
      wcnt_q <= wcnt_eff + (AW+1)'(wr_accept);
      lost_q <= lost_eff + 16'((wr_valid && !wr_accept && lost_eff != '1) ? 1 : 0);
    end
  end
endmodule
