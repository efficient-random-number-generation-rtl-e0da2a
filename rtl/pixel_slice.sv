// pixel_slice -- everything that belongs to one TDC channel of the array.
//
// The channel's delay-line taps are turned into hits and 28-bit tags
// (tdc_channel); accepted tags go to the per-pixel frame memory
// (frame_buffer).  Two extractors run on the same hits, as two independent
// generators:
//   coarse path -- the pixel's sample string has one entry per 2.5 ns clock
//     period, 1 where a tag was stored.  Dead time and afterpulses are
//     removed (holdoff_filter, 80 periods = 200 ns) and the string is
//     debiased by a Peres tree (peres_extractor).  Pixels excluded to
//     suppress cross-talk between neighbours are switched off by
//     coarse_enable.  Periods in which the frame memory is full are not
//     samples, since their events cannot be recorded.
//   fine path -- the fine code 0..139 of every stored tag is debiased by the
//     Zhou-Bruck extractor (zhou_bruck).
// Each path packs its bits into words (bit_packer) and offers them with a
// valid/ready handshake.  The two paths, the hold-off and the pixel
// selection follow the paper; feeding the extractors from the live tag
// stream rather than from a stored frame is this design's choice.
module pixel_slice
  import qrng_pkg::*;
#(
  parameter int unsigned HOLDOFF     = HOLDOFF_LINO,
  parameter int unsigned BUF_D       = BUF_DEPTH,
  parameter int unsigned PERES_DEPTH = 6,
  parameter int unsigned ZB_DEPTH    = 4,
  parameter int unsigned W           = WORD_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_start,
  input  logic [N_TAPS-1:0]        taps,
  input  logic                     coarse_enable,
  // frame memory readout
  input  logic [$clog2(BUF_D)-1:0] rd_addr,
  output logic [TAG_W-1:0]         rd_data,
  output logic [$clog2(BUF_D):0]   rd_count,
  output logic                     rd_saturated,
  // random words
  output logic [W-1:0]             coarse_word,
  output logic                     coarse_valid,
  input  logic                     coarse_ready,
  output logic [W-1:0]             fine_word,
  output logic                     fine_valid,
  input  logic                     fine_ready,
  // events, one-cycle pulses or sticky flags
  output logic                     ev_hit,
  output logic                     ev_stored,
  output logic                     ev_out_of_range,
  output logic                     ev_holdoff_drop,
  output logic                     ev_zb_drop,
  output logic                     overflow
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned PN = (1 << PERES_DEPTH) - 1;
  localparam int unsigned ZN = (1 << ZB_DEPTH) - 1;

  logic               hit_valid, oor, accept, full;
  tdc_hit_t           hit;
  logic [TAG_W-1:0]   tag;
  logic [15:0]        lost_unused;
  logic               s_valid, s_bit, h_valid, h_bit;
  logic [PN-1:0]      p_valid, p_bit;
  logic [ZN-1:0]      z_valid, z_bit;
  logic               zb_busy, c_ovf, f_ovf;

  tdc_channel u_tdc (
    .clk, .rst_n, .frame_start, .taps,
    .hit_valid, .hit, .tag, .out_of_range(oor)
  );

  frame_buffer #(.DEPTH(BUF_D), .TW(TAG_W)) u_buf (
    .clk, .rst_n, .frame_start,
    .wr_valid(hit_valid), .wr_tag(tag), .wr_accept(accept), .full,
    .rd_addr, .rd_data, .rd_count, .rd_saturated, .rd_lost(lost_unused)
  );

  // Coarse sample string: one entry per period while the memory has room.
  always_comb begin
    s_valid = coarse_enable && !full;
    s_bit   = accept;
  end

  holdoff_filter #(.HOLDOFF(HOLDOFF)) u_hold (
    .clk, .rst_n, .in_valid(s_valid), .in_bit(s_bit),
    .out_valid(h_valid), .out_bit(h_bit), .drop_one(ev_holdoff_drop)
  );

  peres_extractor #(.DEPTH(PERES_DEPTH)) u_peres (
    .clk, .rst_n, .in_valid(h_valid), .in_bit(h_bit),
    .out_valid(p_valid), .out_bit(p_bit)
  );

  bit_packer #(.N_IN(PN), .W(W)) u_cpack (
    .clk, .rst_n, .in_valid(p_valid), .in_bit(p_bit),
    .word(coarse_word), .word_valid(coarse_valid), .word_ready(coarse_ready),
    .overflow(c_ovf)
  );

  zhou_bruck #(.N_VALUES(N_TAPS), .DEPTH(ZB_DEPTH)) u_zb (
    .clk, .rst_n, .in_valid(accept), .in_code(hit.fine),
    .busy(zb_busy), .drop(ev_zb_drop), .out_valid(z_valid), .out_bit(z_bit)
  );

  bit_packer #(.N_IN(ZN), .W(W)) u_fpack (
    .clk, .rst_n, .in_valid(z_valid), .in_bit(z_bit),
    .word(fine_word), .word_valid(fine_valid), .word_ready(fine_ready),
    .overflow(f_ovf)
  );

  assign ev_hit          = hit_valid;
  assign ev_stored       = accept;
  assign ev_out_of_range = oor;
  assign overflow        = c_ovf | f_ovf;
endmodule
