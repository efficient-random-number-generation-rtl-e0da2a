// linospad_qrng -- random number generator on a 4 x 64 SPAD array with TDCs.
//
// The sensor has four banks of 64 pixels; a single row of 64 TDC channels
// is shared between them, so bank_sel chooses which bank's pixel outputs
// are routed to the delay lines (line_in).  The 140 taps of each delay line
// come back on taps and are sampled at the 400 MHz clock.  The frame timer
// clears the coarse counters every FRAME_CYCLES (320 us) and swaps the
// frame memories.  Each of the NPIX channels is a pixel_slice running a
// coarse (clock-period) and a fine (delay-line code) generator; the output
// arbiter merges their 2 x NPIX word streams into one.  Source index s of
// a word is the pixel for s < NPIX (coarse path) and pixel s - NPIX for the
// fine path.
//
// The delay lines themselves are carry-chain primitives of the FPGA and
// sit outside this module (a behavioural model is tdc_delay_line).  The
// bank structure, channel count, tap count, clock, frame time, buffer size
// and both extraction paths follow the paper; the bank multiplexer, the
// frame memory readout port and the merged output stream are this
// design's choices.
//
// Event outputs (one bit per pixel, one-cycle pulses) make the internal
// mechanisms observable: hits, stored tags, tags beyond the 2^28-bin
// range, 1s removed by the hold-off window and codes refused by a busy
// Zhou-Bruck extractor.  overflow is sticky: some packer lost bits.
module linospad_qrng
  import qrng_pkg::*;
#(
  parameter int unsigned NPIX        = N_PIX,
  parameter int unsigned BANKS       = N_BANKS,
  parameter int unsigned FRAME_LEN   = FRAME_CYCLES,
  parameter int unsigned BUF_D       = BUF_DEPTH,
  parameter int unsigned HOLDOFF     = HOLDOFF_LINO,
  parameter int unsigned PERES_DEPTH = 6,
  parameter int unsigned ZB_DEPTH    = 4,
  localparam int unsigned NSRC       = 2 * NPIX,
  localparam int unsigned SRCW       = $clog2(NSRC),
  localparam int unsigned PIXW       = $clog2(NPIX),
  localparam int unsigned BW         = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned AW         = $clog2(BUF_D)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // sensor and delay lines
  input  logic [BANKS-1:0][NPIX-1:0]      spad_out,
  input  logic [BW-1:0]                   bank_sel,
  output logic [NPIX-1:0]                 line_in,
  input  logic [NPIX-1:0][N_TAPS-1:0]     taps,
  // configuration
  input  logic [NPIX-1:0]                 coarse_enable,
  // frame memory readout (previous frame)
  input  logic [PIXW-1:0]                 rd_pix,
  input  logic [AW-1:0]                   rd_addr,
  output logic [TAG_W-1:0]                rd_data,
  output logic [AW:0]                     rd_count,
  output logic                            rd_saturated,
  output logic                            frame_start,
  output logic [31:0]                     frame_count,
  // random output
  output logic [WORD_W-1:0]               rng_word,
  output logic [SRCW-1:0]                 rng_src,
  output logic                            rng_valid,
  input  logic                            rng_ready,
  // observability
  output logic [NPIX-1:0]                 ev_hit,
  output logic [NPIX-1:0]                 ev_stored,
  output logic [NPIX-1:0]                 ev_out_of_range,
  output logic [NPIX-1:0]                 ev_holdoff_drop,
  output logic [NPIX-1:0]                 ev_zb_drop,
  output logic                            overflow
);
  timeunit 1ns; timeprecision 1ps;

  logic [NPIX-1:0][TAG_W-1:0]  p_rd_data;
  logic [NPIX-1:0][AW:0]       p_rd_count;
  logic [NPIX-1:0]             p_rd_sat;
  logic [NPIX-1:0][WORD_W-1:0] c_word, f_word;
  logic [NPIX-1:0]             c_valid, c_ready, f_valid, f_ready, p_ovf;
  logic [NSRC-1:0]             s_valid, s_ready;
  logic [NSRC-1:0][WORD_W-1:0] s_word;
  logic [PIXW-1:0]             rd_pix_q;

  // Bank multiplexer in front of the shared TDC row.
  assign line_in = spad_out[bank_sel];

  frame_timer #(.FRAME_CYCLES(FRAME_LEN)) u_frame (
    .clk, .rst_n, .frame_start, .frame_count
  );

  for (genvar p = 0; p < NPIX; p++) begin : g_pix
    pixel_slice #(
      .HOLDOFF(HOLDOFF), .BUF_D(BUF_D),
      .PERES_DEPTH(PERES_DEPTH), .ZB_DEPTH(ZB_DEPTH), .W(WORD_W)
    ) u_pix (
      .clk, .rst_n, .frame_start,
      .taps           (taps[p]),
      .coarse_enable  (coarse_enable[p]),
      .rd_addr        (rd_addr),
      .rd_data        (p_rd_data[p]),
      .rd_count       (p_rd_count[p]),
      .rd_saturated   (p_rd_sat[p]),
      .coarse_word    (c_word[p]),
      .coarse_valid   (c_valid[p]),
      .coarse_ready   (c_ready[p]),
      .fine_word      (f_word[p]),
      .fine_valid     (f_valid[p]),
      .fine_ready     (f_ready[p]),
      .ev_hit         (ev_hit[p]),
      .ev_stored      (ev_stored[p]),
      .ev_out_of_range(ev_out_of_range[p]),
      .ev_holdoff_drop(ev_holdoff_drop[p]),
      .ev_zb_drop     (ev_zb_drop[p]),
      .overflow       (p_ovf[p])
    );
  end

  assign s_valid = {f_valid, c_valid};
  assign s_word  = {f_word, c_word};
  assign c_ready = s_ready[NPIX-1:0];
  assign f_ready = s_ready[NSRC-1:NPIX];
  assign overflow = |p_ovf;

  output_arbiter #(.N_SRC(NSRC), .W(WORD_W)) u_arb (
    .clk, .rst_n,
    .src_valid(s_valid), .src_word(s_word), .src_ready(s_ready),
    .out_word(rng_word), .out_src(rng_src), .out_valid(rng_valid),
    .out_ready(rng_ready)
  );

  // Readout: the frame memory answers one cycle after rd_addr.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_pix_q <= '0;
    else        rd_pix_q <= rd_pix;
  end
  assign rd_data      = p_rd_data[rd_pix_q];
  assign rd_count     = p_rd_count[rd_pix];
  assign rd_saturated = p_rd_sat[rd_pix];
endmodule
