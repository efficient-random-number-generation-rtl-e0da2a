// tdc_channel -- one time-to-digital converter channel: hit detection and tag.
//
// At every 400 MHz clock edge the 140 delay-line taps are registered.  A hit
// is the clock at which tap 0 is high after being low one clock earlier
// (the sampling rule of edge_sampler, applied to the first tap).  For that
// sample the number of high taps counts the cells the edge crossed before
// the clock edge, so the fine code is N_TAPS - ones, 0..139, small for an
// edge early in the period.  Counting ones instead of searching for the
// 0/1 boundary makes the encoder insensitive to bubbles in the
// thermometer code.  A coarse counter, cleared by frame_start, numbers the
// clock periods of the frame; the tag is coarse * 140 + fine, limited to
// 2^28 bins (about 4.8 ms).  Hits in periods beyond that range are not
// tagged and raise out_of_range.  The tap count, the code range 0..139, the
// 400 MHz clock and the 2^28 bins are the paper's; the ones-counting
// encoder, the code orientation and the period numbering are this design's
// choices.
//
// Interface: taps from the delay line, frame_start (one-cycle pulse),
// hit_valid with hit (coarse, fine) and tag, valid after the second clock
// edge following the one that captured the hit.
module tdc_channel
  import qrng_pkg::*;
#(
  parameter int unsigned TAPS = N_TAPS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               frame_start,
  input  logic [TAPS-1:0]    taps,
  output logic               hit_valid,
  output tdc_hit_t           hit,
  output logic [TAG_W-1:0]   tag,
  output logic               out_of_range
);
  timeunit 1ns; timeprecision 1ps;

  logic [TAPS-1:0]     taps_q;
  logic                x_valid, x_bit;
  logic [COARSE_W-1:0] coarse_q, coarse_d1;
  logic [FINE_W:0]     ones, ones_q;

  // Taps and the edge detector are sampled on the same clock edge.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) taps_q <= '0;
    else        taps_q <= taps;
  end

  edge_sampler #(.SYNC_STAGES(1)) u_edge (
    .clk    (clk),
    .rst_n  (rst_n),
    .spad_in(taps[0]),
    .x_valid(x_valid),
    .x_bit  (x_bit)
  );

  always_comb begin
    ones = '0;
    for (int unsigned k = 0; k < TAPS; k++) ones = ones + (FINE_W+1)'(taps_q[k]);
  end

  // ones_q and the edge detector output both describe the previous sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ones_q <= '0;
    else        ones_q <= ones;
  end

  // Coarse period counter; coarse_d1 is the period of the sample in taps_q.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse_q  <= '0;
      coarse_d1 <= '0;
    end else begin
      coarse_d1 <= coarse_q;
      if (frame_start)                     coarse_q <= '0;
      else if (coarse_q != COARSE_W'(COARSE_MAX)) coarse_q <= coarse_q + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_valid    <= 1'b0;
      hit          <= '0;
      tag          <= '0;
      out_of_range <= 1'b0;
    end else begin
      hit_valid    <= 1'b0;
      out_of_range <= 1'b0;
      if (x_valid && x_bit) begin
        if (coarse_d1 < COARSE_W'(COARSE_MAX)) begin
          hit_valid   <= 1'b1;
          hit.coarse  <= coarse_d1;
          hit.fine    <= FINE_W'(TAPS - int'(ones_q));
          tag         <= TAG_W'(coarse_d1) * TAG_W'(TAPS) + TAG_W'(TAPS - int'(ones_q));
        end else begin
          out_of_range <= 1'b1;
        end
      end
    end
  end

  // A detected hit always has tap 0 high, so at least one tap is set.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (x_valid && x_bit) |-> (ones_q != '0));
endmodule
