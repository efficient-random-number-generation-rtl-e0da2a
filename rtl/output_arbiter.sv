// output_arbiter -- merges the random words of all extractors into one stream.
//
// Every pixel is an independent generator on each of its two paths, and the
// array's rate is the sum of theirs.  This arbiter collects the words of
// N_SRC sources (valid/ready each) and forwards one per cycle in
// round-robin order, starting the search after the last source served, so
// no source waits for more than N_SRC words.  The output is a registered
// word with the index of its source.  Merging the streams follows the
// paper's idea of multiplexing the pixels; the round-robin policy and the
// handshake are this design's choices.
//
// Handshake: src_valid[i] with src_word[i]; src_ready[i] pulses when the
// word is taken.  out_valid holds with out_word/out_src until out_ready.
module output_arbiter #(
  parameter int unsigned N_SRC = 128,
  parameter int unsigned W     = qrng_pkg::WORD_W,
  localparam int unsigned SW   = $clog2(N_SRC)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_SRC-1:0]      src_valid,
  input  logic [N_SRC-1:0][W-1:0] src_word,
  output logic [N_SRC-1:0]      src_ready,
  output logic [W-1:0]          out_word,
  output logic [SW-1:0]         out_src,
  output logic                  out_valid,
  input  logic                  out_ready
);
  timeunit 1ns; timeprecision 1ps;

  logic [SW-1:0] last_q;     // last source served
  logic [SW-1:0] pick;
  logic          found;
  logic          take;

  assign take = !out_valid || out_ready;

  always_comb begin
    pick  = '0;
    found = 1'b0;
    for (int unsigned k = 1; k <= N_SRC; k++) begin
      int unsigned s;
      s = (int'(last_q) + k) % N_SRC;
      if (!found && src_valid[s]) begin
        found = 1'b1;
        pick  = SW'(s);
      end
    end
  end

  always_comb begin
    src_ready = '0;
    if (take && found) src_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= SW'(N_SRC - 1);
      out_word  <= '0;
      out_src   <= '0;
      out_valid <= 1'b0;
    end else if (take) begin
      out_valid <= found;
      if (found) begin
        out_word <= src_word[pick];
        out_src  <= pick;
        last_q   <= pick;
      end
    end
  end

  // The output must stay stable while it waits for out_ready.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> (out_valid && $stable(out_word) && $stable(out_src)));
endmodule
