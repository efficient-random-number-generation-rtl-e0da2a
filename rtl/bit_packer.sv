// bit_packer -- gathers the scattered output bits of an extractor into words.
//
// Each cycle up to N_IN bits arrive, flagged by in_valid.  They are taken in
// index order and appended behind the bits already held in an accumulator
// of ACC_W bits; the first bit received ends up in bit 0 of a word.  As soon
// as W bits are held a word is offered on word/word_valid and leaves on a
// cycle with word_ready high.  Bits that do not fit in the accumulator are
// dropped and raise the sticky overflow flag.  The paper only says that the
// extracted bits form the output; the packing is this design's own.
//
// Timing: a bit that arrives in cycle t can be in a word offered in t+1.
module bit_packer #(
  parameter int unsigned N_IN  = 63,
  parameter int unsigned W     = 32,
  parameter int unsigned ACC_W = 2 * W + N_IN
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] in_valid,
  input  logic [N_IN-1:0] in_bit,
  output logic [W-1:0]    word,
  output logic            word_valid,
  input  logic            word_ready,
  output logic            overflow
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned CW = $clog2(ACC_W + 1);

  logic [ACC_W-1:0] acc_q, acc_n;
  logic [CW-1:0]    cnt_q, cnt_n;
  logic             load, drop;

  // A word slot is free when nothing is offered or the offer is taken.
  assign load = (!word_valid || word_ready) && (cnt_q >= CW'(W));

  always_comb begin
    acc_n = acc_q;
    cnt_n = cnt_q;
    drop  = 1'b0;
    if (load) begin
      acc_n = acc_q >> W;
      cnt_n = cnt_q - CW'(W);
    end
    for (int unsigned i = 0; i < N_IN; i++) begin
      if (in_valid[i]) begin
        if (cnt_n < CW'(ACC_W)) begin
          acc_n[cnt_n] = in_bit[i];
          cnt_n        = cnt_n + 1'b1;
        end else begin
          drop = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      cnt_q      <= '0;
      word       <= '0;
      word_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      acc_q <= acc_n;
      cnt_q <= cnt_n;
      if (load) begin
        word       <= acc_q[W-1:0];
        word_valid <= 1'b1;
      end else if (word_ready) begin
        word_valid <= 1'b0;
      end
      if (drop) overflow <= 1'b1;
    end
  end
endmodule
