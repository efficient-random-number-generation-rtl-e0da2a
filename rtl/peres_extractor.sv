// peres_extractor -- streaming Peres debiaser with registered tree state.
//
// Wraps peres_tree_step (see there for the algorithm) with the tree state
// in flip-flops, so that it accepts one input bit per clock.  It is the
// per-pixel extractor of the coarse path and, with HOLDOFF = 18 in front,
// the whole post-processing of the single-SPAD generator.
//
// Interface: in_valid/in_bit one sample per cycle at most; out_valid and
// out_bit are registered vectors (one bit per tree node, node 0 first)
// holding the bits extracted from the sample given one cycle earlier.
// Reset empties every node.
module peres_extractor #(
  parameter int unsigned DEPTH = 6,
  localparam int unsigned NODES = (1 << DEPTH) - 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_bit,
  output logic [NODES-1:0] out_valid,
  output logic [NODES-1:0] out_bit
);
  timeunit 1ns; timeprecision 1ps;

  logic [NODES-1:0] pend_q, bit_q, pend_n, bit_n, ov, ob;

  peres_tree_step #(.DEPTH(DEPTH)) u_step (
    .in_valid  (in_valid),
    .in_bit    (in_bit),
    .state_pend(pend_q),
    .state_bit (bit_q),
    .next_pend (pend_n),
    .next_bit  (bit_n),
    .out_valid (ov),
    .out_bit   (ob)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q    <= '0;
      bit_q     <= '0;
      out_valid <= '0;
      out_bit   <= '0;
    end else begin
      pend_q    <= pend_n;
      bit_q     <= bit_n;
      out_valid <= ov;
      out_bit   <= ob & ov;
    end
  end
endmodule
