// edge_sampler -- clocked sampling of a SPAD output (rule of Eq. 1).
//
// The SPAD output is a level that rises at a photon detection and falls
// back after a fixed time shorter than the dead time.  The sampler takes
// the level at every clock edge and emits x_j = 1 for the sample that is
// high while the previous sample was low, x_j = 0 otherwise, so every
// detection yields exactly one 1.  The rule is the paper's; the optional
// synchronizer stages in front (SYNC_STAGES, 2 for an asynchronous SPAD
// input, 1 where the input is already a sampled delay-line tap) are this
// design's choice.
//
// Interface: spad_in (asynchronous level), x_valid pulses every cycle after
// reset, x_bit is the sample bit.  Latency: SYNC_STAGES + 1 cycles from the
// clock edge that first sees the level high to x_bit.
module edge_sampler #(
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic spad_in,
  output logic x_valid,
  output logic x_bit
);
  timeunit 1ns; timeprecision 1ps;

  logic [SYNC_STAGES-1:0] sync_q;
  logic                   prev_q;
  logic                   level;

  assign level = sync_q[SYNC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q  <= '0;
      prev_q  <= 1'b0;
      x_valid <= 1'b0;
      x_bit   <= 1'b0;
    end else begin
      sync_q  <= (sync_q << 1) | SYNC_STAGES'(spad_in);
      prev_q  <= level;
      x_valid <= 1'b1;
      x_bit   <= level & ~prev_q;   // U now, L one clock earlier
    end
  end
endmodule
