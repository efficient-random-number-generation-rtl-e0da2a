// peres_tree_step -- one input bit pushed through a streaming Peres tree.
//
// Peres' procedure Psi(s) = Psi_N(s) || Psi(Psi_U(s)) || Psi(Psi_V(s))
// is unrolled into a binary tree of von Neumann nodes, stored as a heap:
// node 0 takes the raw stream, node i passes its U stream (XOR of each
// pair) to node 2i+1 and its V stream (the common value of each 00 or 11
// pair) to node 2i+2.  Every node keeps one pending bit.  When a second bit
// arrives the pair is complete: a 01 or 10 pair emits its first bit (the
// von Neumann output), the XOR goes to the U child and, for an equal pair,
// the value goes to the V child.  Recursion stops at DEPTH levels; the
// leaves are plain von Neumann extractors.  The recursion is the paper's;
// the fixed depth and the stream (rather than block) form are this
// design's choices.  The bits a tree emits are the same as block Peres on
// the whole stream, only interleaved differently.
//
// Purely combinational: state_pend/state_bit is the current state, the
// *_n outputs are the state after the input bit, out_valid[i]/out_bit[i]
// the bit node i emits for this input (at most one per node).
module peres_tree_step #(
  parameter int unsigned DEPTH = 6,
  localparam int unsigned NODES = (1 << DEPTH) - 1
) (
  input  logic             in_valid,
  input  logic             in_bit,
  input  logic [NODES-1:0] state_pend,
  input  logic [NODES-1:0] state_bit,
  output logic [NODES-1:0] next_pend,
  output logic [NODES-1:0] next_bit,
  output logic [NODES-1:0] out_valid,
  output logic [NODES-1:0] out_bit
);
  timeunit 1ns; timeprecision 1ps;

  logic [NODES-1:0] node_v;   // node i receives a bit
  logic [NODES-1:0] node_b;   // value of that bit
  logic [NODES-1:0] pair;     // node i completes a pair
  logic [NODES-1:0] first;    // first bit of the completed pair

  // Each node's input depends only on its parent (a lower heap index).
  always_comb begin
    node_v = '0;
    node_b = '0;
    node_v[0] = in_valid;
    node_b[0] = in_bit;
    for (int unsigned i = 1; i < NODES; i++) begin
      int unsigned p;
      p = (i - 1) / 2;
      if (i % 2 == 1) begin                         // U child of p
        node_v[i] = node_v[p] & state_pend[p];
        node_b[i] = state_bit[p] ^ node_b[p];
      end else begin                                // V child of p
        node_v[i] = node_v[p] & state_pend[p] & ~(state_bit[p] ^ node_b[p]);
        node_b[i] = state_bit[p];
      end
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < NODES; i++) begin
      pair[i]      = node_v[i] & state_pend[i];
      first[i]     = state_bit[i];
      out_valid[i] = pair[i] & (first[i] ^ node_b[i]);
      out_bit[i]   = first[i];
      next_pend[i] = node_v[i] ? ~state_pend[i] : state_pend[i];
      next_bit[i]  = (node_v[i] & ~state_pend[i]) ? node_b[i] : state_bit[i];
    end
  end
endmodule
