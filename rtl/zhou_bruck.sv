// zhou_bruck -- Zhou-Bruck extraction of the fine (delay-line) codes.
//
// The fine codes 0..N_VALUES-1 of a pixel are far from uniform, and the bits
// of their binary form are correlated, so they cannot go to a Peres
// extractor directly.  Zhou and Bruck's construction, as the paper applies
// it, writes each code with B = ceil(log2 N_VALUES) bits, most significant
// first, and sends bit i to a sequence selected by the i bits before it:
// one sequence for the first bit, two for the second, ..., 2^(B-1) for the
// last, 2^B - 1 sequences in all, numbered as a heap
// (sequence = 2^i - 1 + prefix).  Within one sequence the bits are biased
// but independent, and each sequence is debiased by its own Peres tree.
// The paper counts the sequences as 2^i - 1 for bit i and N = 2^B in
// total; the binary split it describes gives 2^(i-1) and 2^B - 1, which is
// what is built here.
//
// Only one sequence is touched per bit, so the trees share one
// peres_tree_step and keep their state in a memory of 2^B - 1 words; a
// code is processed in B cycles, one bit per cycle, and the extractor is
// busy meanwhile.  A code offered while busy is dropped and flagged on
// drop (the detector dead time, 16 clock periods, leaves room for B = 8).
// The time sharing and the Peres depth are this design's choices.
//
// Interface: in_valid/in_code; out_valid/out_bit registered vectors of the
// tree nodes of the sequence processed one cycle earlier.
module zhou_bruck #(
  parameter int unsigned N_VALUES = qrng_pkg::N_TAPS,
  parameter int unsigned DEPTH    = 4,
  localparam int unsigned B       = $clog2(N_VALUES),
  localparam int unsigned NODES   = (1 << DEPTH) - 1,
  localparam int unsigned SEQS    = (1 << B) - 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [B-1:0]     in_code,
  output logic             busy,
  output logic             drop,
  output logic [NODES-1:0] out_valid,
  output logic [NODES-1:0] out_bit
);
  timeunit 1ns; timeprecision 1ps;

  localparam int unsigned SW = $clog2(SEQS);
  localparam int unsigned IW = $clog2(B + 1);

  typedef struct packed {
    logic [NODES-1:0] pend;
    logic [NODES-1:0] bits;
  } tree_state_t;

  tree_state_t    state_mem [SEQS];
  logic [SEQS-1:0] used_q;          // sequence has received a bit since reset
  logic [B-1:0]   code_q;
  logic [IW-1:0]  idx_q;            // bit position being processed, 0 = MSB
  logic [SW-1:0]  seq;
  logic           cur_bit;
  tree_state_t    cur, nxt;
  logic [NODES-1:0] ov, ob;

  assign busy = (idx_q != '0);

  // Sequence of bit idx: heap node reached by the idx preceding bits.
  always_comb begin
    logic [B-1:0] prefix;
    prefix  = code_q >> (B - int'(idx_q));
    seq     = SW'((1 << idx_q) - 1) + SW'(prefix);
    cur_bit = code_q[B-1-int'(idx_q)];
    if (idx_q == '0) begin
      prefix  = '0;
      seq     = '0;
      cur_bit = in_code[B-1];
    end
    cur = used_q[seq] ? state_mem[seq] : '0;
  end

  // idx_q == 0 with in_valid starts a code with its first bit this cycle.
  logic step;
  assign step = busy || in_valid;

  peres_tree_step #(.DEPTH(DEPTH)) u_step (
    .in_valid  (step),
    .in_bit    (cur_bit),
    .state_pend(cur.pend),
    .state_bit (cur.bits),
    .next_pend (nxt.pend),
    .next_bit  (nxt.bits),
    .out_valid (ov),
    .out_bit   (ob)
  );

  always_ff @(posedge clk) begin
    if (step) state_mem[seq] <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used_q    <= '0;
      code_q    <= '0;
      idx_q     <= '0;
      drop      <= 1'b0;
      out_valid <= '0;
      out_bit   <= '0;
    end else begin
      drop      <= busy && in_valid;
      out_valid <= step ? ov : '0;
      out_bit   <= step ? (ob & ov) : '0;
      if (step) used_q[seq] <= 1'b1;
      if (!busy && in_valid) begin
        code_q <= in_code;
        idx_q  <= IW'(1);
      end else if (busy) begin
        idx_q  <= (idx_q == IW'(B - 1)) ? '0 : idx_q + 1'b1;
      end
    end
  end
endmodule
