// tb_zhou_bruck -- random fine codes 0..139 with a strongly non-uniform
// distribution are fed to the extractor.  The reference splits every code
// into its 8 bits, most significant first, sends bit i to the sequence
// named by the i bits before it (heap index 2^i - 1 + prefix), and runs
// block Peres on each sequence.  The bits emitted by the hardware are
// attributed to the sequence being processed and compared node by node.
// Also checks the 8-cycle occupancy per code and the drop flag for a code
// offered while busy.
module tb_zhou_bruck;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;

  localparam int NV = 140, DEPTH = 3, B = 8;
  localparam int NODES = (1 << DEPTH) - 1, SEQS = (1 << B) - 1;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [B-1:0] in_code = '0;
  logic busy, drop;
  logic [NODES-1:0] out_valid, out_bit;
  int checks = 0, failures = 0, drops = 0;
  bitq_t seq_in [SEQS];
  bitq_t got [SEQS][NODES];

  zhou_bruck #(.N_VALUES(NV), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect outputs: results registered at an edge belong to the step
  // taken in the cycle before it
  int step_seq, prev_seq = -1;
  always @(posedge clk) prev_seq <= step_seq;
  always @(negedge clk) begin
    if (rst_n && prev_seq >= 0) begin
      for (int i = 0; i < NODES; i++) if (out_valid[i]) got[prev_seq][i].push_back(out_bit[i]);
    end else if (rst_n) begin
      if (out_valid != '0) begin failures++; $display("FAIL output without step"); end
    end
  end

  initial begin
    step_seq = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int code;
      // non-uniform: clustered around a few values
      case ($urandom_range(3))
        0: code = $urandom_range(60, 75);
        1: code = $urandom_range(100, 139);
        2: code = 64;
        default: code = $urandom_range(0, 139);
      endcase
      in_valid = 1; in_code = B'(code);
      for (int i = 0; i < B; i++) begin
        int prefix, s;
        prefix = (i == 0) ? 0 : (code >> (B - i));
        s = (1 << i) - 1 + prefix;
        seq_in[s].push_back(code[B-1-i]);
      end
      for (int i = 0; i < B; i++) begin
        int prefix;
        prefix = (i == 0) ? 0 : (code >> (B - i));
        step_seq = (1 << i) - 1 + prefix;
        @(posedge clk); #1;
        in_valid = 0;
        if (i < B - 1) check(busy, "busy during code");
        // a code offered while busy must be dropped
        if (n == 5 && i == 2) begin
          in_valid = 1; in_code = 8'd3;
        end
        if (n == 5 && i == 3) begin
          check(drop, "drop flag"); drops++;
        end
      end
      check(!busy, "idle after 8 cycles");
      step_seq = -1;
      @(posedge clk); #1;
    end
    // the dropped code (3) was never processed; compare each sequence
    for (int s = 0; s < SEQS; s++) begin
      for (int i = 0; i < NODES; i++) begin
        bitq_t exp;
        exp = node_output(seq_in[s], i);
        checks++;
        if (exp != got[s][i]) begin
          failures++;
          if (failures < 8) $display("FAIL seq %0d node %0d: %0d vs %0d bits", s, i, got[s][i].size(), exp.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
