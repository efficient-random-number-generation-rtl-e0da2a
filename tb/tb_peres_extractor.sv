// tb_peres_extractor -- checks the streaming Peres tree against the block
// recursion.  Random biased inputs (with idle cycles) are fed in; the bits
// each node emits are collected and compared, node by node and in order,
// with the reference.  A short hand-worked vector is checked first:
// 1,0 -> node 0 emits 1; 1,1,0,0 -> U gets 0,0 and V gets 1,0, so node 2
// (V) emits 1.  The one-cycle latency is checked on the first vector.
module tb_peres_extractor;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;

  localparam int DEPTH = 4;
  localparam int NODES = (1 << DEPTH) - 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_bit = 0;
  logic [NODES-1:0] out_valid, out_bit;
  int checks = 0, failures = 0;

  peres_extractor #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  bitq_t sent;
  bitq_t got [NODES];

  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NODES; i++) if (out_valid[i]) got[i].push_back(out_bit[i]);

  task automatic push(input bit b);
    in_valid = 1; in_bit = b;
    @(posedge clk); #1;
    in_valid = 0;
    sent.push_back(b);
  endtask

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // hand vector: pair 1,0 -> node 0 emits 1, one cycle after the second bit
    push(1);
    push(0);
    check(out_valid[0] && out_bit[0] && out_valid[NODES-1:1] == '0, "10 -> node0 emits 1 after one cycle");
    push(1); push(1); push(0); push(0);
    @(posedge clk); #1;
    // after 1,0,1,1,0,0: U = 1,0,0 -> node1 pair (1,0) emits 1; V = 1,0 -> node2 emits 1
    check(got[1].size() == 1 && got[1][0] == 1, "node1 (U) emits 1");
    check(got[2].size() == 1 && got[2][0] == 1, "node2 (V) emits 1");
    // random biased stream with gaps
    for (int n = 0; n < 20000; n++) begin
      if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      push($urandom_range(99) < 20);
    end
    repeat (3) @(posedge clk);
    for (int i = 0; i < NODES; i++) begin
      bitq_t exp;
      exp = node_output(sent, i);
      check(exp.size() == got[i].size(), $sformatf("node %0d count %0d vs %0d", i, got[i].size(), exp.size()));
      if (exp.size() == got[i].size())
        foreach (exp[k]) if (exp[k] != got[i][k]) begin
          check(0, $sformatf("node %0d bit %0d", i, k));
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
