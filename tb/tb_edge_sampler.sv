// tb_edge_sampler -- random SPAD levels, changing between clock edges, are
// sampled; the expected x_j is computed from the levels the testbench held
// at each clock edge: 1 exactly when the level seen SYNC_STAGES edges ago
// is high and the one before it is low.  Also checks that every photon
// pulse yields exactly one 1 (the sampling rule of Eq. 1).
module tb_edge_sampler;
  timeunit 1ns; timeprecision 1ps;

  localparam int SYNC = 2;
  logic clk = 0, rst_n = 0, spad_in = 0;
  logic x_valid, x_bit;
  int checks = 0, failures = 0;
  bit lv[$];          // level at each clock edge after reset
  int pulses = 0, ones = 0;

  edge_sampler #(.SYNC_STAGES(SYNC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(posedge clk);
      lv.push_back(spad_in);           // level present at this edge
      #($urandom_range(2, 8));
      if (spad_in == 0 && $urandom_range(9) == 0) begin spad_in = 1; pulses++; end
      else if (spad_in == 1 && $urandom_range(2) == 0) spad_in = 0;
      // check the output registered at this edge
      if (lv.size() >= SYNC + 2) begin
        int n;
        bit exp;
        n = lv.size();
        // x registered at edge n-1 uses level of edge n-1-SYNC and the one before
        exp = lv[n-1-SYNC] && !lv[n-2-SYNC];
        checks++;
        if (!x_valid || x_bit != exp) begin
          failures++;
          if (failures < 5) $display("FAIL edge %0d exp %0d got %0d", n, exp, x_bit);
        end
        ones += int'(x_bit);
      end
    end
    checks++;
    // pulses that started in the last SYNC+1 cycles are not out yet
    if (ones > pulses || ones < pulses - 3) begin
      failures++;
      $display("FAIL ones %0d pulses %0d", ones, pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
