// tb_output_arbiter -- eight sources each hold a queue of numbered words and
// present the head with valid; out_ready is random.  Every word must come
// out once, tagged with its source, in per-source order; while several
// sources wait, consecutive grants must follow round-robin order (the next
// waiting source after the last one served).
module tb_output_arbiter;
  timeunit 1ns; timeprecision 1ps;

  localparam int N = 8, W = 32;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] src_valid, src_ready;
  logic [N-1:0][W-1:0] src_word;
  logic [W-1:0] out_word;
  logic [$clog2(N)-1:0] out_src;
  logic out_valid, out_ready = 0;
  int checks = 0, failures = 0;
  logic [W-1:0] q [N][$];
  logic [W-1:0] sentq [N][$];
  int total = 0, received = 0, last_src = N - 1;
  logic [N-1:0] waiting_at_grant;

  output_arbiter #(.N_SRC(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  always_comb
    for (int s = 0; s < N; s++) begin
      src_valid[s] = q[s].size() > 0;
      src_word[s]  = (q[s].size() > 0) ? q[s][0] : '0;
    end

  task automatic check(input bit c, input string w);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", w); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      // sample handshakes just before the edge
      #3;
      // expected grant: first waiting source after last_src
      if (src_ready != '0) begin
        int exp;
        exp = -1;
        for (int k = 1; k <= N; k++) if (exp < 0 && src_valid[(last_src + k) % N]) exp = (last_src + k) % N;
        check($onehot(src_ready) && src_ready[exp], $sformatf("round robin grant exp %0d", exp));
        last_src = exp;
      end
      if (out_valid && out_ready) begin
        logic [W-1:0] e;
        e = sentq[out_src].pop_front();
        check(out_word == e, $sformatf("word from src %0d", out_src));
        received++;
      end
      @(posedge clk); #1;
    end
    check(received > 1000, $sformatf("words received %0d", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source side: pop on grant, push new words at random
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) begin
      if (src_ready[s]) void'(q[s].pop_front());
      if ($urandom_range(9) == 0) begin
        logic [W-1:0] w;
        w = {8'(s), 24'(total)};
        q[s].push_back(w);
        sentq[s].push_back(w);
        total++;
      end
    end
    out_ready <= ($urandom_range(2) != 0);
  end
endmodule
