// tb_stm_buffer: checks the short-term memory window (DEPTH = 100) against a
// queue model: count, running sum after wrap-around, and the below-95% flag
// on both sides of the threshold.
module tb_stm_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0;
  logic [15:0] sample = 0, expected = 1000;
  logic [6:0]  count;
  logic [22:0] sum;
  logic        below;
  int checks = 0, failures = 0;
  int q[$];

  stm_buffer dut (.clk, .rst_n, .push, .sample, .expected, .count, .sum, .below);

  task automatic check_state(string what);
    longint s;
    logic b;
    s = 0;
    foreach (q[i]) s += q[i];
    b = (q.size() != 0) && (s * 100 < 95 * longint'(expected) * q.size());
    checks++;
    if (count != q.size() || sum != s || below != b) begin
      failures++;
      $display("FAIL %s: count=%0d/%0d sum=%0d/%0d below=%0b/%0b", what, count, q.size(), sum, s, below, b);
    end
  endtask

  task automatic do_push(int v);
    @(negedge clk) begin push = 1; sample = 16'(v); end
    @(negedge clk) push = 0;
    q.push_back(v);
    if (q.size() > 100) void'(q.pop_front());
    check_state("push");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_state("empty");
    checks++; if (below) begin failures++; $display("FAIL empty flags"); end
    // exactly at 95%: not below
    do_push(950);
    checks++; if (below) begin failures++; $display("FAIL 95%% flagged"); end
    do_push(949);    // mean 949.5 -> not below
    do_push(948);    // sum 2847 < 2850 -> below
    checks++; if (!below) begin failures++; $display("FAIL below not flagged"); end
    for (int i = 0; i < 250; i++) do_push($urandom_range(800, 1200));
    checks++; if (count != 100) begin failures++; $display("FAIL count %0d", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
