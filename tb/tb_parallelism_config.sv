// tb_parallelism_config: checks the parallelism memory: a miss searches and
// returns the shape with the fewest passes (reference enumerates the same
// shapes in the testbench), the shape is stored and a later request for the
// same layer type hits it even if the layer sizes changed, and a low
// utilization history (below 95% of expected) forces a new search.
module tb_parallelism_config;
  import mgua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, ack, hit, searched, util_push = 0, util_low;
  logic [3:0] layer_type = 0, bits = 8;
  logic [7:0] co = 20, ci = 20, wd = 20;
  par_cfg_t cfg;
  logic [31:0] passes;
  logic [15:0] util_sample = 0, util_expected = 50000;
  int checks = 0, failures = 0;

  parallelism_config dut (.clk, .rst_n, .req, .layer_type, .co, .ci, .wd, .bits, .ack, .cfg, .hit,
    .searched, .passes, .util_push, .util_sample, .util_expected, .util_low);

  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic best(output par_cfg_t c, output int p);
    int pc;
    p = 1 << 30; c = '0;
    for (int m = 0; m <= 4; m++) for (int v = 0; v <= 4; v++) for (int n = 0; n <= 4; n++)
      if (8 - m - v - n >= 0 && 8 - m - v - n <= 4) begin
        pc = cdiv(co, 1 << m) * cdiv(ci, 1 << v) * cdiv(wd, 1 << n) * cdiv(bits, 1 << (8 - m - v - n));
        if (pc < p) begin p = pc; c = '{lg_m: 3'(m), lg_v: 3'(v), lg_n: 3'(n), lg_s: 3'(8 - m - v - n)}; end
      end
  endtask

  task automatic ask(int lt, logic exp_search, par_cfg_t exp_cfg, string what);
    @(negedge clk) begin req = 1; layer_type = 4'(lt); end
    @(negedge clk) req = 0;
    checks++;
    if (!ack || searched != exp_search || cfg != exp_cfg) begin
      failures++;
      $display("FAIL %s: ack=%0b searched=%0b cfg=%h exp %h", what, ack, searched, cfg, exp_cfg);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    par_cfg_t c1, c2;
    int p1, p2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    best(c1, p1);
    ask(1, 1, c1, "first miss");
    checks++; if (passes != 32'(p1)) begin failures++; $display("FAIL passes %0d exp %0d", passes, p1); end
    co = 64; ci = 3; wd = 32; bits = 4;
    best(c2, p2);
    ask(1, 0, c1, "hit keeps stored shape");
    ask(2, 1, c2, "other type searches");
    // random layers on fresh types
    for (int t = 3; t < 16; t++) begin
      co = 8'($urandom_range(1, 128)); ci = 8'($urandom_range(1, 128));
      wd = 8'($urandom_range(1, 64)); bits = 4'($urandom_range(1, 8));
      best(c2, p2);
      ask(t, 1, c2, "random miss");
    end
    // low utilization history -> re-search on type 1 with current sizes
    @(negedge clk) begin util_push = 1; util_sample = 16'd1000; end
    @(negedge clk) util_push = 0;
    checks++; if (!util_low) begin failures++; $display("FAIL util_low not set"); end
    co = 64; ci = 3; wd = 32; bits = 4;
    best(c2, p2);
    ask(1, 1, c2, "re-search on low utilization");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
