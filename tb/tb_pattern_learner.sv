// tb_pattern_learner: checks the curriculum stages (2:4/1:4 only, then 1:3,
// then the irregular format) advancing after 4 consecutive successes and a
// failure resetting the streak, the rule for a miss, and reuse of a stored
// successful pattern for the same characteristics.
module tb_pattern_learner;
  import mgua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, ack, hit, fb_valid = 0, fb_ok = 0, advanced;
  logic [2:0] fits = 0;
  logic [3:0] density = 0;
  pattern_e pattern;
  logic [1:0] stage;
  int checks = 0, failures = 0;

  pattern_learner dut (.clk, .rst_n, .req, .fits, .density, .ack, .pattern, .hit, .stage,
    .fb_valid, .fb_ok, .advanced);

  task automatic ask(logic [2:0] f, int d, pattern_e exp, logic exp_hit, string what);
    @(negedge clk) begin req = 1; fits = f; density = 4'(d); end
    @(negedge clk) req = 0;
    checks++;
    if (!ack || pattern != exp || hit != exp_hit) begin
      failures++;
      $display("FAIL %s: pattern=%0d exp %0d hit=%0b exp %0b stage=%0d", what, pattern, exp, hit, exp_hit, stage);
    end
  endtask

  task automatic fb(logic ok);
    @(negedge clk) begin fb_valid = 1; fb_ok = ok; end
    @(negedge clk) fb_valid = 0;
  endtask

  task automatic expect_stage(int s);
    checks++;
    if (stage != 2'(s)) begin failures++; $display("FAIL stage %0d exp %0d", stage, s); end
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
    expect_stage(0);
    ask(3'b000, 9, PAT_2_4, 0, "dense stage0 -> 2:4 lossy");
    ask(3'b100, 5, PAT_2_4, 0, "1:3 fits but not allowed");
    ask(3'b011, 3, PAT_1_4, 0, "1:4 fits");
    fb(1); fb(1); fb(1);
    fb(0);                       // streak reset
    expect_stage(0);
    ask(3'b011, 3, PAT_1_4, 1, "stored 1:4");
    ask(3'b101, 5, PAT_2_4, 0, "2:4 fits, 1:3 not allowed");
    fb(1); fb(1); fb(1); fb(1);
    expect_stage(1);
    ask(3'b101, 5, PAT_2_4, 1, "stored 2:4 reused");
    ask(3'b100, 6, PAT_1_3, 0, "1:3 allowed at stage 1");
    ask(3'b000, 10, PAT_2_4, 0, "dense stage1 -> 2:4");
    fb(1); fb(1); fb(1); fb(1);
    expect_stage(2);
    ask(3'b000, 11, PAT_LEARNED, 0, "dense stage2 -> learned");
    fb(1);
    ask(3'b000, 11, PAT_LEARNED, 1, "stored learned");
    ask(3'b000, 10, PAT_2_4, 1, "stored 2:4 for that key");
    fb(1); fb(1); fb(1); fb(1);
    expect_stage(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
