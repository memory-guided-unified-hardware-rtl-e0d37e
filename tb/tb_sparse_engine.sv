// tb_sparse_engine: checks the 4x4 sparse systolic array at its default size
// (A 20 x 20, B 20 x 20) for all four patterns against a reference that
// prunes A in the testbench and multiplies densely. Inputs include a tensor
// that already satisfies 2:4 (result equals the unpruned product) and dense
// random ones. Checks the clock count 25 tiles x (G + 7).
module tb_sparse_engine;
  import mgua_pkg::*;
  localparam int R = 20, K = 20, C = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  pattern_e pattern;
  logic signed [15:0] amat [R][K];
  logic signed [15:0] bmat [K][C];
  logic signed [47:0] out [R][C];
  logic [15:0] cycles;
  int checks = 0, failures = 0;

  import sparse_ref_pkg::*;

  sparse_engine dut (.clk, .rst_n, .start, .pattern, .amat, .bmat, .out, .busy, .done, .cycles);

  task automatic run(pattern_e p, string what);
    logic signed [15:0] pr [20][20];
    int n, m, g, bad;
    longint s;
    m = (p == PAT_1_3) ? 3 : 4;
    n = (p == PAT_2_4) ? 2 : (p == PAT_LEARNED) ? 4 : 1;
    prune_ref(R, K, n, m, amat, pr);
    pattern = p;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    g = (K + m - 1) / m;
    checks++;
    if (cycles != 16'(25 * (g + 7))) begin failures++; $display("FAIL %s cycles %0d exp %0d", what, cycles, 25*(g+7)); end
    bad = 0;
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      s = 0;
      for (int k = 0; k < K; k++) s += longint'(pr[i][k]) * bmat[k][j];
      checks++;
      if (longint'(out[i][j]) != s) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL %s out[%0d][%0d]=%0d exp %0d", what, i, j, out[i][j], s);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pattern = PAT_2_4;
    for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) bmat[k][j] = 16'($urandom);
    // A that holds 2:4 exactly: zero positions 1 and 3 of each group
    for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) amat[i][k] = (k % 2 == 1) ? 16'sd0 : 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(PAT_2_4, "2:4 exact");
    run(PAT_LEARNED, "learned exact");
    for (int i = 0; i < R; i++) for (int k = 0; k < K; k++)
      amat[i][k] = ($urandom_range(0, 2) == 0) ? 16'sd0 : 16'($urandom);
    run(PAT_2_4, "2:4 pruned");
    run(PAT_1_4, "1:4 pruned");
    run(PAT_1_3, "1:3 pruned");
    run(PAT_LEARNED, "learned dense");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
