// tb_sparse_compressor: checks the index-based compressed format: for every
// pattern, expanding (value, 2-bit index) lanes back into a dense row must
// equal the pruned reference row; lanes beyond the pattern's n are zero, the
// indices lie inside the group, and the group count is ceil(K/m).
module tb_sparse_compressor;
  import mgua_pkg::*;
  import sparse_ref_pkg::*;
  localparam int R = 20, K = 20, G = 7, L = 4;
  logic signed [15:0] amat [R][K];
  pattern_e pattern;
  logic signed [15:0] vals [R][G][L];
  logic [1:0] idx [R][G][L];
  logic [2:0] groups;
  int checks = 0, failures = 0;

  sparse_compressor dut (.amat, .pattern, .vals, .idx, .groups);

  task automatic check(pattern_e p);
    logic signed [15:0] pr [20][20];
    logic signed [15:0] ex [20][20];
    int n, m, bad;
    m = (p == PAT_1_3) ? 3 : 4;
    n = (p == PAT_2_4) ? 2 : (p == PAT_LEARNED) ? 4 : 1;
    prune_ref(R, K, n, m, amat, pr);
    pattern = p;
    #1;
    checks++;
    if (int'(groups) != (K + m - 1) / m) begin failures++; $display("FAIL groups %0d", groups); end
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) ex[r][k] = 0;
    bad = 0;
    for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) for (int l = 0; l < L; l++) begin
      if (vals[r][g][l] != 0) begin
        if (l >= n || g * m + idx[r][g][l] >= K || idx[r][g][l] >= m || g >= (K + m - 1) / m) bad++;
        else ex[r][g*m + idx[r][g][l]] = vals[r][g][l];
      end
    end
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) if (ex[r][k] != pr[r][k]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL pattern %0d: %0d mismatches", p, bad); end
  endtask

  initial begin
    pattern = PAT_2_4;
    for (int t = 0; t < 40; t++) begin
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++)
        amat[r][k] = ($urandom_range(0, 2) == 0) ? 16'sd0 : 16'($signed($urandom_range(0, 20)) - 10);
      check(PAT_2_4); check(PAT_1_4); check(PAT_1_3); check(PAT_LEARNED);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
