// tb_sparsity_analyzer: checks nonzero count, density bucket and the three
// lossless-fit flags against a group-by-group count in the testbench, on
// constructed tensors (one nonzero per group of 12 positions fits all three
// patterns; two per group of 4 fits only 2:4) and random ones.
module tb_sparsity_analyzer;
  localparam int R = 20, K = 20;
  logic signed [15:0] amat [R][K];
  logic [15:0] nnz;
  logic [2:0] fits;
  logic [3:0] density;
  int checks = 0, failures = 0;

  sparsity_analyzer dut (.amat, .nnz, .fits, .density);

  task automatic check(string what);
    int c, mx4, mx3, cnt, d;
    c = 0; mx4 = 0; mx3 = 0;
    for (int r = 0; r < R; r++) begin
      for (int k = 0; k < K; k++) if (amat[r][k] != 0) c++;
      for (int g = 0; g < K; g += 4) begin
        cnt = 0;
        for (int k = g; k < g + 4 && k < K; k++) if (amat[r][k] != 0) cnt++;
        if (cnt > mx4) mx4 = cnt;
      end
      for (int g = 0; g < K; g += 3) begin
        cnt = 0;
        for (int k = g; k < g + 3 && k < K; k++) if (amat[r][k] != 0) cnt++;
        if (cnt > mx3) mx3 = cnt;
      end
    end
    d = c * 16 / (R * K); if (d > 15) d = 15;
    #1;
    checks++;
    if (nnz != 16'(c) || density != 4'(d) || fits != {mx3 <= 1, mx4 <= 1, mx4 <= 2}) begin
      failures++;
      $display("FAIL %s: nnz=%0d/%0d density=%0d/%0d fits=%b/%b", what, nnz, c, density, d, fits,
               {mx3 <= 1, mx4 <= 1, mx4 <= 2});
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) amat[r][k] = (k % 12 == 0) ? 16'sd5 : 16'sd0;
    check("sparse");
    #1; checks++; if (fits != 3'b111) begin failures++; $display("FAIL fits %b", fits); end
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) amat[r][k] = (k % 4 < 2) ? -16'sd3 : 16'sd0;
    check("2:4");
    #1; checks++; if (fits != 3'b001) begin failures++; $display("FAIL fits 2:4 %b", fits); end
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) amat[r][k] = 16'sd1;
    check("dense");
    #1; checks++; if (fits != 3'b000 || density != 15) begin failures++; $display("FAIL dense"); end
    for (int t = 0; t < 200; t++) begin
      int keep;
      keep = $urandom_range(1, 30);
      for (int r = 0; r < R; r++) for (int k = 0; k < K; k++)
        amat[r][k] = ($urandom_range(0, 99) < keep) ? 16'($urandom_range(1, 1000)) : 16'sd0;
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
