// tb_kappa_estimator: checks the condition-number estimator against a
// reference computed in the testbench with 64-bit integers (explicit 2x2
// minors, not the cyclic-index form of the design), on known matrices
// (identity, a diagonal, a singular one) and 300 random Jacobians. Also
// checks the one-clock latency.
module tb_kappa_estimator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [15:0] jac [3][3];
  logic [31:0] kappa;
  int checks = 0, failures = 0;

  kappa_estimator dut (.clk, .rst_n, .in_valid, .jac, .out_valid, .kappa);

  function automatic longint labs(longint v); return v < 0 ? -v : v; endfunction

  function automatic longint unsigned ref_kappa(logic signed [15:0] j [3][3]);
    longint a, b, c, d, e, f, g, h, i, det;
    longint adj [3][3];
    longint unsigned n1, n2, s;
    a = j[0][0]; b = j[0][1]; c = j[0][2];
    d = j[1][0]; e = j[1][1]; f = j[1][2];
    g = j[2][0]; h = j[2][1]; i = j[2][2];
    adj[0][0] = e*i - f*h; adj[0][1] = c*h - b*i; adj[0][2] = b*f - c*e;
    adj[1][0] = f*g - d*i; adj[1][1] = a*i - c*g; adj[1][2] = c*d - a*f;
    adj[2][0] = d*h - e*g; adj[2][1] = b*g - a*h; adj[2][2] = a*e - b*d;
    det = a*adj[0][0] + b*adj[1][0] + c*adj[2][0];
    n1 = 0; n2 = 0;
    for (int col = 0; col < 3; col++) begin
      s = labs(j[0][col]) + labs(j[1][col]) + labs(j[2][col]);
      if (s > n1) n1 = s;
      s = labs(adj[0][col]) + labs(adj[1][col]) + labs(adj[2][col]);
      if (s > n2) n2 = s;
    end
    if (det == 0) return 64'hFFFF_FFFF;
    // n1*n2 fits 64 bits for |entries| <= 2^15: n1 < 2^17, n2 < 2^33.
    s = (n1 * n2) / longint'(labs(det));
    return (s > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : s;
  endfunction

  task automatic run(input logic signed [15:0] j [3][3], input string what);
    longint unsigned exp;
    jac = j;
    exp = ref_kappa(j);
    @(negedge clk) in_valid = 1;
    @(negedge clk) in_valid = 0;
    checks++;
    if (!out_valid || 64'(kappa) != exp) begin
      failures++;
      $display("FAIL %s: valid=%0b kappa=%0d exp=%0d", what, out_valid, kappa, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] m [3][3];
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) jac[r][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // identity: kappa 1
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) m[r][c] = (r == c) ? 16'sd1 : 16'sd0;
    run(m, "identity");
    checks++; if (kappa != 1) begin failures++; $display("FAIL identity literal %0d", kappa); end
    // diag(1,2,4): ||J||=4, ||adj||=8, det=8 -> 4
    m[1][1] = 2; m[2][2] = 4;
    run(m, "diag");
    checks++; if (kappa != 4) begin failures++; $display("FAIL diag literal %0d", kappa); end
    // singular
    for (int c = 0; c < 3; c++) begin m[0][c] = 16'(c + 1); m[1][c] = 16'(2*c + 2); m[2][c] = 16'(c); end
    run(m, "singular");
    checks++; if (kappa != 32'hFFFF_FFFF) begin failures++; $display("FAIL singular %0d", kappa); end
    // valid drops after one clock
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
    for (int t = 0; t < 300; t++) begin
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++)
        m[r][c] = (t < 150) ? 16'($signed($urandom_range(0, 200)) - 100) : 16'($urandom);
      run(m, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
