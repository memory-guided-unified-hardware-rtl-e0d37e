// tb_snn_array: checks the bit-serial spike array at its default size
// (20 x 20 x 20, 256 elements) against a direct signed matrix product
// W x X computed in the testbench, for several shapes (including the fixed
// 4x4x4x4 and skewed ones), bit-widths 1..8 and partial layer sizes. Also
// checks that the pass count equals ceil(Co/M)ceil(Ci/V)ceil(W/N)ceil(b/S)
// and that active counts exactly Co*Ci*W*b element operations.
module tb_snn_array;
  import mgua_pkg::*;
  localparam int MT = 20, VT = 20, NT = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  par_cfg_t cfg;
  logic [3:0] bits;
  logic [7:0] m_cnt, v_cnt, n_cnt;
  logic signed [7:0] xin [VT][NT];
  logic signed [7:0] wts [MT][VT];
  logic signed [31:0] out [MT][NT];
  logic [15:0] cycles;
  logic [31:0] active;
  int checks = 0, failures = 0;

  snn_array dut (.clk, .rst_n, .start, .cfg, .bits, .m_cnt, .v_cnt, .n_cnt, .xin, .wts,
    .out, .busy, .done, .cycles, .active);

  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  task automatic run(int lm, int lv, int ln, int ls, int b, int mc, int vc, int nc);
    int exp_pass, lat, bad;
    longint s;
    cfg = '{lg_m: 3'(lm), lg_v: 3'(lv), lg_n: 3'(ln), lg_s: 3'(ls)};
    bits = 4'(b); m_cnt = 8'(mc); v_cnt = 8'(vc); n_cnt = 8'(nc);
    // inputs within the b-bit signed range
    for (int v = 0; v < VT; v++) for (int n = 0; n < NT; n++)
      xin[v][n] = 8'($signed($urandom_range(0, (1 << b) - 1)) - (1 << (b - 1)));
    for (int m = 0; m < MT; m++) for (int v = 0; v < VT; v++) wts[m][v] = 8'($urandom);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    exp_pass = cdiv(mc, 1 << lm) * cdiv(vc, 1 << lv) * cdiv(nc, 1 << ln) * cdiv(b, 1 << ls);
    checks++;
    if (cycles != 16'(exp_pass) || lat != exp_pass + 1) begin
      failures++; $display("FAIL passes %0d lat %0d exp %0d", cycles, lat, exp_pass);
    end
    checks++;
    if (active != 32'(mc * vc * nc * b)) begin failures++; $display("FAIL active %0d", active); end
    bad = 0;
    for (int m = 0; m < MT; m++) for (int n = 0; n < NT; n++) begin
      s = 0;
      if (m < mc && n < nc) for (int v = 0; v < vc; v++) s += longint'(wts[m][v]) * xin[v][n];
      checks++;
      if (longint'(out[m][n]) != s) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL out[%0d][%0d]=%0d exp %0d (cfg %0d%0d%0d%0d b=%0d)", m, n, out[m][n], s, lm, lv, ln, ls, b);
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
    cfg = '0; bits = 8; m_cnt = 0; v_cnt = 0; n_cnt = 0;
    for (int v = 0; v < VT; v++) for (int n = 0; n < NT; n++) xin[v][n] = 0;
    for (int m = 0; m < MT; m++) for (int v = 0; v < VT; v++) wts[m][v] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(2, 2, 2, 2, 8, 20, 20, 20);
    run(2, 2, 2, 2, 4, 20, 20, 20);
    run(3, 2, 3, 0, 1, 20, 20, 20);
    run(4, 1, 1, 2, 3, 17, 9, 5);
    run(0, 4, 1, 3, 8, 20, 20, 20);
    run(1, 2, 3, 2, 6, 13, 20, 11);
    for (int t = 0; t < 6; t++) begin
      int m, v, n, s;
      m = $urandom_range(0, 4); v = $urandom_range(0, 4 < 8 - m ? 4 : 8 - m);
      n = 8 - m - v > 4 ? 4 : 8 - m - v; s = 8 - m - v - n;
      if (s > 4) begin s = 4; end
      run(m, v, n, s, $urandom_range(1, 8), $urandom_range(1, 20), $urandom_range(1, 20), $urandom_range(1, 20));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
