// tb_mgua_top: end-to-end test of the unified accelerator at its default
// sizes (20 x 20 element matrices, 8 quadrature points, 256-element spike
// array, 4x4 sparse array, 10000-entry long-term and 100-entry short-term
// memories). It runs a sequence of element tasks with host feedback between
// them and checks, for every task, the final output tensor against a
// reference computed in the testbench from the data and the decisions the
// design reports (precisions, bit-width, shape, pattern), plus kappa, the
// spike-array pass count and the sparse-array clock count. Scenario checks
// verify the decisions themselves. Each mechanism is counted and must occur
// at least once: default precision (well / ill conditioned), precision
// memory hit, precision promotion, bit-width narrowing and widening,
// parallelism search, parallelism hit, low-utilization re-search, spike
// saturation (at 8 bits and at a narrowed 6-bit width), each of the four
// patterns, pattern memory hit and both curriculum advances.
module tb_mgua_top;
  import mgua_pkg::*;
  import sparse_ref_pkg::*;
  localparam int NB = 20, NQ = 8, CO = 20, SC = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic signed [15:0] jac [3][3];
  logic [1:0] elem_type = 0;
  logic signed [15:0] bmat [NB][NQ];
  logic signed [15:0] cmat [NQ][NQ];
  logic [3:0] layer = 0;
  logic signed [7:0] wts [CO][NB];
  logic [5:0] fem_shift = 0, snn_shift = 0;
  logic signed [15:0] spb [NB][SC];
  logic prec_fb_valid = 0, bw_fb_valid = 0, sp_fb_valid = 0, sp_fb_ok = 0;
  logic [15:0] prec_fb_acc = 0, prec_fb_expected = 1000, bw_fb_acc = 0, bw_fb_expected = 1000;
  logic [3:0] bw_fb_layer = 0;
  logic [15:0] util_expected = 0;
  logic signed [47:0] out [CO][SC];
  logic busy, done, prec_hit, par_hit, par_searched, util_low, pat_hit, fem_saturated;
  logic [31:0] kappa, task_cycles;
  prec_cfg_t prec_cfg;
  logic [3:0] bits;
  par_cfg_t par_cfg;
  pattern_e pattern;
  logic [1:0] cur_stage;
  logic [15:0] snn_passes, sp_cycles;

  localparam prec_cfg_t WELL = '{up: PREC_BF16, um: PREC_FP32, uq: PREC_BF16, us: PREC_FP16};
  localparam prec_cfg_t ILL  = '{up: PREC_FP64, um: PREC_FP64, uq: PREC_FP64, us: PREC_FP64};
  localparam prec_cfg_t PROM = '{up: PREC_FP32, um: PREC_FP64, uq: PREC_FP32, us: PREC_BF16};

  int checks = 0, failures = 0;
  int n_well = 0, n_ill = 0, n_phit = 0, n_prom = 0, n_narrow = 0, n_widen = 0, n_search = 0,
      n_parhit = 0, n_research = 0, n_sat = 0, n_pat [4] = '{0, 0, 0, 0}, n_pathit = 0, n_adv = 0,
      n_sat_prev = 0, n_sat_narrow = 0;

  mgua_top dut (.clk, .rst_n, .start, .jac, .elem_type, .bmat, .cmat, .layer, .wts, .fem_shift,
    .spb, .snn_shift, .prec_fb_valid, .prec_fb_acc, .prec_fb_expected, .bw_fb_valid, .bw_fb_layer,
    .bw_fb_acc, .bw_fb_expected, .sp_fb_valid, .sp_fb_ok, .util_expected, .out, .busy, .done,
    .kappa, .prec_cfg, .prec_hit, .bits, .par_cfg, .par_hit, .par_searched, .util_low, .pattern,
    .pat_hit, .cur_stage, .fem_saturated, .snn_passes, .sp_cycles, .task_cycles);

  function automatic int sbits(prec_e p);
    return p == PREC_FP16 ? 11 : p == PREC_BF16 ? 8 : p == PREC_FP32 ? 24 : 53;
  endfunction
  function automatic longint tr(longint x, int nb);
    longint unsigned m;
    int sh;
    m = (x < 0) ? -x : x;
    sh = 0;
    while ((m >> sh) >= (64'd1 << nb)) sh++;
    m = (m >> sh) << sh;
    return (x < 0) ? -longint'(m) : longint'(m);
  endfunction
  function automatic longint labs(longint v); return v < 0 ? -v : v; endfunction
  function automatic int cdiv(int a, int b); return (a + b - 1) / b; endfunction

  function automatic longint unsigned ref_kappa();
    longint a, b, c, d, e, f, g, h, i, det;
    longint adj [3][3];
    longint unsigned n1, n2, s;
    a = jac[0][0]; b = jac[0][1]; c = jac[0][2];
    d = jac[1][0]; e = jac[1][1]; f = jac[1][2];
    g = jac[2][0]; h = jac[2][1]; i = jac[2][2];
    adj[0][0] = e*i - f*h; adj[0][1] = c*h - b*i; adj[0][2] = b*f - c*e;
    adj[1][0] = f*g - d*i; adj[1][1] = a*i - c*g; adj[1][2] = c*d - a*f;
    adj[2][0] = d*h - e*g; adj[2][1] = b*g - a*h; adj[2][2] = a*e - b*d;
    det = a*adj[0][0] + b*adj[1][0] + c*adj[2][0];
    n1 = 0; n2 = 0;
    for (int col = 0; col < 3; col++) begin
      s = labs(jac[0][col]) + labs(jac[1][col]) + labs(jac[2][col]);
      if (s > n1) n1 = s;
      s = labs(adj[0][col]) + labs(adj[1][col]) + labs(adj[2][col]);
      if (s > n2) n2 = s;
    end
    if (det == 0) return 64'hFFFF_FFFF;
    s = (n1 * n2) / longint'(labs(det));
    return (s > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : s;
  endfunction

  // Runs one task and checks the output against the reference chain.
  task automatic run_task(string what);
    longint br [NB][NQ], cr [NQ][NQ], tm [NB][NQ], am [NB][NB], y [CO][NB], s, hi, lo, v;
    logic signed [15:0] sa [20][20];
    logic signed [15:0] pr [20][20];
    int q, n, m, bad, exp_pass, sat;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    // kappa
    checks++;
    if (64'(kappa) != ref_kappa()) begin failures++; $display("FAIL %s kappa %0d exp %0d", what, kappa, ref_kappa()); end
    // stage 1 reference
    q = sbits(prec_cfg.uq);
    for (int i = 0; i < NB; i++) for (int k = 0; k < NQ; k++) br[i][k] = tr(bmat[i][k], sbits(prec_cfg.up));
    for (int a = 0; a < NQ; a++) for (int b = 0; b < NQ; b++) cr[a][b] = tr(cmat[a][b], sbits(prec_cfg.um));
    for (int i = 0; i < NB; i++) for (int t = 0; t < NQ; t++) begin
      tm[i][t] = 0;
      for (int k = 0; k < NQ; k++) tm[i][t] = tr(tm[i][t] + tr(br[i][k] * cr[k][t], q), q);
    end
    for (int i = 0; i < NB; i++) for (int j = 0; j < NB; j++) begin
      s = 0;
      for (int t = 0; t < NQ; t++) s = tr(s + tr(tm[i][t] * br[j][t], q), q);
      am[i][j] = tr(s, sbits(prec_cfg.us));
    end
    // stage 2 reference: b-bit spikes, W x X
    hi = (64'sd1 <<< (bits - 1)) - 1; lo = -(64'sd1 <<< (bits - 1));
    sat = 0;
    for (int i = 0; i < NB; i++) for (int j = 0; j < NB; j++) begin
      v = am[i][j] >>> fem_shift;
      if (v > hi) begin v = hi; sat = 1; end
      if (v < lo) begin v = lo; sat = 1; end
      am[i][j] = v;
    end
    checks++;
    if (fem_saturated != 1'(sat)) begin failures++; $display("FAIL %s saturation flag", what); end
    if (sat) n_sat++;
    for (int mm = 0; mm < CO; mm++) for (int j = 0; j < NB; j++) begin
      y[mm][j] = 0;
      for (int i = 0; i < NB; i++) y[mm][j] += longint'(wts[mm][i]) * am[i][j];
      v = y[mm][j] >>> snn_shift;
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
      sa[mm][j] = 16'(v);
    end
    exp_pass = cdiv(CO, 1 << par_cfg.lg_m) * cdiv(NB, 1 << par_cfg.lg_v) * cdiv(NB, 1 << par_cfg.lg_n)
             * cdiv(bits, 1 << par_cfg.lg_s);
    checks++;
    if (snn_passes != 16'(exp_pass) || 32'(par_cfg.lg_m) + par_cfg.lg_v + par_cfg.lg_n + par_cfg.lg_s != 8) begin
      failures++; $display("FAIL %s passes %0d exp %0d", what, snn_passes, exp_pass);
    end
    // stage 3 reference
    m = (pattern == PAT_1_3) ? 3 : 4;
    n = (pattern == PAT_2_4) ? 2 : (pattern == PAT_LEARNED) ? 4 : 1;
    prune_ref(CO, NB, n, m, sa, pr);
    checks++;
    if (sp_cycles != 16'(25 * (cdiv(NB, m) + 7))) begin failures++; $display("FAIL %s sparse cycles %0d", what, sp_cycles); end
    bad = 0;
    for (int i = 0; i < CO; i++) for (int j = 0; j < SC; j++) begin
      s = 0;
      for (int k = 0; k < NB; k++) s += longint'(pr[i][k]) * spb[k][j];
      checks++;
      if (longint'(out[i][j]) != s) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL %s out[%0d][%0d]=%0d exp %0d", what, i, j, out[i][j], s);
      end
    end
    n_pat[pattern]++;
    if (pat_hit) n_pathit++;
    if (par_searched) n_search++;
    if (par_hit && !par_searched) n_parhit++;
    if (par_hit && par_searched) n_research++;
    if (prec_hit) n_phit++;
    $display("%s: kappa=%0d prec=%h hit=%0b bits=%0d shape=%0d/%0d/%0d/%0d pattern=%0d stage=%0d cycles=%0d",
             what, kappa, prec_cfg, prec_hit, bits, par_cfg.lg_m, par_cfg.lg_v, par_cfg.lg_n, par_cfg.lg_s,
             pattern, cur_stage, task_cycles);
  endtask

  task automatic expect_true(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse_prec(int acc);
    @(negedge clk) begin prec_fb_valid = 1; prec_fb_acc = 16'(acc); end
    @(negedge clk) prec_fb_valid = 0;
    @(negedge clk);
  endtask
  task automatic pulse_bw(int acc);
    @(negedge clk) begin bw_fb_valid = 1; bw_fb_layer = layer; bw_fb_acc = 16'(acc); end
    @(negedge clk) bw_fb_valid = 0;
    @(negedge clk);
  endtask
  task automatic pulse_sp(logic ok);
    logic [1:0] st0;
    st0 = cur_stage;
    @(negedge clk) begin sp_fb_valid = 1; sp_fb_ok = ok; end
    @(negedge clk) sp_fb_valid = 0;
    if (cur_stage != st0) n_adv++;
  endtask

  task automatic set_jac(int d0, int d1, int d2);
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) jac[r][c] = 0;
    jac[0][0] = 16'(d0); jac[1][1] = 16'(d1); jac[2][2] = 16'(d2); jac[0][1] = 16'sd1;
  endtask

  // B rows kept only where keep(row) is true -> columns of the later tensors
  task automatic set_b(int every);
    for (int i = 0; i < NB; i++) for (int k = 0; k < NQ; k++)
      bmat[i][k] = (every == 0 || i % every == 0) ? 16'($signed($urandom_range(0, 60)) - 30) : 16'sd0;
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_jac(2, 3, 4);
    set_b(0);
    for (int a = 0; a < NQ; a++) for (int b = 0; b < NQ; b++) cmat[a][b] = 16'($signed($urandom_range(0, 40)) - 20);
    for (int mm = 0; mm < CO; mm++) for (int i = 0; i < NB; i++) wts[mm][i] = 8'($urandom);
    for (int i = 0; i < NB; i++) for (int j = 0; j < SC; j++) spb[i][j] = 16'($urandom);
    fem_shift = 12; snn_shift = 4;
    util_expected = 16'd1000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1: well-conditioned tet, dense data: default precisions, search, 2:4
    run_task("t1 well dense");
    expect_true(!prec_hit && prec_cfg == WELL, "t1 default well");
    n_well++;
    expect_true(par_searched && bits == 8 && pattern == PAT_2_4 && cur_stage == 0, "t1 decisions");
    pulse_prec(1000);            // good: stored
    pulse_sp(1);
    // 2: same element, 1-in-4 sparse columns: precision hit, parallelism hit, 1:4
    set_b(4);
    run_task("t2 hit sparse");
    expect_true(prec_hit && par_hit && !par_searched && pattern == PAT_1_4, "t2 decisions");
    pulse_sp(1);
    // 3: ill-conditioned hex element: fp64 default
    set_jac(1, 1, 2000); elem_type = ELEM_HEX;
    set_b(0);
    run_task("t3 ill");
    expect_true(!prec_hit && prec_cfg == ILL, "t3 fp64");
    n_ill++;
    // accuracy drop -> promote the hex configuration
    pulse_prec(100);
    pulse_prec(100);
    // 4: back to the well element after a bad window -> promoted pattern stored
    set_jac(2, 3, 4); elem_type = ELEM_TET;
    run_task("t4 tet again");
    expect_true(prec_hit, "t4 hit");
    pulse_prec(100);             // bad again -> tet pattern promoted
    run_task("t5 promoted");
    expect_true(prec_hit && prec_cfg == PROM, "t5 promoted cfg");
    if (prec_cfg.up == PREC_FP32) n_prom++;
    // bit-width: layer 1 reported accurate twice -> 6 bits; the spike array
    // is then under-used (6 of 8 time-step lanes) and, with a high expected
    // utilization, the short-term history drops below 95% -> re-search
    layer = 1;
    repeat (4) pulse_prec(1000);   // refill the precision window
    pulse_bw(1000);
    pulse_bw(1000);
    util_expected = 16'hFFFF;
    for (int t = 0; t < 6; t++) begin
      // the last narrow task is unscaled, so it clips at the 6-bit range
      fem_shift = (t == 5) ? 6'd0 : 6'd12;
      n_sat_prev = n_sat;
      run_task($sformatf("t6.%0d narrow", t));
      expect_true(bits == 6, "bits 6");
      if (bits == 6) n_narrow++;
      if (bits == 6 && n_sat > n_sat_prev) n_sat_narrow++;
    end
    fem_shift = 12;
    expect_true(util_low, "util_low set");
    util_expected = 16'd1000;
    // layer 1 reported bad -> wider again
    pulse_bw(100);
    pulse_bw(100);
    run_task("t7 widen");
    expect_true(bits == 8, "t7 bits back to 8");
    if (bits == 8) n_widen++;
    // saturation of the spike conversion
    fem_shift = 0;
    run_task("t10 saturating");
    fem_shift = 12;
    // curriculum: two successes more reach stage 1 (4 in a row)
    pulse_sp(1); pulse_sp(1);
    expect_true(cur_stage == 1, "stage 1");
    set_b(3);
    run_task("t11 1:3");
    expect_true(pattern == PAT_1_3, "t11 1:3");
    pulse_sp(1); pulse_sp(1); pulse_sp(1); pulse_sp(1);
    expect_true(cur_stage == 2, "stage 2");
    // three nonzero columns in every group of four: no structured fit, and a
    // density bucket not seen before
    for (int i = 0; i < NB; i++) for (int k = 0; k < NQ; k++)
      bmat[i][k] = (i % 4 == 3) ? 16'sd0 : 16'($signed($urandom_range(0, 60)) - 30);
    run_task("t12 learned");
    expect_true(pattern == PAT_LEARNED, "t12 learned");
    pulse_sp(1);
    run_task("t13 pattern memory");
    expect_true(pat_hit && pattern == PAT_LEARNED, "t13 pattern hit");

    expect_true(n_well > 0, "mechanism default well");
    expect_true(n_ill > 0, "mechanism default ill");
    expect_true(n_phit > 0, "mechanism precision hit");
    expect_true(n_prom > 0, "mechanism promotion");
    expect_true(n_narrow > 0, "mechanism narrowing");
    expect_true(n_widen > 0, "mechanism widening");
    expect_true(n_search > 0, "mechanism shape search");
    expect_true(n_parhit > 0, "mechanism shape hit");
    expect_true(n_research > 0, "mechanism low-utilization re-search");
    expect_true(n_sat > 0, "mechanism spike saturation");
    expect_true(n_sat_narrow > 0, "mechanism saturation at a narrowed bit-width");
    for (int p = 0; p < 4; p++) expect_true(n_pat[p] > 0, $sformatf("mechanism pattern %0d", p));
    expect_true(n_pathit > 0, "mechanism pattern memory hit");
    expect_true(n_adv == 2, "mechanism curriculum advance");
    $display("mechanisms: well=%0d ill=%0d phit=%0d prom=%0d narrow=%0d widen=%0d search=%0d parhit=%0d research=%0d sat=%0d/%0d pat=%0d/%0d/%0d/%0d pathit=%0d adv=%0d",
             n_well, n_ill, n_phit, n_prom, n_narrow, n_widen, n_search, n_parhit, n_research, n_sat, n_sat_narrow,
             n_pat[0], n_pat[1], n_pat[2], n_pat[3], n_pathit, n_adv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
