// tb_fem_array: checks element-matrix assembly at the default size (NB = 20
// basis functions, NQ = 8 quadrature points). With fp64 everywhere the
// result must equal the exact integer sum_s sum_t B[i][s] C[s][t] B[j][t]. With
// reduced precisions the result must equal a reference that truncates with a
// shift-based routine in the same accumulation order. Also checks that done
// comes 2*NQ+1 clocks after start and that bf16 results differ from exact ones.
module tb_fem_array;
  import mgua_pkg::*;
  localparam int NB = 20, NQ = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  prec_cfg_t cfg;
  logic signed [15:0] bmat [NB][NQ];
  logic signed [15:0] cmat [NQ][NQ];
  logic signed [63:0] amat [NB][NB];
  int checks = 0, failures = 0;

  fem_array dut (.clk, .rst_n, .start, .cfg, .bmat, .cmat, .amat, .busy, .done);

  function automatic int sbits(prec_e p);
    return p == PREC_FP16 ? 11 : p == PREC_BF16 ? 8 : p == PREC_FP32 ? 24 : 53;
  endfunction

  // truncate |x| to nb significant bits by shifting
  function automatic longint tr(longint x, int nb);
    longint unsigned m;
    int sh;
    m = (x < 0) ? -x : x;
    sh = 0;
    while ((m >> sh) >= (64'd1 << nb)) sh++;
    m = (m >> sh) << sh;
    return (x < 0) ? -longint'(m) : longint'(m);
  endfunction

  task automatic run_case(prec_cfg_t c, string what, output int diff_from_exact);
    longint br [NB][NQ], cr [NQ][NQ], tm [NB][NQ], ac, ex;
    int q, lat;
    q = sbits(c.uq);
    for (int i = 0; i < NB; i++) for (int s = 0; s < NQ; s++) br[i][s] = tr(bmat[i][s], sbits(c.up));
    for (int s = 0; s < NQ; s++) for (int t = 0; t < NQ; t++) cr[s][t] = tr(cmat[s][t], sbits(c.um));
    for (int i = 0; i < NB; i++) for (int t = 0; t < NQ; t++) begin
      tm[i][t] = 0;
      for (int s = 0; s < NQ; s++) tm[i][t] = tr(tm[i][t] + tr(br[i][s] * cr[s][t], q), q);
    end
    cfg = c;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    // lat counts negedges from the one after the sampling edge: done is set
    // by the (2*NQ+1)-th edge after the one that sampled start
    if (lat != 2*NQ + 2) begin failures++; $display("FAIL %s latency %0d", what, lat); end
    diff_from_exact = 0;
    for (int i = 0; i < NB; i++) for (int j = 0; j < NB; j++) begin
      ac = 0; ex = 0;
      for (int t = 0; t < NQ; t++) ac = tr(ac + tr(tm[i][t] * br[j][t], q), q);
      ac = tr(ac, sbits(c.us));
      for (int s = 0; s < NQ; s++) for (int t = 0; t < NQ; t++)
        ex += longint'(bmat[i][s]) * cmat[s][t] * bmat[j][t];
      checks++;
      if (amat[i][j] != ac) begin
        failures++;
        if (failures < 10) $display("FAIL %s A[%0d][%0d]=%0d exp %0d", what, i, j, amat[i][j], ac);
      end
      if (amat[i][j] != ex) diff_from_exact++;
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
    int d;
    cfg = '0;
    for (int i = 0; i < NB; i++) for (int s = 0; s < NQ; s++) bmat[i][s] = 16'($urandom);
    for (int s = 0; s < NQ; s++) for (int t = 0; t < NQ; t++) cmat[s][t] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case('{up: PREC_FP64, um: PREC_FP64, uq: PREC_FP64, us: PREC_FP64}, "fp64", d);
    checks++; if (d != 0) begin failures++; $display("FAIL fp64 not exact in %0d entries", d); end
    run_case('{up: PREC_BF16, um: PREC_FP32, uq: PREC_BF16, us: PREC_FP16}, "mixed", d);
    checks++; if (d == 0) begin failures++; $display("FAIL bf16 gave exact result"); end
    run_case('{up: PREC_FP16, um: PREC_FP16, uq: PREC_FP32, us: PREC_FP32}, "fp16/fp32", d);
    for (int i = 0; i < NB; i++) for (int s = 0; s < NQ; s++) bmat[i][s] = 16'($signed($urandom_range(0, 200)) - 100);
    run_case('{up: PREC_FP32, um: PREC_FP32, uq: PREC_FP64, us: PREC_BF16}, "small", d);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
