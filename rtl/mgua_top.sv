// mgua_top: memory-guided unified accelerator, one element end to end.
//
// Three stages share one pipeline controller: adaptive-precision FEM,
// spatiotemporal spiking array, adaptive sparse tensor array. One task runs:
//   1. kappa_estimator      condition number of the element Jacobian
//   2. precision_selector   (u_p, u_m, u_q, u_s) from L_precision / defaults
//   3. fem_array            A = sum_s sum_t B_s C_st B_t^T in those precisions
//   4. bitwidth_agent       spike bit-width b for `layer`
//      parallelism_config   array shape (M, V, N, S) for `layer`
//   5. snn_array            Y = W x X, X = A scaled to b-bit spike trains
//   6. sparsity_analyzer    characteristics of Y scaled to 16 bits
//      pattern_learner      pattern from curriculum stage and L_sparsity
//   7. sparse_engine        out = Y x B_sp on the 4x4 sparse array
// The stage order and the memory-guided decisions follow the method. The
// conversions between stages are this design's: A >>> fem_shift saturated to
// b bits becomes the spike input, Y >>> snn_shift saturated to 16 bits the
// sparse operand. After stage 5 the achieved utilization
// (65536 * active / (passes * 256), saturated) is fed back to the
// parallelism memory's short-term history. Accuracy feedback for the
// precision, bit-width and sparsity decisions comes from the host ports.
//
// Interface: pulse start while idle; hold all data inputs until done pulses.
// out, and the decisions taken (kappa, prec_cfg, bits, par_cfg, pattern),
// stay valid until the next start. task_cycles counts the clocks of the task.
module mgua_top
  import mgua_pkg::*;
#(
  parameter int NB     = 20,
  parameter int NQ     = 8,
  parameter int SNN_CO = 20,
  parameter int SP_C   = 20,
  parameter int LTM_ENTRIES = 10000,
  parameter int STM_DEPTH   = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  // stage 1 inputs
  input  logic signed [15:0] jac  [3][3],
  input  logic [1:0]         elem_type,
  input  logic signed [15:0] bmat [NB][NQ],
  input  logic signed [15:0] cmat [NQ][NQ],
  // stage 2 inputs
  input  logic [3:0]         layer,
  input  logic signed [7:0]  wts  [SNN_CO][NB],
  input  logic [5:0]         fem_shift,
  // stage 3 inputs
  input  logic signed [15:0] spb  [NB][SP_C],
  input  logic [5:0]         snn_shift,
  // host feedback
  input  logic               prec_fb_valid,
  input  logic [15:0]        prec_fb_acc,
  input  logic [15:0]        prec_fb_expected,
  input  logic               bw_fb_valid,
  input  logic [3:0]         bw_fb_layer,
  input  logic [15:0]        bw_fb_acc,
  input  logic [15:0]        bw_fb_expected,
  input  logic               sp_fb_valid,
  input  logic               sp_fb_ok,
  input  logic [15:0]        util_expected,
  // results
  output logic signed [47:0] out  [SNN_CO][SP_C],
  output logic               busy,
  output logic               done,
  output logic [31:0]        kappa,
  output prec_cfg_t          prec_cfg,
  output logic               prec_hit,
  output logic [3:0]         bits,
  output par_cfg_t           par_cfg,
  output logic               par_hit,
  output logic               par_searched,
  output logic               util_low,
  output pattern_e           pattern,
  output logic               pat_hit,
  output logic [1:0]         cur_stage,
  output logic               fem_saturated,
  output logic [15:0]        snn_passes,
  output logic [15:0]        sp_cycles,
  output logic [31:0]        task_cycles
);
  typedef enum logic [3:0] {
    T_IDLE, T_KAPPA, T_PREC, T_FEM, T_PAR, T_SNN, T_PAT, T_SP
  } tstate_e;
  tstate_e st;

  // ---- stage 1 ----------------------------------------------------------
  logic              k_valid;
  logic [31:0]       k_val;
  logic              ps_ack, ps_hit;
  prec_cfg_t         ps_cfg;
  logic signed [63:0] amat [NB][NB];
  logic              fem_done;

  kappa_estimator #(.DATA_W(16), .KAPPA_W(32)) u_kappa (
    .clk, .rst_n, .in_valid(st == T_IDLE && start), .jac, .out_valid(k_valid), .kappa(k_val)
  );

  precision_selector #(.LTM_ENTRIES(LTM_ENTRIES), .STM_DEPTH(STM_DEPTH)) u_prec (
    .clk, .rst_n, .req(k_valid && st == T_KAPPA), .kappa(k_val), .elem_type,
    .ack(ps_ack), .cfg(ps_cfg), .hit(ps_hit),
    .fb_valid(prec_fb_valid), .fb_acc(prec_fb_acc), .fb_expected(prec_fb_expected), .promoted()
  );

  fem_array #(.NB(NB), .NQ(NQ), .DATA_W(16), .ACC_W(64)) u_fem (
    .clk, .rst_n, .start(ps_ack && st == T_PREC), .cfg(ps_cfg), .bmat, .cmat,
    .amat, .busy(), .done(fem_done)
  );

  // ---- stage 2 ----------------------------------------------------------
  logic [3:0]        bw_bits;
  logic              pc_ack, pc_hit, pc_searched, pc_low;
  par_cfg_t          pc_cfg;
  logic signed [7:0] xin [NB][NB];
  logic signed [31:0] yout [SNN_CO][NB];
  logic              snn_done;
  logic [15:0]       snn_cyc;
  logic [31:0]       snn_act;
  logic              util_push;
  logic [15:0]       util_sample;
  logic              sat_any;

  bitwidth_agent #(.LAYERS(16), .BMAX(8), .BMIN(2), .STM_DEPTH(STM_DEPTH)) u_bw (
    .clk, .rst_n, .layer, .bits(bw_bits),
    .fb_valid(bw_fb_valid), .fb_layer(bw_fb_layer), .fb_acc(bw_fb_acc), .fb_expected(bw_fb_expected),
    .widened(), .narrowed()
  );

  parallelism_config #(.PES_LG2(8), .LTM_ENTRIES(LTM_ENTRIES), .STM_DEPTH(STM_DEPTH)) u_par (
    .clk, .rst_n, .req(fem_done && st == T_FEM), .layer_type(layer),
    .co(8'(SNN_CO)), .ci(8'(NB)), .wd(8'(NB)), .bits(bw_bits),
    .ack(pc_ack), .cfg(pc_cfg), .hit(pc_hit), .searched(pc_searched), .passes(),
    .util_push, .util_sample, .util_expected, .util_low(pc_low)
  );

  // FEM result -> b-bit two's-complement spike input.
  always_comb begin
    logic signed [63:0] v, lo, hi;
    sat_any = 1'b0;
    hi = (64'sd1 <<< (int'(bits) - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (int'(bits) - 1));
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < NB; j++) begin
        v = amat[i][j] >>> fem_shift;
        if (v > hi) begin
          v = hi;
          sat_any = 1'b1;
        end else if (v < lo) begin
          v = lo;
          sat_any = 1'b1;
        end
        xin[i][j] = 8'(v);
      end
  end

  snn_array #(.PES_LG2(8), .MT(SNN_CO), .VT(NB), .NT(NB), .XB(8), .WB(8), .OW(32)) u_snn (
    .clk, .rst_n, .start(pc_ack && st == T_PAR), .cfg(pc_cfg), .bits,
    .m_cnt(8'(SNN_CO)), .v_cnt(8'(NB)), .n_cnt(8'(NB)), .xin, .wts,
    .out(yout), .busy(), .done(snn_done), .cycles(snn_cyc), .active(snn_act)
  );

  always_comb begin
    logic [63:0] q;
    q = (snn_cyc == '0) ? 64'd0 : (64'(snn_act) << 16) / (64'(snn_cyc) << 8);
    util_sample = (q > 64'd65535) ? 16'hFFFF : q[15:0];
    util_push   = snn_done && st == T_SNN;
  end

  // ---- stage 3 ----------------------------------------------------------
  logic signed [15:0] spa [SNN_CO][NB];
  logic [2:0]        an_fits;
  logic [3:0]        an_density;
  logic              pl_ack, pl_hit;
  pattern_e          pl_pat;
  logic [1:0]        pl_stage;
  logic              sp_done;
  logic [15:0]       sp_cyc;
  logic              pat_req_sent;

  always_comb begin
    logic signed [31:0] v;
    for (int i = 0; i < SNN_CO; i++)
      for (int j = 0; j < NB; j++) begin
        v = yout[i][j] >>> snn_shift;
        if (v > 32'sd32767)       spa[i][j] = 16'sh7FFF;
        else if (v < -32'sd32768) spa[i][j] = -16'sh8000;
        else                      spa[i][j] = 16'(v);
      end
  end

  sparsity_analyzer #(.R(SNN_CO), .K(NB), .DATA_W(16)) u_an (
    .amat(spa), .nnz(), .fits(an_fits), .density(an_density)
  );

  pattern_learner #(.LTM_ENTRIES(LTM_ENTRIES), .ADV_THRESH(4)) u_pat (
    .clk, .rst_n, .req(st == T_PAT && !pat_req_sent), .fits(an_fits), .density(an_density),
    .ack(pl_ack), .pattern(pl_pat), .hit(pl_hit), .stage(pl_stage),
    .fb_valid(sp_fb_valid), .fb_ok(sp_fb_ok), .advanced()
  );

  sparse_engine #(.ROWS(4), .COLS(4), .R(SNN_CO), .K(NB), .C(SP_C), .DATA_W(16), .ACC_W(48), .LANES(4)) u_sp (
    .clk, .rst_n, .start(pl_ack && st == T_PAT), .pattern(pl_pat), .amat(spa), .bmat(spb),
    .out, .busy(), .done(sp_done), .cycles(sp_cyc)
  );

  // ---- task controller --------------------------------------------------

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st            <= T_IDLE;
      done          <= 1'b0;
      kappa         <= '0;
      prec_cfg      <= '0;
      prec_hit      <= 1'b0;
      bits          <= 4'd8;
      par_cfg       <= '0;
      par_hit       <= 1'b0;
      par_searched  <= 1'b0;
      pattern       <= PAT_2_4;
      pat_hit       <= 1'b0;
      fem_saturated <= 1'b0;
      snn_passes    <= '0;
      sp_cycles     <= '0;
      task_cycles   <= '0;
      pat_req_sent  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st != T_IDLE) task_cycles <= task_cycles + 1'b1;
      case (st)
        T_IDLE:  if (start) begin
          st          <= T_KAPPA;
          task_cycles <= 32'd1;
        end
        T_KAPPA: if (k_valid) begin
          kappa <= k_val;
          st    <= T_PREC;
        end
        T_PREC:  if (ps_ack) begin
          prec_cfg <= ps_cfg;
          prec_hit <= ps_hit;
          st       <= T_FEM;
        end
        T_FEM:   if (fem_done) begin
          bits <= bw_bits;
          st   <= T_PAR;
        end
        T_PAR:   if (pc_ack) begin
          par_cfg       <= pc_cfg;
          par_hit       <= pc_hit;
          par_searched  <= pc_searched;
          fem_saturated <= sat_any;
          st            <= T_SNN;
        end
        T_SNN:   if (snn_done) begin
          snn_passes   <= snn_cyc;
          pat_req_sent <= 1'b0;
          st           <= T_PAT;
        end
        T_PAT: begin
          pat_req_sent <= 1'b1;
          if (pl_ack) begin
            pattern <= pl_pat;
            pat_hit <= pl_hit;
            st      <= T_SP;
          end
        end
        T_SP:    if (sp_done) begin
          sp_cycles <= sp_cyc;
          done      <= 1'b1;
          st        <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign busy      = (st != T_IDLE);
  assign util_low  = pc_low;
  assign cur_stage = pl_stage;
endmodule
