// parallelism_config: memory-guided choice of the spike array's shape.
//
// Returns log2(M, V, N, S) for a layer. The long-term memory (L_parallelism)
// is keyed by layer type; a hit returns the stored shape. On a miss, or when
// the short-term utilization memory (S_util) reports a window mean below 95% of
// the expected utilization, the block searches every shape with
// M*V*N*S = 2^PES_LG2 and each dimension 1..16, choosing the one with the
// fewest passes ceil(Co/M)*ceil(Ci/V)*ceil(W/N)*ceil(b/S) (first found on a
// tie, enumeration order M, V, N outermost to innermost), and stores it. Keying
// by layer type and consulting utilization history follow the method; the
// exhaustive pass-count search is this design's rule.
//
// Timing: req is answered by ack with cfg on the next clock; the store of a
// new shape happens at the same edge as ack.
module parallelism_config
  import mgua_pkg::*;
#(
  parameter int PES_LG2     = 8,
  parameter int LTM_ENTRIES = 10000,
  parameter int STM_DEPTH   = 100
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic [3:0]  layer_type,
  input  logic [7:0]  co,
  input  logic [7:0]  ci,
  input  logic [7:0]  wd,
  input  logic [3:0]  bits,
  output logic        ack,
  output par_cfg_t    cfg,
  output logic        hit,
  output logic        searched,
  output logic [31:0] passes,
  input  logic        util_push,
  input  logic [15:0] util_sample,
  input  logic [15:0] util_expected,
  output logic        util_low
);
  logic        lk_hit;
  logic [15:0] lk_data;
  par_cfg_t    best;
  logic [31:0] best_passes;
  logic        use_mem, do_search;

  function automatic int unsigned ceil_sh(int unsigned x, int unsigned lg);
    return (x + (1 << lg) - 1) >> lg;
  endfunction

  always_comb begin
    int unsigned pc;
    best        = '0;
    best_passes = '1;
    for (int lm = 0; lm <= PAR_LG_MAX; lm++)
      for (int lv = 0; lv <= PAR_LG_MAX; lv++)
        for (int ln = 0; ln <= PAR_LG_MAX; ln++) begin
          int ls;
          ls = PES_LG2 - lm - lv - ln;
          if (ls >= 0 && ls <= PAR_LG_MAX) begin
            pc = ceil_sh(int'(co), lm) * ceil_sh(int'(ci), lv) * ceil_sh(int'(wd), ln)
               * ceil_sh(int'(bits), ls);
            if (pc < best_passes) begin
              best_passes = pc;
              best = '{lg_m: 3'(lm), lg_v: 3'(lv), lg_n: 3'(ln), lg_s: 3'(ls)};
            end
          end
        end
    use_mem   = lk_hit && !util_low;
    do_search = req && !use_mem;
  end

  ltm_table #(.ENTRIES(LTM_ENTRIES), .KEY_W(4), .DATA_W(16)) u_lpar (
    .clk, .rst_n,
    .lk_en(req), .lk_key(layer_type), .lk_hit(lk_hit), .lk_data(lk_data),
    .wr_en(do_search), .wr_key(layer_type), .wr_data(16'(best)), .occupancy()
  );

  stm_buffer #(.DEPTH(STM_DEPTH), .W(16), .PCT(95)) u_sutil (
    .clk, .rst_n, .push(util_push), .sample(util_sample), .expected(util_expected),
    .count(), .sum(), .below(util_low)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack      <= 1'b0;
      cfg      <= '0;
      hit      <= 1'b0;
      searched <= 1'b0;
      passes   <= '0;
    end else begin
      ack <= req;
      if (req) begin
        hit      <= lk_hit;
        searched <= do_search;
        cfg      <= use_mem ? par_cfg_t'(lk_data[11:0]) : best;
        passes   <= best_passes;
      end
    end
  end
endmodule
