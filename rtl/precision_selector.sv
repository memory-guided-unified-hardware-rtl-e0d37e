// precision_selector: memory-guided choice of the four FEM precisions.
//
// For each element the selector forms a key from the element type and the
// condition-number range floor(log2 kappa), and looks it up in the long-term
// memory (L_precision). A hit returns the stored successful pattern
// (u_p, u_m, u_q, u_s). A miss applies a default: well-conditioned elements
// (kappa < 2^ILL_LOG2) get bf16 basis, fp32 geometry, bf16 matrix operations
// and fp16 storage; ill-conditioned elements get fp64 throughout.
//
// Accuracy feedback for the last element goes into a short-term memory
// (S_batch). One clock later, if S_batch reports a window mean below 95% of
// the expected accuracy, every field of the last configuration is raised one
// level and that is stored; otherwise the last configuration is stored as a
// successful pattern. Lookup by condition range and element type, the two
// memories and the 95% trigger follow the method; the range boundaries, the
// defaults' details and the promotion rule are this design's choices.
//
// Timing: req is answered by ack with cfg/hit on the next clock.
module precision_selector
  import mgua_pkg::*;
#(
  parameter int LTM_ENTRIES = 10000,
  parameter int STM_DEPTH   = 100,
  parameter int KAPPA_W     = 32,
  parameter int ILL_LOG2    = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req,
  input  logic [KAPPA_W-1:0] kappa,
  input  logic [1:0]         elem_type,
  output logic               ack,
  output prec_cfg_t          cfg,
  output logic               hit,
  input  logic               fb_valid,
  input  logic [15:0]        fb_acc,
  input  logic [15:0]        fb_expected,
  output logic               promoted
);
  logic [5:0]  bucket;
  logic [7:0]  key, last_key;
  logic        lk_hit;
  logic [15:0] lk_data;
  prec_cfg_t   dflt, last_cfg, store_cfg;
  logic        fb_pend, below, wr_en;

  always_comb begin
    bucket = '0;
    for (int i = 0; i < KAPPA_W; i++) if (kappa[i]) bucket = 6'(i);
    key = {elem_type, bucket};
    if (int'(bucket) >= ILL_LOG2) dflt = '{up: PREC_FP64, um: PREC_FP64, uq: PREC_FP64, us: PREC_FP64};
    else                          dflt = '{up: PREC_BF16, um: PREC_FP32, uq: PREC_BF16, us: PREC_FP16};
    store_cfg = below ? prec_cfg_t'{up: prec_up(last_cfg.up), um: prec_up(last_cfg.um),
                                    uq: prec_up(last_cfg.uq), us: prec_up(last_cfg.us)}
                      : last_cfg;
    wr_en = fb_pend;
  end

  ltm_table #(.ENTRIES(LTM_ENTRIES), .KEY_W(8), .DATA_W(16)) u_lprec (
    .clk, .rst_n,
    .lk_en(req), .lk_key(key), .lk_hit(lk_hit), .lk_data(lk_data),
    .wr_en(wr_en), .wr_key(last_key), .wr_data(16'(store_cfg)), .occupancy()
  );

  stm_buffer #(.DEPTH(STM_DEPTH), .W(16), .PCT(95)) u_sbatch (
    .clk, .rst_n, .push(fb_valid), .sample(fb_acc), .expected(fb_expected),
    .count(), .sum(), .below(below)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack      <= 1'b0;
      hit      <= 1'b0;
      cfg      <= '0;
      last_cfg <= '0;
      last_key <= '0;
      fb_pend  <= 1'b0;
      promoted <= 1'b0;
    end else begin
      ack      <= req;
      fb_pend  <= fb_valid;
      promoted <= 1'b0;
      if (req) begin
        hit      <= lk_hit;
        cfg      <= lk_hit ? prec_cfg_t'(lk_data[7:0]) : dflt;
        last_cfg <= lk_hit ? prec_cfg_t'(lk_data[7:0]) : dflt;
        last_key <= key;
      end else if (fb_pend) begin
        last_cfg <= store_cfg;
        promoted <= below;
      end
    end
  end
endmodule
