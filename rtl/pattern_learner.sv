// pattern_learner: curriculum-gated, memory-guided sparsity pattern choice.
//
// Chooses the pattern for a tensor among 2:4, 1:4, 1:3 and the irregular
// "learned" format. A curriculum stage limits the choice: stage 0 allows the
// structured 2:4 and 1:4, stage 1 adds the semi-structured 1:3, stage 2 adds
// the irregular format. The stage advances after ADV_THRESH consecutive
// successful (fb_ok) selections. The long-term memory (L_sparsity), keyed by
// the analyzer's characteristics {fits, density}, holds patterns that
// succeeded before; a stored pattern allowed in the current stage is reused.
// Otherwise the sparsest allowed pattern that holds the tensor without loss is
// taken (1:4, then 1:3, then 2:4), else the irregular format if allowed, else
// 2:4 with pruning. The progression structured -> semi-structured ->
// irregular and the memory of successful patterns follow the method; the
// policy network it mentions is replaced by this fixed rule.
//
// Timing: req is answered by ack with pattern on the next clock. A feedback
// (fb_valid, fb_ok) refers to the last answered request.
module pattern_learner
  import mgua_pkg::*;
#(
  parameter int LTM_ENTRIES = 10000,
  parameter int ADV_THRESH  = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req,
  input  logic [2:0] fits,
  input  logic [3:0] density,
  output logic       ack,
  output pattern_e   pattern,
  output logic       hit,
  output logic [1:0] stage,
  input  logic       fb_valid,
  input  logic       fb_ok,
  output logic       advanced
);
  logic [6:0]  key, last_key;
  pattern_e    last_pat, rule_pat, stored_pat;
  logic        lk_hit, use_mem;
  logic [15:0] lk_data;
  logic [7:0]  succ;

  function automatic logic allowed(pattern_e p, logic [1:0] st);
    case (p)
      PAT_1_3:     return st >= 2'd1;
      PAT_LEARNED: return st >= 2'd2;
      default:     return 1'b1;
    endcase
  endfunction

  always_comb begin
    key        = {fits, density};
    stored_pat = pattern_e'(lk_data[1:0]);
    use_mem    = lk_hit && allowed(stored_pat, stage);
    if (fits[1])                          rule_pat = PAT_1_4;
    else if (fits[2] && stage >= 2'd1)    rule_pat = PAT_1_3;
    else if (fits[0])                     rule_pat = PAT_2_4;
    else if (stage >= 2'd2)               rule_pat = PAT_LEARNED;
    else                                  rule_pat = PAT_2_4;
  end

  ltm_table #(.ENTRIES(LTM_ENTRIES), .KEY_W(7), .DATA_W(16)) u_lspar (
    .clk, .rst_n,
    .lk_en(req), .lk_key(key), .lk_hit(lk_hit), .lk_data(lk_data),
    .wr_en(fb_valid && fb_ok), .wr_key(last_key), .wr_data(16'(last_pat)), .occupancy()
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack      <= 1'b0;
      pattern  <= PAT_2_4;
      hit      <= 1'b0;
      stage    <= '0;
      last_key <= '0;
      last_pat <= PAT_2_4;
      succ     <= '0;
      advanced <= 1'b0;
    end else begin
      ack      <= req;
      advanced <= 1'b0;
      if (req) begin
        hit      <= use_mem;
        pattern  <= use_mem ? stored_pat : rule_pat;
        last_pat <= use_mem ? stored_pat : rule_pat;
        last_key <= key;
      end
      if (fb_valid) begin
        if (!fb_ok) succ <= '0;
        else if (int'(succ) + 1 >= ADV_THRESH && stage != 2'd2) begin
          succ     <= '0;
          stage    <= stage + 1'b1;
          advanced <= 1'b1;
        end else succ <= succ + 1'b1;
      end
    end
  end
endmodule
