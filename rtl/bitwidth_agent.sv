// bitwidth_agent: experience-driven spike bit-width per layer.
//
// Keeps a bit-width b for each of LAYERS layers (reset to BMAX = 8, the
// method's upper bound on spike precision) and an experience buffer of recent
// accuracy samples (a short-term memory). `bits` is the prediction for
// `layer`, read combinationally. Each accuracy report (fb_valid, fb_layer,
// fb_acc) is recorded; on the next clock, if the buffer's mean is below 95%
// of fb_expected the layer gets one more bit (up to BMAX), and if the reported
// accuracy reached fb_expected it gives up one bit (down to BMIN) to save
// time steps. The method describes a learning agent without giving its rule;
// this increment/decrement rule is the simplest one that trades accuracy
// against bit-width and is this design's choice.
module bitwidth_agent #(
  parameter int LAYERS    = 16,
  parameter int BMAX      = 8,
  parameter int BMIN      = 2,
  parameter int STM_DEPTH = 100
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(LAYERS)-1:0] layer,
  output logic [3:0]                bits,
  input  logic                      fb_valid,
  input  logic [$clog2(LAYERS)-1:0] fb_layer,
  input  logic [15:0]               fb_acc,
  input  logic [15:0]               fb_expected,
  output logic                      widened,
  output logic                      narrowed
);
  logic [3:0] tbl [LAYERS];
  logic       pend, met, below;
  logic [$clog2(LAYERS)-1:0] pend_layer;

  stm_buffer #(.DEPTH(STM_DEPTH), .W(16), .PCT(95)) u_exp (
    .clk, .rst_n, .push(fb_valid), .sample(fb_acc), .expected(fb_expected),
    .count(), .sum(), .below(below)
  );

  assign bits = tbl[layer];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAYERS; i++) tbl[i] <= 4'(BMAX);
      pend       <= 1'b0;
      met        <= 1'b0;
      pend_layer <= '0;
      widened    <= 1'b0;
      narrowed   <= 1'b0;
    end else begin
      pend       <= fb_valid;
      pend_layer <= fb_layer;
      met        <= fb_acc >= fb_expected;
      widened    <= 1'b0;
      narrowed   <= 1'b0;
      if (pend) begin
        if (below) begin
          if (int'(tbl[pend_layer]) < BMAX) begin
            tbl[pend_layer] <= tbl[pend_layer] + 1'b1;
            widened         <= 1'b1;
          end
        end else if (met && int'(tbl[pend_layer]) > BMIN) begin
          tbl[pend_layer] <= tbl[pend_layer] - 1'b1;
          narrowed        <= 1'b1;
        end
      end
    end
  end
endmodule
