// fem_array: element-matrix assembly A = sum_s sum_t B_s C_st B_t^T.
//
// B is the NB x NQ basis tabulation (NB basis functions at NQ quadrature
// points), C the NQ x NQ geometry tensor. A[i][j] = sum_s sum_t
// B[i][s] C[s][t] B[j][t]. The array has NB*NQ multiply-accumulate cells for
// T = B C and NB*NB cells for A = T B^T, both output stationary with operands
// broadcast: phase 1 takes NQ clocks (one s per clock), phase 2 NQ clocks (one
// t per clock). NB = 20 and NQ = 8 are the method's typical sizes.
//
// Mixed precision: on start, B is truncated to u_p and C to u_m significand
// bits; every product and every partial sum is truncated to u_q; the final A
// is truncated to u_s (see mgua_pkg::round_sig). The four roles follow the
// method; emulating a format by significand truncation on integer data (no
// exponent range) and the broadcast (unskewed) array are this design's.
//
// Timing: start (one clock, while idle) captures bmat/cmat/cfg; done pulses
// 2*NQ+1 clocks later with amat valid until the next start.
module fem_array
  import mgua_pkg::*;
#(
  parameter int NB     = 20,
  parameter int NQ     = 8,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  prec_cfg_t                cfg,
  input  logic signed [DATA_W-1:0] bmat [NB][NQ],
  input  logic signed [DATA_W-1:0] cmat [NQ][NQ],
  output logic signed [ACC_W-1:0]  amat [NB][NB],
  output logic                     busy,
  output logic                     done
);
  typedef enum logic [1:0] {S_IDLE, S_BC, S_TB, S_STORE} state_e;
  state_e state;
  logic [$clog2(NQ)-1:0] k;
  prec_cfg_t cfg_q;
  logic signed [ACC_W-1:0] br [NB][NQ];
  logic signed [ACC_W-1:0] cr [NQ][NQ];
  logic signed [ACC_W-1:0] tm [NB][NQ];
  logic signed [ACC_W-1:0] acc [NB][NB];

  int unsigned bq;
  assign bq = sig_bits(cfg_q.uq);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      done  <= 1'b0;
      cfg_q <= '0;
      for (int i = 0; i < NB; i++) begin
        for (int q = 0; q < NQ; q++) begin
          br[i][q] <= '0;
          tm[i][q] <= '0;
        end
        for (int j = 0; j < NB; j++) begin
          acc[i][j]  <= '0;
          amat[i][j] <= '0;
        end
      end
      for (int s = 0; s < NQ; s++)
        for (int t = 0; t < NQ; t++) cr[s][t] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          for (int i = 0; i < NB; i++)
            for (int q = 0; q < NQ; q++) begin
              br[i][q] <= round_sig(ACC_W'(bmat[i][q]), sig_bits(cfg.up));
              tm[i][q] <= '0;
            end
          for (int s = 0; s < NQ; s++)
            for (int t = 0; t < NQ; t++) cr[s][t] <= round_sig(ACC_W'(cmat[s][t]), sig_bits(cfg.um));
          for (int i = 0; i < NB; i++)
            for (int j = 0; j < NB; j++) acc[i][j] <= '0;
          k     <= '0;
          state <= S_BC;
        end
        S_BC: begin
          // T[i][t] += B[i][k] * C[k][t]
          for (int i = 0; i < NB; i++)
            for (int t = 0; t < NQ; t++)
              tm[i][t] <= round_sig(tm[i][t] + round_sig(br[i][k] * cr[k][t], bq), bq);
          k <= (int'(k) == NQ - 1) ? '0 : k + 1'b1;
          if (int'(k) == NQ - 1) state <= S_TB;
        end
        S_TB: begin
          // A[i][j] += T[i][k] * B[j][k]
          for (int i = 0; i < NB; i++)
            for (int j = 0; j < NB; j++)
              acc[i][j] <= round_sig(acc[i][j] + round_sig(tm[i][k] * br[j][k], bq), bq);
          k <= (int'(k) == NQ - 1) ? '0 : k + 1'b1;
          if (int'(k) == NQ - 1) state <= S_STORE;
        end
        default: begin
          for (int i = 0; i < NB; i++)
            for (int j = 0; j < NB; j++) amat[i][j] <= round_sig(acc[i][j], sig_bits(cfg_q.us));
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
