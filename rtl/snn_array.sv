// snn_array: spatiotemporal spiking systolic array with reconfigurable shape.
//
// Computes Out[m][n] = sum_v W[m][v] * X[v][n] for multi-bit X by decomposing
// each b-bit value into b binary spike planes (bit k = time step k), so that
// each processing element only gates a weight by a spike, and recombining the
// planes with shift-add: Out = sum_k 2^k (W x S_k), with the top plane weighted
// -2^(b-1) for two's-complement inputs. This follows the method's decomposition
// of multi-bit values into equivalent time steps and shift-add reconstruction.
//
// The array is a pool of 2^PES_LG2 (256 = 4x4x4x4) spike-gated accumulate
// elements. The shape cfg = log2(M, V, N, S) decides how the pool is read as
// an M x V x N x S block: element p maps to (m, v, n, s) from its index bits,
// S lowest. Each clock processes one block (pass) of the layer; passes run
// with S innermost, then V, N and M, covering ceil(m_cnt/M) * ceil(v_cnt/V) *
// ceil(n_cnt/N) * ceil(bits/S) passes. Elements outside the layer are idle and
// not counted in `active`. Any shape with lg_m+lg_v+lg_n+lg_s <= PES_LG2 is
// accepted; the decoding of the pool and the pass order are this design's.
//
// Timing: start (while idle) clears the accumulators; done pulses one clock
// after the last pass; cycles = passes, active = useful element operations.
module snn_array
  import mgua_pkg::*;
#(
  parameter int PES_LG2 = 8,
  parameter int MT      = 20,
  parameter int VT      = 20,
  parameter int NT      = 20,
  parameter int XB      = 8,
  parameter int WB      = 8,
  parameter int OW      = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  par_cfg_t             cfg,
  input  logic [3:0]           bits,
  input  logic [7:0]           m_cnt,
  input  logic [7:0]           v_cnt,
  input  logic [7:0]           n_cnt,
  input  logic signed [XB-1:0] xin [VT][NT],
  input  logic signed [WB-1:0] wts [MT][VT],
  output logic signed [OW-1:0] out [MT][NT],
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          cycles,
  output logic [31:0]          active
);
  localparam int PES = 1 << PES_LG2;

  par_cfg_t cfg_q;
  logic [3:0] bits_q;
  logic [7:0] mc_q, vc_q, nc_q;
  int unsigned tm, tv, tn, ts;              // pass indices (in blocks)
  int unsigned ntm, ntv, ntn, nts;          // pass counts
  logic signed [OW-1:0] delta [MT][NT];
  logic [PES_LG2:0] nact;

  function automatic int unsigned ceil_sh(int unsigned x, int unsigned lg);
    return (x + (1 << lg) - 1) >> lg;
  endfunction

  always_comb begin
    ntm = ceil_sh(int'(mc_q), int'(cfg_q.lg_m));
    ntv = ceil_sh(int'(vc_q), int'(cfg_q.lg_v));
    ntn = ceil_sh(int'(nc_q), int'(cfg_q.lg_n));
    nts = ceil_sh(int'(bits_q), int'(cfg_q.lg_s));
  end

  // One block of spike-gated accumulations, reduced per output position.
  always_comb begin
    int unsigned lsum, m, v, n, s, gm, gv, gn, gs;
    logic signed [OW-1:0] term;
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++) delta[i][j] = '0;
    nact = '0;
    lsum = int'(cfg_q.lg_m) + int'(cfg_q.lg_v) + int'(cfg_q.lg_n) + int'(cfg_q.lg_s);
    for (int p = 0; p < PES; p++) begin
      term = '0;
      s  = p & ((1 << cfg_q.lg_s) - 1);
      n  = (p >> cfg_q.lg_s) & ((1 << cfg_q.lg_n) - 1);
      v  = (p >> (cfg_q.lg_s + cfg_q.lg_n)) & ((1 << cfg_q.lg_v) - 1);
      m  = (p >> (cfg_q.lg_s + cfg_q.lg_n + cfg_q.lg_v)) & ((1 << cfg_q.lg_m) - 1);
      gm = (tm << cfg_q.lg_m) + m;
      gv = (tv << cfg_q.lg_v) + v;
      gn = (tn << cfg_q.lg_n) + n;
      gs = (ts << cfg_q.lg_s) + s;
      if ((p >> lsum) == 0 && gm < int'(mc_q) && gv < int'(vc_q) && gn < int'(nc_q)
          && gs < int'(bits_q) && gm < MT && gv < VT && gn < NT && gs < XB) begin
        nact = nact + 1'b1;
        if (xin[gv][gn][gs]) begin
          term = OW'(wts[gm][gv]) <<< gs;
          if (gs == int'(bits_q) - 1) delta[gm][gn] = delta[gm][gn] - term;
          else                        delta[gm][gn] = delta[gm][gn] + term;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cycles <= '0;
      active <= '0;
      cfg_q  <= '0;
      bits_q <= '0;
      mc_q   <= '0;
      vc_q   <= '0;
      nc_q   <= '0;
      tm <= 0; tv <= 0; tn <= 0; ts <= 0;
      for (int i = 0; i < MT; i++)
        for (int j = 0; j < NT; j++) out[i][j] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          cfg_q  <= cfg;
          bits_q <= bits;
          mc_q   <= m_cnt;
          vc_q   <= v_cnt;
          nc_q   <= n_cnt;
          cycles <= '0;
          active <= '0;
          tm <= 0; tv <= 0; tn <= 0; ts <= 0;
          for (int i = 0; i < MT; i++)
            for (int j = 0; j < NT; j++) out[i][j] <= '0;
        end
      end else begin
        for (int i = 0; i < MT; i++)
          for (int j = 0; j < NT; j++) out[i][j] <= out[i][j] + delta[i][j];
        cycles <= cycles + 1'b1;
        active <= active + 32'(nact);
        if (ts + 1 < nts) ts <= ts + 1;
        else begin
          ts <= 0;
          if (tv + 1 < ntv) tv <= tv + 1;
          else begin
            tv <= 0;
            if (tn + 1 < ntn) tn <= tn + 1;
            else begin
              tn <= 0;
              if (tm + 1 < ntm) tm <= tm + 1;
              else begin
                tm   <= 0;
                busy <= 1'b0;
                done <= 1'b1;
              end
            end
          end
        end
      end
    end
  end
endmodule
