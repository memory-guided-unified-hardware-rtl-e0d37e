// sparse_compressor: index-based compression of A for the sparse array.
//
// Splits every row of A into groups of m along K (m = 4, or 3 for 1:3; the
// last group padded with zeros) and emits, per group, up to LANES values with
// 2-bit in-group indices. For the structured patterns (2:4, 1:4, 1:3) the n
// largest magnitudes of each group are kept (first on a tie, lanes in index
// order) and the rest pruned. For the irregular ("learned") pattern every
// nonzero of a group of 4 is kept, packed into the low lanes. Unused lanes
// carry value 0, index 0. The 2-bit index format follows the method; the
// pruning rule and the packing of the irregular format are this design's.
// Purely combinational.
module sparse_compressor
  import mgua_pkg::*;
#(
  parameter int R      = 20,
  parameter int K      = 20,
  parameter int DATA_W = 16,
  parameter int LANES  = 4,
  parameter int GMAX   = (K + 2) / 3
) (
  input  logic signed [DATA_W-1:0] amat [R][K],
  input  pattern_e                 pattern,
  output logic signed [DATA_W-1:0] vals [R][GMAX][LANES],
  output logic [1:0]               idx  [R][GMAX][LANES],
  output logic [$clog2(GMAX+1)-1:0] groups
);
  function automatic logic [DATA_W:0] mag(logic signed [DATA_W-1:0] v);
    return v[DATA_W-1] ? (DATA_W+1)'(-(DATA_W+1)'(v)) : (DATA_W+1)'(v);
  endfunction

  always_comb begin
    int unsigned m, n, gcount, lane;
    int i1, i2;
    logic signed [DATA_W-1:0] e [4];
    lane   = 0;
    i1     = 0;
    i2     = 0;
    m      = pat_m(pattern);
    n      = pat_n(pattern);
    gcount = (K + m - 1) / m;
    groups = ($clog2(GMAX+1))'(gcount);
    for (int r = 0; r < R; r++)
      for (int g = 0; g < GMAX; g++) begin
        for (int l = 0; l < LANES; l++) begin
          vals[r][g][l] = '0;
          idx[r][g][l]  = '0;
        end
        for (int j = 0; j < 4; j++)
          e[j] = (j < int'(m) && g*int'(m) + j < K) ? amat[r][(g*int'(m) + j) % K] : '0;
        if (g < int'(gcount)) begin
          if (pattern == PAT_LEARNED) begin
            lane = 0;
            for (int j = 0; j < 4; j++)
              if (e[j] != '0 && lane < LANES) begin
                vals[r][g][lane % LANES] = e[j];
                idx[r][g][lane % LANES]  = 2'(j);
                lane++;
              end
          end else begin
            i1 = 0;
            for (int j = 1; j < 4; j++) if (j < int'(m) && mag(e[j]) > mag(e[i1])) i1 = j;
            i2 = (i1 == 0) ? 1 : 0;
            for (int j = 0; j < 4; j++)
              if (j < int'(m) && j != i1 && mag(e[j]) > mag(e[i2])) i2 = j;
            if (n == 1) begin
              vals[r][g][0] = e[i1];
              idx[r][g][0]  = 2'(i1);
            end else begin
              vals[r][g][0] = (i1 < i2) ? e[i1] : e[i2];
              idx[r][g][0]  = (i1 < i2) ? 2'(i1) : 2'(i2);
              vals[r][g][1] = (i1 < i2) ? e[i2] : e[i1];
              idx[r][g][1]  = (i1 < i2) ? 2'(i2) : 2'(i1);
            end
          end
        end
      end
  end
endmodule
