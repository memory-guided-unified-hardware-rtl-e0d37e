// sparsity_analyzer: sparsity characteristics of an R x K tensor.
//
// Counts the nonzeros of the tensor and, group by group along K (groups
// padded with zeros past K), reports which structured patterns hold it without
// dropping a nonzero: fits[0] for 2:4 (at most 2 nonzeros in every group of 4),
// fits[1] for 1:4, fits[2] for 1:3. density is floor(16*nnz/(R*K)) clipped to
// 15. The method only says that sparsity characteristics are analysed before a
// pattern is chosen; these particular characteristics are this design's.
// Purely combinational.
module sparsity_analyzer #(
  parameter int R      = 20,
  parameter int K      = 20,
  parameter int DATA_W = 16
) (
  input  logic signed [DATA_W-1:0] amat [R][K],
  output logic [15:0]              nnz,
  output logic [2:0]               fits,
  output logic [3:0]               density
);
  localparam int G4 = (K + 3) / 4;
  localparam int G3 = (K + 2) / 3;

  always_comb begin
    int unsigned c4, c3;
    logic [31:0] d;
    nnz  = '0;
    fits = 3'b111;
    for (int r = 0; r < R; r++) begin
      for (int k = 0; k < K; k++) if (amat[r][k] != '0) nnz = nnz + 1'b1;
      for (int g = 0; g < G4; g++) begin
        c4 = 0;
        for (int j = 0; j < 4; j++) if (g*4 + j < K && amat[r][(g*4+j) % K] != '0) c4++;
        if (c4 > 2) fits[0] = 1'b0;
        if (c4 > 1) fits[1] = 1'b0;
      end
      for (int g = 0; g < G3; g++) begin
        c3 = 0;
        for (int j = 0; j < 3; j++) if (g*3 + j < K && amat[r][(g*3+j) % K] != '0) c3++;
        if (c3 > 1) fits[2] = 1'b0;
      end
    end
    d = (32'(nnz) * 32'd16) / 32'(R * K);
    density = (d > 32'd15) ? 4'd15 : d[3:0];
  end
endmodule
