// kappa_estimator: condition number of a finite element's 3x3 Jacobian.
//
// Computes kappa_1(J) = ||J||_1 * ||J^-1||_1 using the adjugate,
// J^-1 = adj(J) / det(J), so kappa = ||J||_1 * ||adj J||_1 / |det J|, all in
// exact integer arithmetic, then floors and saturates to KAPPA_W bits. A
// singular Jacobian returns the saturated maximum.
//
// The accelerator needs kappa(K) per element to select precisions; how it is
// computed is not specified by the method, so the 1-norm form on the element
// Jacobian is this design's choice.
//
// Interface: in_valid/jac in, out_valid/kappa one clock later (one result per
// clock, fully pipelined at depth 1). Synchronous active-low reset rst_n.
module kappa_estimator #(
  parameter int DATA_W  = 16,
  parameter int KAPPA_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] jac [3][3],
  output logic                     out_valid,
  output logic [KAPPA_W-1:0]       kappa
);
  localparam int CW = 2*DATA_W + 1;        // cofactor
  localparam int DW = 3*DATA_W + 3;        // determinant
  localparam int NW = 128;                 // numerator / quotient width

  logic signed [CW-1:0] cof [3][3];
  logic signed [DW-1:0] det;
  logic [NW-1:0]        nj, na, num, den, quo;
  logic [KAPPA_W-1:0]   kap_c;

  function automatic logic [NW-1:0] absv(logic signed [NW-1:0] v);
    return v[NW-1] ? NW'(-v) : NW'(v);
  endfunction

  always_comb begin
    logic [NW-1:0] colsum;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        cof[i][j] = CW'(jac[(i+1)%3][(j+1)%3]) * CW'(jac[(i+2)%3][(j+2)%3])
                  - CW'(jac[(i+1)%3][(j+2)%3]) * CW'(jac[(i+2)%3][(j+1)%3]);
    det = DW'(jac[0][0]) * DW'(cof[0][0]) + DW'(jac[0][1]) * DW'(cof[0][1])
        + DW'(jac[0][2]) * DW'(cof[0][2]);
    // ||J||_1: largest column sum of |J|.
    nj = '0;
    for (int j = 0; j < 3; j++) begin
      colsum = '0;
      for (int i = 0; i < 3; i++) colsum += absv(NW'(jac[i][j]));
      if (colsum > nj) nj = colsum;
    end
    // ||adj J||_1: adj = cof^T, so its column j is row j of cof.
    na = '0;
    for (int j = 0; j < 3; j++) begin
      colsum = '0;
      for (int i = 0; i < 3; i++) colsum += absv(NW'(cof[j][i]));
      if (colsum > na) na = colsum;
    end
    num = nj * na;
    den = absv(NW'(det));
    quo = (den == '0) ? '1 : num / den;
    kap_c = (quo > NW'({KAPPA_W{1'b1}})) ? '1 : quo[KAPPA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      kappa     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) kappa <= kap_c;
    end
  end
endmodule
