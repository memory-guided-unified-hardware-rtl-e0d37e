// sparse_engine: 4x4 output-stationary systolic array of sparse PEs.
//
// Computes out = A x B for an R x K matrix A and a K x C matrix B, A being
// compressed with the selected pattern (sparse_compressor). The output is
// covered in ROWS x COLS tiles, row-major. For each tile the engine streams
// the G compressed groups of the tile's A rows in from the west and the
// matching B groups (m rows of B per group) in from the north, row r and
// column c delayed by r and c clocks so that PE(r,c) meets group g at feed
// clock g+r+c. After G+ROWS+COLS-2 feed clocks the accumulators are copied to
// `out` and cleared in one clock. A tile thus takes G+ROWS+COLS-1 clocks
// (G+7 for 4x4), where G = ceil(K/m).
// The 4x4 array, sparse PEs and output-stationary dataflow follow the method;
// the tile schedule is this design's.
//
// Timing: start (while idle) captures pattern, amat and bmat; done pulses once
// all tiles are written; cycles counts the clocks spent.
module sparse_engine
  import mgua_pkg::*;
#(
  parameter int ROWS   = 4,
  parameter int COLS   = 4,
  parameter int R      = 20,
  parameter int K      = 20,
  parameter int C      = 20,
  parameter int DATA_W = 16,
  parameter int ACC_W  = 48,
  parameter int LANES  = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  pattern_e                 pattern,
  input  logic signed [DATA_W-1:0] amat [R][K],
  input  logic signed [DATA_W-1:0] bmat [K][C],
  output logic signed [ACC_W-1:0]  out  [R][C],
  output logic                     busy,
  output logic                     done,
  output logic [15:0]              cycles
);
  localparam int GMAX = (K + 2) / 3;
  localparam int NTR  = (R + ROWS - 1) / ROWS;
  localparam int NTC  = (C + COLS - 1) / COLS;

  pattern_e pat_q;
  logic signed [DATA_W-1:0] a_q [R][K];
  logic signed [DATA_W-1:0] b_q [K][C];
  logic signed [DATA_W-1:0] cvals [R][GMAX][LANES];
  logic [1:0]               cidx  [R][GMAX][LANES];
  logic [$clog2(GMAX+1)-1:0] groups;

  int unsigned tr, tc, t;
  logic clear;

  // West and north inputs of the array.
  logic signed [DATA_W-1:0] w_vals [ROWS][LANES];
  logic [1:0]               w_idx  [ROWS][LANES];
  logic signed [DATA_W-1:0] n_b    [COLS][4];

  // Inter-PE wires: a_* [r][c] is the output of PE(r,c) going east.
  logic signed [DATA_W-1:0] av [ROWS][COLS][LANES];
  logic [1:0]               ai [ROWS][COLS][LANES];
  logic signed [DATA_W-1:0] bv [ROWS][COLS][4];
  logic signed [ACC_W-1:0]  acc [ROWS][COLS];
  // PE inputs: from the array edge or from the west / north neighbour.
  logic signed [DATA_W-1:0] avi [ROWS][COLS][LANES];
  logic [1:0]               aii [ROWS][COLS][LANES];
  logic signed [DATA_W-1:0] bvi [ROWS][COLS][4];

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        avi[r][c] = (c == 0) ? w_vals[r] : av[r][(c+COLS-1)%COLS];
        aii[r][c] = (c == 0) ? w_idx[r]  : ai[r][(c+COLS-1)%COLS];
        bvi[r][c] = (r == 0) ? n_b[c]    : bv[(r+ROWS-1)%ROWS][c];
      end
  end

  sparse_compressor #(.R(R), .K(K), .DATA_W(DATA_W), .LANES(LANES), .GMAX(GMAX)) u_comp (
    .amat(a_q), .pattern(pat_q), .vals(cvals), .idx(cidx), .groups(groups)
  );

  always_comb begin
    int g, row, col, k, m;
    m = int'(pat_m(pat_q));
    for (int r = 0; r < ROWS; r++) begin
      g   = int'(t) - r;
      row = int'(tr) * ROWS + r;
      for (int l = 0; l < LANES; l++) begin
        w_vals[r][l] = '0;
        w_idx[r][l]  = '0;
        if (busy && !clear && g >= 0 && g < int'(groups) && row < R) begin
          w_vals[r][l] = cvals[row % R][g % GMAX][l];
          w_idx[r][l]  = cidx[row % R][g % GMAX][l];
        end
      end
    end
    for (int c = 0; c < COLS; c++) begin
      g   = int'(t) - c;
      col = int'(tc) * COLS + c;
      for (int j = 0; j < 4; j++) begin
        k = g * m + j;
        n_b[c][j] = '0;
        if (busy && !clear && g >= 0 && g < int'(groups) && j < m && k < K && col < C)
          n_b[c][j] = b_q[k % K][col % C];
      end
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      sparse_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W), .LANES(LANES)) u_pe (
        .clk, .rst_n, .clear,
        .a_vals_in (avi[r][c]),
        .a_idx_in  (aii[r][c]),
        .b_in      (bvi[r][c]),
        .a_vals_out(av[r][c]),
        .a_idx_out (ai[r][c]),
        .b_out     (bv[r][c]),
        .acc       (acc[r][c])
      );
    end
  end

  // Last feed clock of a tile is t = groups + ROWS + COLS - 3; the next clock
  // copies and clears.
  assign clear = !busy || (t == int'(groups) + ROWS + COLS - 2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cycles <= '0;
      pat_q  <= PAT_2_4;
      tr <= 0; tc <= 0; t <= 0;
      for (int i = 0; i < R; i++) begin
        for (int k = 0; k < K; k++) a_q[i][k] <= '0;
        for (int j = 0; j < C; j++) out[i][j] <= '0;
      end
      for (int k = 0; k < K; k++)
        for (int j = 0; j < C; j++) b_q[k][j] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          pat_q  <= pattern;
          a_q    <= amat;
          b_q    <= bmat;
          cycles <= '0;
          tr <= 0; tc <= 0; t <= 0;
        end
      end else begin
        cycles <= cycles + 1'b1;
        if (clear) begin
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++)
              if (int'(tr) * ROWS + r < R && int'(tc) * COLS + c < C)
                out[(int'(tr) * ROWS + r) % R][(int'(tc) * COLS + c) % C] <= acc[r][c];
          t <= 0;
          if (tc + 1 < NTC) tc <= tc + 1;
          else begin
            tc <= 0;
            if (tr + 1 < NTR) tr <= tr + 1;
            else begin
              tr   <= 0;
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end else t <= t + 1;
      end
    end
  end
endmodule
