// sparse_ref_pkg: reference pruning shared by the sparse testbenches.
// Prune a dense R x K matrix with an N:M pattern (keep the n largest
// magnitudes of each group of m, earlier index first on a tie), or keep it
// whole for the irregular format (n = m = 4).
package sparse_ref_pkg;
  function automatic void prune_ref(input int R, input int K, input int n, input int m,
                                    input logic signed [15:0] a [20][20],
                                    output logic signed [15:0] p [20][20]);
    for (int r = 0; r < R; r++)
      for (int g = 0; g * m < K; g++) begin
        int order [$];
        for (int j = 0; j < m && g*m + j < K; j++) order.push_back(j);
        // selection by (magnitude desc, index asc)
        for (int x = 0; x < order.size(); x++)
          for (int y = x + 1; y < order.size(); y++) begin
            int ax, ay;
            ax = a[r][g*m + order[x]]; ax = ax < 0 ? -ax : ax;
            ay = a[r][g*m + order[y]]; ay = ay < 0 ? -ay : ay;
            if (ay > ax) begin int tmp; tmp = order[x]; order[x] = order[y]; order[y] = tmp; end
            else if (ay == ax && order[y] < order[x]) begin int tmp; tmp = order[x]; order[x] = order[y]; order[y] = tmp; end
          end
        for (int j = 0; j < m && g*m + j < K; j++) p[r][g*m + j] = 0;
        for (int x = 0; x < order.size() && x < n; x++) p[r][g*m + order[x]] = a[r][g*m + order[x]];
      end
  endfunction
endpackage
