// sparse_pe: sparse processing element of the output-stationary array.
//
// Each clock it receives one compressed group of A from the west (up to LANES
// values with 2-bit in-group indices) and the matching group of four B values
// from the north, selects for every lane the B value its index names, and adds
// sum_l a[l] * b[idx[l]] to its stationary accumulator. It forwards the A
// group east and the B group south through registers, one clock per hop. This
// is the method's sparse multiply-accumulate (compressed A times B selected by
// the pattern indices, several B values loaded in parallel).
// `clear` zeroes the accumulator and the forwarding registers.
module sparse_pe #(
  parameter int DATA_W = 16,
  parameter int ACC_W  = 48,
  parameter int LANES  = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic signed [DATA_W-1:0] a_vals_in [LANES],
  input  logic [1:0]               a_idx_in  [LANES],
  input  logic signed [DATA_W-1:0] b_in      [4],
  output logic signed [DATA_W-1:0] a_vals_out [LANES],
  output logic [1:0]               a_idx_out  [LANES],
  output logic signed [DATA_W-1:0] b_out      [4],
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [ACC_W-1:0] mac;

  always_comb begin
    mac = '0;
    for (int l = 0; l < LANES; l++)
      mac += ACC_W'(a_vals_in[l]) * ACC_W'(b_in[a_idx_in[l]]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      acc <= '0;
      for (int l = 0; l < LANES; l++) begin
        a_vals_out[l] <= '0;
        a_idx_out[l]  <= '0;
      end
      for (int j = 0; j < 4; j++) b_out[j] <= '0;
    end else begin
      acc        <= acc + mac;
      a_vals_out <= a_vals_in;
      a_idx_out  <= a_idx_in;
      b_out      <= b_in;
    end
  end
endmodule
