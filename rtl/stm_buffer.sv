// stm_buffer: short-term memory of recent metric samples.
//
// A DEPTH-entry ring buffer (100 per the method) that keeps the last DEPTH
// samples of one metric (batch accuracy, utilization or performance) and a
// running sum of them. `below` is high when the window mean is under PCT
// percent of `expected` (95% per the method's trigger for policy
// adjustment), evaluated without division as sum*100 < PCT*expected*count.
// An empty buffer never flags. Sample encoding (unsigned, W bits, full scale
// 1.0) is this design's choice.
//
// Timing: a push is absorbed at the clock edge; count/sum/below reflect it
// from the next clock. Synchronous active-low reset empties the buffer.
module stm_buffer #(
  parameter int DEPTH = 100,
  parameter int W     = 16,
  parameter int PCT   = 95
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push,
  input  logic [W-1:0]                 sample,
  input  logic [W-1:0]                 expected,
  output logic [$clog2(DEPTH+1)-1:0]   count,
  output logic [W+$clog2(DEPTH+1)-1:0] sum,
  output logic                         below
);
  localparam int CW = $clog2(DEPTH+1);
  localparam int SW = W + CW;

  logic [W-1:0]           buf_q [DEPTH];
  logic [$clog2(DEPTH)-1:0] wp;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      count <= '0;
      sum   <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else if (push) begin
      buf_q[wp] <= sample;
      wp        <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (int'(count) == DEPTH) sum <= sum + SW'(sample) - SW'(buf_q[wp]);
      else begin
        sum   <= sum + SW'(sample);
        count <= count + 1'b1;
      end
    end
  end

  always_comb begin
    logic [SW+7:0] lhs, rhs;
    lhs   = (SW+8)'(sum) * (SW+8)'(100);
    rhs   = (SW+8)'(PCT) * (SW+8)'(expected) * (SW+8)'(count);
    below = (count != '0) && (lhs < rhs);
  end
endmodule
