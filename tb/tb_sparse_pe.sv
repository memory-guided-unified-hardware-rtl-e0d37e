// tb_sparse_pe: checks one sparse processing element: each clock the
// accumulator adds sum_l a[l] * b[idx[l]] (B values picked by the 2-bit
// indices), the A group and B group appear at the outputs one clock later,
// and clear zeroes the accumulator and the forwarding registers.
module tb_sparse_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  logic signed [15:0] a_vals_in [4], a_vals_out [4], b_in [4], b_out [4];
  logic [1:0] a_idx_in [4], a_idx_out [4];
  logic signed [47:0] acc;
  int checks = 0, failures = 0;
  longint model;

  sparse_pe dut (.clk, .rst_n, .clear, .a_vals_in, .a_idx_in, .b_in, .a_vals_out, .a_idx_out, .b_out, .acc);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 4; l++) begin a_vals_in[l] = 0; a_idx_in[l] = 0; b_in[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    model = 0;
    for (int t = 0; t < 300; t++) begin
      logic signed [15:0] av [4], bv [4];
      logic [1:0] ai [4];
      for (int l = 0; l < 4; l++) begin
        av[l] = 16'($urandom); ai[l] = 2'($urandom); bv[l] = 16'($urandom);
        if ($urandom_range(0, 3) == 0) av[l] = 0;
      end
      a_vals_in = av; a_idx_in = ai; b_in = bv;
      clear = (t % 50 == 49);
      @(negedge clk);
      if (clear) model = 0;
      else for (int l = 0; l < 4; l++) model += longint'(av[l]) * bv[ai[l]];
      checks++;
      if (longint'(acc) != model) begin failures++; $display("FAIL acc %0d exp %0d", acc, model); end
      checks++;
      if (!clear && (a_vals_out != av || a_idx_out != ai || b_out != bv)) begin
        failures++; $display("FAIL forwarding");
      end
      if (clear && (a_vals_out[0] != 0 || b_out[0] != 0)) begin failures++; $display("FAIL clear fwd"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
