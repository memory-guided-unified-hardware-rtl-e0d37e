// tb_bitwidth_agent: checks the experience-driven bit-width table: reset to
// 8 bits, one bit removed per report that meets the expected accuracy down to
// BMIN = 2, one bit added while the window mean is under 95% of expected, up
// to 8, and per-layer independence.
module tb_bitwidth_agent;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] layer = 0, fb_layer = 0, bits;
  logic fb_valid = 0, widened, narrowed;
  logic [15:0] fb_acc = 0, fb_expected = 1000;
  int checks = 0, failures = 0;
  int model [16];
  int win [$];

  bitwidth_agent dut (.clk, .rst_n, .layer, .bits, .fb_valid, .fb_layer, .fb_acc, .fb_expected,
    .widened, .narrowed);

  task automatic report(int l, int acc);
    longint s;
    @(negedge clk) begin fb_valid = 1; fb_layer = 4'(l); fb_acc = 16'(acc); end
    @(negedge clk) fb_valid = 0;
    @(negedge clk);
    win.push_back(acc);
    if (win.size() > 100) void'(win.pop_front());
    s = 0;
    foreach (win[i]) s += win[i];
    if (s * 100 < 95 * 1000 * win.size()) begin
      if (model[l] < 8) model[l]++;
    end else if (acc >= 1000 && model[l] > 2) model[l]--;
    for (int i = 0; i < 16; i++) begin
      layer = 4'(i);
      #1;
      checks++;
      if (int'(bits) != model[i]) begin
        failures++;
        $display("FAIL layer %0d bits %0d exp %0d", i, bits, model[i]);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) model[i] = 8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (bits != 8) begin failures++; $display("FAIL reset bits %0d", bits); end
    repeat (8) report(3, 1000);       // down to 2, then stays
    checks++; begin layer = 3; #1; if (bits != 2) begin failures++; $display("FAIL floor %0d", bits); end end
    repeat (10) report(3, 100);       // drops: back up to 8
    checks++; begin layer = 3; #1; if (bits != 8) begin failures++; $display("FAIL ceiling %0d", bits); end end
    for (int t = 0; t < 200; t++) report($urandom_range(0, 15), $urandom_range(900, 1100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
