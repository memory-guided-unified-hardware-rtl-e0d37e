// tb_precision_selector: checks the memory-guided precision choice: defaults
// on a miss for well- and ill-conditioned elements, storing a successful
// pattern on good feedback (later hit), promotion of every field by one
// level when the accuracy window drops below 95%, the promoted pattern being
// returned on the next lookup with the same key, and separation by element
// type and condition range. Checks the one-clock answer.
module tb_precision_selector;
  import mgua_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, ack, hit, fb_valid = 0, promoted;
  logic [31:0] kappa = 0;
  logic [1:0] elem_type = 0;
  prec_cfg_t cfg;
  logic [15:0] fb_acc = 0, fb_expected = 1000;
  int checks = 0, failures = 0;

  precision_selector dut (.clk, .rst_n, .req, .kappa, .elem_type, .ack, .cfg, .hit,
    .fb_valid, .fb_acc, .fb_expected, .promoted);

  localparam prec_cfg_t WELL = '{up: PREC_BF16, um: PREC_FP32, uq: PREC_BF16, us: PREC_FP16};
  localparam prec_cfg_t ILL  = '{up: PREC_FP64, um: PREC_FP64, uq: PREC_FP64, us: PREC_FP64};
  localparam prec_cfg_t PROM = '{up: PREC_FP32, um: PREC_FP64, uq: PREC_FP32, us: PREC_BF16};

  task automatic ask(int k, int et, prec_cfg_t exp_cfg, logic exp_hit, string what);
    @(negedge clk) begin req = 1; kappa = 32'(k); elem_type = 2'(et); end
    @(negedge clk) req = 0;
    checks++;
    if (!ack || cfg != exp_cfg || hit != exp_hit) begin
      failures++;
      $display("FAIL %s: ack=%0b cfg=%h exp %h hit=%0b exp %0b", what, ack, cfg, exp_cfg, hit, exp_hit);
    end
  endtask

  task automatic feed(int acc);
    @(negedge clk) begin fb_valid = 1; fb_acc = 16'(acc); end
    @(negedge clk) fb_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nprom;
    nprom = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    ask(300, 0, WELL, 0, "well miss");
    ask(5000, 0, ILL, 0, "ill miss");
    ask(1023, 1, WELL, 0, "boundary 1023 well");
    ask(1024, 1, ILL, 0, "boundary 1024 ill");
    // good feedback for the hex/1024 element: stored
    feed(1000);
    ask(1500, 1, ILL, 1, "stored hit same range");
    // well element, then a bad accuracy window -> promoted and stored
    ask(300, 0, WELL, 0, "well miss again");
    fork
      begin feed(500); end
      begin repeat (3) begin @(posedge clk); #1; if (promoted) nprom++; end end
    join
    checks++; if (nprom != 1) begin failures++; $display("FAIL promoted pulses %0d", nprom); end
    ask(400, 0, PROM, 1, "promoted hit");
    ask(300, 1, WELL, 0, "other element type");
    ask(100, 0, WELL, 0, "other range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
