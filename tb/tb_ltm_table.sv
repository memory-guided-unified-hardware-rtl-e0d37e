// tb_ltm_table: checks the associative long-term memory with LRU eviction
// against a model in the testbench (ENTRIES reduced to 8 so that eviction
// is reached quickly): insert, hit/miss, overwrite, LRU touch on lookup,
// eviction of the least recently used key, occupancy. A second instance at
// the full 10000 entries checks insert/lookup/overwrite.
module tb_ltm_table;
  localparam int E = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_en = 0, wr_en = 0;
  logic [7:0] lk_key = 0, wr_key = 0;
  logic [15:0] wr_data = 0, lk_data;
  logic lk_hit;
  logic [3:0] occ;
  int checks = 0, failures = 0;

  ltm_table #(.ENTRIES(E), .KEY_W(8), .DATA_W(16)) dut (
    .clk, .rst_n, .lk_en, .lk_key, .lk_hit, .lk_data, .wr_en, .wr_key, .wr_data, .occupancy(occ));

  // full-size instance
  logic f_lk_hit;
  logic [15:0] f_lk_data;
  logic [13:0] f_occ;
  ltm_table dut_full (
    .clk, .rst_n, .lk_en, .lk_key, .lk_hit(f_lk_hit), .lk_data(f_lk_data),
    .wr_en, .wr_key, .wr_data, .occupancy(f_occ));

  // model: key -> data, and use order (front = least recent)
  int mdata [int];
  int order [$];

  task automatic touch(int k);
    foreach (order[i]) if (order[i] == k) begin order.delete(i); break; end
    order.push_back(k);
  endtask

  task automatic store(int k, int d);
    @(negedge clk) begin wr_en = 1; wr_key = 8'(k); wr_data = 16'(d); end
    @(negedge clk) wr_en = 0;
    if (!mdata.exists(k) && mdata.num() == E) begin
      mdata.delete(order[0]);
      void'(order.pop_front());
    end
    mdata[k] = d;
    touch(k);
  endtask

  task automatic lookup(int k);
    logic eh;
    @(negedge clk) begin lk_en = 1; lk_key = 8'(k); end
    #1;
    eh = mdata.exists(k);
    checks++;
    if (lk_hit != eh || (eh && lk_data != 16'(mdata[k]))) begin
      failures++;
      $display("FAIL lookup %0d: hit=%0b/%0b data=%0d", k, lk_hit, eh, lk_data);
    end
    @(negedge clk) lk_en = 0;
    if (eh) touch(k);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    lookup(5);
    for (int k = 0; k < E; k++) store(10 + k, 100 + k);
    checks++; if (occ != E) begin failures++; $display("FAIL occupancy %0d", occ); end
    lookup(10);               // 10 becomes most recent; 11 is now LRU
    store(99, 7);             // evicts 11
    lookup(11);
    lookup(10);
    lookup(99);
    store(12, 555);           // overwrite
    lookup(12);
    checks++; if (occ != E) begin failures++; $display("FAIL occupancy after evict %0d", occ); end
    for (int t = 0; t < 300; t++) begin
      if ($urandom_range(0, 1)) store($urandom_range(0, 20), $urandom_range(0, 65535));
      else lookup($urandom_range(0, 20));
    end
    // full-size instance holds every key stored above (fewer than 10000)
    @(negedge clk) begin lk_en = 1; lk_key = 8'd99; end
    #1;
    checks++; if (!f_lk_hit || f_lk_data != 16'd7) begin failures++; $display("FAIL full-size lookup"); end
    @(negedge clk) lk_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
