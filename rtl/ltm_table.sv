// ltm_table: long-term memory of the accelerator.
//
// A fully associative store of ENTRIES (key, data) pairs with least-recently-
// used replacement. Three instances hold the successful precision patterns,
// parallelism shapes and sparsity patterns. ENTRIES = 10000 and LRU eviction
// follow the method; key and data widths are this design's (the method's
// entries are software records, here each is a key plus a configuration word).
//
// Lookup is combinational: lk_hit/lk_data follow lk_key in the same clock.
// A clock with lk_en and a hit marks that entry most recently used. A clock
// with wr_en stores wr_data under wr_key: an existing entry is overwritten,
// else the first invalid entry is filled, else the entry with the oldest
// time stamp is evicted. LRU order uses a per-entry time stamp from a global
// counter that advances on every lookup or store. A store has priority over a
// touch in the same clock. Synchronous active-low reset clears all entries.
module ltm_table #(
  parameter int ENTRIES = 10000,
  parameter int KEY_W   = 8,
  parameter int DATA_W  = 16,
  parameter int STAMP_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lk_en,
  input  logic [KEY_W-1:0]  lk_key,
  output logic              lk_hit,
  output logic [DATA_W-1:0] lk_data,
  input  logic              wr_en,
  input  logic [KEY_W-1:0]  wr_key,
  input  logic [DATA_W-1:0] wr_data,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  localparam int IW = $clog2(ENTRIES);

  logic                valid [ENTRIES];
  logic [KEY_W-1:0]    key   [ENTRIES];
  logic [DATA_W-1:0]   data  [ENTRIES];
  logic [STAMP_W-1:0]  stamp [ENTRIES];
  logic [STAMP_W-1:0]  now;

  logic [IW-1:0]       lk_idx, wr_idx, victim;
  logic                wr_hit, have_free;

  always_comb begin
    logic [STAMP_W-1:0] oldest;
    lk_hit  = 1'b0;
    lk_idx  = '0;
    wr_hit  = 1'b0;
    wr_idx  = '0;
    have_free = 1'b0;
    victim  = '0;
    oldest  = '1;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && key[i] == lk_key && !lk_hit) begin
        lk_hit = 1'b1;
        lk_idx = IW'(i);
      end
      if (valid[i] && key[i] == wr_key && !wr_hit) begin
        wr_hit = 1'b1;
        wr_idx = IW'(i);
      end
      if (!valid[i] && !have_free) begin
        have_free = 1'b1;
        victim    = IW'(i);
      end else if (valid[i] && !have_free && stamp[i] < oldest) begin
        oldest = stamp[i];
        victim = IW'(i);
      end
    end
    lk_data = lk_hit ? data[lk_idx] : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now       <= '0;
      occupancy <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0;
        key[i]   <= '0;
        data[i]  <= '0;
        stamp[i] <= '0;
      end
    end else begin
      if (wr_en || lk_en) now <= now + 1'b1;
      if (lk_en && lk_hit) stamp[lk_idx] <= now;
      if (wr_en) begin
        if (wr_hit) begin
          data[wr_idx]  <= wr_data;
          stamp[wr_idx] <= now;
        end else begin
          valid[victim] <= 1'b1;
          key[victim]   <= wr_key;
          data[victim]  <= wr_data;
          stamp[victim] <= now;
          if (have_free) occupancy <= occupancy + 1'b1;
        end
      end
    end
  end
endmodule
