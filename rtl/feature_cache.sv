// Feature cache: a cache-like buffer of feature vectors with FIFO replacement.
//
// Entries are keyed by (stage ID, vertex type, vertex ID). The cache is
// set-associative: the set is the low bits of the vertex ID, and within a set
// the ways are replaced first-in-first-out through a per-set pointer. The same
// module serves as the globally shared cache and as each channel's local cache.
//
// Interface and timing:
//  * lookup: lk_valid/lk_key in cycle t; lk_done, lk_hit and lk_data in cycle t+1.
//  * fill:   fl_valid/fl_key/fl_data write in one cycle. If the key is already
//            present its way is overwritten, otherwise the set's FIFO way is
//            replaced and the pointer advances.
//  * flush:  clears every valid bit in one cycle.
//  * A lookup in the same cycle as a fill of the same key sees the old state.
//
// The paper gives the key, the FIFO policy and the capacity (6.00 MB for all
// feature caches together). Set associativity, the way count and the split of
// capacity between global and local caches are this design's choices.
module feature_cache
  import tlv_pkg::*;
#(
  parameter int unsigned LINE_W  = 2048,    // one feature vector: 64 x 32 bits
  parameter int unsigned ENTRIES = 8192,    // 2 MB of 256-byte lines
  parameter int unsigned WAYS    = 4,
  localparam int unsigned KEY_W  = STAGE_W + VTYPE_W + VID_W,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic              lk_valid,
  input  logic [KEY_W-1:0]  lk_key,
  output logic              lk_done,
  output logic              lk_hit,
  output logic [LINE_W-1:0] lk_data,
  input  logic              fl_valid,
  input  logic [KEY_W-1:0]  fl_key,
  input  logic [LINE_W-1:0] fl_data
);

  logic [LINE_W-1:0] data_mem [SETS*WAYS];
  logic [KEY_W-1:0]  tag      [SETS][WAYS];
  logic [WAYS-1:0]   valid    [SETS];
  logic [WAY_W-1:0]  fifo_ptr [SETS];

  logic [SET_W-1:0] lk_set, fl_set;
  assign lk_set = lk_key[SET_W-1:0];
  assign fl_set = fl_key[SET_W-1:0];

  // lookup tag match
  logic             lk_match;
  logic [WAY_W-1:0] lk_way;
  always_comb begin
    lk_match = 1'b0;
    lk_way   = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[lk_set][w] && tag[lk_set][w] == lk_key) begin
        lk_match = 1'b1;
        lk_way   = WAY_W'(w);
      end
  end

  // fill tag match
  logic             fl_match;
  logic [WAY_W-1:0] fl_hit_way, fl_way;
  always_comb begin
    fl_match   = 1'b0;
    fl_hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[fl_set][w] && tag[fl_set][w] == fl_key) begin
        fl_match   = 1'b1;
        fl_hit_way = WAY_W'(w);
      end
    fl_way = fl_match ? fl_hit_way : fifo_ptr[fl_set];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid[s]    <= '0;
        fifo_ptr[s] <= '0;
      end
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
    end else begin
      lk_done <= lk_valid;
      lk_hit  <= lk_valid && lk_match;
      if (flush) begin
        for (int s = 0; s < SETS; s++) begin
          valid[s]    <= '0;
          fifo_ptr[s] <= '0;
        end
      end else if (fl_valid) begin
        valid[fl_set][fl_way] <= 1'b1;
        tag[fl_set][fl_way]   <= fl_key;
        if (!fl_match)
          fifo_ptr[fl_set] <= (fifo_ptr[fl_set] == WAY_W'(WAYS-1)) ? '0 : fifo_ptr[fl_set] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fl_valid && !flush) data_mem[{fl_set, fl_way}] <= fl_data;
    if (lk_valid)           lk_data <= data_mem[{lk_set, lk_way}];
  end

  initial begin
    assert (WAYS >= 1 && (WAYS & (WAYS - 1)) == 0 && (SETS & (SETS - 1)) == 0)
      else $error("feature_cache: WAYS and ENTRIES/WAYS must be powers of two");
  end

endmodule
