// Testbench of the feature cache: random fills and lookups over a small key
// space, compared with a model that keeps, per set, the keys in arrival order
// (first in, first out) with their data. Also checks flush and that refilling a
// present key replaces its data without evicting anything.
module tb_feature_cache;
  import tlv_pkg::*;
  localparam int LW = 32, ENT = 8, WAYS = 2, SETS = ENT / WAYS;
  localparam int KW = STAGE_W + VTYPE_W + VID_W;
  logic clk = 0, rst_n = 0;
  logic flush, lk_valid, lk_done, lk_hit, fl_valid;
  logic [KW-1:0] lk_key, fl_key;
  logic [LW-1:0] lk_data, fl_data;
  int checks = 0, failures = 0;

  feature_cache #(.LINE_W(LW), .ENTRIES(ENT), .WAYS(WAYS)) dut (.*);
  always #5 clk = ~clk;

  logic [KW-1:0] mkeys [SETS][$];
  logic [LW-1:0] mdata [SETS][$];
  int hits = 0, misses = 0;

  function automatic logic [KW-1:0] rkey();
    logic [KW-1:0] k;
    k = '0;
    k[VID_W-1:0] = VID_W'($urandom_range(0, 11));   // 12 IDs over 4 sets
    k[VID_W +: VTYPE_W] = VTYPE_W'($urandom_range(0, 1));
    return k;
  endfunction

  function automatic int find(logic [KW-1:0] k);
    int s;
    s = int'(k[1:0]);
    foreach (mkeys[s][i]) if (mkeys[s][i] == k) return i;
    return -1;
  endfunction

  initial begin
    flush = 0; lk_valid = 0; fl_valid = 0; lk_key = 0; fl_key = 0; fl_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      lk_valid = 0; fl_valid = 0; flush = 0;
      if (t == 1000) begin
        flush = 1;
        for (int s = 0; s < SETS; s++) begin mkeys[s].delete(); mdata[s].delete(); end
      end else if ($urandom_range(0, 1)) begin
        int s, i;
        fl_valid = 1; fl_key = rkey(); fl_data = $urandom;
        s = int'(fl_key[1:0]); i = find(fl_key);
        if (i >= 0) mdata[s][i] = fl_data;
        else begin
          if (mkeys[s].size() == WAYS) begin void'(mkeys[s].pop_front()); void'(mdata[s].pop_front()); end
          mkeys[s].push_back(fl_key); mdata[s].push_back(fl_data);
        end
      end else begin
        int s, i;
        logic [LW-1:0] ed;
        lk_valid = 1; lk_key = rkey();
        s = int'(lk_key[1:0]); i = find(lk_key);
        ed = (i >= 0) ? mdata[s][i] : '0;
        @(negedge clk);
        lk_valid = 0;
        checks++;
        if (!lk_done || lk_hit !== (i >= 0)) begin failures++; $display("hit mismatch t=%0d", t); end
        if (i >= 0) begin
          hits++;
          checks++;
          if (lk_data !== ed) begin failures++; $display("data mismatch t=%0d", t); end
        end else misses++;
      end
    end
    checks++;
    if (hits < 50 || misses < 50) failures++;
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
