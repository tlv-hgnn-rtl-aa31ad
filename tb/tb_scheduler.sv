// Testbench of the scheduler with the real target buffer, model channels (busy
// for a random time per job) and a model grouper that streams a fixed grouping.
// Checks: a flush at start; every vertex projected exactly once with the type
// its ID falls in; no aggregation job before every projection is finished;
// every target aggregated exactly once; members of group g on channel
// g mod N_CH; low-degree targets dealt in runs of N_max; done after the last
// output.
module tb_scheduler;
  import tlv_pkg::*;
  localparam int NC = 3, NTY = 4, HVW = 6;
  logic clk = 0, rst_n = 0, start;
  vid_t cfg_n_vert, cfg_n_tgt, cfg_n_hv, cfg_nmax;
  vid_t cfg_type_base [NTY];
  logic flush, done, phase_na;
  logic [NC-1:0] ch_job_valid, ch_job_ready, ch_busy;
  job_kind_e ch_job_kind;
  vref_t ch_job_v [NC];
  logic tq_push; logic [1:0] tq_push_ch; vref_t tq_push_v;
  logic [NC-1:0] tq_pop, tq_empty, tq_full;
  vref_t tq_head [NC];
  logic grp_start, grp_done, grp_mem_valid, grp_mem_ready;
  logic [HVW-1:0] grp_mem_vid, grp_mem_gid, grp_n_groups;
  logic out_fire;
  int checks = 0, failures = 0;

  scheduler #(.N_CH(NC), .N_TYPES(NTY), .HV_W(HVW)) dut (.*);
  target_buffer #(.N_CH(NC), .DEPTH(4)) tbuf (.clk, .rst_n, .push(tq_push), .push_ch(tq_push_ch),
    .push_v(tq_push_v), .pop(tq_pop), .head_v(tq_head), .empty(tq_empty), .full(tq_full));
  always #5 clk = ~clk;

  // model channels
  int cbusy [NC];
  int fp_seen [64], na_seen [64], na_ch [64];
  int outs_pending = 0, fp_live = 0, n_flush = 0;
  always @(posedge clk) if (rst_n && flush) n_flush++;
  always_comb for (int c = 0; c < NC; c++) begin
    ch_job_ready[c] = (cbusy[c] == 0);
    ch_busy[c]      = (cbusy[c] != 0);
  end
  always @(posedge clk) begin
    out_fire <= 0;
    if (outs_pending > 0 && $urandom_range(0, 1)) begin out_fire <= 1; outs_pending--; end
    for (int c = 0; c < NC; c++) begin
      if (cbusy[c] > 0) begin
        cbusy[c]--;
        if (cbusy[c] == 0 && ch_job_kind == JOB_FP) fp_live--;
      end
      if (rst_n && ch_job_valid[c] && ch_job_ready[c]) begin
        int v; v = int'(ch_job_v[c].vid);
        cbusy[c] = $urandom_range(1, 6);
        if (ch_job_kind == JOB_FP) begin
          fp_seen[v]++; fp_live++;
          checks++;
          if (int'(ch_job_v[c].vtype) != ((v >= 9) ? 2 : (v >= 4) ? 1 : 0)) failures++;
        end else begin
          na_seen[v]++; na_ch[v] = c; outs_pending++;
          checks++;
          if (fp_live != 0) begin failures++; $display("NA before FP finished"); end
        end
      end
    end
  end

  // model grouper: 5 targets in groups {0,1},{2,3,4}
  int gv [5] = '{0, 1, 2, 3, 4};
  int gg [5] = '{0, 0, 1, 1, 1};
  int gi; bit grunning;
  always_comb begin
    grp_mem_valid = grunning && gi < 5;
    grp_mem_vid   = HVW'((gi < 5) ? gv[gi] : 0);
    grp_mem_gid   = HVW'((gi < 5) ? gg[gi] : 0);
    grp_done      = grunning && gi == 5;
    grp_n_groups  = 2;
  end
  always @(posedge clk) begin
    if (grp_start) begin grunning <= 1; gi <= 0; end
    else if (grp_mem_valid && grp_mem_ready) gi <= gi + 1;
  end

  initial begin
    int n_cyc;
    start = 0; gi = 0; grunning = 0; out_fire = 0;
    for (int c = 0; c < NC; c++) cbusy[c] = 0;
    for (int v = 0; v < 64; v++) begin fp_seen[v] = 0; na_seen[v] = 0; na_ch[v] = -1; end
    cfg_n_vert = 20; cfg_n_tgt = 12; cfg_n_hv = 5; cfg_nmax = 3;
    cfg_type_base = '{0, 4, 9, 0};
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n_cyc = 0;
    while (!done && n_cyc < 5000) begin @(posedge clk); n_cyc++; end
    checks += 3;
    if (!done) failures++;
    if (n_flush != 1) failures++;
    if (outs_pending != 0) failures++;
    for (int v = 0; v < 20; v++) begin checks++; if (fp_seen[v] != 1) failures++; end
    for (int v = 0; v < 12; v++) begin checks++; if (na_seen[v] != 1) begin failures++; $display("target %0d seen %0d", v, na_seen[v]); end end
    // grouped targets: channel = gid mod NC
    for (int i = 0; i < 5; i++) begin checks++; if (na_ch[gv[i]] != gg[i] % NC) failures++; end
    // sequential targets 5..11 in runs of 3 starting at channel 2 (= 2 groups mod 3)
    for (int v = 5; v < 12; v++) begin
      checks++;
      if (na_ch[v] != (2 + (v - 5) / 3) % NC) begin failures++; $display("seq %0d on %0d", v, na_ch[v]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
