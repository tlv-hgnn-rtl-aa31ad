// Testbench of the dispatcher, driving a real group of F RPEs.
// Memory models answer feature reads after a random delay and hold the
// adjacency (CSR per target and semantic) and the W^T rows. Projection jobs
// must write back W*x (Q16.16 products summed); aggregation jobs must return
// sum over semantics of (h_t + sum of neighbour features). Neighbour counts up
// to 20 force multi-issue reductions through the feedback lane.
module tb_dispatcher;
  import tlv_pkg::*;
  localparam int F = 8, NM = 4, NG = 2, AAW = 10, WAW = 6, NSEM = 3, NVX = 40, NT = 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] cfg_nsem;
  logic job_valid, job_ready; job_kind_e job_kind; vref_t job_v;
  logic fr_valid, fr_ready, fr_raw, fr_rsp_valid; vref_t fr_v; data_t [F-1:0] fr_rsp_data;
  logic fw_valid, fw_ready; vref_t fw_v; data_t [F-1:0] fw_data;
  logic adj_rd_en; logic [AAW-1:0] adj_rd_addr; logic [31:0] adj_rd_data;
  logic w_rd_en; logic [WAW-1:0] w_rd_addr; data_t [F-1:0] w_rd_data;
  logic grp_sel; logic iss_valid; rpe_mode_e iss_mode; logic iss_load_a;
  data_t iss_a [NM]; data_t [F-1:0] iss_x [NM]; data_t [F-1:0] iss_y [NM];
  logic [NM-1:0] iss_fb_sel; logic rpe_valid; data_t [F-1:0] rpe_data;
  logic res_valid, res_ready; vref_t res_v; data_t [F-1:0] res_data;
  logic [31:0] cnt_lin_issue, cnt_agg_issue, cnt_fb_issue;
  int checks = 0, failures = 0;

  dispatcher #(.F(F), .N_MOA(NM), .N_GRP(NG), .ADJ_AW(AAW), .W_AW(WAW)) dut (.*);

  // one RPE group
  logic [F-1:0] lv;
  for (genvar k = 0; k < F; k++) begin : g_lane
    data_t xl [NM], yl [NM];
    always_comb for (int i = 0; i < NM; i++) begin xl[i] = iss_x[i][k]; yl[i] = iss_y[i][k]; end
    rpe #(.N_MOA(NM)) u (.clk, .rst_n, .mode(iss_mode), .load_a(iss_load_a), .a_in(iss_a),
      .in_valid(iss_valid), .x_in(xl), .y_in(yl), .fb_sel(iss_fb_sel),
      .out_valid(lv[k]), .out_data(rpe_data[k]));
  end
  assign rpe_valid = lv[0];

  always #5 clk = ~clk;

  // memories
  data_t [F-1:0] feat [NVX];
  data_t [F-1:0] raw  [NVX];
  data_t [F-1:0] wt   [2*F];     // two vertex types
  logic [31:0]   adj  [1 << AAW];

  always_ff @(posedge clk) begin
    if (adj_rd_en) adj_rd_data <= adj[adj_rd_addr];
    if (w_rd_en)   w_rd_data   <= wt[w_rd_addr];
  end

  // feature port with random latency
  int lat; bit busy_f; vref_t pv; bit praw;
  always @(negedge clk) fr_ready = !busy_f && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    fr_rsp_valid <= 0;
    if (busy_f) begin
      if (lat == 0) begin
        fr_rsp_valid <= 1;
        fr_rsp_data  <= praw ? raw[pv.vid] : feat[pv.vid];
        busy_f <= 0;
      end else lat <= lat - 1;
    end else if (fr_valid && fr_ready) begin
      busy_f <= 1; pv <= fr_v; praw <= fr_raw; lat <= $urandom_range(0, 3);
    end
  end
  always @(negedge clk) fw_ready = ($urandom_range(0, 1) == 1);
  always @(negedge clk) res_ready = ($urandom_range(0, 1) == 1);

  function automatic data_t mulq(data_t a, data_t b);
    longint p; p = longint'(a) * longint'(b); return data_t'(p >>> 16);
  endfunction

  data_t [F-1:0] got; vref_t gotv; bit gotf;
  always @(posedge clk) begin
    if (fw_valid && fw_ready) begin got <= fw_data; gotv <= fw_v; gotf <= 1; end
    if (res_valid && res_ready) begin got <= res_data; gotv <= res_v; gotf <= 1; end
  end

  task automatic run_job(job_kind_e k, vref_t v, data_t [F-1:0] e);
    int t0;
    @(negedge clk);
    job_valid = 1; job_kind = k; job_v = v; gotf = 0;
    @(posedge clk); #1 job_valid = 0;
    t0 = 0;
    while (!gotf && t0 < 5000) begin @(posedge clk); #1; t0++; end
    checks += 2;
    if (got !== e) begin failures++; $display("kind %0d v %0d mismatch", k, v.vid); end
    if (gotv !== v) failures++;
  endtask

  int nb [NT][NSEM][$];
  initial begin
    int a;
    job_valid = 0; job_kind = JOB_FP; job_v = '0; cfg_nsem = NSEM; busy_f = 0; gotf = 0;
    for (int v = 0; v < NVX; v++) for (int e = 0; e < F; e++) begin
      feat[v][e] = $signed($urandom) >>> 6; raw[v][e] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    end
    for (int r = 0; r < 2 * F; r++) for (int e = 0; e < F; e++) wt[r][e] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    // adjacency: pointer table first, neighbour lists after it
    a = NT * (NSEM + 1);
    for (int t = 0; t < NT; t++) for (int r = 0; r < NSEM; r++) begin
      int cnt; cnt = (t == 0) ? 0 : $urandom_range(0, 20);
      adj[t * (NSEM + 1) + r] = a;
      for (int i = 0; i < cnt; i++) begin
        int u; u = $urandom_range(NT, NVX - 1);
        nb[t][r].push_back(u);
        adj[a] = {4'd1, 28'(u)}; a++;
      end
      adj[t * (NSEM + 1) + r + 1] = a;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // projection jobs
    for (int v = 0; v < 6; v++) begin
      data_t [F-1:0] e; vref_t vr;
      vr = '{vtype: 4'(v % 2), vid: 28'(v)};
      for (int k = 0; k < F; k++) begin
        e[k] = 0;
        for (int j = 0; j < F; j++) e[k] += mulq(raw[v][j], wt[(v % 2) * F + j][k]);
      end
      run_job(JOB_FP, vr, e);
    end
    // aggregation jobs
    for (int t = 0; t < NT; t++) begin
      data_t [F-1:0] e;
      for (int k = 0; k < F; k++) begin
        e[k] = 0;
        for (int r = 0; r < NSEM; r++) begin
          e[k] += feat[t][k];
          foreach (nb[t][r][i]) e[k] += feat[nb[t][r][i]][k];
        end
      end
      run_job(JOB_NA, '{vtype: 4'd0, vid: 28'(t)}, e);
    end
    checks += 3;
    if (cnt_lin_issue == 0) failures++;
    if (cnt_agg_issue == 0) failures++;
    if (cnt_fb_issue == 0) failures++;
    $display("issues lin=%0d agg=%0d fb=%0d", cnt_lin_issue, cnt_agg_issue, cnt_fb_issue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
