// Testbench of one computing module (channel): dispatcher, crossbar, two RPE
// groups and the local feature cache, with a memory-controller model that
// answers after a random delay. Projection jobs must write W*x back through the
// memory port; aggregation jobs must return sum over semantics of (h_t + sum of
// neighbour features). Neighbours are drawn from a small set so the local cache
// must hit; hits and misses are both required.
module tb_computing_module;
  import tlv_pkg::*;
  localparam int F = 8, NM = 4, NG = 2, AAW = 10, WAW = 6, NSEM = 2, NVX = 20, NT = 6;
  logic clk = 0, rst_n = 0, flush;
  logic [7:0] cfg_nsem;
  logic job_valid, job_ready; job_kind_e job_kind; vref_t job_v;
  logic res_valid, res_ready; vref_t res_v; data_t [F-1:0] res_data;
  logic mc_req_valid, mc_req_ready, mc_rsp_valid; mem_req_t mc_req;
  data_t [F-1:0] mc_wdata, mc_rsp_data;
  logic adj_rd_en; logic [AAW-1:0] adj_rd_addr; logic [31:0] adj_rd_data;
  logic w_rd_en; logic [WAW-1:0] w_rd_addr; data_t [F-1:0] w_rd_data;
  logic busy;
  logic [31:0] cnt_lc_hit, cnt_lc_miss, cnt_lin_issue, cnt_agg_issue, cnt_fb_issue;
  int checks = 0, failures = 0;

  computing_module #(.F(F), .N_MOA(NM), .N_GRP(NG), .LC_ENTRIES(8), .LC_WAYS(2),
                     .ADJ_AW(AAW), .W_AW(WAW)) dut (.*);
  always #5 clk = ~clk;

  data_t [F-1:0] feat [NVX], raw [NVX], wt [2*F];
  logic [31:0] adj [1 << AAW];
  always_ff @(posedge clk) begin
    if (adj_rd_en) adj_rd_data <= adj[adj_rd_addr];
    if (w_rd_en)   w_rd_data   <= wt[w_rd_addr];
  end

  // memory-controller model
  bit mbusy; int mlat; mem_req_t mq;
  data_t [F-1:0] wrote; vref_t wrote_v; bit wrote_f;
  always @(negedge clk) mc_req_ready = !mbusy && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    mc_rsp_valid <= 0;
    if (mbusy) begin
      if (mlat == 0) begin
        mc_rsp_valid <= 1;
        mc_rsp_data  <= (mq.op == MEM_RD_RAW) ? raw[mq.v.vid] : feat[mq.v.vid];
        mbusy <= 0;
      end else mlat <= mlat - 1;
    end else if (mc_req_valid && mc_req_ready) begin
      if (mc_req.op == MEM_WR_FEAT) begin wrote <= mc_wdata; wrote_v <= mc_req.v; wrote_f <= 1; end
      else begin mbusy <= 1; mq <= mc_req; mlat <= $urandom_range(1, 5); end
    end
  end
  always @(negedge clk) res_ready = ($urandom_range(0, 1) == 1);
  data_t [F-1:0] got; vref_t gotv; bit gotf;
  always @(posedge clk) if (res_valid && res_ready) begin got <= res_data; gotv <= res_v; gotf <= 1; end

  function automatic data_t mulq(data_t a, data_t b);
    longint p; p = longint'(a) * longint'(b); return data_t'(p >>> 16);
  endfunction

  task automatic start_job(job_kind_e k, vref_t v);
    @(negedge clk);
    job_valid = 1; job_kind = k; job_v = v; gotf = 0; wrote_f = 0;
    @(posedge clk); while (!job_ready) @(posedge clk);
    #1 job_valid = 0;
  endtask

  int nb [NT][NSEM][$];
  initial begin
    int a;
    job_valid = 0; job_kind = JOB_FP; job_v = '0; cfg_nsem = NSEM; flush = 0; mbusy = 0;
    gotf = 0; wrote_f = 0;
    for (int v = 0; v < NVX; v++) for (int e = 0; e < F; e++) begin
      feat[v][e] = $signed($urandom) >>> 6; raw[v][e] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    end
    for (int r = 0; r < 2 * F; r++) for (int e = 0; e < F; e++) wt[r][e] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    a = NT * (NSEM + 1);
    for (int t = 0; t < NT; t++) for (int r = 0; r < NSEM; r++) begin
      int cnt; cnt = $urandom_range(1, 12);
      adj[t * (NSEM + 1) + r] = a;
      for (int i = 0; i < cnt; i++) begin
        int u; u = $urandom_range(NT, NT + 5);
        nb[t][r].push_back(u); adj[a] = {4'd1, 28'(u)}; a++;
      end
      adj[t * (NSEM + 1) + r + 1] = a;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 4; v++) begin
      data_t [F-1:0] e; vref_t vr; int to;
      vr = '{vtype: 4'(v % 2), vid: 28'(v)};
      for (int k = 0; k < F; k++) begin
        e[k] = 0;
        for (int j = 0; j < F; j++) e[k] += mulq(raw[v][j], wt[(v % 2) * F + j][k]);
      end
      start_job(JOB_FP, vr);
      to = 0; while (!wrote_f && to < 3000) begin @(posedge clk); #1; to++; end
      checks += 2;
      if (wrote !== e) begin failures++; $display("FP %0d mismatch", v); end
      if (wrote_v !== vr) failures++;
    end
    for (int t = 0; t < NT; t++) begin
      data_t [F-1:0] e; int to;
      for (int k = 0; k < F; k++) begin
        e[k] = 0;
        for (int r = 0; r < NSEM; r++) begin
          e[k] += feat[t][k];
          foreach (nb[t][r][i]) e[k] += feat[nb[t][r][i]][k];
        end
      end
      start_job(JOB_NA, '{vtype: 4'd0, vid: 28'(t)});
      to = 0; while (!gotf && to < 5000) begin @(posedge clk); #1; to++; end
      checks += 2;
      if (got !== e) begin failures++; $display("NA %0d mismatch", t); end
      if (gotv.vid != 28'(t)) failures++;
    end
    checks += 4;
    if (cnt_lc_hit == 0) failures++;
    if (cnt_lc_miss == 0) failures++;
    if (cnt_lin_issue == 0 || cnt_agg_issue == 0) failures++;
    if (cnt_fb_issue == 0) failures++;
    $display("lc hit=%0d miss=%0d lin=%0d agg=%0d fb=%0d", cnt_lc_hit, cnt_lc_miss, cnt_lin_issue, cnt_agg_issue, cnt_fb_issue);
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
