// Full-size run of the accelerator: the top with every parameter at its
// default (4 channels of 8 x 64 RPE lanes, feature length 64, full caches and
// buffers, a 16384-vertex grouper), taken through one complete inference on a
// small graph: 12 targets with neighbours under two semantics. Type-1
// neighbours are drawn from IDs 2048 apart, so five of them share one set of
// the global cache (2048 sets of 4 ways) and evict each other. The reference
// is worked out as in the reduced end-to-end test (projection with the same
// fixed-point rounding, aggregation over all semantics, LeakyReLU), every
// output is compared, and the linear, aggregation, feedback, cache and grouping
// events are required to occur. The target queues are far too deep to fill
// here, so that event is only reported.
module tb_tlv_hgnn_full;
  import tlv_pkg::*;
  localparam int NC = 4, F = 64, NTY = 8, NHV = 16384, NHE = 131072;
  localparam int WBD = 6400, ADJD = 367001;
  localparam int NT = 12, N1 = 8200, N2 = 6, NV = NT + N1 + N2, NSEM = 2, N_HV_USED = 8, NMAX = 3;
  localparam int ADJ_AW = $clog2(ADJD), W_AW = $clog2(WBD), HV_W = $clog2(NHV + 1), HE_W = $clog2(NHE + 1);
  localparam int LINE_W = F * DATA_W;

  logic clk = 0, rst_n = 0, start = 0, done;
  vid_t cfg_n_vert, cfg_n_tgt, cfg_n_hv, cfg_nmax;
  logic [7:0] cfg_nsem;
  vid_t cfg_type_base [NTY];
  logic wb_we = 0; logic [W_AW-1:0] wb_waddr = '0; data_t [F-1:0] wb_wdata = '0;
  logic adj_we = 0; logic [ADJ_AW-1:0] adj_waddr = '0; logic [31:0] adj_wdata = '0;
  logic grp_ld_we = 0; logic [1:0] grp_ld_sel = '0; logic [HE_W-1:0] grp_ld_addr = '0; logic [31:0] grp_ld_data = '0;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid;
  logic [VID_W:0] hbm_req_addr;
  logic [LINE_W-1:0] hbm_req_wdata, hbm_rsp_data;
  logic out_valid, out_ready; vref_t out_v; data_t [F-1:0] out_data;
  logic [31:0] ch_lin_issue [NC], ch_agg_issue [NC], ch_fb_issue [NC], ch_lc_hit [NC], ch_lc_miss [NC];
  logic [31:0] cnt_gc_hit, cnt_gc_miss, cnt_hbm_rd, cnt_hbm_wr;
  logic [HV_W-1:0] n_groups, vg_rd_addr = '0, vg_rd_gid, gw_rd_addr = '0;
  logic phase_na, grp_busy;
  logic [39:0] gw_rd_in; logic signed [39:0] gw_rd_out;
  int checks = 0, failures = 0;

  tlv_hgnn_top dut (.*);
  tb_hbm_model #(.AW(VID_W + 1), .DW(LINE_W)) hbm (
    .clk, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req_we(hbm_req_we),
    .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata), .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data));
  always #5 clk = ~clk;

  function automatic data_t mulq(data_t a, data_t b);
    longint p; p = longint'(a) * longint'(b); return data_t'(p >>> 16);
  endfunction
  function automatic int vtype_of(int v);
    return (v >= NT + N1) ? 2 : (v >= NT) ? 1 : 0;
  endfunction

  data_t [F-1:0] raw [NV], proj [NV], expo [NT], wt [3 * F];
  int nb [NT][NSEM][$];
  bit nbset [NT][NV];

  // output side: random back-pressure, record everything
  int n_out [NT]; int n_bp = 0, n_seq_out = 0, n_tq_full = 0;
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) n_bp++;
    if (rst_n && |dut.tq_full) n_tq_full++;
    if (rst_n && out_valid && out_ready) begin
      int t; t = int'(out_v.vid);
      checks++;
      if (t >= NT || out_v.vtype != 0) begin failures++; $display("bad output vertex %0d", t); end
      else begin
        n_out[t]++;
        if (t >= N_HV_USED) n_seq_out++;
        if (out_data !== expo[t]) begin failures++; $display("target %0d: wrong embedding", t); end
      end
    end
  end

  task automatic wr_adj(int a, logic [31:0] d);
    @(negedge clk); adj_we = 1; adj_waddr = ADJ_AW'(a); adj_wdata = d;
    @(negedge clk); adj_we = 0;
  endtask
  task automatic wr_grp(int sel, int a, int d);
    @(negedge clk); grp_ld_we = 1; grp_ld_sel = 2'(sel); grp_ld_addr = HE_W'(a); grp_ld_data = d;
    @(negedge clk); grp_ld_we = 0;
  endtask

  initial begin
    int a, e, cyc, miss_v, ok;
    int lin, agg, fb, lch, lcm;
    cfg_n_vert = NV; cfg_n_tgt = NT; cfg_n_hv = N_HV_USED; cfg_nmax = NMAX; cfg_nsem = NSEM;
    cfg_type_base = '{0, NT, NT + N1, 0, 0, 0, 0, 0};
    for (int t = 0; t < NT; t++) begin n_out[t] = 0; for (int v = 0; v < NV; v++) nbset[t][v] = 0; end
    // data
    for (int v = 0; v < NV; v++) for (int k = 0; k < F; k++)
      raw[v][k] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    for (int r = 0; r < 3 * F; r++) for (int k = 0; k < F; k++)
      wt[r][k] = $signed($urandom_range(0, 1 << 18)) - (1 << 17);
    for (int v = 0; v < NV; v++) for (int k = 0; k < F; k++) begin
      proj[v][k] = 0;
      for (int j = 0; j < F; j++) proj[v][k] += mulq(raw[v][j], wt[vtype_of(v) * F + j][k]);
    end
    for (int t = 0; t < NT; t++) for (int r = 0; r < NSEM; r++) begin
      int cnt; cnt = $urandom_range(1, 5);
      for (int i = 0; i < cnt; i++) begin
        int u; u = (r == 0) ? NT + 2048 * $urandom_range(0, 4) + $urandom_range(0, 1) : $urandom_range(NT + N1, NV - 1);
        nb[t][r].push_back(u); nbset[t][u] = 1;
      end
    end
    for (int t = 0; t < NT; t++) for (int k = 0; k < F; k++) begin
      data_t z; z = 0;
      for (int r = 0; r < NSEM; r++) begin
        z += proj[t][k];
        foreach (nb[t][r][i]) z += proj[nb[t][r][i]][k];
      end
      expo[t][k] = (z < 0) ? mulq(z, 32'sd655) : z;
    end
    foreach (raw[v]) hbm.mem[{1'b1, 28'(v)}] = raw[v];

    repeat (3) @(negedge clk); rst_n = 1;
    // weight buffer: row type*F + j holds W_type^T row j
    for (int r = 0; r < 3 * F; r++) begin
      @(negedge clk); wb_we = 1; wb_waddr = W_AW'(r); wb_wdata = wt[r];
    end
    @(negedge clk); wb_we = 0;
    // adjacency CSR
    a = NT * (NSEM + 1);
    for (int t = 0; t < NT; t++) for (int r = 0; r < NSEM; r++) begin
      wr_adj(t * (NSEM + 1) + r, a);
      foreach (nb[t][r][i]) begin wr_adj(a, {4'(vtype_of(nb[t][r][i])), 28'(nb[t][r][i])}); a++; end
      wr_adj(t * (NSEM + 1) + r + 1, a);
    end
    // grouper graph: Jaccard similarity of neighbour sets, Q0.16
    e = 0;
    for (int i = 0; i < N_HV_USED; i++) begin
      wr_grp(0, i, e);
      for (int j = 0; j < N_HV_USED; j++) if (j != i) begin
        int in_c, un_c;
        in_c = 0; un_c = 0;
        for (int v = 0; v < NV; v++) begin
          if (nbset[i][v] && nbset[j][v]) in_c++;
          if (nbset[i][v] || nbset[j][v]) un_c++;
        end
        if (in_c > 0) begin
          wr_grp(1, e, j); wr_grp(2, e, (in_c << 16) / un_c); e++;
        end
      end
    end
    wr_grp(0, N_HV_USED, e);

    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 1500000) begin @(posedge clk); cyc++; end
    repeat (2) @(posedge clk);
    checks++; if (!done) begin failures++; $display("no done"); end
    miss_v = 0;
    for (int t = 0; t < NT; t++) begin checks++; if (n_out[t] != 1) begin failures++; miss_v++; end end
    // projected features written back to HBM
    ok = 1;
    for (int v = 0; v < NV; v++) if (hbm.mem[{1'b0, 28'(v)}] !== proj[v]) ok = 0;
    checks++; if (!ok) begin failures++; $display("projected features in HBM differ"); end

    lin = 0; agg = 0; fb = 0; lch = 0; lcm = 0;
    for (int c = 0; c < NC; c++) begin
      lin += ch_lin_issue[c]; agg += ch_agg_issue[c]; fb += ch_fb_issue[c];
      lch += ch_lc_hit[c]; lcm += ch_lc_miss[c];
    end
    $display("cycles=%0d linear=%0d agg=%0d feedback=%0d lc_hit=%0d lc_miss=%0d gc_hit=%0d gc_miss=%0d hbm_rd=%0d hbm_wr=%0d",
             cyc, lin, agg, fb, lch, lcm, cnt_gc_hit, cnt_gc_miss, cnt_hbm_rd, cnt_hbm_wr);
    $display("groups=%0d seq_targets_out=%0d tq_full_cycles=%0d backpressure=%0d missing=%0d",
             n_groups, n_seq_out, n_tq_full, n_bp, miss_v);
    checks += 11;
    if (lin == 0) begin failures++; $display("no linear-mode issue"); end
    if (agg == 0) begin failures++; $display("no aggregation-mode issue"); end
    if (fb == 0) begin failures++; $display("no feedback issue"); end
    if (lch == 0) begin failures++; $display("no local hit"); end
    if (lcm == 0) begin failures++; $display("no local miss"); end
    if (cnt_gc_hit == 0) begin failures++; $display("no global hit"); end
    if (cnt_gc_miss == 0) begin failures++; $display("no global miss"); end
    if (cnt_hbm_wr == 0) begin failures++; $display("no write-back"); end
    if (n_groups < 2) begin failures++; $display("fewer than two groups"); end
    if (n_seq_out == 0) begin failures++; $display("no sequential target"); end
    if (n_bp == 0) begin failures++; $display("no output back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
