// TLV-HGNN accelerator top level.
//
// Heterogeneous-graph neural network inference, organised around the target
// vertex: each target and its neighbours under every semantic form one job,
// aggregated and fused at once, so no per-semantic intermediate results are
// stored and each target feature is read once. The chip has:
//  * N_CH computing modules (channels), each with N_GRP*F reconfigurable PEs,
//    a crossbar, a dispatcher and a local feature cache;
//  * a globally shared feature cache and a memory controller in front of HBM;
//  * a weight buffer, an adjacency buffer and a target buffer;
//  * a vertex grouper that groups high-overlap targets for the channels;
//  * a scheduler and an activation module (LeakyReLU).
// HBM itself is off chip: its port is brought out (hbm_*).
//
// Operation: load the weight buffer (wb_*), the adjacency buffer (adj_*) and
// the grouper's hypergraph (grp_ld_*) and put raw features into HBM; set cfg_*
// and pulse start. The chip projects every vertex (FP phase, RPEs in linear
// mode, results written back to HBM), then groups and aggregates every target
// (NA phase, RPEs in aggregation mode). Each finished embedding leaves on
// out_valid/out_ready, in completion order; done rises after the last one.
// The event counters show how often each mechanism worked.
//
// Sizes follow the paper where it gives them: 4 channels, 2048 RPEs, 512
// grouper MAC units, 1.64 MB weight buffer, 1.40 MB adjacency buffer, 0.60 MB
// target buffer, 6 MB of feature caches (split here 2 MB global + 4 x 1 MB
// local). Feature length, number format and buffer layouts are this design's.
//
// Lint notes: the grouper's per-group close pulse is left open here (the
// scheduler needs only the member stream); rst_n is reported as used both
// synchronously and asynchronously because the assertions' disable-iff reads
// it - all flip-flops reset asynchronously.
module tlv_hgnn_top
  import tlv_pkg::*;
#(
  parameter int unsigned N_CH       = 4,
  parameter int unsigned F          = 64,
  parameter int unsigned N_MOA      = 4,
  parameter int unsigned N_GRP      = 8,
  parameter int unsigned LC_ENTRIES = 4096,
  parameter int unsigned GC_ENTRIES = 8192,
  parameter int unsigned WB_DEPTH   = 6400,
  parameter int unsigned ADJ_DEPTH  = 367001,
  parameter int unsigned TB_DEPTH   = 39321,
  parameter int unsigned N_HV       = 16384,
  parameter int unsigned N_HE       = 131072,
  parameter int unsigned LANES      = 256,
  parameter int unsigned N_TYPES    = 8,
  localparam int unsigned ADJ_AW    = $clog2(ADJ_DEPTH),
  localparam int unsigned W_AW      = $clog2(WB_DEPTH),
  localparam int unsigned HV_W      = $clog2(N_HV + 1),
  localparam int unsigned HE_W      = $clog2(N_HE + 1),
  localparam int unsigned LINE_W    = F * DATA_W,
  localparam int unsigned HADDR_W   = VID_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  logic                start,
  input  vid_t                cfg_n_vert,
  input  vid_t                cfg_n_tgt,
  input  vid_t                cfg_n_hv,
  input  vid_t                cfg_nmax,
  input  logic [7:0]          cfg_nsem,
  input  vid_t                cfg_type_base [N_TYPES],
  output logic                done,
  // buffer loading
  input  logic                wb_we,
  input  logic [W_AW-1:0]     wb_waddr,
  input  data_t [F-1:0]       wb_wdata,
  input  logic                adj_we,
  input  logic [ADJ_AW-1:0]   adj_waddr,
  input  logic [31:0]         adj_wdata,
  input  logic                grp_ld_we,
  input  logic [1:0]          grp_ld_sel,
  input  logic [HE_W-1:0]     grp_ld_addr,
  input  logic [31:0]         grp_ld_data,
  // HBM
  output logic                hbm_req_valid,
  input  logic                hbm_req_ready,
  output logic                hbm_req_we,
  output logic [HADDR_W-1:0]  hbm_req_addr,
  output logic [LINE_W-1:0]   hbm_req_wdata,
  input  logic                hbm_rsp_valid,
  input  logic [LINE_W-1:0]   hbm_rsp_data,
  // embeddings out
  output logic                out_valid,
  input  logic                out_ready,
  output vref_t               out_v,
  output data_t [F-1:0]       out_data,
  // event counts
  output logic [31:0]         ch_lin_issue [N_CH],
  output logic [31:0]         ch_agg_issue [N_CH],
  output logic [31:0]         ch_fb_issue  [N_CH],
  output logic [31:0]         ch_lc_hit    [N_CH],
  output logic [31:0]         ch_lc_miss   [N_CH],
  output logic [31:0]         cnt_gc_hit,
  output logic [31:0]         cnt_gc_miss,
  output logic [31:0]         cnt_hbm_rd,
  output logic [31:0]         cnt_hbm_wr,
  output logic [HV_W-1:0]     n_groups,
  output logic                phase_na,
  output logic                grp_busy,
  // vertex-group and group-weight tables of the grouper (combinational reads)
  input  logic [HV_W-1:0]     vg_rd_addr,
  output logic [HV_W-1:0]     vg_rd_gid,
  input  logic [HV_W-1:0]     gw_rd_addr,
  output logic [39:0]         gw_rd_in,
  output logic signed [39:0]  gw_rd_out
);

  localparam int unsigned CH_W = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic flush;

  // ---------------- channels ----------------
  logic [N_CH-1:0]   job_valid, job_ready, ch_busy;
  job_kind_e         job_kind;
  vref_t             job_v [N_CH];
  logic [N_CH-1:0]   res_valid, res_ready;
  vref_t             res_v [N_CH];
  data_t [F-1:0]     res_data [N_CH];
  logic [N_CH-1:0]   mc_req_valid, mc_req_ready, mc_rsp_valid;
  mem_req_t          mc_req [N_CH];
  data_t [F-1:0]     mc_wdata [N_CH];
  data_t [F-1:0]     mc_rsp_data;
  logic [N_CH-1:0]   adj_rd_en, w_rd_en;
  logic [ADJ_AW-1:0] adj_rd_addr [N_CH];
  logic [31:0]       adj_rd_data [N_CH];
  logic [W_AW-1:0]   w_rd_addr [N_CH];
  logic [LINE_W-1:0] w_rd_word [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    computing_module #(
      .F(F), .N_MOA(N_MOA), .N_GRP(N_GRP), .LC_ENTRIES(LC_ENTRIES),
      .ADJ_AW(ADJ_AW), .W_AW(W_AW)
    ) u_cm (
      .clk, .rst_n, .flush, .cfg_nsem,
      .job_valid(job_valid[c]), .job_ready(job_ready[c]), .job_kind, .job_v(job_v[c]),
      .res_valid(res_valid[c]), .res_ready(res_ready[c]), .res_v(res_v[c]), .res_data(res_data[c]),
      .mc_req_valid(mc_req_valid[c]), .mc_req_ready(mc_req_ready[c]), .mc_req(mc_req[c]),
      .mc_wdata(mc_wdata[c]), .mc_rsp_valid(mc_rsp_valid[c]), .mc_rsp_data,
      .adj_rd_en(adj_rd_en[c]), .adj_rd_addr(adj_rd_addr[c]), .adj_rd_data(adj_rd_data[c]),
      .w_rd_en(w_rd_en[c]), .w_rd_addr(w_rd_addr[c]), .w_rd_data(w_rd_word[c]),
      .busy(ch_busy[c]),
      .cnt_lc_hit(ch_lc_hit[c]), .cnt_lc_miss(ch_lc_miss[c]),
      .cnt_lin_issue(ch_lin_issue[c]), .cnt_agg_issue(ch_agg_issue[c]), .cnt_fb_issue(ch_fb_issue[c])
    );
  end

  // ---------------- shared buffers ----------------
  sram_buf #(.WIDTH(32), .DEPTH(ADJ_DEPTH), .N_RD(N_CH)) u_adj_buf (
    .clk, .we(adj_we), .waddr(adj_waddr), .wdata(adj_wdata),
    .rd_en(adj_rd_en), .rd_addr(adj_rd_addr), .rd_data(adj_rd_data)
  );

  sram_buf #(.WIDTH(LINE_W), .DEPTH(WB_DEPTH), .N_RD(N_CH)) u_weight_buf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(LINE_W'(wb_wdata)),
    .rd_en(w_rd_en), .rd_addr(w_rd_addr), .rd_data(w_rd_word)
  );

  logic            tq_push;
  logic [CH_W-1:0] tq_push_ch;
  vref_t           tq_push_v;
  logic [N_CH-1:0] tq_pop, tq_empty, tq_full;
  vref_t           tq_head [N_CH];

  target_buffer #(.N_CH(N_CH), .DEPTH(TB_DEPTH)) u_target_buf (
    .clk, .rst_n, .push(tq_push), .push_ch(tq_push_ch), .push_v(tq_push_v),
    .pop(tq_pop), .head_v(tq_head), .empty(tq_empty), .full(tq_full)
  );

  // ---------------- memory controller and global cache ----------------
  memory_controller #(.N_CH(N_CH), .F(F), .GC_ENTRIES(GC_ENTRIES)) u_mc (
    .clk, .rst_n, .flush,
    .req_valid(mc_req_valid), .req_ready(mc_req_ready), .req(mc_req), .req_wdata(mc_wdata),
    .rsp_valid(mc_rsp_valid), .rsp_data(mc_rsp_data),
    .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
    .hbm_rsp_valid, .hbm_rsp_data,
    .cnt_gc_hit, .cnt_gc_miss, .cnt_hbm_rd, .cnt_hbm_wr
  );

  // ---------------- vertex grouper ----------------
  logic            grp_start, grp_done, grp_mem_valid, grp_mem_ready;
  logic [HV_W-1:0] grp_mem_vid, grp_mem_gid;

  vertex_grouper #(.N_HV(N_HV), .N_HE(N_HE), .LANES(LANES)) u_grouper (
    .clk, .rst_n,
    .ld_we(grp_ld_we), .ld_sel(grp_ld_sel), .ld_addr(grp_ld_addr), .ld_data(grp_ld_data),
    .start(grp_start), .cfg_n(HV_W'(cfg_n_hv)), .cfg_nmax(HV_W'(cfg_nmax)),
    .busy(grp_busy), .done(grp_done),
    .mem_valid(grp_mem_valid), .mem_ready(grp_mem_ready), .mem_vid(grp_mem_vid), .mem_gid(grp_mem_gid),
    .grp_close(), .n_groups,
    .vg_rd_addr, .vg_rd_gid, .gw_rd_addr, .gw_rd_in, .gw_rd_out
  );

  // ---------------- scheduler ----------------
  scheduler #(.N_CH(N_CH), .N_TYPES(N_TYPES), .HV_W(HV_W)) u_sched (
    .clk, .rst_n, .start, .cfg_n_vert, .cfg_n_tgt, .cfg_n_hv, .cfg_nmax, .cfg_type_base,
    .flush, .done, .phase_na,
    .ch_job_valid(job_valid), .ch_job_ready(job_ready), .ch_job_kind(job_kind), .ch_job_v(job_v),
    .ch_busy,
    .tq_push, .tq_push_ch, .tq_push_v, .tq_pop, .tq_head, .tq_empty, .tq_full,
    .grp_start, .grp_done, .grp_mem_valid, .grp_mem_ready, .grp_mem_vid, .grp_mem_gid,
    .grp_n_groups(n_groups),
    .out_fire(out_valid && out_ready)
  );

  // ---------------- activation ----------------
  activation_module #(.N_CH(N_CH), .F(F)) u_act (
    .clk, .rst_n,
    .in_valid(res_valid), .in_ready(res_ready), .in_v(res_v), .in_data(res_data),
    .out_valid, .out_ready, .out_v, .out_data
  );

endmodule
