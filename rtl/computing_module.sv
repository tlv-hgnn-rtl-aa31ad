// Computing module: one channel of the accelerator.
//
// Holds N_GRP*F RPEs arranged as N_GRP groups of F element lanes, the crossbar
// that steers the dispatcher's issues to one group, the dispatcher, and the
// channel-private (local) feature cache.
//
// Feature reads of the dispatcher go through the local cache: a projected
// feature is looked up (result one cycle later); a hit answers the dispatcher
// directly, a miss, and every raw-feature read, becomes a request to the memory
// controller, whose answer is filled into the local cache (projected features
// only) and passed on. Write-backs of projected features go straight to the
// memory controller, which takes a write when it accepts it and sends no answer.
// The channel has one memory request outstanding at a time.
//
// Interfaces: job_* takes one job (JOB_FP or JOB_NA on a vertex); res_* hands
// out one finished embedding; mc_* is the request/answer port to the memory
// controller; adj_* and w_* are read ports into the shared adjacency and weight
// buffers (answer one cycle after the read); flush clears the local cache.
//
// The paper gives the parts (RPEs, crossbar, dispatcher, local cache) and that
// a channel holds 512 RPEs (2048 over four channels). Grouping them by feature
// element (8 groups of 64 with the default F = 64) and serving one job at a
// time, so that only the selected group works, is this design's choice.
//
// Lint note: only lane 0's valid of each RPE group is used, as all lanes of a
// group run in lock-step.
module computing_module
  import tlv_pkg::*;
#(
  parameter int unsigned F         = 64,
  parameter int unsigned N_MOA     = 4,
  parameter int unsigned N_GRP     = 8,
  parameter int unsigned LC_ENTRIES = 4096,   // 1 MB local cache per channel
  parameter int unsigned LC_WAYS   = 4,
  parameter int unsigned ADJ_AW    = 19,
  parameter int unsigned W_AW      = 13,
  localparam int unsigned GRP_W    = (N_GRP > 1) ? $clog2(N_GRP) : 1,
  localparam int unsigned LINE_W   = F * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic [7:0]        cfg_nsem,
  input  logic              job_valid,
  output logic              job_ready,
  input  job_kind_e         job_kind,
  input  vref_t             job_v,
  output logic              res_valid,
  input  logic              res_ready,
  output vref_t             res_v,
  output data_t [F-1:0]     res_data,
  output logic              mc_req_valid,
  input  logic              mc_req_ready,
  output mem_req_t          mc_req,
  output data_t [F-1:0]     mc_wdata,
  input  logic              mc_rsp_valid,
  input  data_t [F-1:0]     mc_rsp_data,
  output logic              adj_rd_en,
  output logic [ADJ_AW-1:0] adj_rd_addr,
  input  logic [31:0]       adj_rd_data,
  output logic              w_rd_en,
  output logic [W_AW-1:0]   w_rd_addr,
  input  data_t [F-1:0]     w_rd_data,
  output logic              busy,
  output logic [31:0]       cnt_lc_hit,
  output logic [31:0]       cnt_lc_miss,
  output logic [31:0]       cnt_lin_issue,
  output logic [31:0]       cnt_agg_issue,
  output logic [31:0]       cnt_fb_issue
);

  typedef data_t [F-1:0] vec_t;

  // ---------------- dispatcher ----------------
  logic              fr_valid, fr_ready, fr_raw, fr_rsp_valid;
  vref_t             fr_v, fw_v;
  data_t [F-1:0]     fr_rsp_data, fw_data;
  logic              fw_valid, fw_ready;
  logic [GRP_W-1:0]  grp_sel;
  logic              iss_valid, iss_load_a;
  rpe_mode_e         iss_mode;
  data_t             iss_a [N_MOA];
  data_t [F-1:0]     iss_x [N_MOA];
  data_t [F-1:0]     iss_y [N_MOA];
  logic [N_MOA-1:0]  iss_fb_sel;
  logic              rpe_valid;
  data_t [F-1:0]     rpe_data;

  dispatcher #(.F(F), .N_MOA(N_MOA), .N_GRP(N_GRP), .ADJ_AW(ADJ_AW), .W_AW(W_AW)) u_disp (
    .clk, .rst_n, .cfg_nsem,
    .job_valid, .job_ready, .job_kind, .job_v,
    .fr_valid, .fr_ready, .fr_raw, .fr_v, .fr_rsp_valid, .fr_rsp_data,
    .fw_valid, .fw_ready, .fw_v, .fw_data,
    .adj_rd_en, .adj_rd_addr, .adj_rd_data,
    .w_rd_en, .w_rd_addr, .w_rd_data,
    .grp_sel, .iss_valid, .iss_mode, .iss_load_a, .iss_a, .iss_x, .iss_y, .iss_fb_sel,
    .rpe_valid, .rpe_data,
    .res_valid, .res_ready, .res_v, .res_data,
    .cnt_lin_issue, .cnt_agg_issue, .cnt_fb_issue
  );

  // ---------------- crossbar to the RPE groups ----------------
  localparam int unsigned OP_W = 2 * N_MOA * DATA_W;
  logic [F-1:0][OP_W-1:0]   up_op;
  logic [N_GRP-1:0]         dn_valid;
  logic [F-1:0][OP_W-1:0]   dn_op  [N_GRP];
  logic [N_GRP-1:0]         grp_res_valid;
  logic [F-1:0][DATA_W-1:0] grp_res [N_GRP];
  logic [F-1:0][DATA_W-1:0] xb_res;

  always_comb begin
    for (int k = 0; k < F; k++)
      for (int i = 0; i < N_MOA; i++) begin
        up_op[k][(2*i)*DATA_W   +: DATA_W] = iss_x[i][k];
        up_op[k][(2*i+1)*DATA_W +: DATA_W] = iss_y[i][k];
      end
  end

  crossbar #(.N_GRP(N_GRP), .LANES(F), .OP_W(OP_W), .RES_W(DATA_W)) u_xbar (
    .sel(grp_sel), .up_valid(iss_valid), .up_op,
    .dn_valid, .dn_op,
    .res_valid_in(grp_res_valid), .res_in(grp_res),
    .res_valid(rpe_valid), .res(xb_res)
  );
  always_comb for (int k = 0; k < F; k++) rpe_data[k] = data_t'(xb_res[k]);

  for (genvar g = 0; g < N_GRP; g++) begin : g_grp
    logic [F-1:0] lane_valid;
    for (genvar k = 0; k < F; k++) begin : g_lane
      data_t x_l [N_MOA];
      data_t y_l [N_MOA];
      data_t o_l;
      always_comb
        for (int i = 0; i < N_MOA; i++) begin
          x_l[i] = data_t'(dn_op[g][k][(2*i)*DATA_W   +: DATA_W]);
          y_l[i] = data_t'(dn_op[g][k][(2*i+1)*DATA_W +: DATA_W]);
        end
      rpe #(.N_MOA(N_MOA)) u_rpe (
        .clk, .rst_n,
        .mode(iss_mode),
        .load_a(iss_load_a && grp_sel == GRP_W'(g)),
        .a_in(iss_a),
        .in_valid(dn_valid[g]),
        .x_in(x_l), .y_in(y_l),
        .fb_sel(iss_fb_sel),
        .out_valid(lane_valid[k]),
        .out_data(o_l)
      );
      assign grp_res[g][k] = o_l;
    end
    // all lanes of a group run in lockstep; lane 0 speaks for the group
    assign grp_res_valid[g] = lane_valid[0];
  end

  // ---------------- local feature cache ----------------
  typedef enum logic [2:0] {L_IDLE, L_LOOKUP, L_MREQ, L_MWAIT, L_WREQ} lstate_e;
  lstate_e        lst;
  vref_t          lv;
  logic           lraw;
  logic           lk_valid, lk_done, lk_hit, fl_valid;
  logic [LINE_W-1:0] lk_data;

  feature_cache #(.LINE_W(LINE_W), .ENTRIES(LC_ENTRIES), .WAYS(LC_WAYS)) u_lcache (
    .clk, .rst_n, .flush,
    .lk_valid, .lk_key({STAGE_PROJ, fr_v}), .lk_done, .lk_hit, .lk_data,
    .fl_valid, .fl_key({STAGE_PROJ, lv}), .fl_data(mc_rsp_data)
  );

  always_comb begin
    fr_ready     = (lst == L_IDLE) && fr_valid;
    lk_valid     = (lst == L_IDLE) && fr_valid && !fr_raw;
    fw_ready     = (lst == L_WREQ) && mc_req_ready;
    fr_rsp_valid = ((lst == L_LOOKUP) && lk_done && lk_hit) || ((lst == L_MWAIT) && mc_rsp_valid);
    fr_rsp_data  = (lst == L_LOOKUP) ? vec_t'(lk_data) : mc_rsp_data;
    fl_valid     = (lst == L_MWAIT) && mc_rsp_valid && !lraw;
    mc_req_valid = (lst == L_MREQ) || (lst == L_WREQ);
    mc_req.op    = (lst == L_WREQ) ? MEM_WR_FEAT : (lraw ? MEM_RD_RAW : MEM_RD_FEAT);
    mc_req.v     = (lst == L_WREQ) ? fw_v : lv;
    mc_wdata     = fw_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst <= L_IDLE; lv <= '0; lraw <= 1'b0;
      cnt_lc_hit <= '0; cnt_lc_miss <= '0;
    end else begin
      unique case (lst)
        L_IDLE: begin
          if (fr_valid) begin
            lv   <= fr_v;
            lraw <= fr_raw;
            lst  <= fr_raw ? L_MREQ : L_LOOKUP;
          end else if (fw_valid) lst <= L_WREQ;
        end
        L_LOOKUP: if (lk_done) begin
          if (lk_hit) begin cnt_lc_hit <= cnt_lc_hit + 1; lst <= L_IDLE; end
          else        begin cnt_lc_miss <= cnt_lc_miss + 1; lst <= L_MREQ; end
        end
        L_MREQ:  if (mc_req_ready) lst <= L_MWAIT;
        L_MWAIT: if (mc_rsp_valid) lst <= L_IDLE;
        L_WREQ:  if (mc_req_ready) lst <= L_IDLE;
        default: lst <= L_IDLE;
      endcase
    end
  end

  assign busy = !job_ready || res_valid;

endmodule
