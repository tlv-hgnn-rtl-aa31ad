// Memory controller: moves feature vectors between the channels, the globally
// shared feature cache and the HBM.
//
// The N_CH channel ports are served one request at a time, picked round-robin.
//  * MEM_RD_FEAT (projected feature): looked up in the global cache (answer one
//    cycle later); a hit is answered at once, a miss is read from HBM, filled
//    into the global cache and answered.
//  * MEM_RD_RAW (raw feature): read from HBM and answered; not cached.
//  * MEM_WR_FEAT: written to HBM and filled into the global cache (write
//    through with allocate), so that the aggregation phase finds freshly
//    projected features on chip. No answer is sent.
// Answers go back on one shared data bus with a per-channel valid.
//
// HBM port: one request (read or write of one whole vector) at a time with a
// valid/ready handshake; read data returns on hbm_rsp_valid after any number of
// cycles. HBM word address = {region, vertex ID}, region 0 holding projected
// features and region 1 raw features, one vector per word.
//
// The paper says only that this unit schedules transfers between off-chip and
// on-chip memory. The round-robin order, the single outstanding request, the
// write-allocate policy and the address map are this design's choices.
module memory_controller
  import tlv_pkg::*;
#(
  parameter int unsigned N_CH       = 4,
  parameter int unsigned F          = 64,
  parameter int unsigned GC_ENTRIES = 8192,   // 2 MB global cache
  parameter int unsigned GC_WAYS    = 4,
  localparam int unsigned CH_W      = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned LINE_W    = F * DATA_W,
  localparam int unsigned HADDR_W   = VID_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  // channel ports
  input  logic [N_CH-1:0]     req_valid,
  output logic [N_CH-1:0]     req_ready,
  input  mem_req_t            req     [N_CH],
  input  data_t [F-1:0]       req_wdata [N_CH],
  output logic [N_CH-1:0]     rsp_valid,
  output data_t [F-1:0]       rsp_data,
  // HBM port
  output logic                hbm_req_valid,
  input  logic                hbm_req_ready,
  output logic                hbm_req_we,
  output logic [HADDR_W-1:0]  hbm_req_addr,
  output logic [LINE_W-1:0]   hbm_req_wdata,
  input  logic                hbm_rsp_valid,
  input  logic [LINE_W-1:0]   hbm_rsp_data,
  // event counts
  output logic [31:0]         cnt_gc_hit,
  output logic [31:0]         cnt_gc_miss,
  output logic [31:0]         cnt_hbm_rd,
  output logic [31:0]         cnt_hbm_wr
);

  typedef data_t [F-1:0] vec_t;
  typedef enum logic [2:0] {M_IDLE, M_LOOKUP, M_HREQ, M_HWAIT, M_WREQ} mstate_e;

  mstate_e          st;
  logic [CH_W-1:0]  rr, pick, cur;
  logic             any;
  mem_req_t         cr;
  vec_t             cw;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < N_CH; k++) begin
      logic [CH_W:0] c;
      c = (CH_W+1)'((int'(rr) + k) % N_CH);
      if (!any && req_valid[c[CH_W-1:0]]) begin
        any  = 1'b1;
        pick = c[CH_W-1:0];
      end
    end
  end

  // global feature cache
  logic              lk_valid, lk_done, lk_hit, fl_valid;
  logic [LINE_W-1:0] lk_data, fl_data;
  logic [STAGE_W+VTYPE_W+VID_W-1:0] fl_key;

  feature_cache #(.LINE_W(LINE_W), .ENTRIES(GC_ENTRIES), .WAYS(GC_WAYS)) u_gcache (
    .clk, .rst_n, .flush,
    .lk_valid, .lk_key({STAGE_PROJ, req[pick].v}), .lk_done, .lk_hit, .lk_data,
    .fl_valid, .fl_key, .fl_data
  );

  always_comb begin
    for (int c = 0; c < N_CH; c++) req_ready[c] = (st == M_IDLE) && any && (pick == CH_W'(c));
    lk_valid      = (st == M_IDLE) && any && (req[pick].op == MEM_RD_FEAT);
    hbm_req_valid = (st == M_HREQ) || (st == M_WREQ);
    hbm_req_we    = (st == M_WREQ);
    hbm_req_addr  = {(cr.op == MEM_RD_RAW), cr.v.vid};
    hbm_req_wdata = cw;
    fl_key        = {STAGE_PROJ, cr.v};
    fl_valid      = ((st == M_HWAIT) && hbm_rsp_valid && (cr.op == MEM_RD_FEAT))
                 || ((st == M_WREQ) && hbm_req_ready);
    fl_data       = (st == M_WREQ) ? LINE_W'(cw) : hbm_rsp_data;
    rsp_valid     = '0;
    rsp_data      = vec_t'(hbm_rsp_data);
    if (st == M_LOOKUP && lk_done && lk_hit) begin
      rsp_valid[cur] = 1'b1;
      rsp_data       = vec_t'(lk_data);
    end else if (st == M_HWAIT && hbm_rsp_valid) begin
      rsp_valid[cur] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; rr <= '0; cur <= '0; cr <= '0; cw <= '0;
      cnt_gc_hit <= '0; cnt_gc_miss <= '0; cnt_hbm_rd <= '0; cnt_hbm_wr <= '0;
    end else begin
      unique case (st)
        M_IDLE: if (any) begin
          cur <= pick;
          cr  <= req[pick];
          cw  <= req_wdata[pick];
          rr  <= (pick == CH_W'(N_CH-1)) ? '0 : pick + 1'b1;
          unique case (req[pick].op)
            MEM_RD_FEAT: st <= M_LOOKUP;
            MEM_RD_RAW:  st <= M_HREQ;
            default:     st <= M_WREQ;
          endcase
        end
        M_LOOKUP: if (lk_done) begin
          if (lk_hit) begin cnt_gc_hit <= cnt_gc_hit + 1; st <= M_IDLE; end
          else        begin cnt_gc_miss <= cnt_gc_miss + 1; st <= M_HREQ; end
        end
        M_HREQ:  if (hbm_req_ready) begin cnt_hbm_rd <= cnt_hbm_rd + 1; st <= M_HWAIT; end
        M_HWAIT: if (hbm_rsp_valid) st <= M_IDLE;
        M_WREQ:  if (hbm_req_ready) begin cnt_hbm_wr <= cnt_hbm_wr + 1; st <= M_IDLE; end
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
