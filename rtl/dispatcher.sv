// Dispatcher of one computing module (channel).
//
// The dispatcher turns one job at a time into issues of an RPE group. A group
// is F RPEs working in lockstep, RPE k on element k of every vector, so one
// issue reduces up to 2*N_MOA whole vectors (aggregation) or N_MOA weight rows
// (projection). Operands are first gathered into 2*N_MOA vector slots (the
// operand buffer); a full set of slots is issued, and the next issue folds the
// previous result back in through the RPEs' feedback path (lane 0), leaving one
// slot fewer for new vectors. An issue waits until the previous result is back.
//
// Jobs:
//  * JOB_FP, projection of vertex v: the raw feature x is read once; for each
//    input index j the row j of W^T for v's type is read from the weight buffer
//    into a slot and x[j] into the REG operand (linear mode), so the final
//    result is h'_v = W * x. h'_v is written back through the feature port.
//  * JOB_NA, semantics-complete aggregation of target t: the projected feature
//    h'_t is read once. For every semantic r in order, the two CSR pointers of
//    (t, r) are read from the adjacency buffer, then h'_t and every neighbour
//    h'_u of that semantic are put into slots (aggregation mode). The running
//    sum carries across semantics, so the result is
//    z_t = sum_r (h'_t + sum_{u in N_r(t)} h'_u): per-semantic aggregation with
//    the target's own feature as the starting value, fused by summation as soon
//    as the last semantic is done, without storing per-semantic results.
//
// Adjacency layout (one 32-bit word per entry): word t*(n_sem+1)+r holds the
// first neighbour address of semantic r of target t, word t*(n_sem+1)+r+1 the
// end; a neighbour word is a vref_t. Weight-buffer row vtype*F+j holds row j of
// W^T of that vertex type. Both buffers answer one cycle after the read.
//
// Follows the paper: one target and all its semantics as one workload,
// immediate fusion, target feature read once, linear and aggregation modes on
// the same RPEs with feedback of partial results. This design's own choices:
// edge weights are 1 and fusion is a plain sum (attention-weighted models are
// not built), the vector slot scheme, the CSR layout and one job at a time.
module dispatcher
  import tlv_pkg::*;
#(
  parameter int unsigned F      = 64,
  parameter int unsigned N_MOA  = 4,
  parameter int unsigned N_GRP  = 8,
  parameter int unsigned ADJ_AW = 19,
  parameter int unsigned W_AW   = 13,
  localparam int unsigned NS    = 2 * N_MOA,
  localparam int unsigned GRP_W = (N_GRP > 1) ? $clog2(N_GRP) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [7:0]           cfg_nsem,
  // job in
  input  logic                 job_valid,
  output logic                 job_ready,
  input  job_kind_e            job_kind,
  input  vref_t                job_v,
  // feature reads (through the local cache) and write-back
  output logic                 fr_valid,
  input  logic                 fr_ready,
  output logic                 fr_raw,
  output vref_t                fr_v,
  input  logic                 fr_rsp_valid,
  input  data_t [F-1:0]        fr_rsp_data,
  output logic                 fw_valid,
  input  logic                 fw_ready,
  output vref_t                fw_v,
  output data_t [F-1:0]        fw_data,
  // buffers
  output logic                 adj_rd_en,
  output logic [ADJ_AW-1:0]    adj_rd_addr,
  input  logic [31:0]          adj_rd_data,
  output logic                 w_rd_en,
  output logic [W_AW-1:0]      w_rd_addr,
  input  data_t [F-1:0]        w_rd_data,
  // RPE group (through the crossbar)
  output logic [GRP_W-1:0]     grp_sel,
  output logic                 iss_valid,
  output rpe_mode_e            iss_mode,
  output logic                 iss_load_a,
  output data_t                iss_a  [N_MOA],
  output data_t [F-1:0]        iss_x  [N_MOA],
  output data_t [F-1:0]        iss_y  [N_MOA],
  output logic [N_MOA-1:0]     iss_fb_sel,
  input  logic                 rpe_valid,
  input  data_t [F-1:0]        rpe_data,
  // finished embedding out
  output logic                 res_valid,
  input  logic                 res_ready,
  output vref_t                res_v,
  output data_t [F-1:0]        res_data,
  // event counts
  output logic [31:0]          cnt_lin_issue,
  output logic [31:0]          cnt_agg_issue,
  output logic [31:0]          cnt_fb_issue
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH_X, S_WAIT_X,
    S_W_RD, S_W_CAP, S_FP_FIN,
    S_PTR0, S_PTR1, S_PTR2, S_PUT_T, S_NB, S_NB_CAP, S_NB_REQ, S_NB_WAIT,
    S_NA_FIN, S_OUT, S_ISSUE
  } state_e;

  state_e            st, ret;
  job_kind_e         kind;
  vref_t             jv, nbv;
  data_t [F-1:0]     slots [NS];
  data_t             aval  [N_MOA];
  data_t [F-1:0]     xvec, res_q;
  logic [$clog2(NS+1)-1:0] cnt;
  logic [31:0]       npass;
  logic              pending, a_loaded;
  logic [7:0]        r;
  logic [ADJ_AW-1:0] tbase, nb_idx, nb_end;
  logic [W_AW-1:0]   j;

  logic [$clog2(NS+1)-1:0] cap;
  assign cap = (kind == JOB_FP) ? ($clog2(NS+1))'(N_MOA) : ($clog2(NS+1))'(NS);

  // slot fill: returns the state to go to after putting one vector
  logic slot_full_next;
  assign slot_full_next = (cnt + 1'b1 == cap);

  // operand mapping onto the MOA lanes
  always_comb begin
    for (int i = 0; i < N_MOA; i++) begin
      iss_a[i] = aval[i];
      if (kind == JOB_FP) begin
        iss_x[i] = '0;
        iss_y[i] = slots[i];
      end else begin
        iss_x[i] = slots[2*i];
        iss_y[i] = slots[2*i+1];
      end
    end
    iss_fb_sel    = '0;
    iss_fb_sel[0] = (npass != 0);
    iss_mode      = (kind == JOB_FP) ? MODE_LINEAR : MODE_AGG;
  end

  always_comb begin
    job_ready   = (st == S_IDLE);
    fr_valid    = (st == S_FETCH_X) || (st == S_NB_REQ);
    fr_raw      = (st == S_FETCH_X) && (kind == JOB_FP);
    fr_v        = (st == S_NB_REQ) ? nbv : jv;
    fw_valid    = (st == S_FP_FIN) && !pending;
    fw_v        = jv;
    fw_data     = res_q;
    res_valid   = (st == S_OUT) && !pending;
    res_v       = jv;
    res_data    = res_q;
    adj_rd_en   = (st == S_PTR0) || (st == S_PTR1) || (st == S_NB && nb_idx != nb_end);
    adj_rd_addr = (st == S_NB) ? nb_idx : (tbase + ADJ_AW'(r) + ((st == S_PTR1) ? ADJ_AW'(1) : ADJ_AW'(0)));
    w_rd_en     = (st == S_W_RD);
    w_rd_addr   = W_AW'(jv.vtype) * W_AW'(F) + j;
    iss_load_a  = (st == S_ISSUE) && !pending && (kind == JOB_FP) && !a_loaded;
    iss_valid   = (st == S_ISSUE) && !pending && ((kind == JOB_NA) || a_loaded);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; kind <= JOB_NA; jv <= '0; nbv <= '0;
      for (int s = 0; s < NS; s++) slots[s] <= '0;
      for (int i = 0; i < N_MOA; i++) aval[i] <= '0;
      xvec <= '0; res_q <= '0; cnt <= '0; npass <= '0; pending <= 1'b0;
      a_loaded <= 1'b0; r <= '0; tbase <= '0; nb_idx <= '0; nb_end <= '0; j <= '0;
      grp_sel <= '0;
      cnt_lin_issue <= '0; cnt_agg_issue <= '0; cnt_fb_issue <= '0;
    end else begin
      if (rpe_valid) begin
        res_q   <= rpe_data;
        pending <= 1'b0;
      end
      unique case (st)
        S_IDLE: if (job_valid) begin
          kind  <= job_kind;
          jv    <= job_v;
          tbase <= ADJ_AW'(job_v.vid) * ADJ_AW'({1'b0, cfg_nsem} + 9'd1);
          cnt   <= '0;
          npass <= '0;
          r     <= '0;
          j     <= '0;
          st    <= S_FETCH_X;
        end
        S_FETCH_X: if (fr_ready) st <= S_WAIT_X;
        S_WAIT_X: if (fr_rsp_valid) begin
          xvec <= fr_rsp_data;
          st   <= (kind == JOB_FP) ? S_W_RD : S_PTR0;
        end
        // ---------------- projection ----------------
        S_W_RD: st <= S_W_CAP;
        S_W_CAP: begin
          slots[cnt[$clog2(NS)-1:0]]                          <= w_rd_data;
          aval[cnt[$clog2(N_MOA)-1:0]]        <= xvec[j];
          cnt <= cnt + 1'b1;
          j   <= j + 1'b1;
          if (slot_full_next || j == W_AW'(F-1)) begin
            st  <= S_ISSUE;
            ret <= (j == W_AW'(F-1)) ? S_FP_FIN : S_W_RD;
          end else st <= S_W_RD;
        end
        S_FP_FIN: if (!pending && fw_ready) st <= S_IDLE;
        // ---------------- aggregation ----------------
        S_PTR0: st <= S_PTR1;
        S_PTR1: begin nb_idx <= adj_rd_data[ADJ_AW-1:0]; st <= S_PTR2; end
        S_PTR2: begin nb_end <= adj_rd_data[ADJ_AW-1:0]; st <= S_PUT_T; end
        S_PUT_T: begin
          slots[cnt[$clog2(NS)-1:0]] <= xvec;
          cnt        <= cnt + 1'b1;
          if (slot_full_next) begin st <= S_ISSUE; ret <= S_NB; end
          else st <= S_NB;
        end
        S_NB: begin
          if (nb_idx == nb_end) begin
            r  <= r + 1'b1;
            st <= (r + 1'b1 == cfg_nsem) ? S_NA_FIN : S_PTR0;
          end else st <= S_NB_CAP;
        end
        S_NB_CAP: begin nbv <= vref_t'(adj_rd_data); st <= S_NB_REQ; end
        S_NB_REQ: if (fr_ready) st <= S_NB_WAIT;
        S_NB_WAIT: if (fr_rsp_valid) begin
          slots[cnt[$clog2(NS)-1:0]] <= fr_rsp_data;
          cnt        <= cnt + 1'b1;
          nb_idx     <= nb_idx + 1'b1;
          if (slot_full_next) begin st <= S_ISSUE; ret <= S_NB; end
          else st <= S_NB;
        end
        S_NA_FIN: begin
          if (npass == 0 || cnt > 1) begin st <= S_ISSUE; ret <= S_OUT; end
          else st <= S_OUT;
        end
        S_OUT: if (!pending && res_ready) st <= S_IDLE;
        // ---------------- issue one set of slots ----------------
        S_ISSUE: if (!pending) begin
          if (kind == JOB_FP && !a_loaded) a_loaded <= 1'b1;
          else begin
            pending  <= 1'b1;
            a_loaded <= 1'b0;
            npass    <= npass + 1;
            for (int s = 0; s < NS; s++) slots[s] <= '0;
            cnt      <= 1;  // slot 0 gives way to the feedback operand
            if (kind == JOB_FP) cnt_lin_issue <= cnt_lin_issue + 1;
            else                cnt_agg_issue <= cnt_agg_issue + 1;
            if (npass != 0)     cnt_fb_issue  <= cnt_fb_issue + 1;
            st <= ret;
          end
        end
        default: st <= S_IDLE;
      endcase
      // a new job goes to the next RPE group
      if (st == S_IDLE && job_valid)
        grp_sel <= (grp_sel == GRP_W'(N_GRP-1)) ? '0 : grp_sel + 1'b1;
    end
  end

  a_issue_when_free: assert property (@(posedge clk) disable iff (!rst_n) iss_valid |-> !pending);

endmodule
