// Scheduler: global control of one inference run.
//
// A run has two phases.
//  1. Feature projection (FP): every vertex 0..cfg_n_vert-1 is handed, as a
//     JOB_FP, to the next channel that is ready (round-robin). The phase ends
//     when all are handed out and every channel is idle. The caches are flushed
//     when the run starts.
//  2. Neighbour aggregation (NA): the vertex grouper is started on the
//     hypergraph of the first cfg_n_hv targets. Group members are pushed, as
//     they are produced, into the target-buffer queue of channel (gid mod N_CH),
//     so channels start on a group while the next is still being formed. After
//     the grouper is done, the remaining targets cfg_n_hv..cfg_n_tgt-1 (the
//     low-degree ones) are dealt out in consecutive runs of cfg_nmax, channel
//     after channel. Each channel takes JOB_NA jobs from its own queue.
//     The run ends (done) when cfg_n_tgt embeddings have left the chip.
//
// Vertex IDs are numbered type by type: type t holds IDs from cfg_type_base[t]
// up to the next base, so a vertex's type follows from its ID.
//
// The paper gives the scheduler's role, the streaming hand-over from grouping
// to processing, the top-degree/sequential split and N_max. The round-robin
// orders, the strict FP-then-NA phases and the ID numbering are this design's
// choices.
module scheduler
  import tlv_pkg::*;
#(
  parameter int unsigned N_CH    = 4,
  parameter int unsigned N_TYPES = 8,
  parameter int unsigned HV_W    = 15,
  localparam int unsigned CH_W   = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  vid_t                cfg_n_vert,
  input  vid_t                cfg_n_tgt,
  input  vid_t                cfg_n_hv,
  input  vid_t                cfg_nmax,
  input  vid_t                cfg_type_base [N_TYPES],
  output logic                flush,
  output logic                done,
  output logic                phase_na,
  // channel jobs
  output logic [N_CH-1:0]     ch_job_valid,
  input  logic [N_CH-1:0]     ch_job_ready,
  output job_kind_e           ch_job_kind,
  output vref_t               ch_job_v [N_CH],
  input  logic [N_CH-1:0]     ch_busy,
  // target buffer
  output logic                tq_push,
  output logic [CH_W-1:0]     tq_push_ch,
  output vref_t               tq_push_v,
  output logic [N_CH-1:0]     tq_pop,
  input  vref_t               tq_head [N_CH],
  input  logic [N_CH-1:0]     tq_empty,
  input  logic [N_CH-1:0]     tq_full,
  // vertex grouper
  output logic                grp_start,
  input  logic                grp_done,
  input  logic                grp_mem_valid,
  output logic                grp_mem_ready,
  input  logic [HV_W-1:0]     grp_mem_vid,
  input  logic [HV_W-1:0]     grp_mem_gid,
  input  logic [HV_W-1:0]     grp_n_groups,
  // finished embeddings leaving the chip
  input  logic                out_fire
);

  typedef enum logic [2:0] {S_IDLE, S_FP, S_FP_DRAIN, S_NA_GRP, S_NA_SEQ, S_NA_DRAIN, S_DONE} sstate_e;
  sstate_e st;

  vid_t            fp_vid, seq_vid, seq_in_run, n_out;
  logic [CH_W-1:0] rr, seq_ch;

  function automatic vtype_t type_of(vid_t id);
    vtype_t t;
    t = '0;
    for (int k = 0; k < N_TYPES; k++)
      if (k == 0 || (cfg_type_base[k] != '0 && id >= cfg_type_base[k])) t = VTYPE_W'(k);
    return t;
  endfunction

  // FP: pick the next ready channel
  logic [CH_W-1:0] pick;
  logic            any;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < N_CH; k++) begin
      logic [CH_W:0] c;
      c = (CH_W+1)'((int'(rr) + k) % N_CH);
      if (!any && ch_job_ready[c[CH_W-1:0]]) begin
        any  = 1'b1;
        pick = c[CH_W-1:0];
      end
    end
  end

  vid_t grp_vid_ext, grp_gid_ext;
  assign grp_vid_ext = vid_t'(grp_mem_vid);
  assign grp_gid_ext = vid_t'(grp_mem_gid);

  always_comb begin
    flush     = (st == S_IDLE) && start;
    done      = (st == S_DONE);
    phase_na  = (st == S_NA_GRP) || (st == S_NA_SEQ) || (st == S_NA_DRAIN);
    grp_start = (st == S_FP_DRAIN) && (ch_busy == '0) && (ch_job_ready == '1);
    ch_job_kind = phase_na ? JOB_NA : JOB_FP;
    for (int c = 0; c < N_CH; c++) begin
      if (phase_na) begin
        ch_job_valid[c] = !tq_empty[c];
        ch_job_v[c]     = tq_head[c];
      end else begin
        ch_job_valid[c] = (st == S_FP) && any && (pick == CH_W'(c));
        ch_job_v[c]     = '{vtype: type_of(fp_vid), vid: fp_vid};
      end
      tq_pop[c] = phase_na && !tq_empty[c] && ch_job_ready[c];
    end
    // pushes into the target buffer
    tq_push       = 1'b0;
    tq_push_ch    = '0;
    tq_push_v     = '0;
    grp_mem_ready = 1'b0;
    if (st == S_NA_GRP && grp_mem_valid) begin
      tq_push_ch    = CH_W'(grp_gid_ext % N_CH);
      tq_push_v     = '{vtype: type_of(grp_vid_ext), vid: grp_vid_ext};
      tq_push       = !tq_full[tq_push_ch];
      grp_mem_ready = tq_push;
    end else if (st == S_NA_SEQ && seq_vid != cfg_n_tgt) begin
      tq_push_ch    = seq_ch;
      tq_push_v     = '{vtype: type_of(seq_vid), vid: seq_vid};
      tq_push       = !tq_full[seq_ch];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; fp_vid <= '0; seq_vid <= '0; seq_in_run <= '0; n_out <= '0;
      rr <= '0; seq_ch <= '0;
    end else begin
      if (out_fire) n_out <= n_out + 1'b1;
      unique case (st)
        S_IDLE, S_DONE: if (start) begin
          fp_vid <= '0; n_out <= '0; rr <= '0;
          st     <= (cfg_n_vert == '0) ? S_FP_DRAIN : S_FP;
        end
        S_FP: if (any) begin
          rr     <= (pick == CH_W'(N_CH-1)) ? '0 : pick + 1'b1;
          fp_vid <= fp_vid + 1'b1;
          if (fp_vid + 1'b1 == cfg_n_vert) st <= S_FP_DRAIN;
        end
        S_FP_DRAIN: if (grp_start) st <= S_NA_GRP;
        S_NA_GRP: if (grp_done && !grp_mem_valid) begin
          seq_vid    <= cfg_n_hv;
          seq_in_run <= '0;
          seq_ch     <= CH_W'(vid_t'(grp_n_groups) % N_CH);
          st         <= S_NA_SEQ;
        end
        S_NA_SEQ: begin
          if (seq_vid == cfg_n_tgt) st <= S_NA_DRAIN;
          else if (tq_push) begin
            seq_vid <= seq_vid + 1'b1;
            if (seq_in_run + 1'b1 == cfg_nmax) begin
              seq_in_run <= '0;
              seq_ch     <= (seq_ch == CH_W'(N_CH-1)) ? '0 : seq_ch + 1'b1;
            end else seq_in_run <= seq_in_run + 1'b1;
          end
        end
        S_NA_DRAIN: if (n_out + vid_t'(out_fire) == cfg_n_tgt) st <= S_DONE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
