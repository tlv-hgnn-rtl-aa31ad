// Vertex grouper: overlap-driven grouping of target vertices.
//
// Input is a weighted graph over "super vertices" (target vertices): an edge
// joins two targets that share neighbours, weighted by the Jaccard similarity
// w_o of their multi-semantic neighbourhoods (Q0.16, precomputed and loaded).
// The grouper builds groups one after another, Louvain-style:
//   1. Seed Vertex Selector: the lowest-numbered unvisited vertex starts group C.
//   2. Each vertex v added to C is marked in the Vertex Visit Bitmask, written
//      to the Vertex-Group Table and streamed out (mem_*). Its adjacency is read
//      (H_adjacency buffer, H_edge Wo loader); every unvisited neighbour j
//      becomes a candidate, and k_in(j) += w_o(v,j) accumulates the weight
//      between j and C.
//   3. Modularity Calculator: for each candidate, in LANES lanes of two
//      multipliers each (512 MACs by default), the scaled gain
//          g = 2m * k_in(j) - k_j * Sigma_tot(C)
//      which is the Louvain gain dQ = [k_in - k_j*Sigma_tot/(2m)]/(2m) times
//      (2m)^2, so it has dQ's sign and order. k_j is j's weighted degree, 2m the
//      sum of all k.
//   4. dQmax Selector: a comparison tree picks the lane with the largest gain;
//      rows of LANES candidates are scanned one per cycle. Ties go to the
//      earlier-found candidate.
//   5. Updater: if the best gain is positive and |C| < N_max the candidate joins
//      C (step 2); otherwise C is closed, its intra- and inter-group weight sums
//      are written to the Group-Wo Table and the next group starts (step 1).
// Before grouping, an init pass computes every k and 2m from the loaded
// weights and clears the bitmask; it takes one cycle per edge and per vertex.
//
// Loading: ld_sel 0 writes the CSR offsets (N+1 words), 1 the neighbour IDs,
// 2 the weights. Interface timing: start pulses once; mem_valid/mem_ready hand
// out (vertex, group) pairs as they join; grp_close pulses when a group ends;
// done rises when every vertex is grouped.
//
// From the paper: the algorithm, the parts named above, the Jaccard weights,
// the bound N_max on group size, the greedy positive-gain rule and 512 MAC
// units. This design's choices: lowest-index seeding (the algorithm picks a
// random unvisited vertex), fixed-point widths, the scaled gain, one candidate
// row per cycle, and array sizes (16384 vertices, 131072 edges).
//
// Lint note: vertex and edge indices are one bit wider than the arrays need
// (they must also hold the counts N_HV and N_HE); an index never reaches the
// extra range when it is used to address an array, so the truncation is safe.
module vertex_grouper
  import tlv_pkg::*;
#(
  parameter int unsigned N_HV  = 16384,
  parameter int unsigned N_HE  = 131072,
  parameter int unsigned LANES = 256,
  parameter int unsigned WO_W  = 16,
  parameter int unsigned K_W   = 40,
  localparam int unsigned VW   = $clog2(N_HV + 1),
  localparam int unsigned EW   = $clog2(N_HE + 1),
  localparam int unsigned ROWS = (N_HV + LANES - 1) / LANES,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned SW   = RW + LW,
  localparam int unsigned GW   = 2 * K_W + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // loading the hypergraph
  input  logic                 ld_we,
  input  logic [1:0]           ld_sel,
  input  logic [EW-1:0]        ld_addr,
  input  logic [31:0]          ld_data,
  // run
  input  logic                 start,
  input  logic [VW-1:0]        cfg_n,
  input  logic [VW-1:0]        cfg_nmax,
  output logic                 busy,
  output logic                 done,
  // group members, streamed as they join
  output logic                 mem_valid,
  input  logic                 mem_ready,
  output logic [VW-1:0]        mem_vid,
  output logic [VW-1:0]        mem_gid,
  output logic                 grp_close,
  output logic [VW-1:0]        n_groups,
  // table read ports (combinational)
  input  logic [VW-1:0]        vg_rd_addr,
  output logic [VW-1:0]        vg_rd_gid,
  input  logic [VW-1:0]        gw_rd_addr,
  output logic [K_W-1:0]       gw_rd_in,
  output logic signed [K_W-1:0] gw_rd_out
);

  typedef enum logic [2:0] {G_IDLE, G_INIT, G_SEED, G_ADD, G_WALK, G_EVAL, G_CLOSE, G_DONE} gstate_e;
  gstate_e st;

  // hypergraph storage (grouper buffers)
  logic [EW-1:0]   off   [N_HV+1];
  logic [VW-1:0]   hadj  [N_HE];
  logic [WO_W-1:0] hwo   [N_HE];
  logic [K_W-1:0]  kdeg  [N_HV];
  // state tables
  logic            visited [N_HV];
  logic [VW-1:0]   vgt     [N_HV];
  logic [VW:0]     incand  [N_HV];   // group tag (gid+1) of the group j is a candidate for
  logic [SW-1:0]   slot_of [N_HV];
  logic [K_W-1:0]  gw_in   [N_HV];
  logic signed [K_W-1:0] gw_out [N_HV];
  // candidate banks: slot s = row*LANES + lane
  logic [VW-1:0]   cid  [LANES][ROWS];
  logic [K_W-1:0]  ckin [LANES][ROWS];
  logic [K_W-1:0]  ck   [LANES][ROWS];
  logic            cval [LANES][ROWS];

  logic [VW-1:0]  v, seed_ptr, gid, size, nmax, n;
  logic [EW-1:0]  e, e_end;
  logic [K_W-1:0] acc, m2, sig_tot, gin, add_kin;
  logic signed [K_W-1:0] gout;
  logic [SW-1:0]  ncand;
  logic [RW:0]    row;
  logic signed [GW-1:0] best;
  logic [SW-1:0]  best_slot;
  logic           best_ok;

  assign vg_rd_gid = vgt[vg_rd_addr];
  assign gw_rd_in  = gw_in[gw_rd_addr];
  assign gw_rd_out = gw_out[gw_rd_addr];

  // ---------------- modularity calculator and dQmax selector ----------------
  logic signed [GW-1:0] gain [LANES];
  logic                 gok  [LANES];
  logic signed [GW-1:0] row_best;
  logic [LW-1:0]        row_lane;
  logic                 row_ok;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [RW-1:0] rr;
      logic [GW-1:0] p_in, p_tot;
      rr      = row[RW-1:0];
      p_in    = GW'(m2) * GW'(ckin[l][rr]);         // MAC 1: 2m * k_in
      p_tot   = GW'(ck[l][rr]) * GW'(sig_tot);      // MAC 2: k_j * Sigma_tot
      gain[l] = $signed(p_in) - $signed(p_tot);
      gok[l]  = cval[l][rr] && (SW'(row) * SW'(LANES) + SW'(l) < ncand);
    end
  end

  // comparison tree over the lanes; on a tie the lower lane wins
  localparam int unsigned TL = 1 << LW;
  logic signed [GW-1:0] tv [2*TL];
  logic [LW-1:0]        ti [2*TL];
  logic                 tk [2*TL];
  always_comb begin
    for (int l = 0; l < TL; l++) begin
      tv[TL+l] = (l < LANES) ? gain[l] : '0;
      ti[TL+l] = LW'(l);
      tk[TL+l] = (l < LANES) ? gok[l] : 1'b0;
    end
    for (int n2 = TL - 1; n2 >= 1; n2--) begin
      logic take_r;
      take_r = tk[2*n2+1] && (!tk[2*n2] || tv[2*n2+1] > tv[2*n2]);
      tv[n2] = take_r ? tv[2*n2+1] : tv[2*n2];
      ti[n2] = take_r ? ti[2*n2+1] : ti[2*n2];
      tk[n2] = tk[2*n2] || tk[2*n2+1];
    end
    tv[0] = '0; ti[0] = '0; tk[0] = 1'b0;
    row_best = tv[1];
    row_lane = ti[1];
    row_ok   = tk[1];
  end

  logic [RW:0] n_rows;
  assign n_rows = (RW+1)'((ncand + SW'(LANES - 1)) / SW'(LANES));

  // ---------------- control and updater ----------------
  logic [VW-1:0]   wj;
  logic [WO_W-1:0] ww;
  assign wj = hadj[e];
  assign ww = hwo[e];

  logic [VW:0] gtag;
  assign gtag = {1'b0, gid} + 1'b1;

  logic [SW-1:0] bs_slot;
  assign bs_slot = best_slot;

  always_comb begin
    mem_valid = (st == G_ADD);
    mem_vid   = v;
    mem_gid   = gid;
    busy      = (st != G_IDLE) && (st != G_DONE);
    done      = (st == G_DONE);
    grp_close = (st == G_CLOSE);
    n_groups  = gid;
  end

  always_ff @(posedge clk) begin
    if (ld_we) begin
      unique case (ld_sel)
        2'd0:    off[ld_addr[VW-1:0]] <= EW'(ld_data);
        2'd1:    hadj[ld_addr]        <= VW'(ld_data);
        default: hwo[ld_addr]         <= WO_W'(ld_data);
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE;
      v <= '0; seed_ptr <= '0; gid <= '0; size <= '0; nmax <= '0; n <= '0;
      e <= '0; e_end <= '0; acc <= '0; m2 <= '0; sig_tot <= '0; gin <= '0; gout <= '0;
      add_kin <= '0; ncand <= '0; row <= '0; best <= '0; best_slot <= '0; best_ok <= 1'b0;
    end else begin
      unique case (st)
        G_IDLE, G_DONE: if (start) begin
          n <= cfg_n; nmax <= cfg_nmax;
          v <= '0; e <= off[0]; acc <= '0; m2 <= '0; gid <= '0; seed_ptr <= '0;
          st <= (cfg_n == '0) ? G_DONE : G_INIT;
        end
        // weighted degrees, 2m, clear bitmask and candidate tags
        G_INIT: begin
          if (e == off[v+1]) begin
            kdeg[v]    <= acc;
            m2         <= m2 + acc;
            visited[v] <= 1'b0;
            incand[v]  <= '0;
            acc        <= '0;
            v          <= v + 1'b1;
            if (v + 1'b1 == n) st <= G_SEED;
          end else begin
            acc <= acc + K_W'(ww);
            e   <= e + 1'b1;
          end
        end
        G_SEED: begin
          if (seed_ptr == n) st <= G_DONE;
          else if (visited[seed_ptr]) seed_ptr <= seed_ptr + 1'b1;
          else begin
            v <= seed_ptr; add_kin <= '0;
            size <= '0; sig_tot <= '0; gin <= '0; gout <= '0; ncand <= '0;
            st <= G_ADD;
          end
        end
        G_ADD: if (mem_ready) begin
          visited[v] <= 1'b1;
          vgt[v]     <= gid;
          size       <= size + 1'b1;
          sig_tot    <= sig_tot + kdeg[v];
          gin        <= gin + add_kin;
          gout       <= gout + $signed(kdeg[v]) - $signed(add_kin << 1);
          if (incand[v] == gtag) cval[slot_of[v][LW-1:0]][slot_of[v][SW-1:LW]] <= 1'b0;
          e     <= off[v];
          e_end <= off[v+1];
          st    <= G_WALK;
        end
        G_WALK: begin
          if (e == e_end) begin
            row <= '0; best <= '0; best_ok <= 1'b0;
            st  <= (size == nmax) ? G_CLOSE : G_EVAL;
          end else begin
            if (!visited[wj]) begin
              if (incand[wj] == gtag) begin
                ckin[slot_of[wj][LW-1:0]][slot_of[wj][SW-1:LW]] <=
                  ckin[slot_of[wj][LW-1:0]][slot_of[wj][SW-1:LW]] + K_W'(ww);
              end else begin
                cid [ncand[LW-1:0]][ncand[SW-1:LW]] <= wj;
                ckin[ncand[LW-1:0]][ncand[SW-1:LW]] <= K_W'(ww);
                ck  [ncand[LW-1:0]][ncand[SW-1:LW]] <= kdeg[wj];
                cval[ncand[LW-1:0]][ncand[SW-1:LW]] <= 1'b1;
                slot_of[wj] <= ncand;
                incand[wj]  <= gtag;
                ncand       <= ncand + 1'b1;
              end
            end
            e <= e + 1'b1;
          end
        end
        G_EVAL: begin
          if (row == n_rows) begin
            if (best_ok && best > 0) begin
              v       <= cid [bs_slot[LW-1:0]][bs_slot[SW-1:LW]];
              add_kin <= ckin[bs_slot[LW-1:0]][bs_slot[SW-1:LW]];
              st      <= G_ADD;
            end else st <= G_CLOSE;
          end else begin
            if (row_ok && (!best_ok || row_best > best)) begin
              best      <= row_best;
              best_slot <= {row[RW-1:0], row_lane};
              best_ok   <= 1'b1;
            end
            row <= row + 1'b1;
          end
        end
        G_CLOSE: begin
          gw_in[gid]  <= gin;
          gw_out[gid] <= gout;
          gid         <= gid + 1'b1;
          st          <= G_SEED;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  a_group_bound: assert property (@(posedge clk) disable iff (!rst_n)
    (st == G_ADD) |-> (size < nmax)) else $error("vertex_grouper: group over N_max");

endmodule
