// Reconfigurable processing element (RPE).
//
// An RPE is a reduction tree. Its first layer holds N_MOA multiply-or-accumulate
// (MOA) units; the layers after it are adders, one register stage per layer, so
// a result leaves LAT = 1 + log2(N_MOA) cycles after its operands enter (3 cycles
// for the four MOA units drawn in the paper's figure).
//
//  * Linear-transformation mode (MODE_LINEAR): MOA i multiplies the value held in
//    its REG (loaded with load_a/a_in, kept constant across many issues) with
//    y_in[i]; the tree sums the products: out = sum_i REG[i]*y_in[i].
//  * Aggregation mode (MODE_AGG): MOA i adds x_in[i] and y_in[i]; the tree sums
//    the pairs: out = sum_i (x_in[i] + y_in[i]).
//
// In either mode a lane with fb_sel[i] set takes the RPE's own last result in
// place of its first operand and adds it to y_in[i]: this is the feedback path
// that folds an earlier partial result into the next issue. The feedback value
// is the registered output, so an issue that uses it must come at least LAT
// cycles after the issue that produced it (the paper's "delayed by three
// cycles"). The mode is taken per issue, so the RPE can switch between modes
// from one cycle to the next.
//
// The paper gives the tree, the MOA layer, the REG on one operand and the
// feedback mux. Fixed-point Q16.16 arithmetic and the one-register-per-layer
// timing are this design's choices.
module rpe
  import tlv_pkg::*;
#(
  parameter int unsigned N_MOA = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rpe_mode_e         mode,
  input  logic              load_a,            // REG[i] <= a_in[i]
  input  data_t             a_in  [N_MOA],
  input  logic              in_valid,          // issue one set of operands
  input  data_t             x_in  [N_MOA],
  input  data_t             y_in  [N_MOA],
  input  logic [N_MOA-1:0]  fb_sel,
  output logic              out_valid,
  output data_t             out_data
);

  localparam int unsigned LEVELS = $clog2(N_MOA);

  data_t a_reg [N_MOA];
  data_t moa   [N_MOA];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MOA; i++) a_reg[i] <= '0;
    end else if (load_a) begin
      for (int i = 0; i < N_MOA; i++) a_reg[i] <= a_in[i];
    end
  end

  // MOA layer
  always_comb begin
    for (int i = 0; i < N_MOA; i++) begin
      if (fb_sel[i])                moa[i] = out_data + y_in[i];
      else if (mode == MODE_LINEAR) moa[i] = fx_mul(a_reg[i], y_in[i]);
      else                          moa[i] = x_in[i] + y_in[i];
    end
  end

  // Tree: level 0 holds the MOA results; level l+1 sums pairs of level l.
  data_t tree [LEVELS+1][N_MOA];
  logic  vld  [LEVELS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l <= LEVELS; l++) begin
        vld[l] <= 1'b0;
        for (int i = 0; i < N_MOA; i++) tree[l][i] <= '0;
      end
    end else begin
      // A stage loads only when valid data reaches it, so the output holds
      // the last result for the feedback path until the next one arrives.
      vld[0] <= in_valid;
      if (in_valid)
        for (int i = 0; i < N_MOA; i++) tree[0][i] <= moa[i];
      for (int l = 1; l <= LEVELS; l++) begin
        vld[l] <= vld[l-1];
        if (vld[l-1])
          for (int i = 0; i < (N_MOA >> l); i++)
            tree[l][i] <= tree[l-1][2*i] + tree[l-1][2*i+1];
      end
    end
  end

  assign out_valid = vld[LEVELS];
  assign out_data  = tree[LEVELS][0];

  initial begin
    assert (N_MOA >= 2 && (N_MOA & (N_MOA - 1)) == 0)
      else $error("rpe: N_MOA must be a power of two");
  end

endmodule
