// Activation module: LeakyReLU on finished embeddings from all channels.
//
// N_CH channels each offer one fused embedding (a vertex reference and F
// elements) with a valid/ready handshake. A round-robin arbiter takes one per
// cycle, applies y = x for x >= 0 and y = x * NEG_SLOPE otherwise to all F
// elements in parallel, and holds the result in an output register until the
// consumer takes it (out_valid/out_ready). Latency is one cycle; throughput is
// one vector per cycle.
//
// The paper names LeakyReLU as the function applied here. The slope (0.01, the
// common default, as Q16.16 655), the round-robin arbitration and the one-cycle
// latency are this design's choices.
module activation_module
  import tlv_pkg::*;
#(
  parameter int unsigned N_CH      = 4,
  parameter int unsigned F         = 64,
  parameter data_t       NEG_SLOPE = 32'sd655,
  localparam int unsigned CH_W     = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_CH-1:0]     in_valid,
  output logic [N_CH-1:0]     in_ready,
  input  vref_t               in_v    [N_CH],
  input  data_t [F-1:0]       in_data [N_CH],
  output logic                out_valid,
  input  logic                out_ready,
  output vref_t               out_v,
  output data_t [F-1:0]       out_data
);

  logic [CH_W-1:0] rr, pick;
  logic            any;
  logic            take;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 0; k < N_CH; k++) begin
      int unsigned c;
      c = (int'(rr) + k) % N_CH;
      if (!any && in_valid[c]) begin
        any  = 1'b1;
        pick = CH_W'(c);
      end
    end
    take = any && (!out_valid || out_ready);
    for (int c = 0; c < N_CH; c++) in_ready[c] = take && (pick == CH_W'(c));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rr        <= '0;
      out_v     <= '0;
      out_data  <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_v     <= in_v[pick];
        for (int e = 0; e < F; e++)
          out_data[e] <= (in_data[pick][e] < 0) ? fx_mul(in_data[pick][e], NEG_SLOPE)
                                                : in_data[pick][e];
        rr <= (pick == CH_W'(N_CH-1)) ? '0 : pick + 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
