// On-chip buffer: one write port and N_RD independent read ports.
//
// Used for the weight buffer (rows of projection weights) and the adjacency
// buffer (per-target neighbour lists). Each read port returns the word at
// rd_addr one cycle after rd_en. A write and a read of the same word in one
// cycle return the old word. The array is written as a plain memory so that a
// synthesis flow can map it to SRAM macros.
//
// The paper gives the buffers' roles and capacities; the port count, the
// one-cycle read latency and the word layouts are this design's choices.
module sram_buf #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned N_RD  = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [WIDTH-1:0]      wdata,
  input  logic [N_RD-1:0]       rd_en,
  input  logic [AW-1:0]         rd_addr [N_RD],
  output logic [WIDTH-1:0]      rd_data [N_RD]
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < N_RD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
    end
  end

endmodule
