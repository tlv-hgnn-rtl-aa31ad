// Crossbar between the dispatcher and the RPE groups of one computing module.
//
// The RPEs of a channel are arranged as N_GRP groups of LANES element lanes.
// The dispatcher drives one operand bus; the crossbar steers it to the group
// named by sel (the other groups see no valid issue) and returns that group's
// results. Operands are passed as an opaque packed word of OP_W bits per lane,
// results as RES_W bits per lane plus one valid per group.
//
// The paper draws a crossbar between the RPE rows but does not describe its
// insides; this one-to-many steering switch is this design's simplest reading.
// It is combinational: no cycles are added in either direction.
//
// Lint note: the zero fill of an unselected group's operand bus is one wide
// replication (16384 bits at the default sizes); it is intended.
module crossbar #(
  parameter int unsigned N_GRP = 8,
  parameter int unsigned LANES = 64,
  parameter int unsigned OP_W  = 32,
  parameter int unsigned RES_W = 32,
  localparam int unsigned SEL_W = (N_GRP > 1) ? $clog2(N_GRP) : 1
) (
  input  logic [SEL_W-1:0]              sel,
  // from the dispatcher
  input  logic                          up_valid,
  input  logic [LANES-1:0][OP_W-1:0]    up_op,
  // to every group
  output logic [N_GRP-1:0]              dn_valid,
  output logic [LANES-1:0][OP_W-1:0]    dn_op   [N_GRP],
  // results from every group
  input  logic [N_GRP-1:0]              res_valid_in,
  input  logic [LANES-1:0][RES_W-1:0]   res_in  [N_GRP],
  // to the dispatcher
  output logic                          res_valid,
  output logic [LANES-1:0][RES_W-1:0]   res
);

  always_comb begin
    for (int g = 0; g < N_GRP; g++) begin
      dn_valid[g] = up_valid && (SEL_W'(g) == sel);
      dn_op[g]    = (SEL_W'(g) == sel) ? up_op : '0;
    end
    res_valid = res_valid_in[sel];
    res       = res_in[sel];
  end

endmodule
