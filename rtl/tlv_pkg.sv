// Shared types and constants of the TLV-HGNN accelerator.
//
// Numbers are signed fixed point, 32 bits with 16 fraction bits (Q16.16).
// The precision of the accelerator's datapath is not given for the chip,
// so Q16.16 is this design's choice. Vertex references are packed into one
// 32-bit word: a 4-bit vertex type above a 28-bit vertex ID, which is also
// the vertex's row in the HBM feature regions.
package tlv_pkg;

  localparam int unsigned DATA_W  = 32;
  localparam int unsigned FRAC_W  = 16;
  localparam int unsigned VID_W   = 28;
  localparam int unsigned VTYPE_W = 4;
  localparam int unsigned STAGE_W = 2;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [VID_W-1:0]         vid_t;
  typedef logic [VTYPE_W-1:0]       vtype_t;

  // A vertex reference as it sits in the adjacency and target buffers.
  typedef struct packed {
    vtype_t vtype;
    vid_t   vid;
  } vref_t;

  // RPE configuration.
  typedef enum logic {
    MODE_LINEAR = 1'b0,  // MOA units multiply, REG holds the A operand
    MODE_AGG    = 1'b1   // MOA units add two neighbour elements
  } rpe_mode_e;

  // Job kinds run by a channel's dispatcher.
  typedef enum logic {
    JOB_FP = 1'b0,  // feature projection of one vertex (linear mode)
    JOB_NA = 1'b1   // semantics-complete aggregation of one target vertex
  } job_kind_e;

  // Requests from a channel to the memory controller.
  typedef enum logic [1:0] {
    MEM_RD_FEAT = 2'd0,  // projected feature, served by global cache or HBM
    MEM_RD_RAW  = 2'd1,  // raw feature, straight from HBM
    MEM_WR_FEAT = 2'd2   // write a projected feature back to HBM
  } mem_op_e;

  typedef struct packed {
    mem_op_e op;
    vref_t   v;
  } mem_req_t;

  // Stage IDs used in the feature-cache key.
  localparam logic [STAGE_W-1:0] STAGE_PROJ = '0;

  // Q16.16 multiply, truncating toward minus infinity.
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return data_t'(p >>> FRAC_W);
  endfunction

endpackage
