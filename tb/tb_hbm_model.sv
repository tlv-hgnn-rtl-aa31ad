// Behavioural model of the off-chip HBM, for simulation only.
// One vector-wide word per address. It takes a request when it is ready
// (ready is random when RANDOM_READY is set), and answers a read after LAT to
// LAT+JITTER cycles; writes take effect when accepted. Requests are served one
// at a time, in order. The contents are reached hierarchically (mem).
module tb_hbm_model #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 64,
  parameter int unsigned LAT = 4,
  parameter int unsigned JITTER = 3,
  parameter bit RANDOM_READY = 1'b1
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [DW-1:0] req_wdata,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  bit busy = 0;
  int wait_c = 0;
  logic [AW-1:0] a;
  int reads = 0, writes = 0;

  initial begin req_ready = 0; rsp_valid = 0; rsp_data = '0; end

  always @(negedge clk) req_ready = !busy && (!RANDOM_READY || $urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (busy) begin
      if (wait_c == 0) begin
        rsp_valid <= 1'b1;
        rsp_data  <= mem.exists(a) ? mem[a] : '0;
        busy      <= 0;
      end else wait_c <= wait_c - 1;
    end else if (req_valid && req_ready) begin
      if (req_we) begin mem[req_addr] = req_wdata; writes++; end
      else begin busy <= 1; a <= req_addr; wait_c <= LAT + $urandom_range(0, JITTER); reads++; end
    end
  end
endmodule
