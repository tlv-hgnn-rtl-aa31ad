// Testbench of the memory controller with its global cache, against the HBM
// model. Three channels issue random feature reads, raw reads and feature
// writes. Each channel writes and reads back only its own projected features
// (so answers are well defined), raw reads may hit any vertex. Every answer is
// checked against the reference contents; repeated reads must be served from
// the global cache (hits counted), and every request must be answered.
module tb_memory_controller;
  import tlv_pkg::*;
  localparam int NC = 3, F = 2, NV = 24;
  localparam int LW = F * DATA_W, HAW = VID_W + 1;
  logic clk = 0, rst_n = 0, flush;
  logic [NC-1:0] req_valid, req_ready, rsp_valid;
  mem_req_t req [NC];
  data_t [F-1:0] req_wdata [NC];
  data_t [F-1:0] rsp_data;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rsp_valid;
  logic [HAW-1:0] hbm_req_addr;
  logic [LW-1:0] hbm_req_wdata, hbm_rsp_data;
  logic [31:0] cnt_gc_hit, cnt_gc_miss, cnt_hbm_rd, cnt_hbm_wr;
  int checks = 0, failures = 0;

  memory_controller #(.N_CH(NC), .F(F), .GC_ENTRIES(8), .GC_WAYS(2)) dut (.*);
  tb_hbm_model #(.AW(HAW), .DW(LW)) hbm (.clk, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_we(hbm_req_we), .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata),
    .rsp_valid(hbm_rsp_valid), .rsp_data(hbm_rsp_data));
  always #5 clk = ~clk;

  logic [LW-1:0] featm [NV], rawm [NV];
  int done_c [NC];

  for (genvar c = 0; c < NC; c++) begin : g_ch
    initial begin
      req_valid[c] = 0; req[c] = '0; req_wdata[c] = '0; done_c[c] = 0;
      wait (rst_n);
      for (int t = 0; t < 150; t++) begin
        int vid; mem_req_t q; logic [LW-1:0] e;
        @(negedge clk);
        q.op = mem_op_e'($urandom_range(0, 2));
        vid = (q.op == MEM_RD_RAW) ? $urandom_range(0, NV-1) : 3 * $urandom_range(0, NV/3 - 1) + c;
        q.v = '{vtype: 4'd0, vid: 28'(vid)};
        req[c] = q; req_valid[c] = 1;
        if (q.op == MEM_WR_FEAT) req_wdata[c] = {$urandom, $urandom};
        e = (q.op == MEM_RD_RAW) ? rawm[vid] : featm[vid];
        @(posedge clk); while (!req_ready[c]) @(posedge clk);
        #1 req_valid[c] = 0;
        if (q.op == MEM_WR_FEAT) featm[vid] = LW'(req_wdata[c]);
        else begin
          int to; to = 0;
          while (!rsp_valid[c] && to < 200) begin @(posedge clk); #1; to++; end
          // sample the answer in the cycle it is valid
          checks++;
          if (!rsp_valid[c] || LW'(rsp_data) !== e) begin failures++; $display("ch%0d op%0d vid %0d wrong", c, q.op, vid); end
          @(posedge clk);
        end
      end
      done_c[c] = 1;
    end
  end

  initial begin
    flush = 0;
    for (int v = 0; v < NV; v++) begin
      featm[v] = {$urandom, $urandom}; rawm[v] = {$urandom, $urandom};
      hbm.mem[{1'b0, 28'(v)}] = featm[v];
      hbm.mem[{1'b1, 28'(v)}] = rawm[v];
    end
    repeat (2) @(negedge clk); rst_n = 1;
    wait (done_c[0] && done_c[1] && done_c[2]);
    checks += 2;
    if (cnt_gc_hit == 0) failures++;
    if (cnt_gc_miss == 0) failures++;
    $display("gc hit=%0d miss=%0d hbm rd=%0d wr=%0d", cnt_gc_hit, cnt_gc_miss, cnt_hbm_rd, cnt_hbm_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
