// Testbench of the target buffer: random pushes into random queues and random
// pops, including pushes into full queues; each queue is compared with its
// own model queue (contents, order, empty and full flags).
module tb_target_buffer;
  import tlv_pkg::*;
  localparam int NC = 3, D = 5;
  logic clk = 0, rst_n = 0;
  logic push;
  logic [1:0] push_ch;
  vref_t push_v;
  logic [NC-1:0] pop, empty, full;
  vref_t head_v [NC];
  int checks = 0, failures = 0;

  target_buffer #(.N_CH(NC), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  vref_t mq [NC][$];

  initial begin
    push = 0; pop = 0; push_ch = 0; push_v = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check the flags and heads against the model
      for (int c = 0; c < NC; c++) begin
        checks += 2;
        if (empty[c] !== (mq[c].size() == 0)) failures++;
        if (full[c] !== (mq[c].size() == D)) failures++;
        if (mq[c].size() != 0) begin checks++; if (head_v[c] !== mq[c][0]) failures++; end
      end
      push_ch = 2'($urandom_range(0, NC-1));
      push = ($urandom_range(0, 1) == 1) && !full[push_ch];
      push_v = vref_t'($urandom);
      for (int c = 0; c < NC; c++) pop[c] = ($urandom_range(0, 2) == 0) && !empty[c];
      @(posedge clk);
      for (int c = 0; c < NC; c++) if (pop[c]) void'(mq[c].pop_front());
      if (push) mq[push_ch].push_back(push_v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
