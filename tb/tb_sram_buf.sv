// Testbench of the multi-port buffer: random writes, then random reads on all
// ports at once, checked one cycle later against a shadow copy.
module tb_sram_buf;
  localparam int W = 16, D = 64, P = 3;
  logic clk = 0;
  logic we;
  logic [5:0] waddr;
  logic [W-1:0] wdata;
  logic [P-1:0] rd_en;
  logic [5:0] rd_addr [P];
  logic [W-1:0] rd_data [P];
  logic [W-1:0] shadow [D];
  int checks = 0, failures = 0;

  sram_buf #(.WIDTH(W), .DEPTH(D), .N_RD(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; rd_en = 0;
    for (int p = 0; p < P; p++) rd_addr[p] = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 100; t++) begin
      logic [5:0] ad [P];
      @(negedge clk);
      rd_en = '1;
      for (int p = 0; p < P; p++) begin ad[p] = 6'($urandom); rd_addr[p] = ad[p]; end
      // overwrite one word in the same cycle: reads return the old word
      we = 1; waddr = 6'($urandom); wdata = W'($urandom);
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rd_data[p] !== shadow[ad[p]]) failures++;
      end
      shadow[waddr] = wdata;
      we = 0;
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
