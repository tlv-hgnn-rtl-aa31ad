// Testbench of the crossbar: for every select value, the issue must reach only
// the selected group and the selected group's results must come back.
module tb_crossbar;
  localparam int G = 4, L = 3, OW = 8, RW = 8;
  logic [1:0] sel;
  logic up_valid;
  logic [L-1:0][OW-1:0] up_op;
  logic [G-1:0] dn_valid;
  logic [L-1:0][OW-1:0] dn_op [G];
  logic [G-1:0] res_valid_in;
  logic [L-1:0][RW-1:0] res_in [G];
  logic res_valid;
  logic [L-1:0][RW-1:0] res;
  int checks = 0, failures = 0;

  crossbar #(.N_GRP(G), .LANES(L), .OP_W(OW), .RES_W(RW)) dut (.*);

  initial begin
    for (int t = 0; t < 200; t++) begin
      sel = 2'($urandom_range(0, G-1));
      up_valid = 1'($urandom);
      up_op = (L*OW)'({$urandom, $urandom});
      res_valid_in = G'($urandom);
      for (int g = 0; g < G; g++) res_in[g] = (L*RW)'({$urandom, $urandom});
      #1;
      for (int g = 0; g < G; g++) begin
        checks++;
        if (dn_valid[g] !== (up_valid && g == sel)) failures++;
        if (g == sel) begin checks++; if (dn_op[g] !== up_op) failures++; end
      end
      checks += 2;
      if (res_valid !== res_valid_in[sel]) failures++;
      if (res !== res_in[sel]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
