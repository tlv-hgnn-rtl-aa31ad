// Testbench of the activation module: three channels offer random vectors at
// random times, the consumer stalls at random; every vector must come out once,
// with LeakyReLU (slope 655/65536) applied to every element, in the order the
// module accepted them.
module tb_activation_module;
  import tlv_pkg::*;
  localparam int NC = 3, F = 4;
  logic clk = 0, rst_n = 0;
  logic [NC-1:0] in_valid, in_ready;
  vref_t in_v [NC];
  data_t [F-1:0] in_data [NC];
  logic out_valid, out_ready;
  vref_t out_v;
  data_t [F-1:0] out_data;
  int checks = 0, failures = 0;

  activation_module #(.N_CH(NC), .F(F)) dut (.*);
  always #5 clk = ~clk;

  int sent [NC];
  int got = 0;
  data_t [F-1:0] expq [$];
  vref_t vq [$];

  function automatic data_t lrelu(data_t x);
    longint p;
    if (x >= 0) return x;
    p = longint'(x) * 655;
    return data_t'(p >>> 16);
  endfunction

  // producers
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (!in_valid[c] && sent[c] < 50 && $urandom_range(0, 2) != 0) begin
        in_valid[c] = 1;
        in_v[c] = '{vtype: VTYPE_W'(c), vid: VID_W'(sent[c])};
        for (int e = 0; e < F; e++) in_data[c][e] = $signed($urandom) >>> 8;
      end
    end
    out_ready = ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (in_valid[c] && in_ready[c]) begin
      data_t [F-1:0] e;
      for (int k = 0; k < F; k++) e[k] = lrelu(in_data[c][k]);
      expq.push_back(e); vq.push_back(in_v[c]);
      sent[c]++;
      #0 in_valid[c] = 0;
    end
    if (out_valid && out_ready) begin
      checks += 2;
      if (expq.size() == 0) failures++;
      else begin
        data_t [F-1:0] e; vref_t v;
        e = expq.pop_front(); v = vq.pop_front();
        if (out_data !== e) begin failures++; $display("data mismatch"); end
        if (out_v !== v) begin failures++; $display("vref mismatch"); end
      end
      got++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0;
    for (int c = 0; c < NC; c++) begin sent[c] = 0; in_v[c] = '0; in_data[c] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    wait (got == NC * 50);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
