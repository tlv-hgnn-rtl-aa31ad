// Testbench of the reconfigurable PE.
// Drives random operands in both modes, back to back and with the feedback
// lane, and compares every result and its latency (3 cycles for four MOA
// units) with a model computed here.
module tb_rpe;
  import tlv_pkg::*;
  localparam int N = 4;
  localparam int LAT = 3;

  logic clk = 0, rst_n = 0;
  rpe_mode_e mode;
  logic load_a, in_valid;
  data_t a_in [N], x_in [N], y_in [N];
  logic [N-1:0] fb_sel;
  logic out_valid;
  data_t out_data;

  rpe #(.N_MOA(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected results with their issue cycle
  data_t exp_q [$];
  int    iss_q [$];
  data_t a_model [N];
  data_t last_out;

  function automatic data_t mulq(data_t a, data_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return data_t'(p >>> 16);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      data_t e; int ic;
      e = exp_q.pop_front(); ic = iss_q.pop_front();
      if (out_data !== e) begin failures++; $display("mismatch got %0d exp %0d", out_data, e); end
      checks++;
      if (cyc - ic != LAT) begin failures++; $display("latency %0d", cyc - ic); end
    end
  end

  task automatic issue(rpe_mode_e m, logic [N-1:0] fb, data_t prev);
    data_t e;
    mode = m; fb_sel = fb; in_valid = 1;
    for (int i = 0; i < N; i++) begin
      x_in[i] = $signed($urandom_range(0, 200000)) - 100000;
      y_in[i] = $signed($urandom_range(0, 200000)) - 100000;
    end
    e = 0;
    for (int i = 0; i < N; i++) begin
      if (fb[i])                 e += prev + y_in[i];
      else if (m == MODE_LINEAR) e += mulq(a_model[i], y_in[i]);
      else                       e += x_in[i] + y_in[i];
    end
    exp_q.push_back(e); iss_q.push_back(cyc);
    last_out = e;
    @(posedge clk); #1;
    in_valid = 0; fb_sel = 0;
  endtask

  task automatic load();
    load_a = 1;
    for (int i = 0; i < N; i++) begin
      a_in[i] = $signed($urandom_range(0, 400000)) - 200000;
      a_model[i] = a_in[i];
    end
    @(posedge clk); #1;
    load_a = 0;
  endtask

  initial begin
    mode = MODE_AGG; load_a = 0; in_valid = 0; fb_sel = 0;
    for (int i = 0; i < N; i++) begin a_in[i] = 0; x_in[i] = 0; y_in[i] = 0; a_model[i] = 0; end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;
    // aggregation, back to back
    for (int k = 0; k < 20; k++) issue(MODE_AGG, '0, 0);
    // linear mode with a held REG operand, back to back
    load();
    for (int k = 0; k < 20; k++) issue(MODE_LINEAR, '0, 0);
    // mode switch every issue
    load();
    for (int k = 0; k < 20; k++) issue((k % 2) ? MODE_AGG : MODE_LINEAR, '0, 0);
    // feedback chains: wait for the result, fold it into the next issue
    for (int k = 0; k < 20; k++) begin
      issue((k % 3 == 0) ? MODE_LINEAR : MODE_AGG, (k == 0) ? '0 : 4'b0001, last_out);
      repeat (LAT - 1) @(posedge clk);
      #1;
    end
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
