// Target buffer: one first-in-first-out queue of target vertices per channel.
//
// The scheduler pushes a vertex reference into the queue of one channel per
// cycle (push/push_ch/push_v); each channel pops its own queue (pop[c]) and sees
// its head on head_v[c] whenever empty[c] is low. Each queue holds DEPTH
// entries; a push to a full queue is refused (full[c] is high) and an assertion
// flags it.
//
// The paper gives the buffer's role and size (0.60 MB). Splitting it into
// equal per-channel queues is this design's choice: 4 x 39321 entries of 4
// bytes is 0.60 MB.
module target_buffer
  import tlv_pkg::*;
#(
  parameter int unsigned N_CH  = 4,
  parameter int unsigned DEPTH = 39321,
  localparam int unsigned CH_W = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned AW   = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              push,
  input  logic [CH_W-1:0]   push_ch,
  input  vref_t             push_v,
  input  logic [N_CH-1:0]   pop,
  output vref_t             head_v [N_CH],
  output logic [N_CH-1:0]   empty,
  output logic [N_CH-1:0]   full
);

  vref_t         mem   [N_CH][DEPTH];
  logic [AW-1:0] rd_ptr[N_CH];
  logic [AW-1:0] wr_ptr[N_CH];
  logic [AW-1:0] count [N_CH];

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      empty[c]  = (count[c] == '0);
      full[c]   = (count[c] == AW'(DEPTH));
      head_v[c] = mem[c][rd_ptr[c]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) begin
        rd_ptr[c] <= '0;
        wr_ptr[c] <= '0;
        count[c]  <= '0;
      end
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        logic do_push, do_pop;
        do_push = push && (push_ch == CH_W'(c)) && !full[c];
        do_pop  = pop[c] && !empty[c];
        if (do_push) wr_ptr[c] <= nxt(wr_ptr[c]);
        if (do_pop)  rd_ptr[c] <= nxt(rd_ptr[c]);
        if (do_push && !do_pop) count[c] <= count[c] + 1'b1;
        else if (!do_push && do_pop) count[c] <= count[c] - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full[push_ch]) mem[push_ch][wr_ptr[push_ch]] <= push_v;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full[push_ch])
    else $error("target_buffer: push to a full queue");

endmodule
