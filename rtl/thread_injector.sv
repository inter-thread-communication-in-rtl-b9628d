// thread_injector: streams threads into the grid.
//
// What it does: after a start pulse it emits one token per thread,
// TID 0 .. n_threads-1 in order, whose data is the TID itself (the thread's
// linear threadIdx). Units that receive it start that thread's computation
// by the dataflow firing rule. Multi-dimensional coordinates are derived
// from it in the grid (e.g. x = TID mod width) when a kernel needs them.
//
// How: a counter; the token is valid while the counter is below n_threads,
// and advances on out_ready. busy stays high until the last thread left.
//
// Interface: start (one-cycle pulse, loads n_threads), busy, one token
// output (valid/ready). Timing: first token in the cycle after start, then
// one thread per cycle as long as the grid accepts them.
//
// Paper: threads are streamed through the core by injecting their thread
// identifiers and coordinates, and a new thread can be injected every cycle.
// Emitting the linear TID only is this design's choice; the upper 16 bits
// of the data word are therefore always zero.
module thread_injector
  import dmt_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  tid_t   n_threads,
  output logic   busy,
  output logic   out_valid,
  output token_t out_tok,
  input  logic   out_ready
);

  tid_t next_q, count_q;

  assign out_valid = busy;
  assign out_tok   = '{tid: next_q, data: data_t'(next_q)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_q  <= '0;
      count_q <= '0;
      busy    <= 1'b0;
    end else if (start) begin
      next_q  <= '0;
      count_q <= n_threads;
      busy    <= (n_threads != '0);
    end else if (busy && out_ready) begin
      next_q <= next_q + 1'b1;
      busy   <= (next_q + 1'b1) != count_q;
    end
  end

endmodule
