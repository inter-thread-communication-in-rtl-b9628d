// elevator_node: moves tokens between threads (fromThreadOrConst).
//
// What it does: for every thread TID the node emits one token tagged TID.
// Its value is the input token of thread TID-delta when that thread lies in
// the same transmission window as TID, and the configured constant otherwise.
// Windows are the consecutive TID groups [n*win, (n+1)*win); a window equal
// to the thread-block size means "no window". delta may be negative (value
// taken from a higher TID, as in a right-neighbour convolution tap).
//
// How: a DEPTH-entry token buffer holds one slot per target TID in
// [base, base+DEPTH), slot index = TID mod DEPTH, each with a valid bit and a
// data word. When thread t's input token arrives the controller writes the
// data into slot t+delta if t+delta is in t's window and below the thread
// count (t is a producer);
// otherwise the token is simply consumed. The slot at base leaves the node
// when its valid bit is set, or at once when base has no producer (base -
// delta outside its window) and base is below the kernel's thread count: a
// MUX at the output then substitutes the constant. The constant does not
// wait for the thread's own token, so a node may close a loop-carried
// dependence (prefix sum: thread 0's sum needs thread 0's constant). Output
// is therefore in TID order. An input whose target slot lies beyond
// base+DEPTH-1 waits.
//
// Interface: one token input (token, ready, take; in_ready depends only on
// the token and the registers, never on out_ready; a token is consumed when
// take is high), one token output (valid/ready), configuration
// delta, window, cval, the kernel's thread count n_thr, and clear (kernel
// start: empty buffer, base = 0).
// Timing: a token taken in cycle t can leave the node from cycle t+1;
// one token per cycle in steady state.
//
// Paper: behaviour, the token buffer with "tid base", "indx", "Data" and
// "valid bits" columns, the controller fed by delta, transmission window size
// and tid, and the CONST/o_data output MUX follow the paper's elevator figure
// and controller pseudo-code (given there for delta > 0). Direct slot
// mapping, in-order popping, the negative-delta rule (mirror image of the
// positive one) and emitting constants without waiting for the thread's
// token (the paper's pseudo-code marks them on arrival) are this design's
// choices. |delta| must not exceed DEPTH;
// larger deltas are built by cascading nodes.
//
// Lint notes: rst_n is also read by the disable condition of the assertions below, which
// the linter counts as a synchronous use; every flip-flop resets
// asynchronously.
module elevator_node
  import dmt_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  delta_t delta,
  input  tid_t   window,
  input  data_t  cval,
  input  tid_t   n_thr,
  input  token_t in_tok,
  output logic   in_ready,
  input  logic   in_take,
  output logic   out_valid,
  output token_t out_tok,
  input  logic   out_ready
);

  localparam int unsigned IW = $clog2(DEPTH);
  typedef logic [IW-1:0] idx_t;

  tid_t                base_q;
  logic  [DEPTH-1:0]   vld_q;
  data_t [DEPTH-1:0]   dat_q;

  // window arithmetic in 32-bit signed integers
  int win;
  assign win = (window == '0) ? (1 << TID_W) : int'(window);

  function automatic logic in_win(int p);
    return (p >= 0) && (p < win);
  endfunction

  int   pos_in, pos_out, d;
  logic prod, out_const;
  tid_t tgt, p_off;
  logic p_ok, acc;

  always_comb begin
    d         = int'(delta);
    pos_in    = int'(in_tok.tid) % win;
    pos_out   = int'(base_q) % win;
    prod      = in_win(pos_in + d) && (int'(in_tok.tid) + d < int'(n_thr));
    out_const = !in_win(pos_out - d);
    tgt       = in_tok.tid + tid_t'(delta);
    p_off     = tgt - base_q;
    p_ok      = p_off < tid_t'(DEPTH);
    in_ready  = !prod || p_ok;
    acc       = in_take && in_ready;
  end

  idx_t head;
  assign head      = idx_t'(base_q);
  assign out_valid = out_const ? (base_q < n_thr) : vld_q[head];
  assign out_tok   = '{tid: base_q, data: out_const ? cval : dat_q[head]};

  logic pop;
  assign pop = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
      vld_q  <= '0;
      dat_q  <= '0;
    end else if (clear) begin
      base_q <= '0;
      vld_q  <= '0;
    end else begin
      if (pop) begin
        vld_q[head] <= 1'b0;
        base_q      <= base_q + 1'b1;
      end
      if (acc && prod) begin
        vld_q[idx_t'(tgt)] <= 1'b1;
        dat_q[idx_t'(tgt)] <= in_tok.data;
      end
    end
  end

  // a slot with a producer is never popped as a constant
  assert property (@(posedge clk) disable iff (!rst_n || clear)
    (acc && prod) |-> !(int'(p_off) < int'(DEPTH) && tgt == base_q && out_const));
  // each slot is written once per thread
  assert property (@(posedge clk) disable iff (!rst_n || clear)
    (acc && prod) |-> !vld_q[idx_t'(tgt)]);

endmodule
