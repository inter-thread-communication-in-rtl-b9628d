// elevator_node_tb: self-checking test of the elevator node.
//
// For several (delta, window, constant) settings it streams the tokens of
// N threads (data = a hash of the TID) into the node, with random input
// gaps and random output back-pressure, and checks that the node emits
// exactly one token per thread (none beyond the thread count), in TID order, whose data is the input of
// thread TID-delta when that thread is in TID's window, else the constant.
// Settings cover delta 1 (prefix sum), a bounded window (reduction groups),
// a negative delta (right neighbour) and delta = 16 = buffer size (first stage
// of the paper's 18-thread cascade). A last run without gaps or back-pressure
// checks the rate of one token per cycle.
module elevator_node_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  delta_t delta;
  tid_t   window;
  data_t  cval;
  tid_t   n_thr;
  logic   in_valid, in_ready, in_take;
  token_t in_tok;
  logic   out_valid, out_ready;
  token_t out_tok;

  elevator_node #(.DEPTH(16)) dut (
    .clk, .rst_n, .clear, .delta, .window, .cval, .n_thr,
    .in_tok, .in_ready, .in_take,
    .out_valid, .out_tok, .out_ready
  );

  assign in_take = in_valid && in_ready;

  int checks = 0, failures = 0;
  int n_out;
  int gap_pct, bp_pct;

  function automatic data_t hashv(int t);
    return data_t'(t * 32'h9E37 + 32'h1234);
  endfunction

  function automatic data_t expect_val(int t, int d, int w, data_t c);
    int ww, p;
    ww = (w == 0) ? 65536 : w;
    p  = (t % ww) - d;
    if (p >= 0 && p < ww) return hashv(t - d);
    return c;
  endfunction

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_tok.tid != tid_t'(n_out) ||
          out_tok.data != expect_val(n_out, int'(delta), int'(window), cval)) begin
        failures++;
        $display("FAIL d=%0d w=%0d: got tid %0d data %h, want tid %0d data %h", delta, window,
                 out_tok.tid, out_tok.data, n_out, expect_val(n_out, int'(delta), int'(window), cval));
      end
      n_out++;
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  task automatic run(int d, int w, int n, data_t c, int gp, int bp, output int cycles);
    int t0;
    @(negedge clk);
    delta = delta_t'(d); window = tid_t'(w); cval = c; n_thr = tid_t'(n);
    gap_pct = gp; bp_pct = bp;
    clear = 1'b1; in_valid = 1'b0;
    @(negedge clk);
    clear = 1'b0; n_out = 0;
    t0 = $time;
    for (int t = 0; t < n; t++) begin
      while ($urandom_range(99) < gap_pct) begin
        in_valid = 1'b0; @(negedge clk);
      end
      in_valid = 1'b1;
      in_tok   = '{tid: tid_t'(t), data: hashv(t)};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 1'b0;
    while (n_out < n) @(negedge clk);
    cycles = ($time - t0) / 10;
    repeat (20) @(negedge clk);    // no token for threads beyond n
    checks++;
    if (n_out != n) begin
      failures++; $display("FAIL d=%0d w=%0d: %0d tokens for %0d threads", d, w, n_out, n);
    end
  endtask

  initial begin
    int cyc;
    in_valid = 1'b0; in_tok = '0; delta = '0; window = '0; cval = '0; n_thr = '0;
    gap_pct = 0; bp_pct = 0; n_out = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1,   0, 100, 32'd0,        20, 20, cyc);  // prefix-sum pattern
    run(3,   9,  81, 32'hCAFE,     30, 30, cyc);  // 3x3 matmul style window
    run(2,   4,  64, 32'd7,        10, 40, cyc);  // reduction groups
    run(-1,  8,  64, 32'd0,        25, 25, cyc);  // right neighbour
    run(-3, 12,  48, 32'hBEEF,     25, 25, cyc);
    run(16, 64, 128, 32'd5,        15, 15, cyc);  // delta = buffer size
    run(2,  64, 128, 32'd9,        15, 15, cyc);
    // throughput: one token per cycle
    run(1,   0, 200, 32'd0,         0,  0, cyc);
    checks++;
    if (cyc > 200 + 4) begin
      failures++;
      $display("FAIL rate: 200 tokens took %0d cycles", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
