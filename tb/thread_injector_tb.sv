// thread_injector_tb: self-checking test of the thread injector.
//
// Launches 50 threads with random back-pressure and checks that TIDs 0..49
// appear once each, in order, with data equal to the TID, and that busy
// drops after the last one. A second launch of 40 threads with no
// back-pressure must take 40 cycles (one thread per cycle). A launch of zero
// threads must emit nothing.
module thread_injector_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   start, busy, out_valid, out_ready;
  tid_t   n_threads;
  token_t out_tok;

  thread_injector dut (.clk, .rst_n, .start, .n_threads, .busy, .out_valid, .out_tok, .out_ready);

  int checks = 0, failures = 0, n_out = 0, bp_pct = 0;

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_tok.tid != tid_t'(n_out) || out_tok.data != data_t'(n_out)) begin
        failures++; $display("FAIL token %0d: tid %0d data %0d", n_out, out_tok.tid, out_tok.data);
      end
      n_out++;
    end
  end

  task automatic launch(int n);
    @(negedge clk);
    start = 1'b1; n_threads = tid_t'(n); n_out = 0;
    @(negedge clk);
    start = 1'b0;
  endtask

  initial begin
    int t0, cyc;
    start = 1'b0; n_threads = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    bp_pct = 40;
    launch(50);
    while (busy) @(negedge clk);
    checks++;
    if (n_out != 50) begin failures++; $display("FAIL %0d threads, want 50", n_out); end

    bp_pct = 0;
    @(negedge clk);
    launch(40);
    t0 = $time;
    while (busy) @(negedge clk);
    cyc = ($time - t0) / 10;
    checks++;
    if (n_out != 40 || cyc != 40) begin
      failures++; $display("FAIL %0d threads in %0d cycles, want 40 in 40", n_out, cyc);
    end

    launch(0);
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != 0 || busy) begin failures++; $display("FAIL zero-thread launch emitted %0d", n_out); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
