// control_unit_tb: self-checking test of the control/elevator unit.
//
//   ELEV  tokens of 32 threads on operand input 1, delta 2, window 8,
//         constant 0x77: each thread must receive the value of thread TID-2
//         of its window or the constant, in TID order.
//   SEL   16 threads with selector TID mod 2. Only the selector and the
//         selected operand are sent first; all 16 must fire with the selected
//         value. The unselected operands are sent afterwards and must be
//         absorbed (16 more threads on the same entries still fire).
//   EQ NE LT LTU  random and equal operand pairs against a reference.
module control_unit_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  unit_cfg_t         cfg;
  logic   [NOPS-1:0] in_valid, in_ready, in_take;
  token_t [NOPS-1:0] in_tok;
  logic              out_valid, out_ready;
  token_t            out_tok;

  control_unit #(.DEPTH(16)) dut (
    .clk, .rst_n, .clear, .cfg, .n_thr(16'd32),
    .in_valid, .in_tok, .in_ready, .in_take,
    .out_valid, .out_tok, .out_ready
  );
  assign in_take = in_valid & in_ready;

  int checks = 0, failures = 0, n_out = 0;
  data_t exp_out [int];
  int bp_pct = 20;

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int t;
      t = int'(out_tok.tid);
      checks++;
      n_out++;
      if (!exp_out.exists(t) || out_tok.data != exp_out[t]) begin
        failures++;
        $display("FAIL op %s tid %0d got %h want %h", cfg.op.name(), t, out_tok.data, exp_out[t]);
      end
      exp_out.delete(t);
    end
  end

  // send one token for thread t on the inputs in mask m
  task automatic put(int t, logic [2:0] m, data_t v0, data_t v1, data_t v2);
    logic [2:0] need;
    need = m;
    in_tok[0] = '{tid: tid_t'(t), data: v0};
    in_tok[1] = '{tid: tid_t'(t), data: v1};
    in_tok[2] = '{tid: tid_t'(t), data: v2};
    in_valid = need;
    do begin
      @(posedge clk);
      for (int k = 0; k < 3; k++) if (in_take[k]) need[k] = 1'b0;
      @(negedge clk);
      in_valid = in_valid & need;
    end while (need != '0);
  endtask

  task automatic start(opcode_t op);
    @(negedge clk);
    cfg = '0; cfg.op = op;
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    n_out = 0; exp_out.delete();
  endtask

  task automatic expect_n(int n);
    int guard = 0;
    while (n_out < n && guard < 2000) begin @(negedge clk); guard++; end
    checks++;
    if (n_out != n) begin failures++; $display("FAIL %s: %0d outputs, want %0d", cfg.op.name(), n_out, n); end
  endtask

  function automatic data_t v(int t); return data_t'(t * 17 + 5); endfunction

  initial begin
    cfg = '0; in_valid = '0; in_tok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // elevator mode
    start(OP_ELEV);
    cfg.delta = 16'sd2; cfg.window = 16'd8; cfg.cval = 32'h77;
    for (int t = 0; t < 32; t++) exp_out[t] = ((t % 8) >= 2) ? v(t - 2) : 32'h77;
    for (int t = 0; t < 32; t++) put(t, 3'b001, v(t), '0, '0);
    expect_n(32);

    // select, non-strict
    start(OP_SEL);
    for (int t = 0; t < 16; t++) begin
      exp_out[t] = (t % 2) ? v(t) + 1000 : v(t) + 2000;
      put(t, (t % 2) ? 3'b011 : 3'b101, data_t'(t % 2), v(t) + 1000, v(t) + 2000);
    end
    expect_n(16);
    for (int t = 0; t < 16; t++)
      put(t, (t % 2) ? 3'b100 : 3'b010, data_t'(t % 2), v(t) + 1000, v(t) + 2000);
    for (int t = 16; t < 32; t++) begin
      exp_out[t] = (t % 2) ? v(t) + 1000 : v(t) + 2000;
      put(t, 3'b111, data_t'(t % 2), v(t) + 1000, v(t) + 2000);
    end
    expect_n(32);

    // comparisons
    begin
      opcode_t ops [4] = '{OP_EQ, OP_NE, OP_LT, OP_LTU};
      foreach (ops[i]) begin
        start(ops[i]);
        for (int t = 0; t < 20; t++) begin
          data_t a, b;
          logic r;
          a = ($urandom_range(3) == 0) ? 32'hFFFF_FFF0 : data_t'($urandom_range(20));
          b = (t % 4 == 0) ? a : data_t'($urandom_range(20));
          case (ops[i])
            OP_EQ:  r = (a == b);
            OP_NE:  r = (a != b);
            OP_LT:  r = (int'(a) < int'(b));
            default: r = (a < b);
          endcase
          exp_out[t] = data_t'(r);
          put(t, 3'b011, a, b, '0);
        end
        expect_n(20);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
