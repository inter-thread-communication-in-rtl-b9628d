// alu_unit_tb: self-checking test of the compute unit.
//
// For every opcode, 24 threads with random operands (some small, to hit
// shifts, division by zero and signed compares) are sent on the three inputs
// with random back-pressure at the output. Each result token must carry its
// thread's TID and the value computed here by a separate reference model.
// An immediate-operand case (ADD with operand 2 = immediate) and the
// one-cycle operand-to-result latency are checked too.
module alu_unit_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  unit_cfg_t         cfg;
  logic   [NOPS-1:0] in_valid, in_ready, in_take;
  token_t [NOPS-1:0] in_tok;
  logic              out_valid, out_ready;
  token_t            out_tok;

  alu_unit #(.DEPTH(16)) dut (
    .clk, .rst_n, .clear, .cfg,
    .in_valid, .in_tok, .in_ready, .in_take,
    .out_valid, .out_tok, .out_ready
  );
  assign in_take = in_valid & in_ready;

  int checks = 0, failures = 0, n_res = 0;
  int bp_pct = 0;
  data_t ea [int];

  function automatic data_t ref_alu(opcode_t op, data_t a, data_t b, data_t c);
    case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_MUL:  return a * b;
      OP_MAC:  return a * b + c;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_XOR:  return a ^ b;
      OP_SHL:  return a << (b % 32);
      OP_SHR:  return a >> (b % 32);
      OP_MIN:  return (int'(a) < int'(b)) ? a : b;
      OP_MAX:  return (int'(a) > int'(b)) ? a : b;
      OP_DIVU: return (b == 0) ? 32'hFFFF_FFFF : a / b;
      OP_REMU: return (b == 0) ? a : a % b;
      default: return 0;
    endcase
  endfunction

  function automatic data_t rnd();
    case ($urandom_range(3))
      0: return data_t'($urandom_range(7));
      1: return 32'hFFFF_FFF0 + data_t'($urandom_range(15));
      default: return data_t'($urandom);
    endcase
  endfunction

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int t;
      t = int'(out_tok.tid);
      checks++;
      n_res++;
      if (!ea.exists(t) || out_tok.data != ea[t]) begin
        failures++;
        $display("FAIL op %s tid %0d got %h want %h", cfg.op.name(), t, out_tok.data, ea[t]);
      end
      ea.delete(t);
    end
  end

  task automatic run_op(opcode_t op, logic [2:0] immm, data_t immv, int n);
    logic [2:0] need;
    need = op_uses(op) & ~immm;
    @(negedge clk);
    cfg = '0; cfg.op = op; cfg.imm_mask = immm; cfg.imm = immv;
    n_res = 0;
    for (int t = 0; t < n; t++) begin
      data_t a, b, c;
      data_t v [3];
      a = rnd(); b = rnd(); c = rnd();
      v[0] = a; v[1] = immm[1] ? immv : b; v[2] = immm[2] ? immv : c;
      ea[t] = ref_alu(op, v[0], v[1], v[2]);
      for (int k = 0; k < 3; k++) begin
        in_valid[k] = need[k];
        in_tok[k]   = '{tid: tid_t'(t), data: v[k]};
      end
      do begin
        @(posedge clk);
        for (int k = 0; k < 3; k++) if (in_take[k]) need[k] = 1'b0;
        @(negedge clk);
        in_valid = in_valid & need;
      end while (need != '0);
      need = op_uses(op) & ~immm;
    end
    while (n_res < n) @(negedge clk);
  endtask

  initial begin
    opcode_t ops [13] = '{OP_ADD, OP_SUB, OP_MUL, OP_MAC, OP_AND, OP_OR, OP_XOR,
                          OP_SHL, OP_SHR, OP_MIN, OP_MAX, OP_DIVU, OP_REMU};
    int t0, lat;
    cfg = '0; in_valid = '0; in_tok = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bp_pct = 30;
    foreach (ops[i]) run_op(ops[i], 3'b000, '0, 24);
    run_op(OP_ADD, 3'b010, 32'd100, 16);

    // latency: operands taken at one edge, result valid after the next edge
    bp_pct = 0;
    @(negedge clk);
    cfg = '0; cfg.op = OP_ADD;
    ea[50] = 32'd5;
    in_valid = 3'b011;
    in_tok[0] = '{tid: 16'd50, data: 32'd2};
    in_tok[1] = '{tid: 16'd50, data: 32'd3};
    @(posedge clk); t0 = $time;
    @(negedge clk); in_valid = '0;
    while (!out_valid) @(negedge clk);
    lat = ($time - t0 - 5) / 10;
    checks++;
    if (lat != 1) begin
      failures++; $display("FAIL latency %0d cycles", lat);
    end
    repeat (3) @(negedge clk);

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
