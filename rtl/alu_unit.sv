// alu_unit: integer compute unit of the grid.
//
// What it does: waits, per thread, for the operands its opcode needs (via
// token_buffer) and emits one result token carrying the same TID. The unit
// never changes a tag: only the elevator node and the eLDST unit do.
//
// How: the token buffer's fire register holds a matched operand set; the
// arithmetic below is combinational from that register, so the output token
// is valid exactly while the fire register is, and out_ready pops it.
// Opcodes: ADD SUB MUL MAC(op1*op2+op3) AND OR XOR SHL SHR MIN MAX (signed)
// DIVU REMU. DIVU/REMU by zero give all ones / op1 (RISC-V convention).
//
// Interface: three operand inputs (valid/ready/take, see token_buffer), one
// output token (valid/ready). Timing: operand set taken in cycle t gives a
// result token from cycle t+1; one result per cycle at full rate.
//
// Paper: the grid holds 32 ALUs (compute units) that execute the kernel's
// computational operations, each with the typical unit's token buffer; the
// multiply and multiply-accumulate nodes appear in the matrix multiplication
// example. The opcode set and its encoding are this design's choice.
//
// Lint notes: rst_n is also read by the disable condition of the assertions below, which
// the linter counts as a synchronous use; every flip-flop resets
// asynchronously.
// The unit reads only the opcode and immediate of the shared configuration
// word; delta, window and constant belong to elevator and eLDST units.
module alu_unit
  import dmt_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  unit_cfg_t          cfg,
  input  logic   [NOPS-1:0]  in_valid,
  input  token_t [NOPS-1:0]  in_tok,
  output logic   [NOPS-1:0]  in_ready,
  input  logic   [NOPS-1:0]  in_take,
  output logic               out_valid,
  output token_t             out_tok,
  input  logic               out_ready
);

  tid_t             f_tid;
  data_t [NOPS-1:0] f_ops;

  token_buffer #(.DEPTH(DEPTH)) u_tb (
    .clk, .rst_n, .clear,
    .use_mask  (op_uses(cfg.op)),
    .imm_mask  (cfg.imm_mask),
    .imm       (cfg.imm),
    .sel_mode  (1'b0),
    .in_valid, .in_tok, .in_ready, .in_take,
    .fire_valid(out_valid),
    .fire_tid  (f_tid),
    .fire_ops  (f_ops),
    .fire_ready(out_ready)
  );

  data_t a, b, c, r;
  assign a = f_ops[0];
  assign b = f_ops[1];
  assign c = f_ops[2];

  always_comb begin
    unique case (cfg.op)
      OP_ADD:  r = a + b;
      OP_SUB:  r = a - b;
      OP_MUL:  r = a * b;
      OP_MAC:  r = a * b + c;
      OP_AND:  r = a & b;
      OP_OR:   r = a | b;
      OP_XOR:  r = a ^ b;
      OP_SHL:  r = a << b[4:0];
      OP_SHR:  r = a >> b[4:0];
      OP_MIN:  r = ($signed(a) < $signed(b)) ? a : b;
      OP_MAX:  r = ($signed(a) > $signed(b)) ? a : b;
      OP_DIVU: r = (b == '0) ? '1 : a / b;
      OP_REMU: r = (b == '0) ? a  : a % b;
      default: r = '0;
    endcase
  end

  assign out_tok = '{tid: f_tid, data: r};

endmodule
