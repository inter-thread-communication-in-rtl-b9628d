// control_unit: grid control unit that can also act as an elevator node.
//
// What it does: with opcode ELEV it is an elevator node (fromThreadOrConst),
// reading operand input 1 only. Otherwise it is a control unit: SEL is a
// dataflow select (op1 != 0 ? op2 : op3) that fires as soon as the selector
// and the selected token are there and silently absorbs the other token;
// EQ NE LT LTU are comparisons producing 1 or 0.
//
// How: a token_buffer does the tag matching for the control operations; an
// elevator_node does the re-tagging. The opcode decides which of the two
// drives the output and which of them the inputs are steered to.
//
// Interface: three operand inputs (valid/ready/take), one output token
// (valid/ready), configuration word cfg, the kernel's thread count n_thr
// (used by the elevator). Timing: one cycle from operand set
// to output register, one token per cycle.
//
// Paper: the grid has 16 control/elevator units; elevator nodes are made by
// converting existing control units, which the paper says adds only
// combinational logic because the token buffer and opcode register are
// already there. Here the elevator keeps a token buffer of its own beside the
// matching buffer, which is simpler to verify but costs area the paper's
// conversion would not. Select with a predicate operand and comparisons are
// the control operations named by the paper; their encoding is this
// design's choice.
//
// Lint notes: rst_n is also read by the disable condition of the assertions below, which
// the linter counts as a synchronous use; every flip-flop resets
// asynchronously.
module control_unit
  import dmt_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  unit_cfg_t          cfg,
  input  tid_t               n_thr,
  input  logic   [NOPS-1:0]  in_valid,
  input  token_t [NOPS-1:0]  in_tok,
  output logic   [NOPS-1:0]  in_ready,
  input  logic   [NOPS-1:0]  in_take,
  output logic               out_valid,
  output token_t             out_tok,
  input  logic               out_ready
);

  logic is_elev;
  assign is_elev = (cfg.op == OP_ELEV);

  // ---------------- control operations ----------------
  logic [NOPS-1:0]  tb_ready;
  logic             f_valid;
  tid_t             f_tid;
  data_t [NOPS-1:0] f_ops;

  token_buffer #(.DEPTH(DEPTH)) u_tb (
    .clk, .rst_n, .clear,
    .use_mask  (is_elev ? '0 : op_uses(cfg.op)),
    .imm_mask  (cfg.imm_mask),
    .imm       (cfg.imm),
    .sel_mode  (cfg.op == OP_SEL),
    .in_valid,
    .in_tok,
    .in_ready  (tb_ready),
    .in_take   (is_elev ? '0 : in_take),
    .fire_valid(f_valid),
    .fire_tid  (f_tid),
    .fire_ops  (f_ops),
    .fire_ready(out_ready && !is_elev)
  );

  data_t r;
  always_comb begin
    unique case (cfg.op)
      OP_SEL:  r = (f_ops[0] != '0) ? f_ops[1] : f_ops[2];
      OP_EQ:   r = data_t'(f_ops[0] == f_ops[1]);
      OP_NE:   r = data_t'(f_ops[0] != f_ops[1]);
      OP_LT:   r = data_t'($signed(f_ops[0]) < $signed(f_ops[1]));
      OP_LTU:  r = data_t'(f_ops[0] < f_ops[1]);
      default: r = '0;
    endcase
  end

  // ---------------- elevator ----------------
  logic   e_ready, e_valid;
  token_t e_tok;

  elevator_node #(.DEPTH(DEPTH)) u_elev (
    .clk, .rst_n, .clear,
    .delta    (cfg.delta),
    .window   (cfg.window),
    .cval     (cfg.cval),
    .n_thr,
    .in_tok   (in_tok[0]),
    .in_ready (e_ready),
    .in_take  (in_take[0] && is_elev),
    .out_valid(e_valid),
    .out_tok  (e_tok),
    .out_ready(out_ready && is_elev)
  );

  always_comb begin
    if (is_elev) begin
      in_ready  = {{(NOPS-1){1'b0}}, e_ready};
      out_valid = e_valid;
      out_tok   = e_tok;
    end else begin
      in_ready  = tb_ready;
      out_valid = f_valid;
      out_tok   = '{tid: f_tid, data: r};
    end
  end

endmodule
