// eldst_unit: enhanced load/store unit (fromThreadOrMem).
//
// What it does: plain loads (LD) and stores (ST) to the L1 port and, with
// opcode ELD, the memory-or-thread load: a thread whose enable operand is
// non-zero loads its address from memory; a thread whose enable is zero does
// not touch memory and instead receives the value that thread TID-delta
// produced (loaded or itself received). Every value is thus loaded once per
// transmission window and reused window/delta times.
//
// How: operand matching (address, enable or store data) is done by a
// token_buffer. The matched thread is then registered in the output token
// buffer: DEPTH slots for TIDs [base, base+DEPTH), each with an "arrived" bit
// (the thread reached the unit), a "data valid" bit and a data word. Load
// responses fill the data of their TID's slot. The slot at base leaves the
// unit when both bits are set. For ELD, the leaving token is duplicated: its
// TID is advanced by delta and, if the result is still inside the same
// transmission window, the data is written into that slot through the MUX
// that otherwise takes memory data. A store leaves a token carrying the
// stored value once the write request is accepted. PLD is the predicated
// load used around a loop of elevator nodes: a thread whose predicate is zero
// gets a zero token at once and does not access memory.
//
// Interface: three operand inputs (valid/ready/take; operand 3 unused), one
// output token (valid/ready), memory request (valid/ready, write flag,
// address, write data, TID tag) and memory response (valid, TID tag, data;
// always accepted, may return in any order). Timing: a load leaves the unit
// one cycle after its response; a forwarded value one cycle after the
// producer's token left. Tokens leave in TID order.
//
// Paper: the enable-predicated load, the adder on the TID, the window
// comparator, the MUX between LDST data and the looped-back output, and the
// token buffer with "tid base", "indx", "Data" and "valid bits" follow the
// paper's eLDST figure and text. The operand-matching front end, in-order
// leaving and the store acknowledge token are this design's choices.
// delta must lie in 1..DEPTH.
//
// Lint notes: rst_n is also read by the disable condition of the assertions below, which
// the linter counts as a synchronous use; every flip-flop resets
// asynchronously.
// Of the shared configuration word the constant is not used, nor is operand
// input 3. Only the low bits of a response TID are used: they index the
// output buffer, which holds the only outstanding load of that TID class.
module eldst_unit
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
  input  logic               out_ready,
  // L1 port
  output logic               req_valid,
  input  logic               req_ready,
  output logic               req_we,
  output data_t              req_addr,
  output data_t              req_wdata,
  output tid_t               req_tid,
  input  logic               rsp_valid,
  input  tid_t               rsp_tid,
  input  data_t              rsp_data
);

  localparam int unsigned IW = $clog2(DEPTH);
  typedef logic [IW-1:0] idx_t;

  // ---------------- operand matching ----------------
  logic             f_valid, f_ready;
  tid_t             f_tid;
  data_t [NOPS-1:0] f_ops;

  token_buffer #(.DEPTH(DEPTH)) u_tb (
    .clk, .rst_n, .clear,
    .use_mask  (op_uses(cfg.op)),
    .imm_mask  (cfg.imm_mask),
    .imm       (cfg.imm),
    .sel_mode  (1'b0),
    .in_valid, .in_tok, .in_ready, .in_take,
    .fire_valid(f_valid),
    .fire_tid  (f_tid),
    .fire_ops  (f_ops),
    .fire_ready(f_ready)
  );

  // ---------------- output token buffer ----------------
  tid_t                base_q;
  logic  [DEPTH-1:0]   arr_q, dv_q;
  data_t [DEPTH-1:0]   dat_q;

  logic is_st, is_eld, is_pld, needs_mem, a_ok;
  tid_t a_off;
  always_comb begin
    is_st     = (cfg.op == OP_ST);
    is_eld    = (cfg.op == OP_ELD);
    is_pld    = (cfg.op == OP_PLD);
    needs_mem = (cfg.op == OP_LD) || is_st || ((is_eld || is_pld) && f_ops[1] != '0);
    a_off     = f_tid - base_q;
    a_ok      = a_off < tid_t'(DEPTH);
    f_ready   = a_ok && (!needs_mem || req_ready);
    req_valid = f_valid && a_ok && needs_mem;
    req_we    = is_st;
    req_addr  = f_ops[0];
    req_wdata = f_ops[1];
    req_tid   = f_tid;
  end

  logic accept;
  assign accept = f_valid && f_ready;

  idx_t head;
  assign head      = idx_t'(base_q);
  assign out_valid = arr_q[head] && dv_q[head];
  assign out_tok   = '{tid: base_q, data: dat_q[head]};

  logic pop;
  assign pop = out_valid && out_ready;

  // duplicated token: TID + delta, kept only inside the transmission window
  int   win, pos;
  logic fwd;
  idx_t fwd_idx;
  always_comb begin
    win     = (cfg.window == '0) ? (1 << TID_W) : int'(cfg.window);
    pos     = int'(base_q) % win;
    fwd     = is_eld && (pos + int'(cfg.delta) < win);
    fwd_idx = idx_t'(base_q + tid_t'(cfg.delta));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0;
      arr_q  <= '0;
      dv_q   <= '0;
      dat_q  <= '0;
    end else if (clear) begin
      base_q <= '0;
      arr_q  <= '0;
      dv_q   <= '0;
    end else begin
      if (pop) begin
        arr_q[head] <= 1'b0;
        dv_q[head]  <= 1'b0;
        base_q      <= base_q + 1'b1;
        if (fwd) begin
          dv_q[fwd_idx]  <= 1'b1;
          dat_q[fwd_idx] <= dat_q[head];
        end
      end
      if (accept) begin
        arr_q[idx_t'(f_tid)] <= 1'b1;
        if (is_st || (is_pld && f_ops[1] == '0)) begin
          dv_q[idx_t'(f_tid)]  <= 1'b1;
          dat_q[idx_t'(f_tid)] <= is_st ? f_ops[1] : '0;
        end
      end
      if (rsp_valid) begin
        dv_q[idx_t'(rsp_tid)]  <= 1'b1;
        dat_q[idx_t'(rsp_tid)] <= rsp_data;
      end
    end
  end

  // memory handshake: a pending request holds its payload
  assert property (@(posedge clk) disable iff (!rst_n || clear)
    (req_valid && !req_ready) |=> (req_valid && $stable(req_addr) && $stable(req_tid)));
  // delta range of a single eLDST
  assert property (@(posedge clk) disable iff (!rst_n)
    is_eld |-> (cfg.delta >= 1 && int'(cfg.delta) <= int'(DEPTH)));

endmodule
