// token_buffer: the tagged-token matching store found in every grid unit.
//
// What it does: tokens of several threads arrive, in any order, on up to
// NOPS operand inputs. The buffer groups them by thread ID and, once a
// thread's operand set satisfies the dataflow firing rule, hands that set to
// the unit's logic through a one-entry output register ("fire" stage).
// Different threads may fire out of order; that is what lets a thread stalled
// on memory be overtaken by others. Among the threads ready to fire the
// oldest (smallest TID) goes first, so that a younger thread does not sit in
// the output register in front of an older one that an in-order consumer
// (elevator node, eLDST unit) is waiting for.
//
// How: DEPTH entries, direct mapped by the low bits of the TID. An entry holds
// the TID tag, one valid bit and one data word per operand, and a "fired"
// bit. An input is accepted when its entry is free or already owned by the
// same TID and that operand slot is still empty; otherwise it waits (input
// not ready). Two inputs that would claim the same free entry for different
// TIDs in one cycle are resolved in favour of the lower-numbered input.
// Operands marked in imm_mask are not expected from the network: the
// configured immediate is substituted when the set fires.
//
// Firing rule: strict (all used operands present), or, with sel_mode, the
// non-strict select of a control unit: operand 1 chooses operand 2 (non-zero)
// or operand 3 (zero) and only the chosen one must be present. An entry that
// fired is freed once every used operand has arrived, so the token on the
// unselected input of a select is absorbed and dropped when it turns up.
//
// Interface: in_valid/in_tok per input, in_ready (depends only on registers
// and on in_valid/in_tok, never on a downstream ready), in_take = the input is
// consumed this cycle (the network's fork fired). fire_* is a valid/ready
// output. Timing: a token taken in cycle t can fire at the clock edge ending
// cycle t+1 (one cycle in the matching store, then the output register).
//
// Paper: the typical unit of the MT-CGRA has a token buffer indexed by TID
// with operand columns, passing operands to the unit's logic once all of a
// TID's operands are available; 16 entries is the paper's buffer size. The
// direct mapping, the third operand column and the select rule are this
// design's choices.
//
// Lint notes: rst_n is also read by the disable condition of the assertions below, which
// the linter counts as a synchronous use; every flip-flop resets
// asynchronously.
module token_buffer
  import dmt_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,      // kernel start: drop all entries
  // configuration
  input  logic [NOPS-1:0]      use_mask,   // operands the opcode uses
  input  logic [NOPS-1:0]      imm_mask,   // operands taken from imm
  input  data_t                imm,
  input  logic                 sel_mode,
  // operand inputs
  input  logic   [NOPS-1:0]    in_valid,
  input  token_t [NOPS-1:0]    in_tok,
  output logic   [NOPS-1:0]    in_ready,
  input  logic   [NOPS-1:0]    in_take,
  // fire stage
  output logic                 fire_valid,
  output tid_t                 fire_tid,
  output data_t [NOPS-1:0]     fire_ops,
  input  logic                 fire_ready
);

  localparam int unsigned IW = $clog2(DEPTH);
  typedef logic [IW-1:0] idx_t;

  typedef struct packed {
    logic            busy;
    logic            fired;
    tid_t            tid;
    logic [NOPS-1:0] opv;
    data_t [NOPS-1:0] data;
  } entry_t;

  entry_t [DEPTH-1:0] ent_q, ent_d;

  logic [NOPS-1:0] net_mask;
  assign net_mask = use_mask & ~imm_mask;

  // ---------------- input acceptance ----------------
  idx_t [NOPS-1:0] in_idx;
  always_comb begin
    for (int i = 0; i < NOPS; i++) begin
      in_idx[i]   = idx_t'(in_tok[i].tid);
      in_ready[i] = 1'b0;
      if (net_mask[i]) begin
        if (!ent_q[in_idx[i]].busy)
          in_ready[i] = 1'b1;
        else if (ent_q[in_idx[i]].tid == in_tok[i].tid && !ent_q[in_idx[i]].opv[i])
          in_ready[i] = 1'b1;
        // a lower input claiming the same free entry for another TID wins
        for (int j = 0; j < i; j++) begin
          if (in_valid[j] && net_mask[j] && !ent_q[in_idx[i]].busy &&
              in_idx[j] == in_idx[i] && in_tok[j].tid != in_tok[i].tid)
            in_ready[i] = 1'b0;
        end
      end
    end
  end

  // ---------------- fire selection ----------------
  logic [DEPTH-1:0] can_fire;
  always_comb begin
    for (int e = 0; e < DEPTH; e++) begin
      logic [NOPS-1:0] present;
      present = ent_q[e].opv | ~net_mask;
      if (sel_mode)
        can_fire[e] = ent_q[e].busy && !ent_q[e].fired && present[0] &&
                      ((sel_operand(ent_q[e].data, 0) != '0) ? present[1] : present[2]);
      else
        can_fire[e] = ent_q[e].busy && !ent_q[e].fired && (&present);
    end
  end

  function automatic data_t sel_operand(data_t [NOPS-1:0] d, int k);
    return imm_mask[k] ? imm : d[k];
  endfunction

  logic load_fire;
  idx_t pick;
  logic pick_v;
  always_comb begin
    pick   = '0;
    pick_v = 1'b0;
    for (int e = 0; e < DEPTH; e++) begin
      if (can_fire[e] && (!pick_v || ent_q[e].tid < ent_q[pick].tid)) begin
        pick   = idx_t'(e);
        pick_v = 1'b1;
      end
    end
  end
  assign load_fire = pick_v && (!fire_valid || fire_ready);

  // ---------------- entry update ----------------
  always_comb begin
    ent_d = ent_q;
    if (load_fire) ent_d[pick].fired = 1'b1;
    for (int i = 0; i < NOPS; i++) begin
      if (in_take[i] && in_ready[i]) begin
        if (!ent_q[in_idx[i]].busy) begin
          ent_d[in_idx[i]].busy  = 1'b1;
          ent_d[in_idx[i]].fired = 1'b0;
          ent_d[in_idx[i]].tid   = in_tok[i].tid;
        end
        ent_d[in_idx[i]].opv[i]  = 1'b1;
        ent_d[in_idx[i]].data[i] = in_tok[i].data;
      end
    end
    // free an entry whose set fired and whose used operands have all arrived
    for (int e = 0; e < DEPTH; e++) begin
      if (ent_d[e].busy && ent_d[e].fired && ((ent_d[e].opv & net_mask) == net_mask))
        ent_d[e] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ent_q <= '0;
    else if (clear) ent_q <= '0;
    else ent_q <= ent_d;
  end

  // ---------------- fire register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fire_valid <= 1'b0;
      fire_tid   <= '0;
      fire_ops   <= '0;
    end else if (clear) begin
      fire_valid <= 1'b0;
    end else if (!fire_valid || fire_ready) begin
      fire_valid <= pick_v;
      if (pick_v) begin
        fire_tid <= ent_q[pick].tid;
        for (int k = 0; k < NOPS; k++)
          fire_ops[k] <= sel_operand(ent_q[pick].data, k);
      end
    end
  end

  // an accepted token never lands on an occupied operand slot
  for (genvar i = 0; i < NOPS; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      (in_take[i] && in_ready[i]) |-> !(ent_q[in_idx[i]].busy && ent_q[in_idx[i]].opv[i]));
  end

endmodule
