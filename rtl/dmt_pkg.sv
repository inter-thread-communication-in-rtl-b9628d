// dmt_pkg: types and constants shared by the dMT-CGRA grid units.
//
// Every value moving through the grid is a tagged token: a data word plus
// the thread ID (TID) it belongs to. Units match operands by TID (dynamic,
// tagged-token dataflow); only the elevator node and the eLDST unit change
// a token's TID, which is how threads talk to each other.
//
// Widths are this design's choice (the paper gives none): 16-bit TIDs cover
// any CUDA thread block (at most 1024 threads) with room to spare, and 32-bit
// data matches the 32-bit integer/float words of a GPGPU. The unit
// configuration word (unit_cfg_t) is also this design's own encoding of what
// the paper calls the unit's opcode register plus the elevator/eLDST
// parameters (TID delta, transmission window, fallback constant).
package dmt_pkg;

  parameter int unsigned TID_W  = 16;
  parameter int unsigned DATA_W = 32;
  parameter int unsigned NOPS   = 3;   // operand slots per unit token buffer

  typedef logic [TID_W-1:0]         tid_t;
  typedef logic signed [TID_W-1:0]  delta_t;
  typedef logic [DATA_W-1:0]        data_t;

  typedef struct packed {
    tid_t  tid;
    data_t data;
  } token_t;

  // One opcode space for all unit types; each unit type accepts its subset.
  typedef enum logic [4:0] {
    OP_NOP  = 5'd0,
    // compute unit (ALU)
    OP_ADD  = 5'd1,
    OP_SUB  = 5'd2,
    OP_MUL  = 5'd3,
    OP_MAC  = 5'd4,   // op1 * op2 + op3
    OP_AND  = 5'd5,
    OP_OR   = 5'd6,
    OP_XOR  = 5'd7,
    OP_SHL  = 5'd8,
    OP_SHR  = 5'd9,
    OP_MIN  = 5'd10,  // signed
    OP_MAX  = 5'd11,  // signed
    OP_DIVU = 5'd12,
    OP_REMU = 5'd13,
    // control unit
    OP_SEL  = 5'd16,  // op1 != 0 ? op2 : op3, fires on the selected input only
    OP_EQ   = 5'd17,
    OP_NE   = 5'd18,
    OP_LT   = 5'd19,  // signed
    OP_LTU  = 5'd20,
    OP_ELEV = 5'd21,  // elevator node (fromThreadOrConst)
    // load/store unit
    OP_LD   = 5'd24,  // op1 = address
    OP_ST   = 5'd25,  // op1 = address, op2 = data
    OP_ELD  = 5'd26,  // op1 = address, op2 = enable (fromThreadOrMem)
    OP_PLD  = 5'd27   // op1 = address, op2 = predicate; a 0 token if false
  } opcode_t;

  typedef struct packed {
    opcode_t           op;
    logic [NOPS-1:0]   imm_mask;  // operand i comes from imm, not from the network
    data_t             imm;
    delta_t            delta;     // TID delta of elevator / eLDST
    tid_t              window;    // transmission window (>= 1)
    data_t             cval;      // fallback constant of the elevator node
  } unit_cfg_t;

  typedef struct packed {
    logic       en;
    logic [7:0] src;
  } route_t;

  // Operand slots that an opcode consumes (bit i = operand i+1).
  function automatic logic [NOPS-1:0] op_uses(opcode_t op);
    unique case (op)
      OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_XOR, OP_SHL, OP_SHR,
      OP_MIN, OP_MAX, OP_DIVU, OP_REMU,
      OP_EQ, OP_NE, OP_LT, OP_LTU, OP_ST, OP_ELD,
      OP_PLD:                                      op_uses = 3'b011;
      OP_MAC, OP_SEL:                              op_uses = 3'b111;
      OP_ELEV, OP_LD:                              op_uses = 3'b001;
      default:                                     op_uses = 3'b000;
    endcase
  endfunction

endpackage
