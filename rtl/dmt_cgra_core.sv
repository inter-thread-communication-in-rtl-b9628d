// dmt_cgra_core: a dMT-CGRA core, the grid of tagged-token dataflow units.
//
// What it does: runs one kernel's dataflow graph for a whole thread block.
// The graph is loaded as a configuration (an opcode word per unit and a route
// per unit input); then threads are injected one per cycle and flow through
// the units, each unit interleaving the threads by matching tokens on their
// TID tags. Threads communicate directly through the grid: control units
// configured as elevator nodes re-tag a thread's value to another thread
// (fromThreadOrConst), and eLDST units let one thread's load serve the
// following threads of its window (fromThreadOrMem). Long distances are built
// from configuration alone: elevator nodes in a chain add their deltas, and
// a loop of select units around an elevator chain extends an eLDST.
//
// How: N_ALU compute units, N_CTRL control/elevator units and N_LDST eLDST
// units are built here; the floating point, special compute and split/join
// units are not, and attach through the ext_* ports as network sources and
// sinks like the internal units. All are joined by static_noc. Source
// numbering: ALUs, control units, LDSTs, external units, then the thread
// injector (last). Sink numbering: unit u operand i is sink 3*u+i, with units
// in the same order. The memory ports of the eLDST units go out to the L1.
//
// Interface: cfg_we writes unit configuration cfg_unit to unit cfg_idx
// (cfg_is_route = 0; internal units only) or route cfg_route to sink cfg_idx
// (cfg_is_route = 1). start (pulse) clears every unit and begins injecting
// n_threads threads; busy is high while threads are still being injected.
// The thread count is kept for the elevator nodes, which must know which
// threads exist.
// Kernel completion is seen by the environment (stores arriving at memory).
//
// Timing: one cycle per unit on the critical path of a thread, zero in the
// network; a new thread every cycle.
//
// Paper: unit counts (32 ALU, 32 FPU, 12 special compute, 32 LDST, 16
// split/join, 16 control/elevator; 140 in all) and the 16-entry token buffer
// are the paper's. The single-crossbar network, configuration port and
// start/busy protocol are this design's choices.
//
// Lint notes: the units flag rst_n as used both synchronously and
// asynchronously (the synchronous use is the disable condition of their
// assertions) and report the configuration-word and TID bits they do not
// need; see the opening comments of alu_unit and eldst_unit.
module dmt_cgra_core
  import dmt_pkg::*;
#(
  parameter int unsigned N_ALU  = 32,
  parameter int unsigned N_CTRL = 16,
  parameter int unsigned N_LDST = 32,
  parameter int unsigned N_FPU  = 32,
  parameter int unsigned N_SCU  = 12,
  parameter int unsigned N_SJU  = 16,
  parameter int unsigned DEPTH  = 16,
  // derived
  parameter int unsigned N_EXT  = N_FPU + N_SCU + N_SJU,
  parameter int unsigned N_INT  = N_ALU + N_CTRL + N_LDST
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_we,
  input  logic                      cfg_is_route,
  input  logic [9:0]                cfg_idx,
  input  unit_cfg_t                 cfg_unit,
  input  route_t                    cfg_route,
  // kernel control
  input  logic                      start,
  input  tid_t                      n_threads,
  output logic                      busy,
  // L1 ports of the LDST units
  output logic   [N_LDST-1:0]       mem_req_valid,
  input  logic   [N_LDST-1:0]       mem_req_ready,
  output logic   [N_LDST-1:0]       mem_req_we,
  output data_t  [N_LDST-1:0]       mem_req_addr,
  output data_t  [N_LDST-1:0]       mem_req_wdata,
  output tid_t   [N_LDST-1:0]       mem_req_tid,
  input  logic   [N_LDST-1:0]       mem_rsp_valid,
  input  tid_t   [N_LDST-1:0]       mem_rsp_tid,
  input  data_t  [N_LDST-1:0]       mem_rsp_data,
  // units outside this module (FPU, SCU, SJU): their operand inputs ...
  output logic   [3*N_EXT-1:0]      ext_in_valid,
  output token_t [3*N_EXT-1:0]      ext_in_tok,
  input  logic   [3*N_EXT-1:0]      ext_in_ready,
  output logic   [3*N_EXT-1:0]      ext_in_take,
  // ... and their result outputs
  input  logic   [N_EXT-1:0]        ext_out_valid,
  input  token_t [N_EXT-1:0]        ext_out_tok,
  output logic   [N_EXT-1:0]        ext_out_ready
);

  localparam int unsigned N_UNITS = N_INT + N_EXT;
  localparam int unsigned N_SRC   = N_UNITS + 1;
  localparam int unsigned N_SNK   = NOPS * N_UNITS;
  localparam int unsigned CTRL0   = N_ALU;
  localparam int unsigned LDST0   = N_ALU + N_CTRL;
  localparam int unsigned INJ     = N_UNITS;

  // ---------------- configuration registers ----------------
  unit_cfg_t [N_INT-1:0] ucfg_q;
  route_t    [N_SNK-1:0] route_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < N_INT; u++) ucfg_q[u]  <= '0;
      for (int k = 0; k < N_SNK; k++) route_q[k] <= '0;
    end else if (cfg_we) begin
      if (cfg_is_route) begin
        if (int'(cfg_idx) < N_SNK) route_q[cfg_idx] <= cfg_route;
      end else begin
        if (int'(cfg_idx) < N_INT) ucfg_q[cfg_idx] <= cfg_unit;
      end
    end
  end

  // thread count of the running kernel, for the elevator nodes
  tid_t nthr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     nthr_q <= '0;
    else if (start) nthr_q <= n_threads;
  end

  // ---------------- network ----------------
  logic   [N_SRC-1:0] src_valid, src_ready;
  token_t [N_SRC-1:0] src_tok;
  logic   [N_SNK-1:0] snk_valid, snk_ready, snk_take;
  token_t [N_SNK-1:0] snk_tok;

  static_noc #(.N_SRC(N_SRC), .N_SNK(N_SNK)) u_noc (
    .route    (route_q),
    .src_valid, .src_tok, .src_ready,
    .snk_valid, .snk_tok, .snk_ready, .snk_take
  );

  // ---------------- thread injector ----------------
  thread_injector u_inj (
    .clk, .rst_n, .start, .n_threads, .busy,
    .out_valid(src_valid[INJ]),
    .out_tok  (src_tok[INJ]),
    .out_ready(src_ready[INJ])
  );

  // ---------------- compute units ----------------
  for (genvar u = 0; u < N_ALU; u++) begin : g_alu
    alu_unit #(.DEPTH(DEPTH)) u_alu (
      .clk, .rst_n, .clear(start), .cfg(ucfg_q[u]),
      .in_valid (snk_valid[NOPS*u +: NOPS]),
      .in_tok   (snk_tok  [NOPS*u +: NOPS]),
      .in_ready (snk_ready[NOPS*u +: NOPS]),
      .in_take  (snk_take [NOPS*u +: NOPS]),
      .out_valid(src_valid[u]),
      .out_tok  (src_tok[u]),
      .out_ready(src_ready[u])
    );
  end

  // ---------------- control / elevator units ----------------
  for (genvar c = 0; c < N_CTRL; c++) begin : g_ctrl
    localparam int unsigned U = CTRL0 + c;
    control_unit #(.DEPTH(DEPTH)) u_ctrl (
      .clk, .rst_n, .clear(start), .cfg(ucfg_q[U]), .n_thr(nthr_q),
      .in_valid (snk_valid[NOPS*U +: NOPS]),
      .in_tok   (snk_tok  [NOPS*U +: NOPS]),
      .in_ready (snk_ready[NOPS*U +: NOPS]),
      .in_take  (snk_take [NOPS*U +: NOPS]),
      .out_valid(src_valid[U]),
      .out_tok  (src_tok[U]),
      .out_ready(src_ready[U])
    );
  end

  // ---------------- eLDST units ----------------
  for (genvar l = 0; l < N_LDST; l++) begin : g_ldst
    localparam int unsigned U = LDST0 + l;
    eldst_unit #(.DEPTH(DEPTH)) u_ldst (
      .clk, .rst_n, .clear(start), .cfg(ucfg_q[U]),
      .in_valid (snk_valid[NOPS*U +: NOPS]),
      .in_tok   (snk_tok  [NOPS*U +: NOPS]),
      .in_ready (snk_ready[NOPS*U +: NOPS]),
      .in_take  (snk_take [NOPS*U +: NOPS]),
      .out_valid(src_valid[U]),
      .out_tok  (src_tok[U]),
      .out_ready(src_ready[U]),
      .req_valid(mem_req_valid[l]),
      .req_ready(mem_req_ready[l]),
      .req_we   (mem_req_we[l]),
      .req_addr (mem_req_addr[l]),
      .req_wdata(mem_req_wdata[l]),
      .req_tid  (mem_req_tid[l]),
      .rsp_valid(mem_rsp_valid[l]),
      .rsp_tid  (mem_rsp_tid[l]),
      .rsp_data (mem_rsp_data[l])
    );
  end

  // ---------------- external units ----------------
  assign ext_in_valid = snk_valid[N_SNK-1 -: NOPS*N_EXT];
  assign ext_in_tok   = snk_tok  [N_SNK-1 -: NOPS*N_EXT];
  assign ext_in_take  = snk_take [N_SNK-1 -: NOPS*N_EXT];
  assign snk_ready[N_SNK-1 -: NOPS*N_EXT] = ext_in_ready;

  assign src_valid[N_INT +: N_EXT] = ext_out_valid;
  assign src_tok  [N_INT +: N_EXT] = ext_out_tok;
  assign ext_out_ready = src_ready[N_INT +: N_EXT];

endmodule
