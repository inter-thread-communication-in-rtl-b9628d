// eldst_unit_tb: self-checking test of the enhanced load/store unit.
//
// A behavioural memory accepts requests with random back-pressure and
// answers loads after a random 1..8 cycles, out of order. Cases:
//   LD   32 threads load address 64+tid; data and TID order are checked.
//   ST   16 threads store; memory contents and the store tokens are checked.
//   ELD  fromThreadOrMem patterns: window 3 / delta 1 (a row of A shared by
//        the threads of one row of C), window 9 / delta 3 (a column of B),
//        window 64 / delta 16 (delta equal to the buffer size). Only the
//        enabled threads may reach memory; every thread must get the value
//        its window's loading thread read, and the number of memory loads
//        must equal the number of enabled threads (the paper's reuse of
//        window/delta per load).
//   PLD  predicated load: a thread with predicate 0 gets a zero token and
//        makes no memory access.
module eldst_unit_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  unit_cfg_t         cfg;
  logic   [NOPS-1:0] in_valid, in_ready, in_take;
  token_t [NOPS-1:0] in_tok;
  logic              out_valid, out_ready;
  token_t            out_tok;
  logic              req_valid, req_ready, req_we;
  data_t             req_addr, req_wdata;
  tid_t              req_tid;
  logic              rsp_valid;
  tid_t              rsp_tid;
  data_t             rsp_data;

  eldst_unit #(.DEPTH(16)) dut (
    .clk, .rst_n, .clear, .cfg,
    .in_valid, .in_tok, .in_ready, .in_take,
    .out_valid, .out_tok, .out_ready,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .req_tid,
    .rsp_valid, .rsp_tid, .rsp_data
  );
  assign in_take = in_valid & in_ready;

  // ---------------- behavioural memory ----------------
  data_t mem [0:1023];
  typedef struct { longint due; tid_t tid; data_t data; } pend_t;
  pend_t pend [$];
  longint cyc = 0;
  int n_loads = 0, n_stores = 0;

  always @(negedge clk) req_ready <= ($urandom_range(99) < 70);

  always @(posedge clk) begin
    cyc++;
    if (rst_n && req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr[9:0]] = req_wdata; n_stores++;
      end else begin
        pend.push_back('{due: cyc + longint'($urandom_range(8, 1)), tid: req_tid,
                         data: mem[req_addr[9:0]]});
        n_loads++;
      end
    end
  end

  always @(negedge clk) begin
    int pick;
    pick = -1;
    foreach (pend[i]) if (pick < 0 && pend[i].due <= cyc && $urandom_range(1) == 1) pick = i;
    rsp_valid = 1'b0;
    if (pick >= 0) begin
      rsp_valid = 1'b1; rsp_tid = pend[pick].tid; rsp_data = pend[pick].data;
      pend.delete(pick);
    end
  end

  // ---------------- checker ----------------
  int checks = 0, failures = 0, n_out = 0;
  data_t exp_out [int];
  int bp_pct = 0;

  always @(negedge clk) out_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_tok.tid != tid_t'(n_out) || out_tok.data != exp_out[n_out]) begin
        failures++;
        $display("FAIL op %s: got tid %0d data %h, want tid %0d data %h", cfg.op.name(),
                 out_tok.tid, out_tok.data, n_out, exp_out[n_out]);
      end
      n_out++;
    end
  end

  task automatic send(int n, data_t a [int], data_t b [int], logic [2:0] use_m);
    for (int t = 0; t < n; t++) begin
      logic [2:0] need;
      need = use_m;
      in_tok[0] = '{tid: tid_t'(t), data: a[t]};
      in_tok[1] = '{tid: tid_t'(t), data: b[t]};
      in_valid  = need;
      do begin
        @(posedge clk);
        for (int k = 0; k < 3; k++) if (in_take[k]) need[k] = 1'b0;
        @(negedge clk);
        in_valid = in_valid & need;
      end while (need != '0);
    end
  endtask

  task automatic start(opcode_t op, int d, int w);
    @(negedge clk);
    cfg = '0; cfg.op = op; cfg.delta = delta_t'(d); cfg.window = tid_t'(w);
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    n_out = 0; n_loads = 0; n_stores = 0; exp_out.delete();
  endtask

  task automatic finish_case(int n, int loads, int stores);
    int guard = 0;
    while (n_out < n && guard < 4000) begin @(negedge clk); guard++; end
    checks++;
    if (n_out != n || n_loads != loads || n_stores != stores) begin
      failures++;
      $display("FAIL op %s: %0d tokens (want %0d), %0d loads (want %0d), %0d stores (want %0d)",
               cfg.op.name(), n_out, n, n_loads, loads, n_stores, stores);
    end
  endtask

  // fromThreadOrMem with window w, delta d: thread t loads iff t%w < d
  task automatic eld_case(int d, int w, int n);
    data_t a [int], b [int];
    int en_cnt = 0;
    start(OP_ELD, d, w);
    for (int t = 0; t < n; t++) begin
      int src;
      src   = (t / w) * w + (t % w) % d;       // the thread that loads for t
      a[t]  = data_t'(200 + src);              // address (only used if enabled)
      b[t]  = data_t'((t % w) < d);
      if ((t % w) < d) en_cnt++;
      exp_out[t] = mem[200 + src];
    end
    send(n, a, b, 3'b011);
    finish_case(n, en_cnt, 0);
  endtask

  initial begin
    data_t a [int], b [int];
    cfg = '0; in_valid = '0; in_tok = '0; rsp_valid = 1'b0; rsp_tid = '0; rsp_data = '0;
    for (int i = 0; i < 1024; i++) mem[i] = data_t'(i * 32'h01000193 + 7);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bp_pct = 25;

    // plain loads
    start(OP_LD, 1, 0);
    for (int t = 0; t < 32; t++) begin a[t] = data_t'(64 + t); exp_out[t] = mem[64 + t]; end
    send(32, a, a, 3'b001);
    finish_case(32, 32, 0);

    // stores
    start(OP_ST, 1, 0);
    for (int t = 0; t < 16; t++) begin
      a[t] = data_t'(600 + t); b[t] = data_t'(32'hABC0_0000 + t); exp_out[t] = b[t];
    end
    send(16, a, b, 3'b011);
    finish_case(16, 0, 16);
    for (int t = 0; t < 16; t++) begin
      checks++;
      if (mem[600 + t] != b[t]) begin failures++; $display("FAIL store %0d", t); end
    end

    // fromThreadOrMem
    eld_case(1, 3, 27);
    eld_case(3, 9, 81);
    eld_case(16, 64, 128);
    eld_case(2, 8, 64);

    // predicated load: threads with predicate 0 get a 0 token, no access
    begin
      int en_cnt = 0;
      start(OP_PLD, 1, 0);
      for (int t = 0; t < 40; t++) begin
        a[t] = data_t'(300 + t); b[t] = data_t'(t % 3 != 1);
        exp_out[t] = (t % 3 != 1) ? mem[300 + t] : '0;
        if (t % 3 != 1) en_cnt++;
      end
      send(40, a, b, 3'b011);
      finish_case(40, en_cnt, 0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
