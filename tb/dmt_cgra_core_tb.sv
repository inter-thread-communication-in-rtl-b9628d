// dmt_cgra_core_tb: end-to-end test of the dMT-CGRA core at its default size.
//
// The core is configured, one kernel after another, with the dataflow graphs
// of the paper's examples, and each kernel's stores are checked against a
// reference computed here:
//   1. prefix sum      out[t] = in[0] + ... + in[t]; an elevator node with
//                      delta 1 carries the running sum from thread t-1 to t.
//   2. matrix multiply C = A x B (3x3, one thread per element of C); rows of
//                      A and columns of B are loaded by one thread each and
//                      forwarded by eLDST units (window 3/delta 1 and
//                      window 9/delta 3). The number of loads is checked.
//   3. 1D convolution  out[t] = k0*in[t-1] + k1*in[t] + k2*in[t+1] within
//                      rows of 16, zero outside: elevators with delta +1
//                      and -1 and a bounded window.
//   4. cascade         out[t] = in[t-18] or a constant: two chained
//                      elevators, delta 16 then 2.
//   5. elevator loop   fromThreadOrMem with delta 18 > buffer size: a
//                      predicated load, two select units and a chain of two
//                      elevators closed into a loop; every value is loaded
//                      once and used by two threads.
// A behavioural memory serves the 32 LDST ports with random back-pressure
// and random, out-of-order latency. Mechanism counters (elevator forwards,
// constants injected, eLDST forwards, loads, selects, input stalls, memory
// back-pressure) must each be non-zero by the end.
module dmt_cgra_core_tb;
  import dmt_pkg::*;

  localparam int N_ALU = 32, N_CTRL = 16, N_LDST = 32;
  localparam int N_EXT = 60, N_INT = N_ALU + N_CTRL + N_LDST;
  localparam int C0 = N_ALU, L0 = N_ALU + N_CTRL, INJ = N_INT + N_EXT;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      cfg_we, cfg_is_route;
  logic [9:0] cfg_idx;
  unit_cfg_t cfg_unit;
  route_t    cfg_route;
  logic      start, busy;
  tid_t      n_threads;

  logic   [N_LDST-1:0] mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  data_t  [N_LDST-1:0] mem_req_addr, mem_req_wdata, mem_rsp_data;
  tid_t   [N_LDST-1:0] mem_req_tid, mem_rsp_tid;
  logic   [3*N_EXT-1:0] ext_in_valid, ext_in_ready, ext_in_take;
  token_t [3*N_EXT-1:0] ext_in_tok;
  logic   [N_EXT-1:0]   ext_out_valid, ext_out_ready;
  token_t [N_EXT-1:0]   ext_out_tok;

  dmt_cgra_core dut (.*);

  assign ext_in_ready  = '0;
  assign ext_out_valid = '0;
  assign ext_out_tok   = '0;

  // ---------------- behavioural memory (word addressed) ----------------
  data_t mem [0:4095];
  typedef struct { longint due; tid_t tid; data_t data; } pend_t;
  pend_t pend [N_LDST][$];
  longint cyc = 0;
  int n_loads = 0, n_stores = 0, n_mem_bp = 0;

  always @(negedge clk)
    for (int l = 0; l < N_LDST; l++) mem_req_ready[l] <= ($urandom_range(99) < 75);

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int l = 0; l < N_LDST; l++) begin
        if (mem_req_valid[l] && !mem_req_ready[l]) n_mem_bp++;
        if (mem_req_valid[l] && mem_req_ready[l]) begin
          if (mem_req_we[l]) begin
            mem[mem_req_addr[l][11:0]] = mem_req_wdata[l]; n_stores++;
          end else begin
            pend[l].push_back('{due: cyc + longint'($urandom_range(10, 1)), tid: mem_req_tid[l],
                                data: mem[mem_req_addr[l][11:0]]});
            n_loads++;
          end
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int l = 0; l < N_LDST; l++) begin
      int pick;
      pick = -1;
      foreach (pend[l][i]) if (pick < 0 && pend[l][i].due <= cyc && $urandom_range(2) != 0) pick = i;
      mem_rsp_valid[l] = 1'b0;
      mem_rsp_tid[l]   = '0;
      mem_rsp_data[l]  = '0;
      if (pick >= 0) begin
        mem_rsp_valid[l] = 1'b1;
        mem_rsp_tid[l]   = pend[l][pick].tid;
        mem_rsp_data[l]  = pend[l][pick].data;
        pend[l].delete(pick);
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_elev_fwd = 0, n_elev_const = 0, n_eldst_fwd = 0, n_sel = 0, n_stall = 0;
  int n_neg_delta = 0;

  for (genvar c = 0; c < N_CTRL; c++) begin : g_cnt_ctrl
    always @(posedge clk) if (rst_n) begin
      if (dut.g_ctrl[c].u_ctrl.u_elev.acc && dut.g_ctrl[c].u_ctrl.u_elev.prod) begin
        n_elev_fwd++;
        if ($signed(dut.g_ctrl[c].u_ctrl.u_elev.delta) < 0) n_neg_delta++;
      end
      if (dut.g_ctrl[c].u_ctrl.u_elev.pop && dut.g_ctrl[c].u_ctrl.u_elev.out_const) n_elev_const++;
      if (dut.g_ctrl[c].u_ctrl.out_valid && dut.g_ctrl[c].u_ctrl.out_ready &&
          dut.g_ctrl[c].u_ctrl.cfg.op == OP_SEL) n_sel++;
    end
  end
  for (genvar l = 0; l < N_LDST; l++) begin : g_cnt_ldst
    always @(posedge clk) if (rst_n)
      if (dut.g_ldst[l].u_ldst.pop && dut.g_ldst[l].u_ldst.fwd) n_eldst_fwd++;
  end
  always @(posedge clk) if (rst_n) n_stall += $countones(dut.snk_valid & ~dut.snk_ready);

  // ---------------- configuration helpers ----------------
  int checks = 0, failures = 0;

  task automatic wr_unit(int u, opcode_t op, logic [2:0] immm = 3'b000, data_t immv = '0,
                         int d = 0, int w = 0, data_t c = '0);
    @(negedge clk);
    cfg_we = 1'b1; cfg_is_route = 1'b0; cfg_idx = 10'(u);
    cfg_unit = '{op: op, imm_mask: immm, imm: immv, delta: delta_t'(d), window: tid_t'(w), cval: c};
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // operand k (0..2) of unit u comes from source s
  task automatic wr_route(int u, int k, int s);
    @(negedge clk);
    cfg_we = 1'b1; cfg_is_route = 1'b1; cfg_idx = 10'(3 * u + k);
    cfg_route = '{en: 1'b1, src: 8'(s)};
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic clear_config();
    for (int u = 0; u < N_INT; u++) wr_unit(u, OP_NOP);
    for (int k = 0; k < 3 * (N_INT + N_EXT); k++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_is_route = 1'b1; cfg_idx = 10'(k); cfg_route = '0;
    end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic run_kernel(string name, int n, int n_st);
    int guard = 0, st0;
    st0 = n_stores;
    @(negedge clk);
    start = 1'b1; n_threads = tid_t'(n);
    @(negedge clk);
    start = 1'b0;
    while ((n_stores - st0) < n_st && guard < 20000) begin @(negedge clk); guard++; end
    repeat (20) @(negedge clk);
    checks++;
    if ((n_stores - st0) != n_st) begin
      failures++;
      $display("FAIL %s: %0d stores, want %0d", name, n_stores - st0, n_st);
    end else
      $display("%s: %0d threads done in %0d cycles", name, n, guard);
  endtask

  task automatic check_mem(string name, int addr, data_t want);
    checks++;
    if (mem[addr] !== want) begin
      failures++;
      $display("FAIL %s: mem[%0d] = %h, want %h", name, addr, mem[addr], want);
    end
  endtask

  localparam int IN = 0, OUT = 1024, AB = 2048, BB = 2304, CB = 2560;

  initial begin
    int ld0;
    cfg_we = 1'b0; cfg_is_route = 1'b0; cfg_idx = '0; cfg_unit = '0; cfg_route = '0;
    start = 1'b0; n_threads = '0;
    mem_rsp_valid = '0; mem_rsp_tid = '0; mem_rsp_data = '0;
    for (int i = 0; i < 4096; i++) mem[i] = data_t'((i * 7 + 3) % 101);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. prefix sum (scan) ----
    begin
      int n = 100;
      data_t acc;
      wr_unit(0, OP_ADD, 3'b010, data_t'(IN));        // addr_in = tid + IN
      wr_route(0, 0, INJ);
      wr_unit(L0 + 0, OP_LD);                          // mem_val = in[tid]
      wr_route(L0 + 0, 0, 0);
      wr_unit(1, OP_ADD);                              // sum = mem_val + from(t-1)
      wr_route(1, 0, L0 + 0);
      wr_route(1, 1, C0 + 0);
      wr_unit(C0 + 0, OP_ELEV, 3'b000, '0, 1, 0, 32'd0);
      wr_route(C0 + 0, 0, 1);
      wr_unit(2, OP_ADD, 3'b010, data_t'(OUT));       // addr_out = tid + OUT
      wr_route(2, 0, INJ);
      wr_unit(L0 + 1, OP_ST);                          // prefixSum[tid] = sum
      wr_route(L0 + 1, 0, 2);
      wr_route(L0 + 1, 1, 1);
      run_kernel("prefix sum", n, n);
      acc = 0;
      for (int t = 0; t < n; t++) begin
        acc += mem[IN + t];
        check_mem("prefix sum", OUT + t, acc);
      end
    end

    // ---- 2. 3x3 matrix multiplication with fromThreadOrMem ----
    clear_config();
    begin
      // thread t computes C[r][c], r = t / 3, c = t % 3
      wr_unit(0, OP_DIVU, 3'b010, 32'd3); wr_route(0, 0, INJ);          // r
      wr_unit(1, OP_REMU, 3'b010, 32'd3); wr_route(1, 0, INJ);          // c
      wr_unit(2, OP_MUL,  3'b010, 32'd3); wr_route(2, 0, 0);            // 3r
      wr_unit(C0 + 0, OP_EQ, 3'b010, 32'd0); wr_route(C0 + 0, 0, 1);   // En_A = (c == 0)
      wr_unit(C0 + 1, OP_EQ, 3'b010, 32'd0); wr_route(C0 + 1, 0, 0);   // En_B = (r == 0)
      for (int i = 0; i < 3; i++) begin
        wr_unit(3 + i, OP_ADD, 3'b010, data_t'(AB + i));     wr_route(3 + i, 0, 2);   // &A[r][i]
        wr_unit(6 + i, OP_ADD, 3'b010, data_t'(BB + 3 * i)); wr_route(6 + i, 0, 1);   // &B[i][c]
        wr_unit(L0 + i, OP_ELD, 3'b000, '0, 1, 3);          // A: window 3, delta 1
        wr_route(L0 + i, 0, 3 + i); wr_route(L0 + i, 1, C0 + 0);
        wr_unit(L0 + 3 + i, OP_ELD, 3'b000, '0, 3, 9);      // B: window 9, delta 3
        wr_route(L0 + 3 + i, 0, 6 + i); wr_route(L0 + 3 + i, 1, C0 + 1);
      end
      wr_unit(9, OP_MUL); wr_route(9, 0, L0 + 0); wr_route(9, 1, L0 + 3);
      wr_unit(10, OP_MAC); wr_route(10, 0, L0 + 1); wr_route(10, 1, L0 + 4); wr_route(10, 2, 9);
      wr_unit(11, OP_MAC); wr_route(11, 0, L0 + 2); wr_route(11, 1, L0 + 5); wr_route(11, 2, 10);
      wr_unit(12, OP_ADD, 3'b010, data_t'(CB)); wr_route(12, 0, INJ);
      wr_unit(L0 + 6, OP_ST); wr_route(L0 + 6, 0, 12); wr_route(L0 + 6, 1, 11);
      ld0 = n_loads;
      run_kernel("matrix multiply", 9, 9);
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          data_t s;
          s = 0;
          for (int i = 0; i < 3; i++) s += mem[AB + 3 * r + i] * mem[BB + 3 * i + c];
          check_mem("matrix multiply", CB + 3 * r + c, s);
        end
      checks++;
      if (n_loads - ld0 != 18) begin
        failures++; $display("FAIL matrix multiply: %0d loads, want 18", n_loads - ld0);
      end
    end

    // ---- 3. 1D convolution, rows of 16, kernel (2, 3, 5) ----
    clear_config();
    begin
      int n = 64, w = 16;
      wr_unit(0, OP_ADD, 3'b010, data_t'(IN)); wr_route(0, 0, INJ);
      wr_unit(L0 + 0, OP_LD); wr_route(L0 + 0, 0, 0);
      wr_unit(C0 + 0, OP_ELEV, 3'b000, '0, 1, w, 32'd0);  wr_route(C0 + 0, 0, L0 + 0); // left
      wr_unit(C0 + 1, OP_ELEV, 3'b000, '0, -1, w, 32'd0); wr_route(C0 + 1, 0, L0 + 0); // right
      wr_unit(1, OP_MUL, 3'b010, 32'd2); wr_route(1, 0, C0 + 0);
      wr_unit(2, OP_MAC, 3'b010, 32'd3); wr_route(2, 0, L0 + 0); wr_route(2, 2, 1);
      wr_unit(3, OP_MAC, 3'b010, 32'd5); wr_route(3, 0, C0 + 1); wr_route(3, 2, 2);
      wr_unit(4, OP_ADD, 3'b010, data_t'(OUT)); wr_route(4, 0, INJ);
      wr_unit(L0 + 1, OP_ST); wr_route(L0 + 1, 0, 4); wr_route(L0 + 1, 1, 3);
      run_kernel("convolution", n, n);
      for (int t = 0; t < n; t++) begin
        data_t l, r;
        l = (t % w == 0)     ? 0 : mem[IN + t - 1];
        r = (t % w == w - 1) ? 0 : mem[IN + t + 1];
        check_mem("convolution", OUT + t, 2 * l + 3 * mem[IN + t] + 5 * r);
      end
    end

    // ---- 4. cascade: delta 18 = 16 + 2 ----
    clear_config();
    begin
      int n = 80;
      wr_unit(0, OP_ADD, 3'b010, data_t'(IN)); wr_route(0, 0, INJ);
      wr_unit(L0 + 0, OP_LD); wr_route(L0 + 0, 0, 0);
      wr_unit(C0 + 0, OP_ELEV, 3'b000, '0, 16, 0, 32'hC0); wr_route(C0 + 0, 0, L0 + 0);
      wr_unit(C0 + 1, OP_ELEV, 3'b000, '0, 2, 0, 32'hC0);  wr_route(C0 + 1, 0, C0 + 0);
      wr_unit(1, OP_ADD, 3'b010, data_t'(OUT + 512)); wr_route(1, 0, INJ);
      wr_unit(L0 + 1, OP_ST); wr_route(L0 + 1, 0, 1); wr_route(L0 + 1, 1, C0 + 1);
      run_kernel("cascade", n, n);
      for (int t = 0; t < n; t++)
        check_mem("cascade", OUT + 512 + t, (t < 18) ? 32'hC0 : mem[IN + t - 18]);
    end

    // ---- 5. elevator loop: fromThreadOrMem with delta 18, window 36 ----
    clear_config();
    begin
      int n = 72;
      wr_unit(0, OP_ADD, 3'b010, data_t'(IN + 200)); wr_route(0, 0, INJ);   // address
      wr_unit(1, OP_REMU, 3'b010, 32'd36); wr_route(1, 0, INJ);
      wr_unit(C0 + 0, OP_LTU, 3'b010, 32'd18); wr_route(C0 + 0, 0, 1);      // P
      wr_unit(L0 + 0, OP_PLD); wr_route(L0 + 0, 0, 0); wr_route(L0 + 0, 1, C0 + 0);
      wr_unit(C0 + 1, OP_SEL);                                              // first MUX
      wr_route(C0 + 1, 0, C0 + 0); wr_route(C0 + 1, 1, L0 + 0); wr_route(C0 + 1, 2, C0 + 4);
      wr_unit(C0 + 2, OP_ELEV, 3'b000, '0, 16, 36, 32'd0); wr_route(C0 + 2, 0, C0 + 1);
      wr_unit(C0 + 3, OP_ELEV, 3'b000, '0, 2, 36, 32'd0);  wr_route(C0 + 3, 0, C0 + 2);
      wr_unit(C0 + 4, OP_SEL);                                              // second MUX
      wr_route(C0 + 4, 0, C0 + 0); wr_route(C0 + 4, 1, L0 + 0); wr_route(C0 + 4, 2, C0 + 3);
      wr_unit(2, OP_ADD, 3'b010, data_t'(OUT + 768)); wr_route(2, 0, INJ);
      wr_unit(L0 + 1, OP_ST); wr_route(L0 + 1, 0, 2); wr_route(L0 + 1, 1, C0 + 4);
      ld0 = n_loads;
      run_kernel("elevator loop", n, n);
      for (int t = 0; t < n; t++)
        check_mem("elevator loop", OUT + 768 + t, mem[IN + 200 + (t / 36) * 36 + (t % 36) % 18]);
      checks++;
      if (n_loads - ld0 != n / 2) begin
        failures++; $display("FAIL elevator loop: %0d loads, want %0d", n_loads - ld0, n / 2);
      end
    end

    // ---- mechanisms seen ----
    $display("elevator forwards %0d (negative delta %0d), constants %0d, eLDST forwards %0d",
             n_elev_fwd, n_neg_delta, n_elev_const, n_eldst_fwd);
    $display("loads %0d, stores %0d, selects %0d, input stalls %0d, memory back-pressure %0d",
             n_loads, n_stores, n_sel, n_stall, n_mem_bp);
    checks++; if (n_elev_fwd   == 0) begin failures++; $display("FAIL no elevator forward");  end
    checks++; if (n_neg_delta  == 0) begin failures++; $display("FAIL no negative delta");    end
    checks++; if (n_elev_const == 0) begin failures++; $display("FAIL no constant injected"); end
    checks++; if (n_eldst_fwd  == 0) begin failures++; $display("FAIL no eLDST forward");     end
    checks++; if (n_sel        == 0) begin failures++; $display("FAIL no select");            end
    checks++; if (n_stall      == 0) begin failures++; $display("FAIL no input stall");       end
    checks++; if (n_mem_bp     == 0) begin failures++; $display("FAIL no memory back-pressure"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
