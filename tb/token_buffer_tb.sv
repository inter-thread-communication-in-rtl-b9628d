// token_buffer_tb: self-checking test of the tagged-token matching buffer.
//
// Phase 1 (strict, three operands): operand tokens of 64 threads arrive on the
// three inputs, each input in its own locally shuffled order and with random
// gaps, while the fire output sees random back-pressure. Every thread must
// fire exactly once with its own three operands (data = hash of TID and
// operand number). Phase 2 (immediate): operand 3 comes from the immediate.
// Phase 3 (select): 8 threads with a non-zero selector get operands 1 and 2
// only and must all fire before any operand 3 is sent; operand 3 is then
// sent and must be absorbed, which is shown by 8 more threads mapping to the
// same entries firing afterwards.
module token_buffer_tb;
  import dmt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  always #5 clk = ~clk;

  logic [NOPS-1:0]  use_mask, imm_mask;
  data_t            imm;
  logic             sel_mode;
  logic   [NOPS-1:0] in_valid, in_ready, in_take;
  token_t [NOPS-1:0] in_tok;
  logic             fire_valid, fire_ready;
  tid_t             fire_tid;
  data_t [NOPS-1:0] fire_ops;

  token_buffer #(.DEPTH(16)) dut (
    .clk, .rst_n, .clear, .use_mask, .imm_mask, .imm, .sel_mode,
    .in_valid, .in_tok, .in_ready, .in_take,
    .fire_valid, .fire_tid, .fire_ops, .fire_ready
  );

  assign in_take = in_valid & in_ready;

  int checks = 0, failures = 0;
  int fired [int];
  int bp_pct = 0;

  function automatic data_t opval(int t, int k);
    return data_t'((t + 1) * 1000 + k * 7 + 3);
  endfunction

  always @(negedge clk) fire_ready <= ($urandom_range(99) >= bp_pct);

  always @(posedge clk) begin
    if (rst_n && fire_valid && fire_ready) begin
      int t;
      t = int'(fire_tid);
      checks++;
      if (fired.exists(t)) begin
        failures++; $display("FAIL tid %0d fired twice", t);
      end
      fired[t] = 1;
      for (int k = 0; k < NOPS; k++) begin
        data_t want;
        if (imm_mask[k]) want = imm;
        else if (!use_mask[k]) continue;
        else want = opval(t, k);
        if (sel_mode && k > 0) begin
          if ((fire_ops[0] != '0) != (k == 1)) continue;
        end
        if (fire_ops[k] != want) begin
          failures++;
          $display("FAIL tid %0d op%0d got %h want %h", t, k, fire_ops[k], want);
        end
      end
    end
  end

  // send tokens of tids [lo,hi) on port k, locally shuffled (windows of 4)
  task automatic send_port(int k, int lo, int hi, int gap);
    int order[$];
    for (int t = lo; t < hi; t++) order.push_back(t);
    for (int i = 0; i + 3 < order.size(); i += 4) begin
      int a, b, tmp;
      a = i + $urandom_range(3); b = i + $urandom_range(3);
      tmp = order[a]; order[a] = order[b]; order[b] = tmp;
    end
    foreach (order[i]) begin
      while ($urandom_range(99) < gap) @(negedge clk);
      in_valid[k] = 1'b1;
      in_tok[k]   = '{tid: tid_t'(order[i]), data: opval(order[i], k)};
      @(posedge clk);
      while (!in_ready[k]) @(posedge clk);
      @(negedge clk);
      in_valid[k] = 1'b0;
    end
  endtask

  task automatic wait_fired(int n);
    int guard = 0;
    while (fired.size() < n && guard < 5000) begin
      @(negedge clk); guard++;
    end
    checks++;
    if (fired.size() != n) begin
      failures++; $display("FAIL expected %0d fires, saw %0d", n, fired.size());
    end
  endtask

  initial begin
    in_valid = '0; in_tok = '0; imm = '0; imm_mask = '0; sel_mode = 1'b0;
    use_mask = 3'b111;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // phase 1: strict, 3 operands
    bp_pct = 30;
    fork
      send_port(0, 0, 64, 30);
      send_port(1, 0, 64, 30);
      send_port(2, 0, 64, 30);
    join
    wait_fired(64);

    // phase 2: operand 3 from the immediate
    fired.delete();
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    imm_mask = 3'b100; imm = 32'h5A5A_0001;
    fork
      send_port(0, 0, 40, 20);
      send_port(1, 0, 40, 20);
    join
    wait_fired(40);

    // phase 3: select; selector non-zero for every thread (opval never 0)
    fired.delete();
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    imm_mask = 3'b000; sel_mode = 1'b1; bp_pct = 0;
    fork
      send_port(0, 0, 8, 0);
      send_port(1, 0, 8, 0);
    join
    wait_fired(8);            // fired without operand 3
    send_port(2, 0, 8, 0);    // late unselected tokens are absorbed
    fork
      send_port(0, 16, 24, 0);
      send_port(1, 16, 24, 0);
      send_port(2, 16, 24, 0);
    join
    wait_fired(16);

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
