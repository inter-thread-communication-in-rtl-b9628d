// static_noc_tb: self-checking test of the static routing network.
//
// A small network (6 sources, 8 sinks) with a random route table, random
// source valids/tokens and random sink readies, checked combinationally
// against a reference each cycle: every enabled sink sees its source's
// token, a source is ready only if all its enabled sinks are, a source with
// no sink is always ready, and a sink is told "take" exactly when its source
// transfers. Also checks a disabled sink never takes.
module static_noc_tb;
  import dmt_pkg::*;

  localparam int NS = 6, NK = 8;

  route_t [NK-1:0] route;
  logic   [NS-1:0] src_valid, src_ready;
  token_t [NS-1:0] src_tok;
  logic   [NK-1:0] snk_valid, snk_ready, snk_take;
  token_t [NK-1:0] snk_tok;

  static_noc #(.N_SRC(NS), .N_SNK(NK)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int it = 0; it < 2000; it++) begin
      logic [NS-1:0] exp_rdy;
      for (int k = 0; k < NK; k++) begin
        route[k].en  = ($urandom_range(3) != 0);
        route[k].src = 8'($urandom_range(NS - 1));
        snk_ready[k] = ($urandom_range(3) != 0);
      end
      for (int s = 0; s < NS; s++) begin
        src_valid[s] = $urandom_range(1);
        src_tok[s]   = '{tid: tid_t'($urandom), data: data_t'($urandom)};
      end
      #1;
      exp_rdy = '1;
      for (int k = 0; k < NK; k++)
        if (route[k].en && !snk_ready[k]) exp_rdy[route[k].src] = 1'b0;
      checks++;
      if (src_ready != exp_rdy) begin
        failures++; $display("FAIL src_ready %b want %b", src_ready, exp_rdy);
      end
      for (int k = 0; k < NK; k++) begin
        logic ev, et;
        ev = route[k].en && src_valid[route[k].src];
        et = ev && exp_rdy[route[k].src];
        checks++;
        if (snk_valid[k] != ev || snk_take[k] != et ||
            (route[k].en && snk_tok[k] != src_tok[route[k].src])) begin
          failures++; $display("FAIL sink %0d", k);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
