// static_noc: statically routed token network of the grid.
//
// What it does: connects unit outputs (sources) to unit operand inputs
// (sinks) according to a route table written when a kernel is loaded. Each
// sink names one source; a source may feed any number of sinks (fan-out of a
// dataflow edge). The table does not change while a kernel runs.
//
// How: each sink sees its source's valid and token through a multiplexer.
// A source's token is delivered to all its sinks in the same cycle: the
// source's ready is the AND of the readies of the enabled sinks that name it
// (1 when none does, so an unused result is dropped), and each sink is told
// through take that the transfer happened. Sinks must not derive ready from
// a downstream ready, which keeps the network free of combinational loops.
//
// Interface: src_valid/src_tok/src_ready per source; snk_valid/snk_tok/
// snk_ready/snk_take per sink; route per sink (enable, source index).
// Timing: combinational, zero cycles.
//
// Paper: the MT-CGRA core is a grid of functional units joined by a
// statically routed network on chip whose routing is fixed at compile time;
// each unit sends its result back to the grid through a crossbar switch.
// Modelling the whole network as one full crossbar (any source to any sink in
// one hop) is this design's simplification; the paper does not give the
// topology, hop latency or switch sizes.
module static_noc
  import dmt_pkg::*;
#(
  parameter int unsigned N_SRC = 141,
  parameter int unsigned N_SNK = 420
) (
  input  route_t [N_SNK-1:0] route,
  input  logic   [N_SRC-1:0] src_valid,
  input  token_t [N_SRC-1:0] src_tok,
  output logic   [N_SRC-1:0] src_ready,
  output logic   [N_SNK-1:0] snk_valid,
  output token_t [N_SNK-1:0] snk_tok,
  input  logic   [N_SNK-1:0] snk_ready,
  output logic   [N_SNK-1:0] snk_take
);

  always_comb begin
    src_ready = '1;
    for (int k = 0; k < N_SNK; k++) begin
      if (route[k].en && int'(route[k].src) < N_SRC && !snk_ready[k])
        src_ready[route[k].src] = 1'b0;
    end
  end

  always_comb begin
    for (int k = 0; k < N_SNK; k++) begin
      if (route[k].en && int'(route[k].src) < N_SRC) begin
        snk_valid[k] = src_valid[route[k].src];
        snk_tok[k]   = src_tok[route[k].src];
      end else begin
        snk_valid[k] = 1'b0;
        snk_tok[k]   = '0;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N_SNK; k++)
      snk_take[k] = route[k].en && int'(route[k].src) < N_SRC &&
                    src_valid[route[k].src] && src_ready[route[k].src];
  end

endmodule
