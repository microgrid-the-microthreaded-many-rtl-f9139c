// distribution_net: the bidirectional daisy chain that links each core to the
// previous and the next core.
//
// Core i sends to core i+1 on nxt_* and to core i-1 on prv_*; each direction
// of each neighbour pair is a dist_link of two cycles. The chain is open at
// both ends: core 0 has no previous core and core N-1 no next one, and a
// message offered there is never taken. The chain follows core numbers; the
// source lays it along a Moore curve on the die, which only changes where
// the cores sit, not who their neighbours are. A message from one core to a
// core k hops away therefore takes 2k cycles, and a round trip 4k cycles.
//
// Unused-signal lint notes: the chain is open at both ends, so the last
// core's forward output and the first core's backward output (and the
// matching ready inputs) go nowhere.
module distribution_net
  import mg_pkg::*;
#(
  parameter int unsigned N = NCORES_DEF
) (
  input  logic clk,
  input  logic rst_n,
  // towards the next core
  input  logic [N-1:0] nxt_valid,
  input  msg_t         nxt_msg      [N],
  output logic [N-1:0] nxt_ready,
  // towards the previous core
  input  logic [N-1:0] prv_valid,
  input  msg_t         prv_msg      [N],
  output logic [N-1:0] prv_ready,
  // arriving from the previous core
  output logic [N-1:0] from_prv_valid,
  output msg_t         from_prv_msg [N],
  input  logic [N-1:0] from_prv_ready,
  // arriving from the next core
  output logic [N-1:0] from_nxt_valid,
  output msg_t         from_nxt_msg [N],
  input  logic [N-1:0] from_nxt_ready
);
  for (genvar i = 0; i + 1 < N; i++) begin : g_link
    dist_link u_fwd (.clk, .rst_n,
      .in_valid(nxt_valid[i]), .in_msg(nxt_msg[i]), .in_ready(nxt_ready[i]),
      .out_valid(from_prv_valid[i+1]), .out_msg(from_prv_msg[i+1]), .out_ready(from_prv_ready[i+1]));
    dist_link u_bwd (.clk, .rst_n,
      .in_valid(prv_valid[i+1]), .in_msg(prv_msg[i+1]), .in_ready(prv_ready[i+1]),
      .out_valid(from_nxt_valid[i]), .out_msg(from_nxt_msg[i]), .out_ready(from_nxt_ready[i]));
  end
  // open ends of the chain
  assign nxt_ready[N-1]      = 1'b0;
  assign prv_ready[0]        = 1'b0;
  assign from_prv_valid[0]   = 1'b0;
  assign from_prv_msg[0]     = '0;
  assign from_nxt_valid[N-1] = 1'b0;
  assign from_nxt_msg[N-1]   = '0;
endmodule
