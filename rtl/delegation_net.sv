// delegation_net: the fully connected network that lets every core send a
// control message to every other core (itself included).
//
// Each core offers at most one message at a time (out_valid/out_msg, taken in
// the cycle out_ready is high). For every destination a round-robin arbiter
// chooses one of the sources addressing it and moves the message into that
// destination's one-entry input register, where the core sees it on
// in_valid/in_msg the next cycle and takes it with in_ready. A message thus
// travels from source to destination in one cycle when the network is lightly
// loaded, and waits behind other traffic when it is not, as the source
// describes. Because a source offers one message at a time and each
// destination register is a single FIFO stage, messages between one pair of
// cores arrive in the order they were sent (configure before create).
// Arbitration and buffering are this design's own choices.
// Synchronous active-low reset empties the input registers.
module delegation_net
  import mg_pkg::*;
#(
  parameter int unsigned N = NCORES_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [N-1:0] out_valid,
  input  msg_t         out_msg   [N],
  output logic [N-1:0] out_ready,
  output logic [N-1:0] in_valid,
  output msg_t         in_msg    [N],
  input  logic [N-1:0] in_ready
);
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;
  logic [N-1:0] req   [N];   // req[d][s]
  logic [N-1:0] grant [N];
  logic [SW-1:0] gidx [N];
  logic [N-1:0] gvalid, take;
  msg_t         hold  [N];
  logic [N-1:0] full;

  always_comb
    for (int d = 0; d < N; d++)
      for (int s = 0; s < N; s++)
        req[d][s] = out_valid[s] && (int'(out_msg[s].dst) == d);

  for (genvar d = 0; d < N; d++) begin : g_dst
    assign take[d] = gvalid[d] && (!full[d] || in_ready[d]);
    rr_pick #(.N(N)) u_arb (.clk, .rst_n, .req(req[d]), .advance(take[d]),
                            .grant(grant[d]), .idx(gidx[d]), .valid(gvalid[d]));
    always_ff @(posedge clk) begin
      if (!rst_n) full[d] <= 1'b0;
      else if (take[d]) begin
        full[d] <= 1'b1;
        hold[d] <= out_msg[gidx[d]];
      end else if (in_ready[d]) full[d] <= 1'b0;
    end
    assign in_valid[d] = full[d];
    assign in_msg[d]   = hold[d];
  end

  always_comb begin
    out_ready = '0;
    for (int d = 0; d < N; d++)
      if (take[d]) out_ready = out_ready | grant[d];
  end

  a_dst_range: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid[0] |-> int'(out_msg[0].dst) < N));
endmodule
