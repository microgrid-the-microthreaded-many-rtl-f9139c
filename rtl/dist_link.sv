// dist_link: one direction of the link between two neighbouring cores on the
// distribution network.
//
// A two-stage elastic pipeline: a message accepted in cycle t reaches the
// neighbour on out_valid in cycle t+2 when nothing stalls, matching the two
// cycles per hop of the source description. Each stage moves forward when
// the stage ahead is empty or moving, so bubbles close up and nothing is lost
// under back-pressure. Synchronous active-low reset empties both stages.
module dist_link
  import mg_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  msg_t in_msg,
  output logic in_ready,
  output logic out_valid,
  output msg_t out_msg,
  input  logic out_ready
);
  logic v0, v1;
  msg_t m0, m1;
  logic mv1, mv0;

  assign mv1      = !v1 || out_ready;   // stage 1 can take a message
  assign mv0      = !v0 || mv1;         // stage 0 can take a message
  assign in_ready = mv0;
  assign out_valid = v1;
  assign out_msg   = m1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v0 <= 1'b0;
      v1 <= 1'b0;
    end else begin
      if (mv1) begin
        v1 <= v0;
        m1 <= m0;
      end
      if (mv0) begin
        v0 <= in_valid;
        m0 <= in_msg;
      end
    end
  end
endmodule
