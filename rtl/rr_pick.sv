// rr_pick: round-robin choice of one request out of N.
//
// The search starts one place after the last grant, so every requester is
// served within N grants. grant is one-hot, valid is high when any request is
// present; the pointer moves only when advance is high and a grant is made.
// Helper for the scheduler and the delegation network.
//
// Unused-signal lint note: the 32-bit loop variable is used only in its
// low bits.
module rr_pick #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] idx,
  output logic                 valid
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    grant = '0;
    idx   = '0;
    valid = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned j;
      j = (int'(last) + k) % N;
      if (!valid && req[j]) begin
        valid    = 1'b1;
        idx      = IW'(j);
        grant[j] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                last <= IW'(N - 1);
    else if (advance && valid) last <= idx;
  end
endmodule
