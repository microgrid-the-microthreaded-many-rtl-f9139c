// tb_distribution_net: core models pass every message straight on, and the
// last core turns it round, so a message from core 0 makes a full return
// trip. Checks: one hop takes two cycles, the return trip over N-1 hops takes
// 2 x 2 x (N-1) cycles, and a stream of messages with random stalls at the
// receiving end comes back complete and in order.
module tb_distribution_net;
  import mg_pkg::*;
  localparam int N = 8;
  localparam int K = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] nxt_valid, nxt_ready, prv_valid, prv_ready;
  logic [N-1:0] from_prv_valid, from_prv_ready, from_nxt_valid, from_nxt_ready;
  msg_t nxt_msg [N];
  msg_t prv_msg [N];
  msg_t from_prv_msg [N];
  msg_t from_nxt_msg [N];
  logic src_valid = 0, sink_ready = 1;
  msg_t src_msg;
  int checks = 0, failures = 0;

  distribution_net #(.N(N)) dut (.*);

  // core models: forward in both directions, turn round at the last core
  always_comb begin
    for (int i = 0; i < N; i++) begin
      nxt_valid[i] = 0; nxt_msg[i] = '0; prv_valid[i] = 0; prv_msg[i] = '0;
      from_prv_ready[i] = 0; from_nxt_ready[i] = 0;
    end
    nxt_valid[0] = src_valid; nxt_msg[0] = src_msg;
    for (int i = 1; i < N - 1; i++) begin
      nxt_valid[i] = from_prv_valid[i]; nxt_msg[i] = from_prv_msg[i]; from_prv_ready[i] = nxt_ready[i];
      prv_valid[i] = from_nxt_valid[i]; prv_msg[i] = from_nxt_msg[i]; from_nxt_ready[i] = prv_ready[i];
    end
    prv_valid[N-1] = from_prv_valid[N-1]; prv_msg[N-1] = from_prv_msg[N-1];
    from_prv_ready[N-1] = prv_ready[N-1];
    from_nxt_ready[0] = sink_ready;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int t0, got, nsent;
    src_msg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // one message: hop time and return trip
    src_valid = 1; src_msg.data = 64'hABC;
    t0 = cyc;
    @(negedge clk); src_valid = 0;   // accepted at the edge just passed
    chk(!from_prv_valid[1], "not at core 1 after one cycle");
    @(negedge clk);
    chk(from_prv_valid[1] && from_prv_msg[1].data == 64'hABC, "at core 1 after two cycles");
    while (!from_nxt_valid[0]) @(negedge clk);
    chk(cyc - t0 == 2 * 2 * (N - 1), $sformatf("return trip %0d cycles, expected %0d", cyc - t0, 4 * (N - 1)));
    @(negedge clk);
    // stream with random stalls at the sink
    got = 0; nsent = 0;
    while (got < K) begin
      src_valid = nsent < K; src_msg.data = DATA_W'(nsent);
      sink_ready = ($urandom % 3) != 0;
      #4;
      if (from_nxt_valid[0] && sink_ready) begin
        chk(from_nxt_msg[0].data == DATA_W'(got), $sformatf("in order %0d", got));
        got++;
      end
      if (src_valid && nxt_ready[0]) nsent++;
      @(negedge clk);
    end
    chk(nsent == K, "all sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
