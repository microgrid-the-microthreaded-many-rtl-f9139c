// tb_delegation_net: a lone message reaches its destination one cycle after
// it is accepted; then every core sends a stream of messages to random cores
// (itself included) while destinations stall at random, and the testbench
// checks that every message arrives exactly once, at the core it names, and
// in sending order between each pair of cores.
module tb_delegation_net;
  import mg_pkg::*;
  localparam int N = 16;
  localparam int K = 60;   // messages per source
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] out_valid = '0, out_ready, in_valid, in_ready = '0;
  msg_t out_msg [N];
  msg_t in_msg [N];
  int checks = 0, failures = 0;
  int sent [N], got_total;
  int last_seq [N][N];
  bit acc [N];

  delegation_net #(.N(N)) dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) out_msg[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency of one message, core 3 -> core 11
    out_valid[3] = 1; out_msg[3].src = 3; out_msg[3].dst = 11; out_msg[3].data = 64'h55;
    in_ready = '1;
    #1 chk(out_ready[3], "accepted at once");
    @(negedge clk); out_valid[3] = 0;
    chk(in_valid[11] && in_msg[11].data == 64'h55 && in_msg[11].src == 3, "delivered after one cycle");
    chk($countones(in_valid) == 1, "delivered only to core 11");
    @(negedge clk);
    chk(in_valid == 0, "taken");
    // random traffic
    for (int s = 0; s < N; s++) begin sent[s] = 0; for (int d = 0; d < N; d++) last_seq[s][d] = -1; end
    got_total = 0;
    for (int s = 0; s < N; s++) begin out_valid[s] = 0; acc[s] = 0; end
    while (got_total < N * K) begin
      @(negedge clk);
      // drive: random stalls at the destinations, next message at each source
      for (int d = 0; d < N; d++) in_ready[d] = ($urandom % 4) != 0;
      for (int s = 0; s < N; s++) if (acc[s]) begin out_valid[s] = 0; acc[s] = 0; end
      for (int s = 0; s < N; s++)
        if (!out_valid[s]) begin
          if (sent[s] < K) begin
            out_valid[s] = 1;
            out_msg[s].src = CORE_W'(s);
            out_msg[s].dst = CORE_W'($urandom % N);
            out_msg[s].data = DATA_W'(sent[s]);
          end
        end
      // sample the handshakes just before the clock edge
      #4;
      for (int d = 0; d < N; d++)
        if (in_valid[d] && in_ready[d]) begin
          int s, q;
          s = int'(in_msg[d].src); q = int'(in_msg[d].data);
          chk(int'(in_msg[d].dst) == d, "right destination");
          chk(q > last_seq[s][d], $sformatf("order %0d->%0d", s, d));
          last_seq[s][d] = q;
          got_total++;
        end
      for (int s = 0; s < N; s++)
        if (out_valid[s] && out_ready[s]) begin sent[s]++; acc[s] = 1; end
    end
    chk(got_total == N * K, "all messages delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
