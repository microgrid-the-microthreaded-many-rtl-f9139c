// tb_microgrid: the chip end to end with 8 cores, each with a pipeline
// stand-in (tb_pipe_model). A parent thread on core 0 issues the concurrency
// instructions.
//   1 Independent family of 40 threads with window 5 delegated to the 4-core
//     place 4..7 (place id 12): each core must run its own block of 10
//     indexes (core 4: 0..9, core 5: 10..19, ...) with at most 5 alive; every
//     thread reads the global written by the parent after the create ack.
//   2 Dependent family of 8 threads on the 2-core place 2..3 (place id 6):
//     all threads run on core 2, the shared value passes from thread to
//     thread and the parent reads 7 + 0 + 1 + ... + 7 = 35 after sync.
//   3 Core 1's 8 family contexts are filled; allocating the place 0..1
//     (place id 2) then fails in normal mode (undone along the chain) and in
//     suspend mode waits until one of core 1's families is released.
// Each mechanism is counted and must have happened at least once: delegation
// and distribution traffic, allocation success, failure, suspension,
// creation, window full, thread suspension and wake, I-cache miss,
// synchronisation, release, remote register read.
module tb_microgrid;
  import mg_pkg::*;
  localparam int NC = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pipe_in_t  pin  [NC];
  pipe_in_t  pmod [NC];
  pipe_out_t pout [NC];
  logic [NC-1:0] res_valid, ev_susp, ev_miss;
  logic [31:0] res_index [NC];
  logic [63:0] res_value [NC];

  microgrid #(.NCORES(NC)) dut (.clk, .rst_n, .pin, .pout);

  for (genvar i = 0; i < NC; i++) begin : g_pipe
    tb_pipe_model u_pm (.clk, .rst_n, .po(pout[i]), .pi(pmod[i]),
      .res_valid(res_valid[i]), .res_index(res_index[i]), .res_value(res_value[i]),
      .ev_suspend(ev_susp[i]), .ev_icmiss(ev_miss[i]));
  end

  // the parent thread's instructions enter on core 0
  logic cmd_valid = 0; mkind_e cmd_kind = M_NONE; logic [CORE_W:0] cmd_pid = 0;
  logic [CORE_W-1:0] cmd_core = 0; logic [FID_W-1:0] cmd_fam = 0;
  logic [15:0] cmd_aux = 0; logic [63:0] cmd_data = 0;
  always_comb begin
    for (int i = 0; i < NC; i++) pin[i] = pmod[i];
    pin[0].cmd_valid = cmd_valid; pin[0].cmd_kind = cmd_kind; pin[0].cmd_pid = cmd_pid;
    pin[0].cmd_core = cmd_core; pin[0].cmd_fam = cmd_fam; pin[0].cmd_aux = cmd_aux;
    pin[0].cmd_data = cmd_data;
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_deleg = 0, n_dist = 0, n_created = 0, n_winfull = 0, n_allocsusp = 0, n_susp = 0,
      n_miss = 0, n_ok = 0, n_fail = 0, n_sync = 0, n_get = 0, n_release = 0, n_done = 0;
  int alive [NC], max_alive [NC];
  int ran [NC][64];
  int nran [NC];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NC; i++) begin
      if (dut.d_in_valid[i] && dut.d_in_ready[i]) begin
        n_deleg++;
        if (dut.d_in_msg[i].kind == M_RELEASE) n_release++;
      end
      if (dut.fp_valid[i] && dut.fp_ready[i]) begin
        n_dist++;
        if (dut.fp_msg[i].kind == M_DONE) n_done++;
      end
      if (dut.fn_valid[i] && dut.fn_ready[i]) n_dist++;
      if (pout[i].ev_thread_created) n_created++;
      if (pout[i].ev_window_full) n_winfull++;
      if (pout[i].ev_alloc_suspend) n_allocsusp++;
      if (ev_susp[i]) n_susp++;
      if (ev_miss[i]) n_miss++;
      alive[i] = alive[i] + (pout[i].ev_thread_created ? 1 : 0) - (pout[i].ev_thread_killed ? 1 : 0);
      if (alive[i] > max_alive[i]) max_alive[i] = alive[i];
      if (res_valid[i]) begin ran[i][nran[i]] = int'(res_index[i]); nran[i]++; end
    end
    if (pout[0].rsp_valid) case (pout[0].rsp_msg.kind)
      M_ALLOC_OK: n_ok++;  M_ALLOC_FAIL: n_fail++;  M_SYNC_DONE: n_sync++;  M_GET_RSP: n_get++;
      default: ;
    endcase
  end

  // ---------------- parent thread ----------------
  msg_t last_rsp;
  task automatic send(input mkind_e k, input logic [CORE_W:0] pid, input logic [CORE_W-1:0] core,
                      input logic [FID_W-1:0] f, input logic [15:0] aux, input logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd_kind = k; cmd_pid = pid; cmd_core = core; cmd_fam = f; cmd_aux = aux; cmd_data = data;
    #1; while (!pout[0].cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic wait_rsp(input mkind_e k);
    int n;
    n = 0;
    while (!(pout[0].rsp_valid && pout[0].rsp_msg.kind == k) && n < 5000) begin @(posedge clk); #1; n++; end
    chk(pout[0].rsp_valid && pout[0].rsp_msg.kind == k, $sformatf("response %s", k.name()));
    last_rsp = pout[0].rsp_msg;
  endtask
  task automatic config_family(input logic [CORE_W-1:0] c, input logic [FID_W-1:0] f,
                               input int limit, input int window, input bit dep);
    send(M_SETSTART, 0, c, f, 0, 0);
    send(M_SETLIMIT, 0, c, f, 0, 64'(limit));
    send(M_SETSTEP, 0, c, f, 0, 1);
    send(M_SETBLOCK, 0, c, f, 0, 64'(window));
    send(M_SETPC, 0, c, f, 0, 64'h100);
    send(M_SETDEP, 0, c, f, 0, 64'(dep));
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [FID_W-1:0] f, f1 [8];
    for (int i = 0; i < NC; i++) begin alive[i] = 0; max_alive[i] = 0; nran[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- 1: independent family, 40 threads, window 5, cores 4..7 ----
    send(M_ALLOC, 9'd12, 0, 0, 0, 64'(AM_NORMAL));
    wait_rsp(M_ALLOC_OK);
    chk(last_rsp.src == 4, "allocation answered by the first core of the place");
    f = FID_W'(last_rsp.data);
    config_family(4, f, 40, 5, 0);
    send(M_CREATE, 0, 4, f, 0, 0);
    wait_rsp(M_CREATE_ACK);
    send(M_PUT, 0, 4, f, 1, 64'd1000);
    wait_rsp(M_SYNC_DONE);
    for (int c = 4; c < 8; c++) begin
      bit [9:0] seen;
      seen = 0;
      chk(nran[c] == 10, $sformatf("core %0d ran 10 threads (%0d)", c, nran[c]));
      chk(max_alive[c] == 5, $sformatf("core %0d window 5 (%0d)", c, max_alive[c]));
      for (int k = 0; k < nran[c]; k++)
        if (ran[c][k] >= (c - 4) * 10 && ran[c][k] < (c - 3) * 10) seen[ran[c][k] - (c - 4) * 10] = 1;
      chk(seen == 10'h3FF, $sformatf("core %0d ran indexes %0d..%0d", c, (c - 4) * 10, (c - 3) * 10 - 1));
    end
    chk(nran[0] + nran[1] + nran[2] + nran[3] == 0, "no thread outside the place");
    send(M_RELEASE, 0, 4, f, 0, 0);
    // ---- 2: dependent family on cores 2..3 ----
    send(M_ALLOC, 9'd6, 0, 0, 0, 64'(AM_NORMAL));
    wait_rsp(M_ALLOC_OK);
    f = FID_W'(last_rsp.data);
    config_family(2, f, 8, 2, 1);
    send(M_PUT, 0, 2, f, 1, 64'd7);
    send(M_CREATE, 0, 2, f, 0, 0);
    wait_rsp(M_CREATE_ACK);
    wait_rsp(M_SYNC_DONE);
    send(M_GET, 0, 2, f, 1, 0);
    wait_rsp(M_GET_RSP);
    chk(last_rsp.data == 64'd35, $sformatf("final shared 35 (%0d)", last_rsp.data));
    chk(nran[2] == 8 && nran[3] == 0, "dependent family stays on its first core");
    send(M_RELEASE, 0, 2, f, 0, 0);
    // ---- 3: allocation failure and suspension ----
    for (int i = 0; i < 8; i++) begin
      send(M_ALLOC, 9'd3, 0, 0, 0, 64'(AM_NORMAL));   // place id 3: core 1 alone
      wait_rsp(M_ALLOC_OK);
      f1[i] = FID_W'(last_rsp.data);
    end
    send(M_ALLOC, 9'd2, 0, 0, 0, 64'(AM_NORMAL));     // cores 0..1
    wait_rsp(M_ALLOC_FAIL);
    send(M_ALLOC, 9'd2, 0, 0, 0, 64'(AM_SUSPEND));
    repeat (50) @(negedge clk);
    chk(n_allocsusp > 0, "allocation suspended");
    send(M_RELEASE, 0, 1, f1[5], 0, 0);
    wait_rsp(M_ALLOC_OK);
    chk(last_rsp.src == 0, "suspended allocation completes");
    repeat (10) @(negedge clk);
    // ---- every mechanism happened ----
    chk(n_deleg > 0, "delegation messages");      chk(n_dist > 0, "distribution messages");
    chk(n_ok > 0, "allocation success");          chk(n_fail > 0, "allocation failure");
    chk(n_allocsusp > 0, "allocation suspend");   chk(n_created > 0, "thread creation");
    chk(n_winfull > 0, "window full");            chk(n_susp > 0, "thread suspension");
    chk(n_miss > 0, "I-cache miss");              chk(n_sync > 0, "synchronisation");
    chk(n_release > 0, "release");                chk(n_get > 0, "remote register read");
    chk(n_done > 0, "completion passed along the chain");
    $display("mechanisms: deleg=%0d dist=%0d ok=%0d fail=%0d allocsusp=%0d created=%0d winfull=%0d susp=%0d icmiss=%0d sync=%0d release=%0d get=%0d done=%0d",
             n_deleg, n_dist, n_ok, n_fail, n_allocsusp, n_created, n_winfull, n_susp, n_miss, n_sync, n_release, n_get, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
