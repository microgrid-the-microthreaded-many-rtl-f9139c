// tb_mg_core: one core on its own. Its delegation output is looped back to its
// delegation input (a one-entry buffer, as in the network), so a family is
// created on the local place (place id 0). The testbench plays the pipeline:
// every issued thread reads a register in the cycle it is issued; if the
// register is empty the thread is suspended at write back two cycles later,
// otherwise it writes its result and terminates.
//   A  independent family, 10 threads, window 4: each thread reads global G0
//      (written by the parent only after the create acknowledgement, so every
//      early thread suspends and is woken), and reports G0 + index.
//      Checks: all indexes once, right values, never more than 4 threads alive,
//      4 cycles from CREATE to the first thread, then one thread per cycle.
//   B  dependent family, 6 threads, window 2: thread i reads its dependent
//      register (the previous thread's shared) and writes shared = D + index.
//      The parent seeds the first shared with 5 and reads the last shared
//      after sync: 5 + 0 + 1 + ... + 5 = 20.
//   C  allocation: with all 8 family contexts taken, a normal allocation
//      fails, a suspended one waits and succeeds once a family is released.
module tb_mg_core;
  import mg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // core ports
  logic dout_valid, dout_ready, din_valid, din_ready;
  msg_t dout_msg, din_msg;
  logic nxt_valid, prv_valid, fp_ready, fn_ready;
  msg_t nxt_msg, prv_msg;
  logic cmd_valid = 0, cmd_ready;
  mkind_e cmd_kind = M_NONE;
  logic [CORE_W:0] cmd_pid = 0;
  logic [CORE_W-1:0] cmd_core = 0;
  logic [FID_W-1:0] cmd_fam = 0;
  logic [15:0] cmd_aux = 0;
  logic [DATA_W-1:0] cmd_data = 0;
  logic rsp_valid; msg_t rsp_msg;
  logic ic_req; logic [TID_W-1:0] ic_tid; logic [31:0] ic_pc;
  logic issue_valid; issue_t issue;
  logic wb_en; logic [TID_W-1:0] wb_tid; wb_action_e wb_action;
  logic ir_rd_en; logic [RADDR_W-1:0] ir_rd_addr; logic [REG_W-1:0] ir_rd_data; logic ir_rd_full;
  logic ir_wr_en; logic [RADDR_W-1:0] ir_wr_addr; logic [REG_W-1:0] ir_wr_data;
  logic ir_aw_ready, fr_rd_full;
  logic [REG_W-1:0] fr_rd_data;
  logic ev_thread_created, ev_thread_killed, ev_window_full, ev_alloc_suspend;

  // loop-back delegation buffer
  logic lb_full = 0; msg_t lb_msg;
  assign din_valid  = lb_full;
  assign din_msg    = lb_msg;
  assign dout_ready = !lb_full || din_ready;
  always @(posedge clk) begin
    if (!rst_n) lb_full <= 0;
    else if (dout_valid && dout_ready) begin lb_full <= 1; lb_msg <= dout_msg; end
    else if (din_ready) lb_full <= 0;
  end

  mg_core #(.NCORES(4)) dut (
    .clk, .rst_n, .core_id(8'd0),
    .dout_valid, .dout_msg, .dout_ready, .din_valid, .din_msg, .din_ready,
    .nxt_valid, .nxt_msg, .nxt_ready(1'b0), .prv_valid, .prv_msg, .prv_ready(1'b0),
    .fp_valid(1'b0), .fp_msg('0), .fp_ready, .fn_valid(1'b0), .fn_msg('0), .fn_ready,
    .cmd_valid, .cmd_ready, .cmd_kind, .cmd_pid, .cmd_default_pid('0), .cmd_core, .cmd_fam,
    .cmd_aux, .cmd_data, .rsp_valid, .rsp_msg,
    .ic_req, .ic_tid, .ic_pc, .ic_hit(1'b1), .ic_fill_en(1'b0), .ic_fill_tid('0),
    .issue_valid, .issue, .issue_ready(1'b1),
    .wb_en, .wb_tid, .wb_action, .wb_pc(32'h100),
    .ir_rd_en, .ir_rd_addr, .ir_rd_tid(issue.tid), .ir_rd_data, .ir_rd_full,
    .ir_wr_en, .ir_wr_addr, .ir_wr_data,
    .ir_aw_en(1'b0), .ir_aw_addr('0), .ir_aw_data('0), .ir_aw_ready,
    .fr_rd_en(1'b0), .fr_rd_addr('0), .fr_rd_tid('0), .fr_rd_data, .fr_rd_full,
    .fr_wr_en(1'b0), .fr_wr_addr('0), .fr_wr_data('0),
    .fr_aw_en(1'b0), .fr_aw_addr('0), .fr_aw_data('0),
    .ev_thread_created, .ev_thread_killed, .ev_window_full, .ev_alloc_suspend);

  int checks = 0, failures = 0;
  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- pipeline model ----------------
  bit dep_mode = 0;
  // read in the issue cycle
  always_comb begin
    ir_rd_en   = issue_valid;
    ir_rd_addr = dep_mode ? issue.dep_base + 1 : issue.glob_base;
  end
  typedef struct packed { logic v; logic [TID_W-1:0] tid; logic full; logic [63:0] val;
                          logic [31:0] index; logic [RADDR_W-1:0] base; } stage_t;
  stage_t s1, s2;
  int results [64];
  int nres = 0;
  always @(posedge clk) begin
    if (!rst_n) begin s1 <= '0; s2 <= '0; end
    else begin
      s1.v <= issue_valid; s1.tid <= issue.tid; s1.full <= ir_rd_full;
      s1.val <= ir_rd_data; s1.index <= issue.index; s1.base <= issue.base;
      s2 <= s1;
      if (s2.v && s2.full) begin
        results[nres] <= int'(s2.val) + int'(s2.index) + (int'(s2.index) << 16);
        nres <= nres + 1;
      end
    end
  end
  // write back: result into the thread's shared register (base+1)
  always_comb begin
    ir_wr_en   = s2.v && s2.full;
    ir_wr_addr = s2.base + 1;
    ir_wr_data = s2.val + 64'(s2.index);
    wb_en      = s2.v;
    wb_tid     = s2.tid;
    wb_action  = s2.full ? WB_TERMINATE : WB_SUSPEND;
  end

  // ---------------- monitors ----------------
  int cyc = 0, alive = 0, max_alive = 0, created = 0, suspends = 0;
  int t_create = -1, t_first = -1;
  int created_at [64];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      alive = alive + (ev_thread_created ? 1 : 0) - (ev_thread_killed ? 1 : 0);
      if (alive > max_alive) max_alive = alive;
      if (ev_thread_created) begin created_at[created] = cyc; created++; end
      if (wb_en && wb_action == WB_SUSPEND) suspends++;
      if (din_valid && din_ready && din_msg.kind == M_CREATE) t_create = cyc;
    end
  end

  // ---------------- parent thread ----------------
  msg_t last_rsp;
  task automatic send(input mkind_e k, input logic [FID_W-1:0] f, input logic [15:0] aux,
                      input logic [63:0] data);
    @(negedge clk);
    cmd_valid = 1; cmd_kind = k; cmd_fam = f; cmd_aux = aux; cmd_data = data; cmd_core = 0; cmd_pid = 0;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic wait_rsp(input mkind_e k);
    int n = 0;
    while (!(rsp_valid && rsp_msg.kind == k) && n < 2000) begin @(posedge clk); #1; n++; end
    chk(rsp_valid && rsp_msg.kind == k, $sformatf("response %s", k.name()));
    last_rsp = rsp_msg;
  endtask
  task automatic family(input int limit, input int window, input bit dep, output logic [FID_W-1:0] f);
    send(M_ALLOC, 0, 0, 64'(AM_NORMAL));
    wait_rsp(M_ALLOC_OK);
    f = FID_W'(last_rsp.data);
    send(M_SETSTART, f, 0, 0);
    send(M_SETLIMIT, f, 0, 64'(limit));
    send(M_SETSTEP, f, 0, 1);
    send(M_SETBLOCK, f, 0, 64'(window));
    send(M_SETPC, f, 0, 64'h100);
    send(M_SETDEP, f, 0, 64'(dep));
    send(M_CREATE, f, 0, 0);
    wait_rsp(M_CREATE_ACK);
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [FID_W-1:0] f, fa [8];
    int sum;
    bit [15:0] seen;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- A: independent family ----
    family(10, 4, 0, f);
    chk(max_alive <= 4, "window of 4 respected before globals");
    chk(created_at[0] - t_create == CREATE_START_CYCLES, $sformatf("first thread %0d cycles after CREATE",
        created_at[0] - t_create));
    for (int i = 1; i < 4; i++) chk(created_at[i] - created_at[i-1] == 1, "one thread per cycle");
    repeat (20) @(negedge clk);
    chk(suspends > 0, "threads suspended on the empty global");
    send(M_PUT, f, 0, 64'd1000);          // global G0
    wait_rsp(M_SYNC_DONE);
    chk(nres == 10, $sformatf("10 threads ran (%0d)", nres));
    chk(max_alive == 4, $sformatf("at most 4 alive (%0d)", max_alive));
    seen = 0;
    for (int i = 0; i < nres; i++) begin
      int idx;
      idx = results[i] >> 16;
      chk((results[i] & 16'hFFFF) == 1000 + idx && idx < 10, $sformatf("value G0 + index: %h", results[i]));
      seen[idx] = 1;
    end
    chk(seen == 16'h03FF, "every index once");
    send(M_RELEASE, f, 0, 0);
    // ---- B: dependent family ----
    dep_mode = 1; nres = 0; max_alive = 0;
    send(M_ALLOC, 0, 0, 64'(AM_NORMAL));
    wait_rsp(M_ALLOC_OK);
    f = FID_W'(last_rsp.data);
    send(M_SETSTART, f, 0, 0); send(M_SETLIMIT, f, 0, 6); send(M_SETSTEP, f, 0, 1);
    send(M_SETBLOCK, f, 0, 2); send(M_SETPC, f, 0, 64'h100); send(M_SETDEP, f, 0, 1);
    send(M_PUT, f, 1, 64'd5);              // first shared
    send(M_CREATE, f, 0, 0);
    wait_rsp(M_CREATE_ACK);
    wait_rsp(M_SYNC_DONE);
    send(M_GET, f, 1, 0);
    wait_rsp(M_GET_RSP);
    chk(last_rsp.data == 64'd20, $sformatf("last shared 20 (%0d)", last_rsp.data));
    chk(max_alive <= 2, "window 2");
    send(M_RELEASE, f, 0, 0);
    // ---- C: allocation failure and suspension ----
    for (int i = 0; i < 8; i++) begin
      send(M_ALLOC, 0, 0, 64'(AM_NORMAL));
      wait_rsp(M_ALLOC_OK);
      fa[i] = FID_W'(last_rsp.data);
    end
    send(M_ALLOC, 0, 0, 64'(AM_NORMAL));
    wait_rsp(M_ALLOC_FAIL);
    send(M_ALLOC, 0, 0, 64'(AM_SUSPEND));
    repeat (30) @(negedge clk);
    chk(!(rsp_valid), "suspended allocation waits");
    send(M_RELEASE, fa[3], 0, 0);
    wait_rsp(M_ALLOC_OK);
    chk(FID_W'(last_rsp.data) == fa[3], "freed context reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
