// tb_scheduler: walks a thread through every transition of the thread life
// cycle (creation, I-cache hit and miss, fill, switch, reschedule, suspend,
// asynchronous completion, termination, cleanup), checks round-robin issue
// over four threads, one issue per cycle, and that a wake arriving before the
// suspend is not lost.
module tb_scheduler;
  import mg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic create_en = 0, cleanup_en = 0, ic_hit = 0, ic_fill_en = 0, issue_ready = 0, wb_en = 0;
  logic [4:0] create_tid = 0, cleanup_tid = 0, ic_fill_tid = 0, wb_tid = 0, ic_tid, issue_tid;
  wb_action_e wb_action = WB_RESCHEDULE;
  logic [31:0] wake_mask = 0, empty_mask, killed_mask;
  logic ic_req, issue_valid;
  tstate_e state [32];
  int checks = 0, failures = 0;

  scheduler dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic st(input int t, input tstate_e e, input string what);
    chk(state[t] == e, $sformatf("%s: thread %0d in %s, expected %s", what, t, state[t].name(), e.name()));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(empty_mask == '1, "all empty after reset");
    // creation
    create_en = 1; create_tid = 2; @(negedge clk); create_en = 0;
    st(2, TS_READY, "creation");
    // I-cache miss
    chk(ic_req && ic_tid == 2, "ready thread asks the I-cache");
    ic_hit = 0; @(negedge clk);
    st(2, TS_WAITING, "miss");
    ic_fill_en = 1; ic_fill_tid = 2; @(negedge clk); ic_fill_en = 0;
    st(2, TS_ACTIVE, "fill");
    // switch
    chk(issue_valid && issue_tid == 2, "active thread offered");
    issue_ready = 1; @(negedge clk); issue_ready = 0;
    st(2, TS_RUNNING, "switch");
    // reschedule
    wb_en = 1; wb_tid = 2; wb_action = WB_RESCHEDULE; @(negedge clk); wb_en = 0;
    st(2, TS_READY, "reschedule");
    ic_hit = 1; @(negedge clk);
    st(2, TS_ACTIVE, "hit");
    issue_ready = 1; @(negedge clk); issue_ready = 0;
    // suspend at write back, then asynchronous completion
    wb_en = 1; wb_action = WB_SUSPEND; @(negedge clk); wb_en = 0;
    st(2, TS_SUSPENDED, "suspend from running");
    wake_mask = 32'd1 << 2; @(negedge clk); wake_mask = 0;
    st(2, TS_READY, "asynchronous completion");
    @(negedge clk); st(2, TS_ACTIVE, "hit again");
    // suspend straight from active
    wb_en = 1; wb_action = WB_SUSPEND; @(negedge clk); wb_en = 0;
    st(2, TS_SUSPENDED, "suspend from active");
    wake_mask = 32'd1 << 2; @(negedge clk); wake_mask = 0;
    @(negedge clk); st(2, TS_ACTIVE, "back to active");
    // wake that comes while the thread is still running is kept
    issue_ready = 1; @(negedge clk); issue_ready = 0;
    wake_mask = 32'd1 << 2; @(negedge clk); wake_mask = 0;
    wb_en = 1; wb_action = WB_SUSPEND; @(negedge clk); wb_en = 0;
    st(2, TS_READY, "early wake turns suspend into reschedule");
    @(negedge clk); st(2, TS_ACTIVE, "active");
    // termination and cleanup
    wb_en = 1; wb_action = WB_TERMINATE; @(negedge clk); wb_en = 0;
    st(2, TS_KILLED, "termination");
    chk(killed_mask == (32'd1 << 2), "killed mask");
    cleanup_en = 1; cleanup_tid = 2; @(negedge clk); cleanup_en = 0;
    st(2, TS_EMPTY, "cleanup");
    // round robin over four active threads
    for (int t = 10; t < 14; t++) begin create_en = 1; create_tid = 5'(t); @(negedge clk); end
    create_en = 0;
    repeat (4) @(negedge clk);
    for (int t = 10; t < 14; t++) st(t, TS_ACTIVE, "rr setup");
    begin
      bit [31:0] seen = 0;
      issue_ready = 1;
      for (int k = 0; k < 4; k++) begin
        chk(issue_valid, "one issue per cycle");
        seen[issue_tid] = 1;
        @(negedge clk);
      end
      issue_ready = 0;
      chk(seen == 32'h0000_3C00, $sformatf("each of four threads issued once: %h", seen));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
