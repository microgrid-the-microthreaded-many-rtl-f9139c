// tb_sync_regfile: checks the I-structure register file: empty after reset,
// readers of an empty register recorded and woken by a write on either port
// (several waiters at once), writes visible to reads, block clear, and a
// random sequence of writes against a reference array.
module tb_sync_regfile;
  import mg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, aw_en = 0, clr_en = 0;
  logic [9:0] rd_addr = 0, nrd_addr = 0, wr_addr = 0, aw_addr = 0;
  logic [4:0] rd_tid = 0, clr_blk = 0;
  logic [63:0] wr_data = 0, aw_data = 0, rd_data, nrd_data;
  logic rd_full, nrd_full;
  logic [31:0] wake_mask;
  int checks = 0, failures = 0;
  logic [63:0] ref_d [1024];
  bit          ref_f [1024];

  sync_regfile dut (.*);

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // empty after reset
    nrd_addr = 10'd5; #1; chk(!nrd_full, "reset empties r5");
    // two readers wait on r5
    @(negedge clk); rd_en = 1; rd_addr = 5; rd_tid = 3; #1 chk(!rd_full, "r5 empty for tid3");
    @(negedge clk); rd_tid = 7;
    @(negedge clk); rd_en = 0;
    chk(wake_mask == 0, "no wake before write");
    // asynchronous completion writes r5
    aw_en = 1; aw_addr = 5; aw_data = 64'hDEAD_BEEF_0000_0005;
    @(negedge clk); aw_en = 0;
    chk(wake_mask == ((32'd1 << 3) | (32'd1 << 7)), $sformatf("wake both waiters %h", wake_mask));
    rd_addr = 5; #1 chk(rd_full && rd_data == 64'hDEAD_BEEF_0000_0005, "r5 value");
    @(negedge clk); chk(wake_mask == 0, "wake is a pulse");
    // synchronous write without waiters wakes nobody
    wr_en = 1; wr_addr = 40; wr_data = 64'h1234;
    @(negedge clk); wr_en = 0;
    chk(wake_mask == 0, "no waiter, no wake");
    rd_addr = 40; #1 chk(rd_full && rd_data == 64'h1234, "r40 value");
    // read that suspends in the same cycle as the write: reader is woken
    rd_en = 1; rd_addr = 41; rd_tid = 9; wr_en = 1; wr_addr = 41; wr_data = 64'h77;
    @(negedge clk); rd_en = 0; wr_en = 0;
    chk(wake_mask == (32'd1 << 9), "same-cycle write wakes reader");
    // clear block 1 (r32..r63)
    clr_en = 1; clr_blk = 1;
    @(negedge clk); clr_en = 0;
    rd_addr = 40; #1 chk(!rd_full, "clear empties r40");
    rd_addr = 5;  #1 chk(rd_full, "clear keeps r5");
    // random writes against a reference
    for (int i = 0; i < 1024; i++) ref_f[i] = 0;
    clr_en = 1;
    for (int b = 0; b < 32; b++) begin clr_blk = 5'(b); @(negedge clk); end
    clr_en = 0;
    for (int k = 0; k < 400; k++) begin
      wr_en = 1; wr_addr = 10'($urandom); wr_data = {$urandom, $urandom};
      aw_en = 1; aw_addr = 10'($urandom); aw_data = {$urandom, $urandom};
      if (aw_addr == wr_addr) aw_addr = aw_addr + 1;
      ref_d[wr_addr] = wr_data; ref_f[wr_addr] = 1;
      ref_d[aw_addr] = aw_data; ref_f[aw_addr] = 1;
      @(negedge clk);
    end
    wr_en = 0; aw_en = 0;
    for (int a = 0; a < 1024; a += 3) begin
      nrd_addr = 10'(a); #1;
      chk(nrd_full == ref_f[a] && (!ref_f[a] || nrd_data == ref_d[a]), $sformatf("random r%0d", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
