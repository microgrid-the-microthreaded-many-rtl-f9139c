// sync_regfile: a synchronising (I-structure) register file of one core.
//
// Every register is EMPTY, WAITING or FULL. Reading a FULL register returns
// its value. Reading an EMPTY or WAITING register returns rd_full = 0 and
// records the reading thread as a waiter; the pipeline then suspends that
// thread at write back. While a register is WAITING its data field holds the
// set of waiting threads as a bit mask (one bit per thread context), so any
// number of threads can wait on one register, as happens with globals. A
// write makes the register FULL and, if it was WAITING, reports the waiters on
// wake_mask one cycle later so the scheduler can move them back to the ready
// queue.
//
// Two write ports follow the source description: a synchronous port for
// results written back by the pipeline, and an asynchronous port for
// operations that complete out of the pipeline (D-cache loads, FPU results,
// remote writes from other cores). The state encoding, the waiter bit mask,
// the block clear used when a register window is handed to a new thread, and
// the extra non-suspending read port (nrd, for remote reads) are this design's
// own choices. Reads are combinational; writes and clears take effect at the
// clock edge. A write on both ports to the same register in one cycle is a
// usage error (asserted); a clear loses against a write in the same cycle.
// Reset (rst_n, synchronous, active low) empties every register.
module sync_regfile
  import mg_pkg::*;
#(
  parameter int unsigned N    = NREGS,
  parameter int unsigned W    = REG_W,
  parameter int unsigned NT   = NTHREADS,
  parameter int unsigned BLK  = BLK_REGS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // pipeline read (may register the reader as a waiter)
  input  logic                   rd_en,
  input  logic [$clog2(N)-1:0]   rd_addr,
  input  logic [$clog2(NT)-1:0]  rd_tid,
  output logic [W-1:0]           rd_data,
  output logic                   rd_full,
  // non-suspending read
  input  logic [$clog2(N)-1:0]   nrd_addr,
  output logic [W-1:0]           nrd_data,
  output logic                   nrd_full,
  // synchronous write port (pipeline write back)
  input  logic                   wr_en,
  input  logic [$clog2(N)-1:0]   wr_addr,
  input  logic [W-1:0]           wr_data,
  // asynchronous write port (memory, FPU, network)
  input  logic                   aw_en,
  input  logic [$clog2(N)-1:0]   aw_addr,
  input  logic [W-1:0]           aw_data,
  // empty a whole block of BLK registers
  input  logic                   clr_en,
  input  logic [$clog2(N/BLK)-1:0] clr_blk,
  // threads released by a write (valid the cycle after the write)
  output logic [NT-1:0]          wake_mask
);
  localparam int unsigned AW = $clog2(N);
  typedef enum logic [1:0] {R_EMPTY = 2'd0, R_WAITING = 2'd1, R_FULL = 2'd2} rstate_e;

  logic [W-1:0] data [N];
  rstate_e      st   [N];

  always_comb begin
    rd_data  = data[rd_addr];
    rd_full  = (st[rd_addr] == R_FULL);
    nrd_data = data[nrd_addr];
    nrd_full = (st[nrd_addr] == R_FULL);
  end

  // waiters released by a write on either port
  function automatic logic [NT-1:0] released(input logic en, input logic [AW-1:0] a);
    logic [NT-1:0] m;
    m = '0;
    if (en) begin
      if (st[a] == R_WAITING) m = data[a][NT-1:0];
      if (rd_en && rd_addr == a && st[a] != R_FULL) m[rd_tid] = 1'b1;
    end
    return m;
  endfunction

  logic rd_suspend;
  assign rd_suspend = rd_en && (st[rd_addr] != R_FULL) &&
                      !(wr_en && wr_addr == rd_addr) && !(aw_en && aw_addr == rd_addr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) st[i] <= R_EMPTY;
      wake_mask <= '0;
    end else begin
      wake_mask <= released(wr_en, wr_addr) | released(aw_en, aw_addr);
      if (clr_en)
        for (int i = 0; i < BLK; i++) st[{clr_blk, ($clog2(BLK))'(i)}] <= R_EMPTY;
      if (rd_suspend) begin
        st[rd_addr] <= R_WAITING;
        if (st[rd_addr] == R_WAITING)
          data[rd_addr] <= data[rd_addr] | W'(1) << rd_tid;
        else
          data[rd_addr] <= W'(1) << rd_tid;
      end
      if (wr_en) begin
        st[wr_addr]   <= R_FULL;
        data[wr_addr] <= wr_data;
      end
      if (aw_en) begin
        st[aw_addr]   <= R_FULL;
        data[aw_addr] <= aw_data;
      end
    end
  end

  initial assert (NT <= W) else $error("thread mask must fit in a register");

  a_no_double_write: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && aw_en && wr_addr == aw_addr));
endmodule
