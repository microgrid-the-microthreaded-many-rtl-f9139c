// mg_pkg: types and constants shared by the Microgrid thread-management RTL.
//
// The Microgrid is a many-core chip whose cores create, schedule and
// synchronise families of hardware threads themselves. This package holds the
// sizes of a core (register file, thread and family tables), the thread states
// of the thread life cycle, and the message format carried by the two on-chip
// control networks: the delegation network (any core to any core) and the
// distribution network (a daisy chain linking each core to its neighbours).
//
// Sizes that follow the source description: 128 cores, 1024 physical
// registers per core (r0..r1023), 31 registers checked at allocation,
// 4-cycle family creation start, 2 cycles per distribution hop.
// Sizes that are this design's own choice: 64-bit registers, 32 thread
// contexts, 8 family contexts, register allocation in blocks of 32.
//
// Unused-parameter lint note: some constants (the default chip size, the
// 31 registers of an allocation request, the hop and start latencies) are
// recorded here for reference and used by other files or testbenches only.
package mg_pkg;

  // ---- chip and core sizes ----
  parameter int unsigned NCORES_DEF   = 128;  // cores on the chip (128-core layout)
  parameter int unsigned NREGS        = 1024; // physical registers per core (r0..r1023)
  parameter int unsigned REG_W        = 64;   // register width (own choice)
  parameter int unsigned NTHREADS     = 32;   // thread contexts per core (own choice, <= REG_W)
  parameter int unsigned NFAMILIES    = 8;    // family contexts per core (own choice)
  parameter int unsigned BLK_REGS     = 32;   // registers per allocation block (own choice)
  parameter int unsigned NBLKS        = NREGS / BLK_REGS;
  parameter int unsigned ALLOC_REGS   = 31;   // registers that must be available to allocate
  parameter int unsigned CREATE_START_CYCLES = 4; // family creation start-up time
  parameter int unsigned DIST_HOP_CYCLES     = 2; // distribution network cycles per hop
  parameter int unsigned DATA_W       = 64;   // payload width of a network message

  localparam int unsigned TID_W  = $clog2(NTHREADS);
  localparam int unsigned FID_W  = $clog2(NFAMILIES);
  localparam int unsigned BLK_W  = $clog2(NBLKS);
  localparam int unsigned RADDR_W = $clog2(NREGS);
  parameter int unsigned CORE_W  = 8;         // wide enough for 128 cores and more

  // ---- thread life cycle states ----
  typedef enum logic [2:0] {
    TS_EMPTY     = 3'd0,
    TS_READY     = 3'd1,
    TS_WAITING   = 3'd2,   // waiting for an I-cache line
    TS_ACTIVE    = 3'd3,
    TS_RUNNING   = 3'd4,
    TS_SUSPENDED = 3'd5,
    TS_KILLED    = 3'd6
  } tstate_e;

  // what the pipeline reports for a thread at write back
  typedef enum logic [1:0] {
    WB_RESCHEDULE = 2'd0,  // thread switches out and goes back to the ready queue
    WB_SUSPEND    = 2'd1,  // thread read an empty register and waits for it
    WB_TERMINATE  = 2'd2   // thread executed its last instruction
  } wb_action_e;

  // allocation modes
  typedef enum logic [1:0] {
    AM_NORMAL    = 2'd0,   // fail at once when any core of the place lacks resources
    AM_SUSPEND   = 2'd1    // wait until resources become available
  } alloc_mode_e;

  // ---- network messages ----
  typedef enum logic [4:0] {
    M_NONE       = 5'd0,
    // parent core -> first core of the place (delegation network)
    M_ALLOC      = 5'd1,   // data[0]=mode, aux = place size
    M_SETSTART   = 5'd2,
    M_SETLIMIT   = 5'd3,
    M_SETSTEP    = 5'd4,
    M_SETBLOCK   = 5'd5,   // window size: threads alive at once per core
    M_SETPC      = 5'd6,
    M_SETDEP     = 5'd7,   // data[0]=1: dependent family (runs on one core)
    M_CREATE     = 5'd8,
    M_PUT        = 5'd9,   // write family register aux[4:0] with data
    M_GET        = 5'd10,  // read last thread's register aux[4:0]
    M_RELEASE    = 5'd11,
    // first / last core -> parent core (delegation network)
    M_ALLOC_OK   = 5'd12,  // data = slot of the family on the first core
    M_ALLOC_FAIL = 5'd13,
    M_CREATE_ACK = 5'd14,
    M_SYNC_DONE  = 5'd15,
    M_GET_RSP    = 5'd16,
    // core -> neighbour (distribution network)
    M_ALLOC_REQ  = 5'd17,  // forward: check resources; aux = position, data[15:0]=size
    M_ALLOC_ACK  = 5'd18,  // backward: allocation succeeded up to the last core
    M_ALLOC_UNDO = 5'd19,  // backward: allocation failed, drop the reservation
    M_DONE       = 5'd20   // forward: this core and all before it finished their threads
  } mkind_e;

  typedef struct packed {
    mkind_e                 kind;
    logic [CORE_W-1:0]      src;    // sending core
    logic [CORE_W-1:0]      dst;    // receiving core (delegation network only)
    logic [CORE_W-1:0]      parent; // core that owns the family's parent thread
    logic [FID_W-1:0]       fam;    // family slot at the receiving core
    logic [FID_W-1:0]       pfam;   // family slot at the sending neighbour
    logic [15:0]            aux;
    logic [DATA_W-1:0]      data;
  } msg_t;

  // thread issued to the pipeline
  typedef struct packed {
    logic [TID_W-1:0]   tid;
    logic [31:0]        pc;
    logic [31:0]        index;     // value of the thread's index
    logic [RADDR_W-1:0] base;      // first register of the thread's own window
    logic [RADDR_W-1:0] dep_base;  // window holding the shareds this thread depends on
    logic [RADDR_W-1:0] glob_base; // family registers (globals, first shareds)
  } issue_t;

  // signals from a core's pipeline (and the memory and FPU completing into
  // its register files) into the core's thread management
  typedef struct packed {
    logic               cmd_valid;
    mkind_e             cmd_kind;
    logic [CORE_W:0]    cmd_pid;
    logic [CORE_W:0]    cmd_default_pid;
    logic [CORE_W-1:0]  cmd_core;
    logic [FID_W-1:0]   cmd_fam;
    logic [15:0]        cmd_aux;
    logic [DATA_W-1:0]  cmd_data;
    logic               ic_hit;
    logic               ic_fill_en;
    logic [TID_W-1:0]   ic_fill_tid;
    logic               issue_ready;
    logic               wb_en;
    logic [TID_W-1:0]   wb_tid;
    wb_action_e         wb_action;
    logic [31:0]        wb_pc;
    logic               ir_rd_en;
    logic [RADDR_W-1:0] ir_rd_addr;
    logic [TID_W-1:0]   ir_rd_tid;
    logic               ir_wr_en;
    logic [RADDR_W-1:0] ir_wr_addr;
    logic [REG_W-1:0]   ir_wr_data;
    logic               ir_aw_en;
    logic [RADDR_W-1:0] ir_aw_addr;
    logic [REG_W-1:0]   ir_aw_data;
    logic               fr_rd_en;
    logic [RADDR_W-1:0] fr_rd_addr;
    logic [TID_W-1:0]   fr_rd_tid;
    logic               fr_wr_en;
    logic [RADDR_W-1:0] fr_wr_addr;
    logic [REG_W-1:0]   fr_wr_data;
    logic               fr_aw_en;
    logic [RADDR_W-1:0] fr_aw_addr;
    logic [REG_W-1:0]   fr_aw_data;
  } pipe_in_t;

  // signals from a core's thread management to its pipeline
  typedef struct packed {
    logic               cmd_ready;
    logic               rsp_valid;
    msg_t               rsp_msg;
    logic               ic_req;
    logic [TID_W-1:0]   ic_tid;
    logic [31:0]        ic_pc;
    logic               issue_valid;
    issue_t             issue;
    logic [REG_W-1:0]   ir_rd_data;
    logic               ir_rd_full;
    logic               ir_aw_ready;
    logic [REG_W-1:0]   fr_rd_data;
    logic               fr_rd_full;
    logic               ev_thread_created;
    logic               ev_thread_killed;
    logic               ev_window_full;
    logic               ev_alloc_suspend;
  } pipe_out_t;

  // place identifier arithmetic
  function automatic logic [CORE_W:0] place_start(input logic [CORE_W:0] pid);
    return (pid & (pid - 1'b1)) >> 1;
  endfunction
  function automatic logic [CORE_W:0] place_size(input logic [CORE_W:0] pid);
    return pid & (-pid);
  endfunction

endpackage
