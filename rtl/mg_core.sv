// mg_core: the thread-management part of one microthreaded core.
//
// What it does. A core runs many hardware threads grouped in families. This
// module holds the family table and the thread table, allocates their
// contexts and the register windows, creates the threads of a family one per
// cycle, keeps each thread's life cycle (through the scheduler), and takes
// part in the family protocol that runs over the two control networks:
//
//   allocate   The parent's core sends ALLOC to the first core of the place
//              (delegation network). Each core checks for a free family
//              context, a free thread context and a free block of 32
//              registers (the 31 the protocol asks for fit in one block),
//              reserves the family context and the block, and passes
//              ALLOC_REQ to the next core (distribution network). The last
//              core answers ALLOC_ACK backwards; each core records the slot
//              its successor used; the first core reports ALLOC_OK to the
//              parent. A core that cannot allocate sends ALLOC_UNDO backwards
//              and the first core reports ALLOC_FAIL (mode normal), or keeps
//              the request and retries each cycle (mode suspend).
//   configure  SETSTART/SETLIMIT/SETSTEP/SETBLOCK/SETPC/SETDEP are stored in
//              the family entry and passed down the chain; no answer.
//   create     CREATE is passed down the chain. Each core spends 4 cycles
//              working out its share of the index range (equal shares; a
//              dependent family runs wholly on the first core), then creates
//              one thread per cycle while fewer than the window size
//              (SETBLOCK) of the family's threads are alive on the core. The
//              first core sends CREATE_ACK to the parent when its creation has
//              finished or has filled the window.
//   put / get  PUT writes a family register (globals and first shareds) on
//              every core of the place; GET reads back a register of the last
//              thread, for a dependent family's final shared value.
//   sync       A core whose threads have all ended, and whose predecessor
//              said the same (DONE), passes DONE on; the last core sends
//              SYNC_DONE to the parent.
//   release    RELEASE frees the family context and its registers on every
//              core of the place.
//
// Registers. Each thread gets its own block of 32 registers (base); the
// family block holds globals and the shareds given to the first thread
// (glob_base); dep_base names where the thread's dependent registers live:
// the block of the thread created before it in a dependent family, or the
// family block for the first thread. A block is freed when its thread has
// ended and, in a dependent family, also its successor (which reads it), or
// the family is released; so shared values stay valid as long as they can be
// read.
//
// Interfaces. Delegation network: one outgoing and one incoming message port
// (valid/ready). Distribution network: ports to and from the previous and the
// next core. Pipeline: cmd_* carries the concurrency instructions of a parent
// thread (allocate, set*, create, put, get, release), rsp_* returns the
// answers one cycle after they arrive; ic_* is the I-cache check of a ready
// thread; issue_* hands an active thread to the pipeline, wb_* reports it
// back; ir_*/fr_* are the integer and float register files with their
// synchronous and asynchronous write ports.
//
// From the source description: the protocol steps and message order, the
// resources checked at allocation, the allocation modes normal and suspend,
// the 4-cycle creation start and one thread per cycle, the window size per
// core, equal sharing of threads between cores, dependent families on one
// core, two register files with a synchronous and an asynchronous port each.
// This design's own choices: sizes of the tables, registers allocated in
// blocks of 32 and reserved on the forward pass of ALLOC (the source
// allocates on the way back), one message handled per input per cycle, one
// outstanding suspended allocation, the exact layout of the messages, and one
// shared range unit (divider) and one creation path per core, used by the
// lowest-numbered family that needs them in a cycle; a thread's index comes
// from a running sum (next index += step) rather than a multiply.
// Not built: break, exclusive families and the exclusive context, the
// strategies other than exact, giving back unused registers after creation.
//
// Timing: all state changes at the clock edge; synchronous active-low reset
// empties every table. Outputs to the networks are one-entry registers that
// accept a new message only when empty at the start of a cycle, so a core's
// ready signals never depend combinationally on a neighbour.
//
// Unused-signal lint notes: the state vector, the float register file's
// second read port and GET's full flag are kept visible for debugging and
// for a pipeline that needs them; whole family/message structs are passed to
// helpers that use only some fields.
module mg_core
  import mg_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CORE_W-1:0]     core_id,
  // delegation network
  output logic                  dout_valid,
  output msg_t                  dout_msg,
  input  logic                  dout_ready,
  input  logic                  din_valid,
  input  msg_t                  din_msg,
  output logic                  din_ready,
  // distribution network: outgoing to next / previous core
  output logic                  nxt_valid,
  output msg_t                  nxt_msg,
  input  logic                  nxt_ready,
  output logic                  prv_valid,
  output msg_t                  prv_msg,
  input  logic                  prv_ready,
  // distribution network: arriving from previous / next core
  input  logic                  fp_valid,
  input  msg_t                  fp_msg,
  output logic                  fp_ready,
  input  logic                  fn_valid,
  input  msg_t                  fn_msg,
  output logic                  fn_ready,
  // concurrency instructions of a parent thread on this core
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  mkind_e                cmd_kind,
  input  logic [CORE_W:0]       cmd_pid,         // place id (ALLOC)
  input  logic [CORE_W:0]       cmd_default_pid, // default place of the thread
  input  logic [CORE_W-1:0]     cmd_core,        // first core of the family (others)
  input  logic [FID_W-1:0]      cmd_fam,         // family slot on that core
  input  logic [15:0]           cmd_aux,
  input  logic [DATA_W-1:0]     cmd_data,
  output logic                  rsp_valid,
  output msg_t                  rsp_msg,
  // I-cache check for a ready thread
  output logic                  ic_req,
  output logic [TID_W-1:0]      ic_tid,
  output logic [31:0]           ic_pc,
  input  logic                  ic_hit,
  input  logic                  ic_fill_en,
  input  logic [TID_W-1:0]      ic_fill_tid,
  // issue to and write back from the pipeline
  output logic                  issue_valid,
  output issue_t                issue,
  input  logic                  issue_ready,
  input  logic                  wb_en,
  input  logic [TID_W-1:0]      wb_tid,
  input  wb_action_e            wb_action,
  input  logic [31:0]           wb_pc,
  // integer register file
  input  logic                  ir_rd_en,
  input  logic [RADDR_W-1:0]    ir_rd_addr,
  input  logic [TID_W-1:0]      ir_rd_tid,
  output logic [REG_W-1:0]      ir_rd_data,
  output logic                  ir_rd_full,
  input  logic                  ir_wr_en,
  input  logic [RADDR_W-1:0]    ir_wr_addr,
  input  logic [REG_W-1:0]      ir_wr_data,
  input  logic                  ir_aw_en,
  input  logic [RADDR_W-1:0]    ir_aw_addr,
  input  logic [REG_W-1:0]      ir_aw_data,
  output logic                  ir_aw_ready,
  // float register file
  input  logic                  fr_rd_en,
  input  logic [RADDR_W-1:0]    fr_rd_addr,
  input  logic [TID_W-1:0]      fr_rd_tid,
  output logic [REG_W-1:0]      fr_rd_data,
  output logic                  fr_rd_full,
  input  logic                  fr_wr_en,
  input  logic [RADDR_W-1:0]    fr_wr_addr,
  input  logic [REG_W-1:0]      fr_wr_data,
  input  logic                  fr_aw_en,
  input  logic [RADDR_W-1:0]    fr_aw_addr,
  input  logic [REG_W-1:0]      fr_aw_data,
  // observation of the core's mechanisms (one-cycle pulses)
  output logic                  ev_thread_created,
  output logic                  ev_thread_killed,
  output logic                  ev_window_full,
  output logic                  ev_alloc_suspend
);
  localparam int unsigned NT = NTHREADS;
  localparam int unsigned NF = NFAMILIES;
  localparam int unsigned NB = NBLKS;
  localparam int unsigned OW = $clog2(BLK_REGS);

  typedef struct packed {
    logic              valid;
    logic [CORE_W-1:0] parent;
    logic [CORE_W-1:0] first_core;
    logic [FID_W-1:0]  first_slot;
    logic [FID_W-1:0]  prev_slot;
    logic [FID_W-1:0]  next_slot;
    logic [15:0]       pos;
    logic [15:0]       psize;
    logic [31:0]       start, limit, step, block, pc;
    logic              dep;
    logic [BLK_W-1:0]  glob_blk;
    logic [BLK_W-1:0]  last_blk;
    logic              have_last;
    logic              create_req;   // CREATE received, range not yet worked out
    logic [2:0]        start_cnt;    // cycles spent working out the range
    logic              started;
    logic [31:0]       remaining;    // threads still to create on this core
    logic [31:0]       next_idx;     // index value of the next thread created here
    logic [TID_W:0]    alive;        // threads of this family alive on this core
    logic              acked;
    logic              prev_done;
    logic              done_sent;
  } fam_t;

  typedef struct packed {
    logic [FID_W-1:0]  fam;
    logic [31:0]       index;
    logic [31:0]       pc;
    logic [BLK_W-1:0]  blk;
    logic [BLK_W-1:0]  pred_blk;
    logic              has_pred;     // pred_blk belongs to a thread (dependent family)
  } thr_t;

  fam_t ft   [NF];
  fam_t ft_n [NF];
  thr_t tt   [NT];
  thr_t tt_n [NT];
  logic [NB-1:0] h_own, h_succ, h_fam, h_own_n, h_succ_n, h_fam_n;

  logic dout_v_n, nxt_v_n, prv_v_n, rsp_v_n;
  msg_t dout_m_n, nxt_m_n, prv_m_n, rsp_m_n;
  logic pend_v, pend_v_n;        // suspended allocation waiting for resources
  msg_t pend_m, pend_m_n;
  logic pend_from_del, pend_from_del_n;

  // scheduler and register files
  logic          create_en, cleanup_en;
  logic [TID_W-1:0] create_tid, cleanup_tid;
  logic [NT-1:0] empty_mask, killed_mask, wake_i, wake_f;
  tstate_e       tstate [NT];
  logic [TID_W-1:0] issue_tid;
  logic          clr_en;
  logic [BLK_W-1:0] clr_blk;
  logic          put_en;
  logic [RADDR_W-1:0] put_addr, get_addr;
  logic [REG_W-1:0] put_data, get_data;
  logic          get_full;

  scheduler #(.NT(NT)) u_sched (
    .clk, .rst_n,
    .create_en, .create_tid, .cleanup_en, .cleanup_tid,
    .ic_req, .ic_tid, .ic_hit, .ic_fill_en, .ic_fill_tid,
    .issue_valid, .issue_tid, .issue_ready,
    .wb_en, .wb_tid, .wb_action,
    .wake_mask(wake_i | wake_f),
    .empty_mask, .killed_mask, .state(tstate));

  sync_regfile u_iregs (
    .clk, .rst_n,
    .rd_en(ir_rd_en), .rd_addr(ir_rd_addr), .rd_tid(ir_rd_tid),
    .rd_data(ir_rd_data), .rd_full(ir_rd_full),
    .nrd_addr(get_addr), .nrd_data(get_data), .nrd_full(get_full),
    .wr_en(ir_wr_en), .wr_addr(ir_wr_addr), .wr_data(ir_wr_data),
    .aw_en(put_en ? 1'b1 : ir_aw_en), .aw_addr(put_en ? put_addr : ir_aw_addr),
    .aw_data(put_en ? put_data : ir_aw_data),
    .clr_en, .clr_blk, .wake_mask(wake_i));

  logic [REG_W-1:0] f_nrd_data;
  logic             f_nrd_full;
  sync_regfile u_fregs (
    .clk, .rst_n,
    .rd_en(fr_rd_en), .rd_addr(fr_rd_addr), .rd_tid(fr_rd_tid),
    .rd_data(fr_rd_data), .rd_full(fr_rd_full),
    .nrd_addr(get_addr), .nrd_data(f_nrd_data), .nrd_full(f_nrd_full),
    .wr_en(fr_wr_en), .wr_addr(fr_wr_addr), .wr_data(fr_wr_data),
    .aw_en(fr_aw_en), .aw_addr(fr_aw_addr), .aw_data(fr_aw_data),
    .clr_en, .clr_blk, .wake_mask(wake_f));

  assign ir_aw_ready = !put_en;
  assign ic_pc       = tt[ic_tid].pc;

  always_comb begin
    issue.tid       = issue_tid;
    issue.pc        = tt[issue_tid].pc;
    issue.index     = tt[issue_tid].index;
    issue.base      = {tt[issue_tid].blk, OW'(0)};
    issue.dep_base  = {tt[issue_tid].pred_blk, OW'(0)};
    issue.glob_base = {ft[tt[issue_tid].fam].glob_blk, OW'(0)};
  end

  // ---------------- helpers ----------------
  function automatic msg_t mk(input mkind_e k, input logic [CORE_W-1:0] dst,
                              input logic [FID_W-1:0] fam, input logic [FID_W-1:0] pfam,
                              input logic [CORE_W-1:0] parent,
                              input logic [15:0] aux, input logic [DATA_W-1:0] data);
    msg_t m;
    m.kind = k; m.src = core_id; m.dst = dst; m.fam = fam; m.pfam = pfam;
    m.parent = parent; m.aux = aux; m.data = data;
    return m;
  endfunction

  logic              fslot_ok, tslot_ok, blk_ok;
  logic [FID_W-1:0]  fslot;
  logic [BLK_W-1:0]  fblk;
  logic [TID_W-1:0]  ftid;

  // placeid decode for ALLOC commands
  logic [CORE_W-1:0] pl_first;
  logic [CORE_W:0]   pl_size;
  logic              pl_valid;
  placeid_decode #(.NCORES(NCORES)) u_pid (
    .pid(cmd_pid), .self_core(core_id), .default_pid(cmd_default_pid),
    .first_core(pl_first), .size(pl_size), .valid(pl_valid));

  // a thread count: ceil((limit - start) / step), 0 when the range is empty
  function automatic logic [31:0] nthreads(input fam_t f);
    if (f.step == 0 || f.limit <= f.start) return 0;
    return (f.limit - f.start + f.step - 1) / f.step;
  endfunction

  // ---------------- main next-state logic ----------------
  logic din_take, fp_take, fn_take, cmd_take;
  logic [TID_W:0] dummy_unused;

  always_comb begin
    logic        used_dout, used_nxt, used_prv, used_rsp, done_ev, cr_done;
    logic [NB-1:0] blk_busy;
    msg_t        m;
    logic        from_del;
    logic        alloc_try;
    logic        ok;
    logic [FID_W-1:0] f;
    logic [31:0] n, per, lo, hi;
    logic        rs_ok, cs_ok;
    logic [FID_W-1:0] rs, cs;
    fam_t        fs, fc;
    logic [15:0] pos, psz;
    logic        have, del, fwd, needs_dout;

    rs_ok = 1'b0; cs_ok = 1'b0; rs = '0; cs = '0; fs = '0; fc = '0;
    n = '0; per = '0; lo = '0; hi = '0; pos = '0; psz = '0;
    have = 1'b0; del = 1'b0; fwd = 1'b0; needs_dout = 1'b0;
    ok = 1'b0; f = '0; done_ev = 1'b0; cr_done = 1'b0;
    for (int i = 0; i < NF; i++) ft_n[i] = ft[i];
    for (int i = 0; i < NT; i++) tt_n[i] = tt[i];
    h_own_n = h_own; h_succ_n = h_succ; h_fam_n = h_fam;
    pend_v_n = pend_v; pend_m_n = pend_m; pend_from_del_n = pend_from_del;

    // outputs drain when accepted
    // *_v_n marks a new message loaded this cycle; draining is done at the
    // clock edge from the ready inputs
    dout_v_n = 1'b0; dout_m_n = dout_msg;
    nxt_v_n  = 1'b0; nxt_m_n  = nxt_msg;
    prv_v_n  = 1'b0; prv_m_n  = prv_msg;
    rsp_v_n  = 1'b0;                      rsp_m_n  = rsp_msg;
    // an output register takes a new message only when it was empty at the
    // start of the cycle, so readiness never depends on a neighbour's input
    used_dout = dout_valid; used_nxt = nxt_valid; used_prv = prv_valid; used_rsp = 1'b0;

    din_take = 1'b0; fp_take = 1'b0; fn_take = 1'b0; cmd_take = 1'b0;
    create_en = 1'b0; create_tid = '0; cleanup_en = 1'b0; cleanup_tid = '0;
    clr_en = 1'b0; clr_blk = '0;
    put_en = 1'b0; put_addr = '0; put_data = '0; get_addr = '0;
    ev_thread_created = 1'b0; ev_thread_killed = 1'b0; ev_window_full = 1'b0;
    ev_alloc_suspend = 1'b0;
    dummy_unused = '0;

    // ---- cleanup of one killed thread per cycle ----
    for (int t = NT - 1; t >= 0; t--)
      if (killed_mask[t]) begin cleanup_en = 1'b1; cleanup_tid = TID_W'(t); end
    if (cleanup_en) begin
      h_own_n[tt[cleanup_tid].blk] = 1'b0;
      if (tt[cleanup_tid].has_pred) h_succ_n[tt[cleanup_tid].pred_blk] = 1'b0;
      ft_n[tt[cleanup_tid].fam].alive = ft_n[tt[cleanup_tid].fam].alive - 1'b1;
      ev_thread_killed = 1'b1;
    end

    // free resources as seen at the start of the cycle
    blk_busy = h_own | h_succ | h_fam;
    fslot_ok = 1'b0; fslot = '0;
    for (int i = NF - 1; i >= 0; i--) if (!ft[i].valid) begin fslot_ok = 1'b1; fslot = FID_W'(i); end
    blk_ok = 1'b0; fblk = '0;
    for (int i = NB - 1; i >= 0; i--) if (!blk_busy[i]) begin blk_ok = 1'b1; fblk = BLK_W'(i); end
    tslot_ok = 1'b0; ftid = '0;
    for (int i = NT - 1; i >= 0; i--) if (empty_mask[i]) begin tslot_ok = 1'b1; ftid = TID_W'(i); end

    // ---- allocation: the pending (suspended) one first, then a new one ----
    alloc_try = 1'b0; from_del = 1'b0; m = '0;
    if (pend_v) begin
      alloc_try = 1'b1; m = pend_m; from_del = pend_from_del;
    end else if (din_valid && din_msg.kind == M_ALLOC) begin
      alloc_try = 1'b1; m = din_msg; from_del = 1'b1;
    end else if (fp_valid && fp_msg.kind == M_ALLOC_REQ) begin
      alloc_try = 1'b1; m = fp_msg; from_del = 1'b0;
    end
    if (alloc_try && !used_dout && !used_nxt && !used_prv) begin
      ok  = fslot_ok && tslot_ok && blk_ok;
      pos = from_del ? 16'd0 : m.aux;
      psz = from_del ? m.aux : m.data[15:0];
      if (!pend_v) begin
        if (from_del) din_take = 1'b1; else fp_take = 1'b1;
      end
      if (ok) begin
        pend_v_n = 1'b0;
        f = fslot;
        ft_n[f] = '0;
        ft_n[f].valid      = 1'b1;
        ft_n[f].parent     = m.parent;
        ft_n[f].pos        = pos;
        ft_n[f].psize      = psz;
        ft_n[f].first_core = from_del ? core_id : CORE_W'(m.data[47:40]);
        ft_n[f].first_slot = from_del ? f : FID_W'(m.data[39:32]);
        ft_n[f].prev_slot  = m.pfam;
        ft_n[f].glob_blk   = fblk;
        h_fam_n[fblk]      = 1'b1;
        if (pos + 16'd1 >= psz) begin
          // last core of the place
          if (from_del) begin
            dout_v_n = 1'b1; used_dout = 1'b1;
            dout_m_n = mk(M_ALLOC_OK, m.parent, '0, f, m.parent, psz, DATA_W'(f));
          end else begin
            prv_v_n = 1'b1; used_prv = 1'b1;
            prv_m_n = mk(M_ALLOC_ACK, '0, m.pfam, f, m.parent, '0, '0);
          end
        end else begin
          nxt_v_n = 1'b1; used_nxt = 1'b1;
          nxt_m_n = mk(M_ALLOC_REQ, '0, '0, f, m.parent, pos + 16'd1,
                       {m.data[63:48],
                        from_del ? core_id : m.data[47:40],
                        from_del ? 8'(f) : m.data[39:32],
                        16'(m.data[31:16]) | (from_del ? 16'(m.data[1:0]) : 16'd0),
                        psz});
        end
      end else if ((from_del ? m.data[1:0] : m.data[17:16]) == AM_SUSPEND) begin
        // keep the request and retry until resources free up
        pend_v_n = 1'b1; pend_m_n = m; pend_from_del_n = from_del;
        ev_alloc_suspend = !pend_v;
      end else begin
        pend_v_n = 1'b0;
        if (from_del) begin
          dout_v_n = 1'b1; used_dout = 1'b1;
          dout_m_n = mk(M_ALLOC_FAIL, m.parent, '0, '0, m.parent, '0, '0);
        end else begin
          prv_v_n = 1'b1; used_prv = 1'b1;
          prv_m_n = mk(M_ALLOC_UNDO, '0, m.pfam, '0, m.parent, '0, '0);
        end
      end
    end

    // ---- backward messages from the next core ----
    if (fn_valid && (fn_msg.kind == M_ALLOC_ACK || fn_msg.kind == M_ALLOC_UNDO)) begin
      f = fn_msg.fam;
      if (ft[f].pos == 0 ? !used_dout : !used_prv) begin
        fn_take = 1'b1;
        if (fn_msg.kind == M_ALLOC_ACK) begin
          ft_n[f].next_slot = fn_msg.pfam;
          if (ft[f].pos == 0) begin
            dout_v_n = 1'b1; used_dout = 1'b1;
            dout_m_n = mk(M_ALLOC_OK, ft[f].parent, '0, f, ft[f].parent, ft[f].psize, DATA_W'(f));
          end else begin
            prv_v_n = 1'b1; used_prv = 1'b1;
            prv_m_n = mk(M_ALLOC_ACK, '0, ft[f].prev_slot, f, ft[f].parent, '0, '0);
          end
        end else begin
          ft_n[f].valid = 1'b0;
          h_fam_n[ft[f].glob_blk] = 1'b0;
          if (ft[f].pos == 0) begin
            dout_v_n = 1'b1; used_dout = 1'b1;
            dout_m_n = mk(M_ALLOC_FAIL, ft[f].parent, '0, '0, ft[f].parent, '0, '0);
          end else begin
            prv_v_n = 1'b1; used_prv = 1'b1;
            prv_m_n = mk(M_ALLOC_UNDO, '0, ft[f].prev_slot, '0, ft[f].parent, '0, '0);
          end
        end
      end
    end

    // ---- family messages: from the parent (delegation) or the previous core ----
    begin
      m = '0;
      if (din_valid && !din_take && din_msg.kind inside {[M_SETSTART:M_RELEASE]}) begin
        have = 1'b1; del = 1'b1; m = din_msg;
      end else if (fp_valid && !fp_take && fp_msg.kind inside {[M_SETSTART:M_RELEASE], M_DONE}) begin
        have = 1'b1; m = fp_msg;
      end
      if (have) begin
        f = m.fam;
        fwd        = (m.kind != M_GET) && (m.kind != M_DONE) && (ft[f].pos + 16'd1 < ft[f].psize);
        needs_dout = (m.kind == M_GET);
        if (!(fwd && used_nxt) && !(needs_dout && used_dout)) begin
          if (del) din_take = 1'b1; else fp_take = 1'b1;
          if (fwd) begin
            nxt_v_n = 1'b1; used_nxt = 1'b1;
            nxt_m_n = m;
            nxt_m_n.src = core_id;
            nxt_m_n.fam = ft[f].next_slot;
          end
          unique case (m.kind)
            M_SETSTART: ft_n[f].start = m.data[31:0];
            M_SETLIMIT: ft_n[f].limit = m.data[31:0];
            M_SETSTEP:  ft_n[f].step  = m.data[31:0];
            M_SETBLOCK: ft_n[f].block = m.data[31:0];
            M_SETPC:    ft_n[f].pc    = m.data[31:0];
            M_SETDEP:   ft_n[f].dep   = m.data[0];
            M_CREATE:   ft_n[f].create_req = 1'b1;
            M_PUT: begin
              put_en   = 1'b1;
              put_addr = {ft[f].glob_blk, m.aux[OW-1:0]};
              put_data = m.data;
            end
            M_GET: begin
              get_addr = {(ft[f].have_last ? ft[f].last_blk : ft[f].glob_blk), m.aux[OW-1:0]};
              dout_v_n = 1'b1; used_dout = 1'b1;
              dout_m_n = mk(M_GET_RSP, ft[f].parent, '0, f, ft[f].parent, m.aux, get_data);
            end
            M_RELEASE: begin
              ft_n[f].valid = 1'b0;
              h_fam_n[ft[f].glob_blk] = 1'b0;
              if (ft[f].have_last && ft[f].dep) h_succ_n[ft[f].last_blk] = 1'b0;
            end
            M_DONE:     ft_n[f].prev_done = 1'b1;
            default: ;
          endcase
        end
      end
    end

    // ---- answers arriving for this core's parent threads ----
    if (din_valid && !din_take && din_msg.kind inside {[M_ALLOC_OK:M_GET_RSP]}) begin
      din_take = 1'b1;
      rsp_v_n = 1'b1; used_rsp = 1'b1; rsp_m_n = din_msg;
    end

    // ---- concurrency instructions of a local parent thread ----
    if (cmd_valid && !used_dout) begin
      cmd_take = 1'b1;
      if (cmd_kind == M_ALLOC) begin
        if (pl_valid) begin
          dout_v_n = 1'b1; used_dout = 1'b1;
          dout_m_n = mk(M_ALLOC, pl_first, '0, '0, core_id, 16'(pl_size), cmd_data);
        end else if (!used_rsp) begin
          rsp_v_n = 1'b1; used_rsp = 1'b1;
          rsp_m_n = mk(M_ALLOC_FAIL, core_id, '0, '0, core_id, '0, '0);
        end else cmd_take = 1'b0;
      end else begin
        dout_v_n = 1'b1; used_dout = 1'b1;
        dout_m_n = mk(cmd_kind, cmd_core, cmd_fam, '0, core_id, cmd_aux, cmd_data);
      end
    end

    // ---- creation: 4 cycles to work out the share, then one thread per cycle ----
    // one shared range unit: the lowest family that reaches the last start
    // cycle uses it; another one waiting on the same cycle tries again next
    cr_done = 1'b0;
    rs_ok = 1'b0; rs = '0;
    for (int i = NF - 1; i >= 0; i--)
      if (ft[i].valid && ft[i].create_req && !ft[i].started &&
          ft[i].start_cnt == 3'(CREATE_START_CYCLES - 2)) begin rs_ok = 1'b1; rs = FID_W'(i); end
    for (int i = 0; i < NF; i++)
      if (ft[i].valid && ft[i].create_req && !ft[i].started &&
          ft[i].start_cnt != 3'(CREATE_START_CYCLES - 2))
        ft_n[i].start_cnt = ft[i].start_cnt + 3'd1;
    if (rs_ok) begin
      // the range is known after CREATE_START_CYCLES-1 cycles and the first
      // thread is created in the next, CREATE_START_CYCLES after CREATE
      fs  = ft[rs];
      n   = nthreads(fs);
      per = fs.dep ? n : (n + 32'(fs.psize) - 1) / 32'(fs.psize);
      lo  = (fs.dep && fs.pos != 0) ? n : per * 32'(fs.pos);
      hi  = (lo + per > n) ? n : lo + per;
      ft_n[rs].remaining = (hi > lo) ? hi - lo : 32'd0;
      ft_n[rs].next_idx  = fs.start + lo * fs.step;
      ft_n[rs].started   = 1'b1;
    end
    // one thread per cycle, from the lowest family that can create
    cs_ok = 1'b0; cs = '0;
    for (int i = NF - 1; i >= 0; i--)
      if (ft[i].valid && ft[i].started && ft[i].remaining != 0) begin
        if (32'(ft_n[i].alive) >= ft[i].block) ev_window_full = 1'b1;
        else if (tslot_ok && blk_ok && !h_fam_n[fblk]) begin cs_ok = 1'b1; cs = FID_W'(i); end
      end
    if (cs_ok) begin
      fc = ft[cs];
      cr_done     = 1'b1;
      create_en   = 1'b1;
      create_tid  = ftid;
      clr_en      = 1'b1;
      clr_blk     = fblk;
      h_own_n[fblk] = 1'b1;
      tt_n[ftid].fam      = cs;
      tt_n[ftid].index    = fc.next_idx;
      tt_n[ftid].pc       = fc.pc;
      tt_n[ftid].blk      = fblk;
      tt_n[ftid].pred_blk = (fc.dep && fc.have_last) ? fc.last_blk : fc.glob_blk;
      tt_n[ftid].has_pred = fc.dep && fc.have_last;
      if (fc.dep) h_succ_n[fblk] = 1'b1;
      ft_n[cs].last_blk  = fblk;
      ft_n[cs].have_last = 1'b1;
      ft_n[cs].remaining = fc.remaining - 1;
      ft_n[cs].next_idx  = fc.next_idx + fc.step;
      ft_n[cs].alive     = ft_n[cs].alive + 1'b1;
      ev_thread_created = 1'b1;
    end

    // ---- events: create acknowledgement and family completion ----
    done_ev = 1'b0;
    for (int i = 0; i < NF; i++) begin
      if (ft[i].valid && ft[i].started && ft[i].pos == 0 && !ft[i].acked && !used_dout &&
          (ft[i].remaining == 0 || 32'(ft[i].alive) >= ft[i].block)) begin
        ft_n[i].acked = 1'b1;
        dout_v_n = 1'b1; used_dout = 1'b1;
        dout_m_n = mk(M_CREATE_ACK, ft[i].parent, '0, FID_W'(i), ft[i].parent, '0, '0);
      end
    end
    for (int i = 0; i < NF; i++) begin
      if (!done_ev && ft[i].valid && ft[i].started && (ft[i].acked || ft[i].pos != 0) &&
          ft[i].remaining == 0 && ft[i].alive == 0 && !ft[i].done_sent &&
          (ft[i].pos == 0 || ft[i].prev_done)) begin
        if (ft[i].pos + 16'd1 >= ft[i].psize) begin
          if (!used_dout) begin
            done_ev = 1'b1; ft_n[i].done_sent = 1'b1;
            dout_v_n = 1'b1; used_dout = 1'b1;
            dout_m_n = mk(M_SYNC_DONE, ft[i].parent, '0, ft[i].first_slot, ft[i].parent,
                          16'(ft[i].first_core), '0);
          end
        end else if (!used_nxt) begin
          done_ev = 1'b1; ft_n[i].done_sent = 1'b1;
          nxt_v_n = 1'b1; used_nxt = 1'b1;
          nxt_m_n = mk(M_DONE, '0, ft[i].next_slot, FID_W'(i), ft[i].parent, '0, '0);
        end
      end
    end

    // ---- PC kept up to date from write back ----
    if (wb_en) tt_n[wb_tid].pc = wb_pc;
  end

  assign din_ready = din_take;
  assign fp_ready  = fp_take;
  assign fn_ready  = fn_take;
  assign cmd_ready = cmd_take;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NF; i++) ft[i] <= '0;
      for (int i = 0; i < NT; i++) tt[i] <= '0;
      h_own <= '0; h_succ <= '0; h_fam <= '0;
      dout_valid <= 1'b0; nxt_valid <= 1'b0; prv_valid <= 1'b0; rsp_valid <= 1'b0;
      dout_msg <= '0; nxt_msg <= '0; prv_msg <= '0; rsp_msg <= '0;
      pend_v <= 1'b0; pend_m <= '0; pend_from_del <= 1'b0;
    end else begin
      for (int i = 0; i < NF; i++) ft[i] <= ft_n[i];
      for (int i = 0; i < NT; i++) tt[i] <= tt_n[i];
      h_own <= h_own_n; h_succ <= h_succ_n; h_fam <= h_fam_n;
      dout_valid <= dout_v_n || (dout_valid && !dout_ready); dout_msg <= dout_m_n;
      nxt_valid  <= nxt_v_n  || (nxt_valid  && !nxt_ready);  nxt_msg  <= nxt_m_n;
      prv_valid  <= prv_v_n  || (prv_valid  && !prv_ready);  prv_msg  <= prv_m_n;
      rsp_valid  <= rsp_v_n;  rsp_msg  <= rsp_m_n;
      pend_v <= pend_v_n; pend_m <= pend_m_n; pend_from_del <= pend_from_del_n;
    end
  end
endmodule
