// microgrid: the thread-management fabric of a Microgrid chip.
//
// NCORES cores (128 in the chip layout of the source description), each with
// its family table, thread table, scheduler and two synchronising register
// files (mg_core), joined by the two control networks the source describes:
// the delegation network, which connects every core to every other core, and
// the distribution network, a daisy chain from core 0 to core NCORES-1 with
// two cycles per hop. A thread on any core can allocate a place (a power-of-
// two group of adjacent cores), configure and create a family there, pass it
// globals and shareds, wait for its completion and release it; the cores carry
// this out among themselves.
//
// What is not here, because the source names these parts without saying how
// they work, are the six-stage pipeline that executes instructions, the L1
// caches, the FPUs shared by pairs of cores, the L2 caches with their snoopy
// buses, the memory ring, the directories and the DDR channels. Their place
// is taken by the per-core port bundles: pin[i] brings in what core i's
// pipeline, I-cache, D-cache and FPU report (concurrency instructions, I-cache
// hits and fills, write backs, register reads and writes, asynchronous
// completions); pout[i] carries what the core's thread management gives them
// (answers to concurrency instructions, the thread to fetch, the thread to
// issue with its register windows, register read data).
//
// Timing: one clock, synchronous active-low reset.
module microgrid
  import mg_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_DEF
) (
  input  logic      clk,
  input  logic      rst_n,
  input  pipe_in_t  pin  [NCORES],
  output pipe_out_t pout [NCORES]
);
  logic [NCORES-1:0] d_out_valid, d_out_ready, d_in_valid, d_in_ready;
  msg_t              d_out_msg [NCORES];
  msg_t              d_in_msg  [NCORES];
  logic [NCORES-1:0] n_valid, n_ready, p_valid, p_ready;
  logic [NCORES-1:0] fp_valid, fp_ready, fn_valid, fn_ready;
  msg_t              n_msg [NCORES];
  msg_t              p_msg [NCORES];
  msg_t              fp_msg [NCORES];
  msg_t              fn_msg [NCORES];

  delegation_net #(.N(NCORES)) u_deleg (
    .clk, .rst_n,
    .out_valid(d_out_valid), .out_msg(d_out_msg), .out_ready(d_out_ready),
    .in_valid(d_in_valid), .in_msg(d_in_msg), .in_ready(d_in_ready));

  distribution_net #(.N(NCORES)) u_dist (
    .clk, .rst_n,
    .nxt_valid(n_valid), .nxt_msg(n_msg), .nxt_ready(n_ready),
    .prv_valid(p_valid), .prv_msg(p_msg), .prv_ready(p_ready),
    .from_prv_valid(fp_valid), .from_prv_msg(fp_msg), .from_prv_ready(fp_ready),
    .from_nxt_valid(fn_valid), .from_nxt_msg(fn_msg), .from_nxt_ready(fn_ready));

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    mg_core #(.NCORES(NCORES)) u_core (
      .clk, .rst_n,
      .core_id(CORE_W'(i)),
      .dout_valid(d_out_valid[i]), .dout_msg(d_out_msg[i]), .dout_ready(d_out_ready[i]),
      .din_valid(d_in_valid[i]), .din_msg(d_in_msg[i]), .din_ready(d_in_ready[i]),
      .nxt_valid(n_valid[i]), .nxt_msg(n_msg[i]), .nxt_ready(n_ready[i]),
      .prv_valid(p_valid[i]), .prv_msg(p_msg[i]), .prv_ready(p_ready[i]),
      .fp_valid(fp_valid[i]), .fp_msg(fp_msg[i]), .fp_ready(fp_ready[i]),
      .fn_valid(fn_valid[i]), .fn_msg(fn_msg[i]), .fn_ready(fn_ready[i]),
      .cmd_valid(pin[i].cmd_valid), .cmd_ready(pout[i].cmd_ready),
      .cmd_kind(pin[i].cmd_kind), .cmd_pid(pin[i].cmd_pid),
      .cmd_default_pid(pin[i].cmd_default_pid), .cmd_core(pin[i].cmd_core),
      .cmd_fam(pin[i].cmd_fam), .cmd_aux(pin[i].cmd_aux), .cmd_data(pin[i].cmd_data),
      .rsp_valid(pout[i].rsp_valid), .rsp_msg(pout[i].rsp_msg),
      .ic_req(pout[i].ic_req), .ic_tid(pout[i].ic_tid), .ic_pc(pout[i].ic_pc),
      .ic_hit(pin[i].ic_hit), .ic_fill_en(pin[i].ic_fill_en), .ic_fill_tid(pin[i].ic_fill_tid),
      .issue_valid(pout[i].issue_valid), .issue(pout[i].issue), .issue_ready(pin[i].issue_ready),
      .wb_en(pin[i].wb_en), .wb_tid(pin[i].wb_tid), .wb_action(pin[i].wb_action),
      .wb_pc(pin[i].wb_pc),
      .ir_rd_en(pin[i].ir_rd_en), .ir_rd_addr(pin[i].ir_rd_addr), .ir_rd_tid(pin[i].ir_rd_tid),
      .ir_rd_data(pout[i].ir_rd_data), .ir_rd_full(pout[i].ir_rd_full),
      .ir_wr_en(pin[i].ir_wr_en), .ir_wr_addr(pin[i].ir_wr_addr), .ir_wr_data(pin[i].ir_wr_data),
      .ir_aw_en(pin[i].ir_aw_en), .ir_aw_addr(pin[i].ir_aw_addr), .ir_aw_data(pin[i].ir_aw_data),
      .ir_aw_ready(pout[i].ir_aw_ready),
      .fr_rd_en(pin[i].fr_rd_en), .fr_rd_addr(pin[i].fr_rd_addr), .fr_rd_tid(pin[i].fr_rd_tid),
      .fr_rd_data(pout[i].fr_rd_data), .fr_rd_full(pout[i].fr_rd_full),
      .fr_wr_en(pin[i].fr_wr_en), .fr_wr_addr(pin[i].fr_wr_addr), .fr_wr_data(pin[i].fr_wr_data),
      .fr_aw_en(pin[i].fr_aw_en), .fr_aw_addr(pin[i].fr_aw_addr), .fr_aw_data(pin[i].fr_aw_data),
      .ev_thread_created(pout[i].ev_thread_created), .ev_thread_killed(pout[i].ev_thread_killed),
      .ev_window_full(pout[i].ev_window_full), .ev_alloc_suspend(pout[i].ev_alloc_suspend));
  end
endmodule
