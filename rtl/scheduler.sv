// scheduler: thread life cycle and thread choice of one core.
//
// Holds the state of every thread context and moves it along the thread life
// cycle of the source description:
//   EMPTY     -> READY      thread creation (the allocator sets its PC)
//   READY     -> ACTIVE     I-cache hit for the thread's PC
//   READY     -> WAITING    I-cache miss
//   WAITING   -> ACTIVE     I-cache read completion
//   ACTIVE    -> RUNNING    switch: chosen to issue into the pipeline
//   RUNNING   -> READY      reschedule at write back
//   RUNNING or ACTIVE -> SUSPENDED  suspend at write back (empty register)
//   SUSPENDED -> READY      asynchronous completion (register written)
//   ACTIVE or RUNNING -> KILLED     thread termination
//   KILLED    -> EMPTY      cleanup by the allocator
// The ready and active queues are kept as bit vectors served round robin (one
// I-cache lookup and one issue per cycle), which gives the fairness the
// source asks for and lets a lone thread issue on every cycle. A wake that
// arrives while its thread is still in the pipeline is remembered and turns
// the later suspend into a reschedule, so no wake is lost; this and the
// round-robin queues are this design's own choices.
//
// Timing: ic_hit is sampled in the cycle ic_req is high; issue happens in the
// cycle issue_valid && issue_ready; all state changes take effect at the next
// clock edge. Synchronous active-low reset empties every context.
//
// Unused-signal lint note: the one-hot grants of the two pickers are not
// needed; only their indexes are used.
module scheduler
  import mg_pkg::*;
#(
  parameter int unsigned NT = NTHREADS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // creation and cleanup from the allocator
  input  logic                  create_en,
  input  logic [$clog2(NT)-1:0] create_tid,
  input  logic                  cleanup_en,
  input  logic [$clog2(NT)-1:0] cleanup_tid,
  // I-cache lookup for a ready thread
  output logic                  ic_req,
  output logic [$clog2(NT)-1:0] ic_tid,
  input  logic                  ic_hit,
  input  logic                  ic_fill_en,
  input  logic [$clog2(NT)-1:0] ic_fill_tid,
  // issue to the pipeline
  output logic                  issue_valid,
  output logic [$clog2(NT)-1:0] issue_tid,
  input  logic                  issue_ready,
  // write back report from the pipeline
  input  logic                  wb_en,
  input  logic [$clog2(NT)-1:0] wb_tid,
  input  wb_action_e            wb_action,
  // asynchronous completion: threads whose awaited register was written
  input  logic [NT-1:0]         wake_mask,
  // state seen by the allocator
  output logic [NT-1:0]         empty_mask,
  output logic [NT-1:0]         killed_mask,
  output tstate_e               state [NT]
);
  localparam int unsigned TW = $clog2(NT);
  tstate_e       st [NT];
  logic [NT-1:0] pend_wake;
  logic [NT-1:0] ready_v, active_v;

  always_comb begin
    for (int i = 0; i < NT; i++) begin
      ready_v[i]     = (st[i] == TS_READY);
      active_v[i]    = (st[i] == TS_ACTIVE);
      empty_mask[i]  = (st[i] == TS_EMPTY);
      killed_mask[i] = (st[i] == TS_KILLED);
      state[i]       = st[i];
    end
  end

  logic ic_any, is_any;
  logic [NT-1:0] ic_g, is_g;
  rr_pick #(.N(NT)) u_ready  (.clk, .rst_n, .req(ready_v),  .advance(1'b1),
                              .grant(ic_g), .idx(ic_tid), .valid(ic_any));
  rr_pick #(.N(NT)) u_active (.clk, .rst_n, .req(active_v), .advance(issue_ready),
                              .grant(is_g), .idx(issue_tid), .valid(is_any));
  assign ic_req      = ic_any;
  assign issue_valid = is_any;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NT; i++) st[i] <= TS_EMPTY;
      pend_wake <= '0;
    end else begin
      for (int i = 0; i < NT; i++) begin
        unique case (st[i])
          TS_EMPTY:     if (create_en && create_tid == TW'(i)) st[i] <= TS_READY;
          TS_READY:     if (ic_any && ic_tid == TW'(i)) st[i] <= ic_hit ? TS_ACTIVE : TS_WAITING;
          TS_WAITING:   if (ic_fill_en && ic_fill_tid == TW'(i)) st[i] <= TS_ACTIVE;
          TS_SUSPENDED: if (wake_mask[i]) st[i] <= TS_READY;
          TS_KILLED:    if (cleanup_en && cleanup_tid == TW'(i)) st[i] <= TS_EMPTY;
          default: ;
        endcase
        if (st[i] == TS_ACTIVE && is_any && issue_ready && issue_tid == TW'(i))
          st[i] <= TS_RUNNING;
        if ((st[i] == TS_RUNNING || st[i] == TS_ACTIVE) && wb_en && wb_tid == TW'(i)) begin
          unique case (wb_action)
            WB_RESCHEDULE: st[i] <= TS_READY;
            WB_SUSPEND:    st[i] <= (pend_wake[i] || wake_mask[i]) ? TS_READY : TS_SUSPENDED;
            WB_TERMINATE:  st[i] <= TS_KILLED;
            default: ;
          endcase
        end
        // remember a wake that arrives before the thread has suspended
        if (wake_mask[i] && st[i] != TS_SUSPENDED && !(wb_en && wb_tid == TW'(i)))
          pend_wake[i] <= 1'b1;
        else if (wb_en && wb_tid == TW'(i))
          pend_wake[i] <= 1'b0;
      end
    end
  end

  a_create_empty: assert property (@(posedge clk) disable iff (!rst_n)
    create_en |-> st[create_tid] == TS_EMPTY);
  a_wb_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    wb_en |-> (st[wb_tid] == TS_RUNNING || st[wb_tid] == TS_ACTIVE));
endmodule
