// tb_pipe_model: a stand-in for one core's pipeline and I-cache, used by the
// chip-level testbenches. Every thread runs the same short program:
//   read  the register at dep_base + 1 (a global in an independent family,
//         the previous thread's shared in a dependent one);
//   if it is empty, suspend at write back;
//   else  write value + index to base + 1 (the thread's shared) and end.
// The read happens in the issue cycle and write back two cycles later. The
// I-cache misses at random (one miss outstanding; filled 3 cycles later).
// Each finished thread is reported on res_* for the testbench to check.
module tb_pipe_model
  import mg_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  pipe_out_t   po,
  output pipe_in_t    pi,
  output logic        res_valid,
  output logic [31:0] res_index,
  output logic [63:0] res_value,
  output logic        ev_suspend,
  output logic        ev_icmiss
);
  typedef struct packed { logic v; logic [TID_W-1:0] tid; logic full; logic [63:0] val;
                          logic [31:0] index; logic [RADDR_W-1:0] base; } stage_t;
  stage_t s1, s2;
  logic miss_busy; logic [1:0] miss_cnt; logic [TID_W-1:0] miss_tid;
  logic hit_rnd, hit_now;

  // one miss outstanding: while a fill is pending every lookup hits
  always_ff @(posedge clk) hit_rnd <= ($urandom % 4 != 0);
  assign hit_now = miss_busy || hit_rnd;

  always_comb begin
    pi = '0;
    pi.ic_hit      = hit_now;
    pi.ic_fill_en  = miss_busy && miss_cnt == 0;
    pi.ic_fill_tid = miss_tid;
    pi.issue_ready = 1'b1;
    pi.ir_rd_en    = po.issue_valid;
    pi.ir_rd_addr  = po.issue.dep_base + 1;
    pi.ir_rd_tid   = po.issue.tid;
    pi.ir_wr_en    = s2.v && s2.full;
    pi.ir_wr_addr  = s2.base + 1;
    pi.ir_wr_data  = s2.val + 64'(s2.index);
    pi.wb_en       = s2.v;
    pi.wb_tid      = s2.tid;
    pi.wb_action   = s2.full ? WB_TERMINATE : WB_SUSPEND;
    pi.wb_pc       = 32'h100;
    res_valid      = s2.v && s2.full;
    res_index      = s2.index;
    res_value      = s2.val + 64'(s2.index);
    ev_suspend     = s2.v && !s2.full;
    ev_icmiss      = po.ic_req && !hit_now;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; miss_busy <= 1'b0; miss_cnt <= '0; miss_tid <= '0;
    end else begin
      s1.v <= po.issue_valid; s1.tid <= po.issue.tid; s1.full <= po.ir_rd_full;
      s1.val <= po.ir_rd_data; s1.index <= po.issue.index; s1.base <= po.issue.base;
      s2 <= s1;
      if (po.ic_req && !hit_now) begin
        miss_busy <= 1'b1; miss_cnt <= 2'd2; miss_tid <= po.ic_tid;
      end else if (miss_busy) begin
        if (miss_cnt == 0) miss_busy <= 1'b0;
        else miss_cnt <= miss_cnt - 1'b1;
      end
    end
  end
endmodule
