// qos_edge: bandwidth enforcement at the edge of the interconnect, next to the
// target.
//
// Requests from the last arbitration point pass through this block to the
// target. For every thread it keeps a periodic credit event (alloc_tick) and a
// credit counter (credit_counter): the counter gains a credit at the thread's
// allocated rate and loses one each time the target accepts a request of that
// thread. Priority and bandwidth threads whose count is negative are demoted;
// the demote bits go back into the interconnect core as sideband signals, where
// every arbitration point treats a demoted thread as best effort. Best-effort
// threads are never demoted, since they have no allocation to overrun.
//
// Interface: in_valid/in_req/in_ready from the core, tgt_valid/tgt_req/
// tgt_ready to the target, wired straight through so a request reaches the
// target in the cycle it leaves the core. Per-thread configuration:
// thread_level, alloc_num/alloc_den (share of target cycles), pos_limit and
// neg_limit. demote and credit are registered.
//
// The per-thread counters, their limits and the demote rule follow the paper;
// the rate encoding and the widths are this design's choices.
module qos_edge
  import qos_pkg::*;
#(
  parameter int unsigned NT = NTHR,
  parameter int unsigned CW = 8,
  parameter int unsigned RW = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  qos_level_e [NT-1:0]         thread_level,
  input  logic [NT-1:0][RW-1:0]       alloc_num,
  input  logic [NT-1:0][RW-1:0]       alloc_den,
  input  logic signed [NT-1:0][CW-1:0] pos_limit,
  input  logic signed [NT-1:0][CW-1:0] neg_limit,
  input  logic                        in_valid,
  input  req_t                        in_req,
  output logic                        in_ready,
  output logic                        tgt_valid,
  output req_t                        tgt_req,
  input  logic                        tgt_ready,
  output logic [NT-1:0]               demote,
  output logic [NT-1:0][CW-1:0]       credit
);

  assign tgt_valid = in_valid;
  assign tgt_req   = in_req;
  assign in_ready  = tgt_ready;

  for (genvar t = 0; t < NT; t++) begin : g_thr
    logic tick, serviced, neg;

    assign serviced = in_valid && tgt_ready && (in_req.thread == TW'(t));

    alloc_tick #(.RW(RW)) u_tick (
      .clk  (clk),
      .rst_n(rst_n),
      .num  (alloc_num[t]),
      .den  (alloc_den[t]),
      .tick (tick)
    );

    credit_counter #(.CW(CW)) u_cnt (
      .clk      (clk),
      .rst_n    (rst_n),
      .inc      (tick),
      .dec      (serviced),
      .pos_limit(pos_limit[t]),
      .neg_limit(neg_limit[t]),
      .count    (credit[t]),
      .demote   (neg)
    );

    assign demote[t] = neg && (thread_level[t] != QOS_BEST_EFFORT);
  end

endmodule
