// qos_arb_point: one arbitration point in the core of the interconnect.
//
// Each input branch carries requests of one thread. The point forwards one
// request per cycle, chosen in two stages:
//
//  1. Inside each thread, the epoch scheme chooses among the branches of that
//     thread. A branch that has already been served in the current epoch and
//     now shows a request with an epoch marker is held back. When every branch
//     of the thread is either held back or has nothing pending, the thread
//     advances to its next epoch and all its branches may compete again.
//     Among the branches still allowed, the least recently serviced wins.
//  2. Between threads, QoS levels are served in strict priority: priority,
//     then bandwidth, then best effort. A thread whose demote sideband is set
//     (it is over its bandwidth allocation) competes as best effort. Threads of
//     the same level share the target with the same epoch scheme, now applied
//     to the per-thread epochs that stage 1 produces, again with a
//     least-recently-serviced tie-break.
//
// The forwarded request carries a marker when it opens a new epoch of its
// thread at this point, so a later arbitration point sees one marker per
// combined epoch, and never needs to know the initiators' epoch sizes.
//
// Interface: per input valid/request/ready; out_valid and out_req. A thread is
// only considered when out_thr_ready says the next stage has room for it, so a
// raised out_valid is always taken in the same cycle (in_ready of the chosen
// input is high with it). The point holds no request register: a request
// passes in the cycle it arrives. State (epoch bits, service order) changes at
// the clock edge after a grant; an epoch advance is taken in the same cycle it
// occurs, without an idle cycle.
//
// Epoch rules, strict priority between levels, demotion to best effort and the
// least-recently-serviced tie-break follow the paper's scheme. Running the
// epoch scheme between threads on the regenerated per-thread markers is this
// design's own reading of "a version of the epoch scheme".
module qos_arb_point
  import qos_pkg::*;
#(
  parameter int unsigned NI = 4,
  parameter int unsigned NT = NTHR
) (
  input  logic                clk,
  input  logic                rst_n,
  input  qos_level_e [NT-1:0] thread_level,
  input  logic [NT-1:0]       demote,
  input  logic [NI-1:0]       in_valid,
  input  req_t [NI-1:0]       in_req,
  output logic [NI-1:0]       in_ready,
  input  logic [NT-1:0]       out_thr_ready,
  output logic                out_valid,
  output req_t                out_req,
  // observation: an epoch advance was taken with this grant
  output logic                epoch_adv
);

  // ---------------- state ----------------
  logic [NI-1:0]         started_in;  // branch served in its thread's epoch
  logic [NI-1:0][TW-1:0] last_thr;    // thread last seen on each branch
  logic [NT-1:0]         thr_open;    // thread has had a grant since reset
  logic [NT-1:0]         thr_started; // thread served in its level's epoch

  // ---------------- stage 1: per thread ----------------
  logic [NI-1:0][TW-1:0] in_thr;
  logic [NT-1:0][NI-1:0] mem, elig_a, cand_a, gnt_a;
  logic [NT-1:0]         adv_a, thr_req, thr_mark;

  always_comb begin
    for (int i = 0; i < NI; i++)
      in_thr[i] = in_valid[i] ? in_req[i].thread : last_thr[i];
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < NI; i++) begin
        mem[t][i]    = in_valid[i] && (in_req[i].thread == TW'(t)) && out_thr_ready[t];
        elig_a[t][i] = mem[t][i] && !(in_req[i].marker && started_in[i]);
      end
      adv_a[t]    = (elig_a[t] == '0) && (mem[t] != '0);
      cand_a[t]   = adv_a[t] ? mem[t] : elig_a[t];
      thr_req[t]  = (cand_a[t] != '0);
      thr_mark[t] = adv_a[t] || !thr_open[t];
    end
  end

  logic [NT-1:0] gnt_b;

  for (genvar t = 0; t < NT; t++) begin : g_thr
    lrs_arbiter #(.N(NI)) u_lrs_in (
      .clk   (clk),
      .rst_n (rst_n),
      .req   (cand_a[t]),
      .update(gnt_b[t]),
      .gnt   (gnt_a[t])
    );
  end

  // ---------------- stage 2: between threads ----------------
  logic [NT-1:0][1:0] eff_lvl;
  logic [1:0]         best;
  logic [NT-1:0]      at_lvl, same_lvl, elig_b, cand_b;
  logic               adv_b;

  always_comb begin
    best = 2'd3;
    for (int t = 0; t < NT; t++) begin
      eff_lvl[t] = demote[t] ? 2'(QOS_BEST_EFFORT) : 2'(thread_level[t]);
      if (thr_req[t] && eff_lvl[t] < best) best = eff_lvl[t];
    end
    for (int t = 0; t < NT; t++) begin
      same_lvl[t] = (eff_lvl[t] == best);
      at_lvl[t]   = thr_req[t] && same_lvl[t];
      elig_b[t]   = at_lvl[t] && !(thr_mark[t] && thr_started[t]);
    end
    adv_b  = (elig_b == '0) && (at_lvl != '0);
    cand_b = adv_b ? at_lvl : elig_b;
  end

  lrs_arbiter #(.N(NT)) u_lrs_thr (
    .clk   (clk),
    .rst_n (rst_n),
    .req   (cand_b),
    .update(out_valid),
    .gnt   (gnt_b)
  );

  // ---------------- output ----------------
  logic [NI-1:0] gnt_in;

  always_comb begin
    gnt_in    = '0;
    out_req   = '0;
    epoch_adv = 1'b0;
    for (int t = 0; t < NT; t++) begin
      if (gnt_b[t]) begin
        gnt_in    = gnt_a[t];
        epoch_adv = adv_a[t] || adv_b;
      end
    end
    for (int i = 0; i < NI; i++) begin
      if (gnt_in[i]) out_req = in_req[i];
    end
    for (int t = 0; t < NT; t++) begin
      if (gnt_b[t]) out_req.marker = thr_mark[t];
    end
  end

  assign out_valid = (gnt_b != '0);
  assign in_ready  = gnt_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started_in  <= '0;
      last_thr    <= '0;
      thr_open    <= '0;
      thr_started <= '0;
    end else begin
      for (int i = 0; i < NI; i++)
        if (in_valid[i]) last_thr[i] <= in_req[i].thread;
      if (out_valid) begin
        for (int t = 0; t < NT; t++) begin
          if (gnt_b[t]) begin
            thr_open[t] <= 1'b1;
            for (int i = 0; i < NI; i++) begin
              if (adv_a[t] && in_thr[i] == TW'(t)) started_in[i] <= 1'b0;
              if (gnt_a[t][i])                     started_in[i] <= 1'b1;
            end
          end
          if (adv_b && same_lvl[t]) thr_started[t] <= 1'b0;
          if (gnt_b[t])             thr_started[t] <= 1'b1;
        end
      end
    end
  end

  // a raised out_valid must name exactly one input
  a_one_input: assert property (@(posedge clk) disable iff (!rst_n)
                                out_valid |-> $onehot(in_ready));
  a_room: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid |-> out_thr_ready[out_req.thread]);

endmodule
