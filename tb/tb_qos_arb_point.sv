// tb_qos_arb_point: checks one arbitration point.
//
// 1. Epoch scheme with three branches of one thread, using the example
//    streams A = 1* 1 2* 2, B = 1* 1 1 2*, C = 1* 2* (number = epoch,
//    * = marker). All six epoch-1 requests must leave before any epoch-2
//    request, one request per cycle, with the output marker on the first
//    request of each combined epoch; inside an epoch the least recently
//    serviced branch goes first.
// 2. Strict priority: a priority thread always wins over a bandwidth thread;
//    when demoted it loses to the bandwidth thread.
// 3. Threads at the same level share by their epoch sizes (3:1 here), and a
//    demoted thread shares the best-effort level with a best-effort thread.
// 4. A thread whose downstream has no room is never granted.
// 5. Two branches sharing a thread (epoch sizes 2 and 1) next to a third
//    thread: the shared thread's output carries one marker per combined epoch
//    of 3 requests, its branches share 2:1, and the threads share 3:1.
module tb_qos_arb_point;
  import qos_pkg::*;
  localparam int NI = 4, NT = 4;

  logic clk = 0, rst_n = 0;
  qos_level_e [NT-1:0] thread_level;
  logic [NT-1:0] demote, out_thr_ready;
  logic [NI-1:0] in_valid, in_ready;
  req_t [NI-1:0] in_req;
  logic out_valid, epoch_adv;
  req_t out_req;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qos_arb_point #(.NI(NI), .NT(NT)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stream sources: queue per input, data holds the epoch number
  req_t q[NI][$];
  // infinite sources for the share tests: thread and epoch size per input
  bit   inf_on[NI];
  int   inf_esize[NI];
  int   inf_cnt[NI];
  int   inf_thr[NI];

  function automatic req_t mk(int thr, int ep, bit mark, int src);
    req_t r = '0;
    r.thread = TW'(thr);
    r.marker = mark;
    r.data   = DW'(ep);
    r.init   = IW'(src);
    return r;
  endfunction

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = 1'b0;
      in_req[i]   = '0;
      if (q[i].size() > 0) begin
        in_valid[i] = 1'b1;
        in_req[i]   = q[i][0];
      end
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < NI; i++) begin
      if (in_ready[i]) begin
        void'(q[i].pop_front());
        if (inf_on[i]) begin
          inf_cnt[i]++;
          q[i].push_back(mk(inf_thr[i], 0, (inf_cnt[i] % inf_esize[i]) == 0, i));
        end
      end
    end
  end

  task automatic clear();
    for (int i = 0; i < NI; i++) begin q[i].delete(); inf_on[i] = 0; inf_cnt[i] = 0; inf_thr[i] = i; end
  endtask

  initial begin
    int seq[$];
    int ep[$];
    int mk_pos[$];
    int wins[NT];
    thread_level  = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_BANDWIDTH};
    demote        = '0;
    out_thr_ready = '1;
    clear();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. epoch example, all on thread 0 ----
    q[0] = '{mk(0,1,1,0), mk(0,1,0,0), mk(0,2,1,0), mk(0,2,0,0)};
    q[1] = '{mk(0,1,1,1), mk(0,1,0,1), mk(0,1,0,1), mk(0,2,1,1)};
    q[2] = '{mk(0,1,1,2), mk(0,2,1,2)};
    for (int c = 0; c < 10; c++) begin
      #1;
      check(out_valid, $sformatf("epoch example: one request per cycle, cycle %0d", c));
      if (out_valid) begin
        seq.push_back(int'(out_req.init));
        ep.push_back(int'(out_req.data));
        if (out_req.marker) mk_pos.push_back(c);
      end
      @(negedge clk);
    end
    for (int k = 0; k < 10; k++)
      check(ep[k] == ((k < 6) ? 1 : 2), $sformatf("epoch order at output position %0d: got epoch %0d", k, ep[k]));
    check(mk_pos.size() == 2 && mk_pos[0] == 0 && mk_pos[1] == 6, "output markers at positions 0 and 6");
    // least recently serviced interleaving: A, B, C, then A, B, B in epoch 1
    check(seq[0] == 0 && seq[1] == 1 && seq[2] == 2 && seq[3] == 0 && seq[4] == 1 && seq[5] == 1,
          $sformatf("LRS interleave in epoch 1: %p", seq));
    #1 check(!out_valid, "idle after the example");
    @(negedge clk);

    // ---- 2. strict priority and demotion ----
    clear();
    thread_level = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_PRIORITY};
    inf_on[0] = 1; inf_esize[0] = 1; q[0].push_back(mk(0,0,1,0));
    inf_on[1] = 1; inf_esize[1] = 1; q[1].push_back(mk(1,0,1,1));
    for (int c = 0; c < 20; c++) begin
      #1 check(out_valid && out_req.thread == 0, "priority thread wins");
      @(negedge clk);
    end
    demote[0] = 1'b1;
    for (int c = 0; c < 20; c++) begin
      #1 check(out_valid && out_req.thread == 1, "demoted priority thread loses to bandwidth thread");
      @(negedge clk);
    end
    // demoted thread 0 and best-effort thread 3 share the best-effort level
    clear();
    inf_on[0] = 1; inf_esize[0] = 1; q[0].push_back(mk(0,0,1,0));
    inf_on[3] = 1; inf_esize[3] = 1; q[3].push_back(mk(3,0,1,3));
    wins = '{default: 0};
    for (int c = 0; c < 40; c++) begin
      #1 if (out_valid) wins[out_req.thread]++;
      @(negedge clk);
    end
    check(wins[0] == 20 && wins[3] == 20, $sformatf("demoted and best effort share equally: %p", wins));
    demote = '0;

    // ---- 3. share by epoch size between bandwidth threads ----
    clear();
    thread_level = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_PRIORITY};
    inf_on[1] = 1; inf_esize[1] = 3; q[1].push_back(mk(1,0,1,1));
    inf_on[2] = 1; inf_esize[2] = 1; q[2].push_back(mk(2,0,1,2));
    // best effort thread 3 must starve while bandwidth threads are busy
    inf_on[3] = 1; inf_esize[3] = 1; q[3].push_back(mk(3,0,1,3));
    wins = '{default: 0};
    for (int c = 0; c < 80; c++) begin
      #1 if (out_valid) wins[out_req.thread]++;
      @(negedge clk);
    end
    check(wins[1] + wins[2] == 80 && wins[1] - 3*wins[2] <= 4 && 3*wins[2] - wins[1] <= 4 && wins[3] == 0, $sformatf("3:1 epoch share, BE starved: %p", wins));

    // ---- 4. downstream room ----
    out_thr_ready = 4'b1011;   // no room for thread 2
    wins = '{default: 0};
    for (int c = 0; c < 20; c++) begin
      #1 if (out_valid) wins[out_req.thread]++;
      check(!(out_valid && out_req.thread == 2), "thread without room not granted");
      @(negedge clk);
    end
    check(wins[1] == 20, $sformatf("other thread uses every cycle: %p", wins));
    out_thr_ready = '1;
    clear();
    @(negedge clk);

    // ---- 5. two initiators sharing thread 0, next to thread 1 ----
    // inputs 0 (epoch 2) and 1 (epoch 1) on thread 0, input 2 (epoch 1) on
    // thread 1, both bandwidth level: thread 0 forms combined epochs of 3
    // requests, each opened by one output marker, and gets 3 of every 4 cycles.
    thread_level = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_BANDWIDTH};
    inf_on[0] = 1; inf_esize[0] = 2; inf_thr[0] = 0; q[0].push_back(mk(0,0,1,0));
    inf_on[1] = 1; inf_esize[1] = 1; inf_thr[1] = 0; q[1].push_back(mk(0,0,1,1));
    inf_on[2] = 1; inf_esize[2] = 1; inf_thr[2] = 1; q[2].push_back(mk(1,0,1,2));
    begin
      int n0 = 0, m0 = 0, n1 = 0, from0 = 0, from1 = 0, since = 0, bad = 0;
      for (int c = 0; c < 120; c++) begin
        #1;
        if (out_valid && out_req.thread == 0) begin
          n0++;
          if (out_req.init == 0) from0++; else from1++;
          if (out_req.marker) begin
            m0++;
            if (m0 > 1 && since != 3) bad++;
            since = 0;
          end
          since++;
        end else if (out_valid) n1++;
        @(negedge clk);
      end
      check(bad == 0 && m0 >= 25, $sformatf("shared thread: a marker every 3 requests (%0d markers, %0d off)", m0, bad));
      check(from0 == 2 * from1 || from0 == 2 * from1 + 1 || from0 == 2 * from1 + 2,
            $sformatf("shared thread: initiators 2:1 by epoch size (%0d, %0d)", from0, from1));
      check(n0 + n1 == 120 && n0 >= 3 * n1 - 4 && n0 <= 3 * n1 + 4,
            $sformatf("shared thread against single thread 3:1 (%0d, %0d)", n0, n1));
    end
    clear();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
