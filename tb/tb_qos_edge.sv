// tb_qos_edge: checks the bandwidth enforcement at the interconnect edge.
// Threads: 0 priority at 1/4 of the cycles, 1 bandwidth at 1/2, 2 bandwidth at
// 3/20, 3 best effort. Random requests and random target readiness are driven;
// the requests must reach the target unchanged, and each thread's credit and
// demote bit must match an independent model of the rate accumulator and the
// clamped counter. The best-effort thread must never be demoted, and each
// allocated thread must be demoted at some point.
module tb_qos_edge;
  import qos_pkg::*;
  localparam int NT = 4;
  logic clk = 0, rst_n = 0;
  qos_level_e [NT-1:0] thread_level;
  logic [NT-1:0][7:0] alloc_num, alloc_den;
  logic signed [NT-1:0][7:0] pos_limit, neg_limit;
  logic in_valid, in_ready, tgt_valid, tgt_ready;
  req_t in_req, tgt_req;
  logic [NT-1:0] demote;
  logic [NT-1:0][7:0] credit;
  int checks = 0, failures = 0;
  int acc[NT], tk[NT], cnt[NT], demoted_seen[NT];

  always #5 clk = ~clk;
  qos_edge #(.NT(NT), .CW(8), .RW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int thr;
    bit serviced;
    thread_level = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_PRIORITY};
    alloc_num = {8'd0, 8'd3, 8'd1, 8'd1};
    alloc_den = {8'd0, 8'd20, 8'd2, 8'd4};
    pos_limit = {8'sd4, 8'sd4, 8'sd2, 8'sd4};
    neg_limit = {-8'sd4, -8'sd4, -8'sd2, -8'sd4};
    in_valid = 0; in_req = '0; tgt_ready = 0;
    for (int t = 0; t < NT; t++) begin acc[t] = 0; tk[t] = 0; cnt[t] = 0; demoted_seen[t] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      thr = $urandom_range(0, 3);
      in_valid = ($urandom_range(0, 9) < ((c / 500) % 2 == 0 ? 9 : 2));
      in_req = '0;
      in_req.thread = TW'(thr);
      in_req.addr = $urandom;
      in_req.data = {$urandom, $urandom};
      tgt_ready = ($urandom_range(0, 7) != 0);
      #1;
      check(tgt_valid == in_valid && tgt_req == in_req && in_ready == tgt_ready, "pass-through");
      for (int t = 0; t < NT; t++) begin
        check($signed(credit[t]) == cnt[t], $sformatf("credit of thread %0d: %0d vs %0d", t, $signed(credit[t]), cnt[t]));
        check(demote[t] == (cnt[t] < 0 && t != 3), $sformatf("demote of thread %0d", t));
        if (demote[t]) demoted_seen[t]++;
      end
      @(posedge clk);
      for (int t = 0; t < NT; t++) begin
        serviced = in_valid && tgt_ready && thr == t;
        cnt[t] = cnt[t] + tk[t] - int'(serviced);
        if (cnt[t] > int'($signed(pos_limit[t]))) cnt[t] = int'($signed(pos_limit[t]));
        if (cnt[t] < int'($signed(neg_limit[t]))) cnt[t] = int'($signed(neg_limit[t]));
        if (alloc_den[t] == 0) begin acc[t] = 0; tk[t] = 0; end
        else if (acc[t] + int'(alloc_num[t]) >= int'(alloc_den[t])) begin
          acc[t] = acc[t] + int'(alloc_num[t]) - int'(alloc_den[t]); tk[t] = 1;
        end else begin acc[t] = acc[t] + int'(alloc_num[t]); tk[t] = 0; end
      end
      @(negedge clk);
    end
    check(demoted_seen[0] > 0 && demoted_seen[1] > 0 && demoted_seen[2] > 0, "allocated threads demoted when over-using");
    check(demoted_seen[3] == 0, "best effort never demoted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
