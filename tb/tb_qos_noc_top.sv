// tb_qos_noc_top: end-to-end test of the whole request network with the
// system workload: CPU, MPEG, VID and GEN traffic models sharing the SRAM
// target, with the QoS configuration
//   CPU  priority thread,  allocation 7/20 of the target (560 MB/s, the rest)
//   MPEG bandwidth thread, allocation 1/2  (800 MB/s)
//   VID  bandwidth thread, allocation 3/20 (240 MB/s)
//   GEN  best effort.
// The two main runs, each CYCLES target cycles after a reset, are the low
// CPU miss rate (a burst on average 35 cycles after the last miss response)
// and the high one (4 cycles). A short third run has the CPU alone, missing
// all the time, so that it uses the idle target far beyond its allocation.
// A fourth run repeats the low miss rate with VID and GEN sharing one thread.
//
// Checked: every response, in order and with the right data; MPEG and VID
// keep up with their offered load (bounded backlog); a CPU request is
// accepted in the cycle it is presented whenever the CPU thread is not
// demoted, and every CPU response arrives one cycle after acceptance; the CPU
// reaches at least 600 MIPS at the low miss rate; MPEG receives at least 49%
// and VID at least 12.4% of the target cycles in both runs, and at the high
// miss rate the CPU is held to 33-37% of the target. Each mechanism of the
// network must occur at least once: priority service past waiting
// requests, demotion of the CPU thread and of a bandwidth thread, epoch
// advances at both arbitration points, a full staging buffer, best-effort
// service, credit saturation at a positive and a negative limit, and the
// merge of two initiators that share a thread.
// The top runs with its default parameters.
module tb_qos_noc_top;
  import qos_pkg::*;
  localparam int CYCLES = 20000;

  logic clk = 0, rst_n = 0;
  logic [NINIT-1:0][TW-1:0]     init_thread;
  logic [NINIT-1:0][7:0]        epoch_size;
  qos_level_e [NTHR-1:0]        thread_level;
  logic [NTHR-1:0][7:0]         alloc_num, alloc_den;
  logic signed [NTHR-1:0][7:0]  pos_limit, neg_limit;
  logic [NINIT-1:0]             ini_valid, ini_ready, rsp_valid;
  req_t [NINIT-1:0]             ini_req;
  rsp_t [NINIT-1:0]             rsp;
  logic [NTHR-1:0]              demote;
  logic [NTHR-1:0][7:0]         credit;
  logic                         p1_epoch_adv, p2_epoch_adv;
  logic [NINIT-1:0]             run;
  int                           cpu_gap;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qos_noc_top dut (.*);

  int offered[NINIT], accepted[NINIT], responses[NINIT], errors[NINIT];
  int backlog_max[NINIT], compute_cycles[NINIT], bursts[NINIT];
  int acc_end[NINIT];   // words accepted by the end of the traffic, before the drain

  for (genvar i = 0; i < NINIT; i++) begin : g_ini
    tb_traffic #(.KIND(i)) u_traffic (
      .clk, .rst_n, .cpu_gap,
      .run           (run[i]),
      .valid         (ini_valid[i]),
      .req           (ini_req[i]),
      .ready         (ini_ready[i]),
      .rsp_valid     (rsp_valid[i]),
      .rsp           (rsp[i]),
      .offered       (offered[i]),
      .accepted      (accepted[i]),
      .responses     (responses[i]),
      .errors        (errors[i]),
      .backlog_max   (backlog_max[i]),
      .compute_cycles(compute_cycles[i]),
      .bursts        (bursts[i])
    );
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- cycle monitors ----
  int  cyc;
  int  cpu_acc_cyc[$];
  int  n_prio_bypass, n_cpu_demote, n_bw_demote, n_p1_adv, n_p2_adv;
  int  n_stg_full, n_be_serv, n_pos_sat, n_neg_sat, n_cpu_wait_bad, n_cpu_lat_bad;
  int  n_shared_merge;
  logic [NTHR-1:0] demote_q;

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc = 0;
      cpu_acc_cyc.delete();
      demote_q = '0;
    end else begin
      cyc++;
      if (ini_valid[0] && !demote[0] && !ini_ready[0]) n_cpu_wait_bad++;
      if (ini_valid[0] && ini_ready[0] && (ini_valid[1] || dut.p2_in_valid[2] || dut.p2_in_valid[3]))
        n_prio_bypass++;
      if (rsp_valid[0]) begin
        if (cpu_acc_cyc.size() == 0 || cyc - cpu_acc_cyc[0] != 1) n_cpu_lat_bad++;
        if (cpu_acc_cyc.size() > 0) void'(cpu_acc_cyc.pop_front());
      end
      if (ini_valid[0] && ini_ready[0]) cpu_acc_cyc.push_back(cyc);
      if (demote[0] && !demote_q[0]) n_cpu_demote++;
      if ((demote[1] && !demote_q[1]) || (demote[2] && !demote_q[2])) n_bw_demote++;
      demote_q = demote;
      if (p1_epoch_adv && dut.p1_valid) n_p1_adv++;
      if (p2_epoch_adv && dut.p2_valid) n_p2_adv++;
      if (!dut.stg_thr_ready[2] || !dut.stg_thr_ready[3]) n_stg_full++;
      // two initiators of one thread contending at the first point
      if (dut.b_valid[2] && dut.b_valid[3] && init_thread[2] == init_thread[3] && dut.p1_valid)
        n_shared_merge++;
      if (dut.t_valid && dut.t_req.thread == 2'd3) n_be_serv++;
      for (int t = 0; t < 3; t++) begin
        if ($signed(credit[t]) == $signed(pos_limit[t])) n_pos_sat++;
        if ($signed(credit[t]) == $signed(neg_limit[t])) n_neg_sat++;
      end
    end
  end

  task automatic scenario(input int gap, input logic [NINIT-1:0] active, input int ncyc,
                          input string name, output int mips);
    cpu_gap = gap;
    run = '0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = active;
    repeat (ncyc) @(negedge clk);
    run = '0;
    for (int i = 0; i < NINIT; i++) acc_end[i] = accepted[i];
    // drain: wait until every offered word is answered (bounded)
    for (int d = 0; d < 5000; d++) begin
      bit done = 1;
      for (int i = 0; i < NINIT; i++)
        if (responses[i] != offered[i]) done = 0;
      if (done) break;
      @(negedge clk);
    end
    repeat (4) @(negedge clk);
    mips = int'(800.0 * real'(compute_cycles[0]) / real'(ncyc));
    $display("%s: CPU %0d MIPS, %0d bursts; words accepted/offered MPEG %0d/%0d VID %0d/%0d GEN %0d/%0d CPU %0d/%0d",
             name, mips, bursts[0], accepted[1], offered[1], accepted[2], offered[2],
             accepted[3], offered[3], accepted[0], offered[0]);
    $display("%s: bandwidth share MPEG %0.1f%% VID %0.1f%% GEN %0.1f%% CPU %0.1f%%; backlog max MPEG %0d VID %0d",
             name, 100.0 * acc_end[1] / ncyc, 100.0 * acc_end[2] / ncyc,
             100.0 * acc_end[3] / ncyc, 100.0 * acc_end[0] / ncyc,
             backlog_max[1], backlog_max[2]);
    for (int i = 0; i < NINIT; i++) begin
      check(errors[i] == 0, $sformatf("%s: response errors of initiator %0d", name, i));
      check(responses[i] == accepted[i], $sformatf("%s: initiator %0d every word answered", name, i));
      if (active[i])
        check(accepted[i] == offered[i] && offered[i] > 0,
              $sformatf("%s: initiator %0d all offered words served", name, i));
    end
    check(backlog_max[1] <= 64, $sformatf("%s: MPEG backlog %0d bounded", name, backlog_max[1]));
    check(backlog_max[2] <= 16, $sformatf("%s: VID backlog %0d bounded", name, backlog_max[2]));
    check(n_cpu_wait_bad == 0, $sformatf("%s: CPU within allocation waited %0d times", name, n_cpu_wait_bad));
    check(n_cpu_lat_bad == 0, $sformatf("%s: CPU response latency not 1 cycle %0d times", name, n_cpu_lat_bad));
  endtask

  initial begin
    int mips_low, mips_high;
    init_thread  = {2'd3, 2'd2, 2'd1, 2'd0};
    epoch_size   = {8'd1, 8'd3, 8'd10, 8'd4};
    thread_level = {QOS_BEST_EFFORT, QOS_BANDWIDTH, QOS_BANDWIDTH, QOS_PRIORITY};
    alloc_num    = {8'd0, 8'd3, 8'd1, 8'd7};
    alloc_den    = {8'd0, 8'd20, 8'd2, 8'd20};
    pos_limit    = {8'sd0, 8'sd8, 8'sd8, 8'sd16};
    neg_limit    = {8'sd0, -8'sd8, -8'sd8, -8'sd8};
    run = 0; cpu_gap = 35;
    n_prio_bypass = 0; n_cpu_demote = 0; n_bw_demote = 0; n_p1_adv = 0; n_p2_adv = 0;
    n_stg_full = 0; n_be_serv = 0; n_pos_sat = 0; n_neg_sat = 0;
    n_cpu_wait_bad = 0; n_cpu_lat_bad = 0; n_shared_merge = 0;

    scenario(35, 4'b1111, CYCLES, "low miss", mips_low);
    check(mips_low >= 600, $sformatf("low miss: CPU %0d MIPS", mips_low));
    check(acc_end[1] * 1000 >= 490 * CYCLES && acc_end[2] * 1000 >= 124 * CYCLES,
          "low miss: MPEG and VID receive their bandwidth");
    scenario(4, 4'b1111, CYCLES, "high miss", mips_high);
    check(mips_high >= 200, $sformatf("high miss: CPU %0d MIPS", mips_high));
    // the stream initiators keep their bandwidth although the CPU asks for
    // more than its share; the CPU is held to about its 35% allocation
    check(acc_end[1] * 1000 >= 490 * CYCLES, "high miss: MPEG receives at least 49% of the target");
    check(acc_end[2] * 1000 >= 124 * CYCLES, "high miss: VID receives at least 12.4% of the target");
    check(acc_end[0] * 100 >= 33 * CYCLES && acc_end[0] * 100 <= 37 * CYCLES,
          "high miss: CPU held to about its 35% allocation");
    check(accepted[3] > 0, "high miss: GEN still served");
    // the CPU alone, missing all the time: it may use the idle target beyond
    // its allocation, and its credit runs down to the negative limit
    scenario(0, 4'b0001, 2000, "CPU alone", mips_high);
    // VID and GEN share thread 2, a bandwidth thread allocated 1/5 of the
    // target; thread 3 is unused. The epoch scheme at the first point merges
    // VID (epoch 3) and GEN (epoch 1) into the one thread.
    init_thread  = {2'd2, 2'd2, 2'd1, 2'd0};
    alloc_num[2] = 8'd1;
    alloc_den[2] = 8'd5;
    scenario(35, 4'b1111, CYCLES, "VID+GEN shared thread", mips_low);
    check(acc_end[1] * 1000 >= 490 * CYCLES && acc_end[2] * 1000 >= 124 * CYCLES,
          "shared thread: MPEG and VID receive their bandwidth");
    check(mips_low >= 600, $sformatf("shared thread: CPU %0d MIPS", mips_low));

    $display("mechanisms: priority bypass %0d, CPU demotions %0d, bandwidth-thread demotions %0d, epoch advances p1 %0d p2 %0d, staging full cycles %0d, best-effort words %0d, positive-limit cycles %0d, negative-limit cycles %0d",
             n_prio_bypass, n_cpu_demote, n_bw_demote, n_p1_adv, n_p2_adv, n_stg_full,
             n_be_serv, n_pos_sat, n_neg_sat);
    $display("mechanisms: shared-thread merge grants %0d", n_shared_merge);
    check(n_prio_bypass > 0, "priority service past waiting requests happened");
    check(n_cpu_demote > 0, "CPU demotion happened");
    check(n_bw_demote > 0, "bandwidth thread demotion happened");
    check(n_p1_adv > 0, "epoch advance at point 1 happened");
    check(n_p2_adv > 0, "epoch advance at point 2 happened");
    check(n_stg_full > 0, "full staging buffer happened");
    check(n_be_serv > 0, "best-effort service happened");
    check(n_pos_sat > 0, "positive limit reached");
    check(n_neg_sat > 0, "negative limit reached");
    check(n_shared_merge > 0, "two initiators of a shared thread merged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
