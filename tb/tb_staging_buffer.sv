// tb_staging_buffer: checks the per-thread staging FIFOs.
// Random requests of threads 2 and 3 are written whenever the thread has room
// and read with random readiness; each thread's output order must match a
// reference queue, in_thr_ready must fall exactly when a FIFO holds DEPTH
// requests, and a stalled thread must not stop the other.
module tb_staging_buffer;
  import qos_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  req_t in_req;
  logic [NTHR-1:0] in_thr_ready;
  logic [1:0] out_valid, out_ready;
  req_t [1:0] out_req;
  req_t ref_q[2][$];
  int checks = 0, failures = 0;
  int stalled_moves = 0, full_seen = 0;

  always #5 clk = ~clk;

  staging_buffer #(.NB(2), .NT(NTHR), .DEPTH(DEPTH), .THREADS({2'd3, 2'd2})) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int thr;
    in_valid = 0; in_req = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      thr = $urandom_range(2, 3);
      in_req = '0;
      in_req.thread = TW'(thr);
      in_req.addr   = $urandom;
      in_req.data   = {$urandom, $urandom};
      // thread 2 is stalled for long stretches
      out_ready[0] = ((c / 200) % 2 == 0) ? ($urandom_range(0, 1) == 1) : 1'b0;
      out_ready[1] = ($urandom_range(0, 2) != 0);
      #1;
      for (int b = 0; b < 2; b++) begin
        check(in_thr_ready[b+2] == (ref_q[b].size() < DEPTH), $sformatf("room flag of thread %0d", b+2));
        check(out_valid[b] == (ref_q[b].size() > 0), "out_valid");
        if (out_valid[b] && ref_q[b].size() > 0)
          check(out_req[b] == ref_q[b][0], $sformatf("order of thread %0d", b+2));
      end
      check(in_thr_ready[0] && in_thr_ready[1], "threads not carried always have room");
      in_valid = in_thr_ready[thr] && ($urandom_range(0, 3) != 0);
      if (!in_thr_ready[2]) full_seen++;
      if (ref_q[0].size() == DEPTH && out_ready[1] && out_valid[1]) stalled_moves++;
      @(posedge clk);
      for (int b = 0; b < 2; b++)
        if (out_ready[b] && ref_q[b].size() > 0) void'(ref_q[b].pop_front());
      if (in_valid) ref_q[thr-2].push_back(in_req);
      @(negedge clk);
    end
    check(full_seen > 0, "thread 2 FIFO filled at least once");
    check(stalled_moves > 0, "thread 3 moved while thread 2 was full");
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
