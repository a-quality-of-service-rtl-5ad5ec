// tb_epoch_marker: checks the initiator boundary.
// Sends requests with random stalls and checks that the first request of each
// epoch_size group carries the marker, that the initiator and thread numbers
// are stamped, that address and data pass unchanged, and that the handshake is
// passed straight through. Covers epoch sizes 3, 1, 0 (read as 1) and 5.
module tb_epoch_marker;
  import qos_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [TW-1:0] thread_id;
  logic [7:0] epoch_size;
  logic in_valid, in_ready, out_valid, out_ready;
  req_t in_req, out_req;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  epoch_marker #(.INIT_ID(2), .EW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int esize, input int nreq);
    int sent = 0, eff;
    eff = (esize == 0) ? 1 : esize;
    epoch_size = 8'(esize);
    while (sent < nreq) begin
      in_valid  = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      in_req    = '0;
      in_req.addr   = $urandom;
      in_req.data   = {$urandom, $urandom};
      in_req.write  = $urandom_range(0, 1);
      in_req.init   = 2'd0;
      in_req.marker = $urandom_range(0, 1);
      #1;
      check(out_valid == in_valid && in_ready == out_ready, "handshake pass-through");
      if (in_valid) begin
        check(out_req.marker == ((sent % eff) == 0), $sformatf("marker of request %0d, size %0d", sent, esize));
        check(out_req.init == 2'd2 && out_req.thread == thread_id, "stamped init/thread");
        check(out_req.addr == in_req.addr && out_req.data == in_req.data && out_req.write == in_req.write, "payload");
      end
      @(posedge clk);
      if (in_valid && out_ready) sent++;
      #1;
    end
  endtask

  initial begin
    thread_id = 2'd1; epoch_size = 8'd3; in_valid = 0; out_ready = 0; in_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    run(3, 21);
    thread_id = 2'd3;
    run(1, 6);
    run(0, 4);
    run(5, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
