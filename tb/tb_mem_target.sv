// tb_mem_target: checks the shared SRAM target.
// Random reads and writes to a small address window, one per cycle at full
// rate; each response must come exactly one cycle after its request, carry
// the request's initiator, thread and kind, and for a read the last word
// written to that address (checked against a model array).
module tb_mem_target;
  import qos_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid;
  req_t req;
  rsp_t rsp;
  logic [DW-1:0] model [64];
  bit written [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  mem_target #(.DEPTH(4096)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit   pv = 0;
    req_t pr;
    logic [DW-1:0] pexp;
    bit   pknown;
    req_valid = 0; req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // write every address of the window first
    @(negedge clk);
    for (int c = 0; c < 3000; c++) begin
      req = '0;
      req.addr   = (c < 64) ? AW'(c) : AW'($urandom_range(0, 63));
      req.write  = (c < 64) ? 1'b1 : ($urandom_range(0, 2) == 0);
      req.data   = {$urandom, $urandom};
      req.init   = IW'($urandom);
      req.thread = TW'($urandom);
      req_valid  = (c < 64) || ($urandom_range(0, 4) != 0);
      #1;
      check(req_ready, "always ready");
      check(rsp_valid == pv, "response exactly one cycle later");
      if (pv && rsp_valid) begin
        check(rsp.init == pr.init && rsp.thread == pr.thread && rsp.write == pr.write, "response tags");
        if (!pr.write && pknown) check(rsp.data == pexp, $sformatf("read data at %0d", pr.addr));
      end
      pv = req_valid; pr = req;
      pknown = written[req.addr[5:0]];
      pexp = model[req.addr[5:0]];
      @(posedge clk);
      if (req_valid && req.write) begin model[req.addr[5:0]] = req.data; written[req.addr[5:0]] = 1; end
      @(negedge clk);
    end
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
