// tb_lrs_arbiter: checks the least-recently-serviced order against a
// reference list. The reference keeps requesters ordered from least to most
// recently serviced; the winner must be the first requesting entry, and a
// serviced winner moves to the end.
module tb_lrs_arbiter;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic update;
  int order[$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lrs_arbiter #(.N(N)) dut (.*);

  initial begin
    int exp;
    req = '0; update = 0;
    for (int i = 0; i < N; i++) order.push_back(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      req    = N'($urandom);
      update = ($urandom_range(0, 3) != 0);
      #1;
      exp = -1;
      foreach (order[k]) if (exp < 0 && req[order[k]]) exp = order[k];
      checks++;
      if (exp < 0) begin
        if (gnt != '0) begin failures++; $display("FAIL: grant without request"); end
      end else if (gnt != N'(1) << exp) begin
        failures++; $display("FAIL: cycle %0d req=%b gnt=%b expected %0d", cyc, req, gnt, exp);
      end
      @(posedge clk);
      if (update && exp >= 0) begin
        foreach (order[k]) if (order[k] == exp) begin order.delete(k); break; end
        order.push_back(exp);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
