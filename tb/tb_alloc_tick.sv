// tb_alloc_tick: checks the periodic credit event.
// 1/4 must tick exactly every 4th cycle; 3/20 must give 30 ticks in 200
// cycles with no gap longer than 7 cycles; 1/1 ticks every cycle; den = 0
// never ticks.
module tb_alloc_tick;
  logic clk = 0, rst_n = 0;
  logic [7:0] num, den;
  logic tick;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  alloc_tick #(.RW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic count(input int n, output int ticks, output int maxgap);
    int last = 0;
    ticks = 0; maxgap = 0;
    for (int c = 1; c <= n; c++) begin
      @(posedge clk); #1;
      if (tick) begin
        ticks++;
        if (c - last > maxgap) maxgap = c - last;
        last = c;
      end
    end
  endtask

  initial begin
    int t, g, first;
    num = 8'd1; den = 8'd4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 25%: one credit every 4 cycles, at a fixed phase
    first = -1;
    for (int c = 0; c < 40; c++) begin
      @(posedge clk); #1;
      if (tick && first < 0) first = c;
      if (first >= 0) check(tick == (((c - first) % 4) == 0), $sformatf("25%% tick phase, cycle %0d", c));
    end
    check(first >= 0 && first < 4, "first tick within 4 cycles");
    num = 8'd3; den = 8'd20;
    @(posedge clk);
    count(200, t, g);
    check(t == 30, $sformatf("15%%: %0d ticks in 200 cycles", t));
    check(g <= 7, $sformatf("15%%: gap %0d", g));
    num = 8'd1; den = 8'd1;
    @(posedge clk);
    count(50, t, g);
    check(t == 50, "100%");
    num = 8'd1; den = 8'd0;
    @(posedge clk);
    count(50, t, g);
    check(t == 0, "den 0 gives no ticks");
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
