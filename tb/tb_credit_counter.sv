// tb_credit_counter: checks the saturating credit counter against a model.
// Random increments and decrements with several limit pairs; the count must
// follow count + inc - dec clamped to [neg_limit, pos_limit], start at 0, and
// demote exactly when it is negative. Both limits must be reached.
module tb_credit_counter;
  logic clk = 0, rst_n = 0;
  logic inc, dec, demote;
  logic signed [7:0] pos_limit, neg_limit, count;
  int checks = 0, failures = 0, model = 0, hit_pos = 0, hit_neg = 0;

  always #5 clk = ~clk;
  credit_counter #(.CW(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (count %0d model %0d)", what, count, model); end
  endtask

  initial begin
    inc = 0; dec = 0; pos_limit = 8'sd10; neg_limit = -8'sd6;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(count == 0 && !demote, "starts at 0");
    for (int phase = 0; phase < 4; phase++) begin
      case (phase)
        0: begin pos_limit = 8'sd10;  neg_limit = -8'sd6;   end
        1: begin pos_limit = 8'sd3;   neg_limit = -8'sd3;   end
        2: begin pos_limit = 8'sd127; neg_limit = -8'sd128; end
        default: begin pos_limit = 8'sd0; neg_limit = 8'sd0; end
      endcase
      if (model > pos_limit) model = pos_limit;
      if (model < neg_limit) model = neg_limit;
      for (int c = 0; c < 600; c++) begin
        // drift up in the first half, down in the second
        inc = ($urandom_range(0, 9) < ((c < 300) ? 7 : 3));
        dec = ($urandom_range(0, 9) < ((c < 300) ? 3 : 7));
        @(posedge clk);
        model = model + int'(inc) - int'(dec);
        if (model > pos_limit) begin model = pos_limit; end
        if (model < neg_limit) begin model = neg_limit; end
        #1;
        if (phase > 0 || c > 0) begin
          check(count == model, "count");
          check(demote == (model < 0), "demote");
          if (model == pos_limit && pos_limit > 0) hit_pos++;
          if (model == neg_limit && neg_limit < 0) hit_neg++;
        end
      end
    end
    check(hit_pos > 0 && hit_neg > 0, "both limits reached");
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
