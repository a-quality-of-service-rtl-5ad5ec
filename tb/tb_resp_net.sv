// tb_resp_net: checks that each response reaches only the initiator it names,
// in the same cycle, with its contents unchanged.
module tb_resp_net;
  import qos_pkg::*;
  logic in_valid;
  rsp_t in_rsp;
  logic [NINIT-1:0] out_valid;
  rsp_t [NINIT-1:0] out_rsp;
  int checks = 0, failures = 0;

  resp_net #(.NINIT_P(NINIT)) dut (.*);

  initial begin
    for (int c = 0; c < 2000; c++) begin
      in_valid = $urandom_range(0, 1);
      in_rsp = '0;
      in_rsp.init = IW'($urandom);
      in_rsp.thread = TW'($urandom);
      in_rsp.write = $urandom_range(0, 1);
      in_rsp.data = {$urandom, $urandom};
      #1;
      for (int i = 0; i < NINIT; i++) begin
        checks++;
        if (out_valid[i] != (in_valid && in_rsp.init == IW'(i))) begin
          failures++; $display("FAIL: valid of initiator %0d", i);
        end
        if (out_valid[i] && out_rsp[i] != in_rsp) begin
          failures++; $display("FAIL: contents to initiator %0d", i);
        end
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
