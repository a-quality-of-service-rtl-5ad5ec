// resp_net: response network from the single target back to the initiators.
//
// With one target there is no contention among responses, and initiators
// always accept a response, so the response path needs no arbitration and no
// backpressure: each response is steered to the initiator named in it. The
// path is combinational, so an initiator sees its response in the cycle the
// target produces it, which keeps the round trip of a request that meets no
// contention at the target's own latency of one cycle.
//
// Interface: in_valid/in_rsp; per initiator out_valid and out_rsp. Responses
// to initiators that are not addressed are driven to zero.
module resp_net
  import qos_pkg::*;
#(
  parameter int unsigned NINIT_P = NINIT
) (
  input  logic                     in_valid,
  input  rsp_t                     in_rsp,
  output logic [NINIT_P-1:0]       out_valid,
  output rsp_t [NINIT_P-1:0]       out_rsp
);

  always_comb begin
    for (int i = 0; i < NINIT_P; i++) begin
      out_valid[i] = in_valid && (in_rsp.init == IW'(i));
      out_rsp[i]   = out_valid[i] ? in_rsp : '0;
    end
  end

endmodule
