// epoch_marker: the interconnect boundary on the initiator side.
//
// Every request that enters the interconnect passes here. The block stamps the
// request with the initiator's number and its thread, and sets the epoch
// marker on the first request of each group of epoch_size requests. The
// arbitration points inside the network never need to know the epoch sizes;
// they only see markers. Each initiator's epoch size is set on its own, which
// gives the non-uniform share between initiators of one thread.
//
// Interface: valid/ready in and out, wired straight through (no register), so
// the boundary adds no cycle of latency. epoch_size of 0 is read as 1.
// Timing: a request counter advances on every accepted request and wraps at
// epoch_size; reset clears it, so the first request after reset is marked.
//
// Marking the first request of an epoch (rather than the last) follows the
// picture of the epoch scheme, where the marked request opens each epoch. The
// counter width is this design's choice.
module epoch_marker
  import qos_pkg::*;
#(
  parameter int unsigned        INIT_ID = 0,
  parameter int unsigned        EW      = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [TW-1:0] thread_id,
  input  logic [EW-1:0] epoch_size,
  input  logic          in_valid,
  input  req_t          in_req,
  output logic          in_ready,
  output logic          out_valid,
  output req_t          out_req,
  input  logic          out_ready
);

  logic [EW-1:0] cnt;
  logic [EW-1:0] last;

  assign last = (epoch_size == '0) ? '0 : epoch_size - 1'b1;

  always_comb begin
    out_req        = in_req;
    out_req.init   = IW'(INIT_ID);
    out_req.thread = thread_id;
    out_req.marker = (cnt == '0);
  end

  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (in_valid && out_ready) begin
      cnt <= (cnt >= last) ? '0 : cnt + 1'b1;
    end
  end

endmodule
