// req_fifo: small first-word-fall-through FIFO of requests.
//
// Helper for the staging buffers; its form is this design's own. push writes
// a request at the tail, pop removes the head; the head is visible on out_req
// while out_valid is high. out_valid and full come from the fill count
// register, so a request pushed in one cycle can be popped in the next. Any
// DEPTH of 1 or more works. Pushing when full or popping when empty is
// ignored (and flagged by an assertion for the push).
module req_fifo
  import qos_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  req_t in_req,
  input  logic pop,
  output logic out_valid,
  output req_t out_req,
  output logic full
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  req_t          mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          do_push, do_pop;

  assign full      = (cnt == (PW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_req   = mem[rp];
  assign do_push   = push && !full;
  assign do_pop    = pop && out_valid;

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= in_req;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));

endmodule
