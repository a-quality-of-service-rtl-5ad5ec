// staging_buffer: per-thread staging buffers on a link between two
// arbitration points.
//
// The upstream arbitration point sends at most one request per cycle over the
// link, tagged with its thread. Here each thread the link carries has a FIFO
// of its own, so a thread that the downstream point holds back does not block
// the others: threads keep their own buffering and proceed independently.
// in_thr_ready tells the upstream point, per thread, whether its FIFO has
// room; the upstream point only sends a thread that has room.
//
// Interface: in_valid/in_req (no ready: the sender checks in_thr_ready);
// NB output streams with valid/ready. THREADS lists the thread number held in
// each of the NB FIFOs; in_thr_ready is high for threads the link does not
// carry (they never arrive). Timing: a request written in one cycle can be
// read in the next.
//
// One FIFO per thread follows the design; the depth is this design's choice.
module staging_buffer
  import qos_pkg::*;
#(
  parameter int unsigned             NB      = 2,
  parameter int unsigned             NT      = NTHR,
  parameter int unsigned             DEPTH   = 4,
  parameter logic [NB-1:0][TW-1:0]   THREADS = {2'd3, 2'd2}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  req_t          in_req,
  output logic [NT-1:0] in_thr_ready,
  output logic [NB-1:0] out_valid,
  output req_t [NB-1:0] out_req,
  input  logic [NB-1:0] out_ready
);

  logic [NB-1:0] full;

  for (genvar b = 0; b < NB; b++) begin : g_buf
    req_fifo #(.DEPTH(DEPTH)) u_fifo (
      .clk      (clk),
      .rst_n    (rst_n),
      .push     (in_valid && in_req.thread == THREADS[b]),
      .in_req   (in_req),
      .pop      (out_ready[b]),
      .out_valid(out_valid[b]),
      .out_req  (out_req[b]),
      .full     (full[b])
    );
  end

  always_comb begin
    in_thr_ready = '1;
    for (int t = 0; t < NT; t++)
      for (int b = 0; b < NB; b++)
        if (THREADS[b] == TW'(t) && full[b]) in_thr_ready[t] = 1'b0;
  end

endmodule
