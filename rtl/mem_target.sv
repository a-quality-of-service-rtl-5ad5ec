// mem_target: the shared target, an on-chip SRAM.
//
// One word (8 bytes) per cycle at full bandwidth, always ready. A write stores
// the word; a read returns the stored word. Every request gets a response one
// cycle after it is accepted, tagged with the initiator and thread, so the
// response network can route it back; for a write it is an acknowledge.
//
// Interface: req_valid/req/req_ready, rsp_valid/rsp. Timing: latency 1 cycle,
// one request per cycle. The address is a word address; only its low
// log2(DEPTH) bits are used.
// The 8-byte port, full bandwidth and 1-cycle latency follow the target
// assumed for the system; the size and the write acknowledge are this
// design's choices.
module mem_target
  import qos_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req_valid,
  input  req_t req,
  output logic req_ready,
  output logic rsp_valid,
  output rsp_t rsp
);

  localparam int unsigned MW = $clog2(DEPTH);

  logic [DW-1:0] ram [DEPTH];
  logic [MW-1:0] idx;

  assign idx       = req.addr[MW-1:0];
  assign req_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (req_valid && req.write) ram[idx] <= req.data;
    rsp.data   <= ram[idx];
    rsp.init   <= req.init;
    rsp.thread <= req.thread;
    rsp.write  <= req.write;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp_valid <= 1'b0;
    else        rsp_valid <= req_valid;
  end

endmodule
