// tb_traffic: traffic model of one initiator for the system testbench.
//
// KIND selects the traffic (rates in words per target cycle; one word is
// 8 bytes, the target runs at 200 MHz, so 1 word/cycle = 1.6 GB/s):
//   0 CPU : 4-word bursts, reads:writes 4:1. It computes for a random time
//           (uniform, mean cpu_gap cycles) after the last response of its
//           previous burst, then issues the next burst and stalls until all
//           four responses are back. At 800 MHz and one instruction per CPU
//           clock it executes 4 instructions per target cycle spent
//           computing, which gives its MIPS.
//   1 MPEG: bursts of 1-8 words, reads:writes 2:1, 0.5 word/cycle (800 MB/s).
//   2 VID : 8-word reads every 64 cycles, 0.125 word/cycle (200 MB/s).
//   3 GEN : bursts of 1-8 words, reads:writes 1:1, 0.0625 word/cycle.
// Stream initiators queue the words that have arrived and send them one per
// cycle; the queue length is their backlog. Every initiator addresses its own
// region of the target and checks each response, in order, against a shadow
// copy of what it wrote.
module tb_traffic
  import qos_pkg::*;
#(
  parameter int KIND = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  input  int   cpu_gap,
  output logic valid,
  output req_t req,
  input  logic ready,
  input  logic rsp_valid,
  input  rsp_t rsp,
  output int   offered,
  output int   accepted,
  output int   responses,
  output int   errors,
  output int   backlog_max,
  output int   compute_cycles,
  output int   bursts
);

  typedef struct {
    bit            write;
    bit            known;   // read of a word this initiator wrote before
    logic [AW-1:0] addr;
    logic [DW-1:0] data;
  } word_t;

  word_t         q[$];          // words waiting to be sent
  word_t         exp_q[$];      // responses expected, in order
  logic [DW-1:0] shadow[int];
  int            acc16;         // arrival accumulator, 1/16 word units
  int            next_len;
  int            gap, outstanding, vid_timer;
  bit            stalled;

  function automatic word_t mkword(bit wr);
    word_t w;
    w.write = wr;
    w.known = 1'b0;
    w.addr  = AW'((KIND << 10) + $urandom_range(0, 255));
    w.data  = {$urandom, $urandom};
    return w;
  endfunction

  task automatic push_burst(int len, int wr_num, int wr_den);
    bit wr = ($urandom_range(0, wr_den - 1) < wr_num);
    for (int k = 0; k < len; k++) q.push_back(mkword(wr));
    offered += len;
    bursts++;
  endtask

  always @(posedge clk) begin
    if (!rst_n) begin
      offered = 0; accepted = 0; responses = 0; errors = 0; backlog_max = 0;
      compute_cycles = 0; bursts = 0; acc16 = 0; next_len = 1; outstanding = 0;
      stalled = 0; vid_timer = 0; gap = cpu_gap;
      q.delete();
      exp_q.delete();
    end else begin
      // ---- response check ----
      if (rsp_valid) begin
        responses++;
        if (exp_q.size() == 0) begin
          errors++; $display("FAIL: initiator %0d: response without request", KIND);
        end else begin
          if (rsp.write != exp_q[0].write || int'(rsp.init) != KIND) begin
            errors++; $display("FAIL: initiator %0d: response kind/tag", KIND);
          end else if (!rsp.write && exp_q[0].known && rsp.data != exp_q[0].data) begin
            errors++; $display("FAIL: initiator %0d: read data", KIND);
          end
          void'(exp_q.pop_front());
        end
        outstanding--;
      end
      // ---- acceptance ----
      if (valid && ready) begin
        word_t w, e;
        w = q.pop_front();
        e = w;
        accepted++;
        outstanding++;
        if (w.write) shadow[int'(w.addr)] = w.data;
        else if (shadow.exists(int'(w.addr))) begin
          e.known = 1'b1;
          e.data  = shadow[int'(w.addr)];
        end
        exp_q.push_back(e);
      end
      // ---- arrivals ----
      if (run) begin
        case (KIND)
          0: begin
            if (!stalled) begin
              if (gap > 0) begin
                gap--;
                compute_cycles++;
              end else begin
                push_burst(4, 1, 5);
                stalled = 1;
              end
            end else if (q.size() == 0 && outstanding == 0) begin
              stalled = 0;
              gap = $urandom_range(0, 2 * cpu_gap);
            end
          end
          1: begin
            acc16 += 8;
            if (acc16 >= 16 * next_len) begin
              acc16 -= 16 * next_len;
              push_burst(next_len, 1, 3);
              next_len = $urandom_range(1, 8);
            end
          end
          2: begin
            if (vid_timer == 0) push_burst(8, 0, 1);
            vid_timer = (vid_timer + 1) % 64;
          end
          default: begin
            acc16 += 1;
            if (acc16 >= 16 * next_len) begin
              acc16 -= 16 * next_len;
              push_burst(next_len, 1, 2);
              next_len = $urandom_range(1, 8);
            end
          end
        endcase
      end
      if (q.size() > backlog_max) backlog_max = q.size();
    end
    // present the head of the queue for the next cycle
    valid <= rst_n && (q.size() > 0);
    if (rst_n && q.size() > 0) begin
      req       <= '0;
      req.write <= q[0].write;
      req.addr  <= q[0].addr;
      req.data  <= q[0].data;
    end else begin
      req <= '0;
    end
  end
endmodule
