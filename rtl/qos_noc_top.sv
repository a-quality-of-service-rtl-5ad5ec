// qos_noc_top: request network of four initiators to one shared target with
// the two-part QoS arbitration.
//
// Topology (one target):
//
//   CPU(0) -- epoch_marker ------------------------------+
//   MPEG(1)-- epoch_marker ------------------------------+-- arb point 2 -- edge -- MEM
//   VID(2) -- epoch_marker --+-- arb point 1 -- staging -+      ^            |      |
//   GEN(3) -- epoch_marker --+        ^        buffers          |  demote    |      |
//                                     +-----------------------+------------+      |
//   responses <---------------------------- resp_net <----------------------------+
//
// init_thread assigns each initiator to a thread: an initiator may have a
// thread of its own (the usual set-up: thread number = initiator number) or
// share one with others, whose requests are then merged by the epoch scheme.
// The core arbitration points apply strict priority between QoS levels and the
// epoch scheme within a level; the edge keeps one credit counter per thread and
// feeds demote bits back to both points. The staging buffers keep one FIFO per
// thread on the link between the two points, so any thread may cross it.
//
// Interface: per initiator a valid/ready request port (the initiator's own
// init, thread and marker fields are overwritten at the boundary) and a
// response port without ready. Configuration inputs: per initiator its
// thread and epoch size; per thread its QoS level, allocation num/den of target cycles, positive and negative
// credit limits. demote and credit are brought out for observation.
// Timing: a request that meets no contention passes all the way to the target
// in the cycle it is presented; its response comes back one cycle later.
module qos_noc_top
  import qos_pkg::*;
#(
  parameter int unsigned EW        = 8,
  parameter int unsigned CW        = 8,
  parameter int unsigned RW        = 8,
  parameter int unsigned STG_DEPTH = 4,
  parameter int unsigned MEM_DEPTH = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // configuration
  input  logic [NINIT-1:0][TW-1:0]     init_thread,
  input  logic [NINIT-1:0][EW-1:0]     epoch_size,
  input  qos_level_e [NTHR-1:0]        thread_level,
  input  logic [NTHR-1:0][RW-1:0]      alloc_num,
  input  logic [NTHR-1:0][RW-1:0]      alloc_den,
  input  logic signed [NTHR-1:0][CW-1:0] pos_limit,
  input  logic signed [NTHR-1:0][CW-1:0] neg_limit,
  // initiator request ports
  input  logic [NINIT-1:0]             ini_valid,
  input  req_t [NINIT-1:0]             ini_req,
  output logic [NINIT-1:0]             ini_ready,
  // initiator response ports
  output logic [NINIT-1:0]             rsp_valid,
  output rsp_t [NINIT-1:0]             rsp,
  // observation
  output logic [NTHR-1:0]              demote,
  output logic [NTHR-1:0][CW-1:0]      credit,
  output logic                         p1_epoch_adv,
  output logic                         p2_epoch_adv
);

  // ---------------- initiator boundaries ----------------
  logic [NINIT-1:0] b_valid, b_ready;
  req_t [NINIT-1:0] b_req;

  for (genvar i = 0; i < NINIT; i++) begin : g_bnd
    epoch_marker #(.INIT_ID(i), .EW(EW)) u_mark (
      .clk       (clk),
      .rst_n     (rst_n),
      .thread_id (init_thread[i]),
      .epoch_size(epoch_size[i]),
      .in_valid  (ini_valid[i]),
      .in_req    (ini_req[i]),
      .in_ready  (ini_ready[i]),
      .out_valid (b_valid[i]),
      .out_req   (b_req[i]),
      .out_ready (b_ready[i])
    );
  end

  // ---------------- arbitration point 1: VID, GEN ----------------
  logic          p1_valid;
  req_t          p1_req;
  logic [NTHR-1:0] stg_thr_ready;

  qos_arb_point #(.NI(2), .NT(NTHR)) u_p1 (
    .clk          (clk),
    .rst_n        (rst_n),
    .thread_level (thread_level),
    .demote       (demote),
    .in_valid     (b_valid[3:2]),
    .in_req       (b_req[3:2]),
    .in_ready     (b_ready[3:2]),
    .out_thr_ready(stg_thr_ready),
    .out_valid    (p1_valid),
    .out_req      (p1_req),
    .epoch_adv    (p1_epoch_adv)
  );

  // ---------------- staging buffers: one FIFO per thread ----------------
  logic [NTHR-1:0] s_valid, s_ready;
  req_t [NTHR-1:0] s_req;

  staging_buffer #(.NB(NTHR), .NT(NTHR), .DEPTH(STG_DEPTH),
                   .THREADS({TW'(3), TW'(2), TW'(1), TW'(0)})) u_stg (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (p1_valid),
    .in_req      (p1_req),
    .in_thr_ready(stg_thr_ready),
    .out_valid   (s_valid),
    .out_req     (s_req),
    .out_ready   (s_ready)
  );

  // ---------------- arbitration point 2: CPU, MPEG, staged threads -------
  // inputs 0, 1: CPU and MPEG; inputs 2..5: staging FIFOs of threads 0..3
  logic [NTHR+1:0] p2_in_valid, p2_in_ready;
  req_t [NTHR+1:0] p2_in_req;
  logic       p2_valid, edge_ready;
  req_t       p2_req;

  assign p2_in_valid = {s_valid, b_valid[1:0]};
  assign p2_in_req   = {s_req, b_req[1:0]};
  assign b_ready[1:0] = p2_in_ready[1:0];
  assign s_ready      = p2_in_ready[NTHR+1:2];

  qos_arb_point #(.NI(NTHR+2), .NT(NTHR)) u_p2 (
    .clk          (clk),
    .rst_n        (rst_n),
    .thread_level (thread_level),
    .demote       (demote),
    .in_valid     (p2_in_valid),
    .in_req       (p2_in_req),
    .in_ready     (p2_in_ready),
    .out_thr_ready({NTHR{edge_ready}}),
    .out_valid    (p2_valid),
    .out_req      (p2_req),
    .epoch_adv    (p2_epoch_adv)
  );

  // ---------------- interconnect edge ----------------
  logic p2_ready_unused;
  logic t_valid, t_ready;
  req_t t_req;

  qos_edge #(.NT(NTHR), .CW(CW), .RW(RW)) u_edge (
    .clk         (clk),
    .rst_n       (rst_n),
    .thread_level(thread_level),
    .alloc_num   (alloc_num),
    .alloc_den   (alloc_den),
    .pos_limit   (pos_limit),
    .neg_limit   (neg_limit),
    .in_valid    (p2_valid),
    .in_req      (p2_req),
    .in_ready    (p2_ready_unused),
    .tgt_valid   (t_valid),
    .tgt_req     (t_req),
    .tgt_ready   (t_ready),
    .demote      (demote),
    .credit      (credit)
  );

  assign edge_ready = t_ready;

  // ---------------- target and response network ----------------
  logic m_rsp_valid;
  rsp_t m_rsp;

  mem_target #(.DEPTH(MEM_DEPTH)) u_mem (
    .clk      (clk),
    .rst_n    (rst_n),
    .req_valid(t_valid),
    .req      (t_req),
    .req_ready(t_ready),
    .rsp_valid(m_rsp_valid),
    .rsp      (m_rsp)
  );

  resp_net #(.NINIT_P(NINIT)) u_rsp (
    .in_valid (m_rsp_valid),
    .in_rsp   (m_rsp),
    .out_valid(rsp_valid),
    .out_rsp  (rsp)
  );

endmodule
