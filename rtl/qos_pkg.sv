// qos_pkg: types and constants shared by the QoS interconnect.
//
// A request is one word transfer to the shared target. Bursts from an
// initiator are sent as a series of single-word requests, and arbitration is
// done per request. Each request carries the number of the initiator that sent
// it, the thread it travels on, and the epoch marker that the initiator
// boundary sets on the first request of every epoch.
//
// The word width (8 bytes) follows the target described for the system; the
// address width and the field encodings are this design's own choices.
package qos_pkg;

  localparam int unsigned NINIT = 4;   // initiators: 0 CPU, 1 MPEG, 2 VID, 3 GEN
  localparam int unsigned NTHR  = 4;   // threads to the target
  localparam int unsigned IW    = 2;   // initiator number width
  localparam int unsigned TW    = 2;   // thread number width
  localparam int unsigned AW    = 32;  // word address width
  localparam int unsigned DW    = 64;  // data width: 8-byte target interface

  // QoS levels, highest priority first. A demoted thread competes as
  // best effort.
  typedef enum logic [1:0] {
    QOS_PRIORITY    = 2'd0,
    QOS_BANDWIDTH   = 2'd1,
    QOS_BEST_EFFORT = 2'd2
  } qos_level_e;

  typedef struct packed {
    logic [IW-1:0] init;     // initiator that issued the request
    logic [TW-1:0] thread;   // thread (virtual channel) of the request
    logic          marker;   // first request of an epoch
    logic          write;    // 1 write, 0 read
    logic [AW-1:0] addr;     // word address
    logic [DW-1:0] data;     // write data
  } req_t;

  typedef struct packed {
    logic [IW-1:0] init;     // initiator the response goes back to
    logic [TW-1:0] thread;
    logic          write;    // response to a write (acknowledge)
    logic [DW-1:0] data;     // read data
  } rsp_t;

endpackage
