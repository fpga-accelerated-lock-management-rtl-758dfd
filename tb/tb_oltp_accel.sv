// tb_oltp_accel: end-to-end test of the accelerator at a reduced size.
//
// 2 txn agents with 8 concurrent txns each, 2 lock channels of 2 lock agents,
// small lock tables (256 entries) and waiting queues (4 entries), a 512-cycle
// timeout and a hot set of 48 lock ids, so that every mechanism (waiting,
// queue pop, Abort on a full queue, timeout, timeout release) happens often.
// The shared body (oltp_tb_body.svh) builds the workload, runs it through
// the CSRs and checks lock safety, tuple access rights, statistics and
// cleanup; see there. Memory latency is the 36-cycle HBM figure.
module tb_oltp_accel;
  import lock_pkg::*;

  localparam int unsigned N_TA       = 2;
  localparam int unsigned N_CH       = 2;
  localparam int unsigned P          = 2;
  localparam int unsigned TXN_CS     = 8;
  localparam int unsigned LT_ENTRIES = 256;
  localparam int unsigned WQ_ENTRIES = 4;
  localparam int unsigned RSPQ_DEPTH = 4;
  localparam int unsigned NTXN       = 60;
  localparam int unsigned MAXL       = 16;
  localparam int unsigned ID_RANGE   = 48;
  localparam int unsigned MEM_LAT    = 36;
  localparam int unsigned WATCHDOG   = 400000;
  localparam bit          STANDALONE   = 1'b1;
  localparam bit          REQUIRE_MECH = 1'b1;
  localparam bit          REQUIRE_ABORT_RSP = 1'b1;

  oltp_accel #(
    .N_TA(N_TA), .N_CH(N_CH), .P(P), .TXN_CS(TXN_CS), .TIMEOUT(512),
    .LT_ENTRIES(LT_ENTRIES), .WQ_ENTRIES(WQ_ENTRIES), .WQ_SEARCH(8),
    .RSPQ_DEPTH(RSPQ_DEPTH)
  ) dut (.*);

  `include "oltp_tb_body.svh"
endmodule
