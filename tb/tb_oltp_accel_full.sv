// tb_oltp_accel_full: end-to-end test of the accelerator at full size.
//
// The DUT keeps every default: 4 txn agents with 8 concurrent txns each,
// 4 lock channels of 4 lock agents, 64K-entry lock tables, 4K-entry waiting
// queues, a 2^13-cycle timeout. Each agent runs 400 txns, the per-agent
// count of the paper's simulation runs, over a hot set of 256 lock ids with
// 1 to 6 locks per txn and one txn in four up to 24 locks. The 36-cycle
// memory latency is the 288 ns HBM latency at 125 MHz.
// The shared body (oltp_tb_body.svh) checks lock safety, tuple access rights,
// statistics and cleanup, and counts each mechanism. At this size a waiting
// queue can never fill (at most 32 requests wait at once against 4K entries),
// so an Abort response cannot happen and is reported but not required.
module tb_oltp_accel_full;
  import lock_pkg::*;

  localparam int unsigned N_TA       = 4;
  localparam int unsigned N_CH       = 4;
  localparam int unsigned P          = 4;
  localparam int unsigned TXN_CS     = 8;
  localparam int unsigned LT_ENTRIES = 65536;
  localparam int unsigned WQ_ENTRIES = 4096;
  localparam int unsigned RSPQ_DEPTH = 16;
  localparam int unsigned NTXN       = 400;
  localparam int unsigned MAXL       = 24;
  localparam int unsigned ID_RANGE   = 256;
  localparam int unsigned MEM_LAT    = 36;
  localparam int unsigned WATCHDOG   = 3000000;
  localparam bit          STANDALONE   = 1'b1;
  localparam bit          REQUIRE_MECH = 1'b1;
  localparam bit          REQUIRE_ABORT_RSP = 1'b0;

  oltp_accel dut (.*);

  `include "oltp_tb_body.svh"
endmodule
