// oltp_config_run: one end-to-end run of the accelerator in a given
// configuration, for testbenches that compare several configurations.
//
// It instantiates oltp_accel with the channel, lock-agent, txn-agent and
// context-switch counts given as parameters (tables, queues and timeout at
// their defaults) and includes the shared top-level test body without letting
// it finish the simulation: the body checks lock safety, tuple access rights,
// statistics and cleanup as in the single-configuration testbenches, then
// raises done with the run's cycle count and committed txns on the outputs.
// Mechanism counts are printed but not required here, since a small
// configuration may never time out. The workload spreads 1 to 24 locks per
// txn over 4096 lock ids.
module oltp_config_run
  import lock_pkg::*;
#(
  parameter int unsigned CFG_TA = 2,
  parameter int unsigned CFG_CH = 2,
  parameter int unsigned CFG_P  = 2,
  parameter int unsigned CFG_CS = 2,
  parameter int unsigned CFG_NTXN = 400
) (
  output logic            o_done,
  output int              o_checks,
  output int              o_failures,
  output longint unsigned o_cycles,
  output longint unsigned o_commits
);
  localparam int unsigned N_TA       = CFG_TA;
  localparam int unsigned N_CH       = CFG_CH;
  localparam int unsigned P          = CFG_P;
  localparam int unsigned TXN_CS     = CFG_CS;
  localparam int unsigned LT_ENTRIES = 65536;
  localparam int unsigned WQ_ENTRIES = 4096;
  localparam int unsigned RSPQ_DEPTH = 16;
  localparam int unsigned NTXN       = CFG_NTXN;
  localparam int unsigned MAXL       = 24;
  localparam int unsigned ID_RANGE   = 4096;
  localparam int unsigned MEM_LAT    = 36;
  localparam int unsigned WATCHDOG   = 4000000;
  localparam bit          STANDALONE   = 1'b0;
  localparam bit          REQUIRE_MECH = 1'b0;
  localparam bit          REQUIRE_ABORT_RSP = 1'b0;

  oltp_accel #(.N_TA(N_TA), .N_CH(N_CH), .P(P), .TXN_CS(TXN_CS)) dut (.*);

  `include "oltp_tb_body.svh"

  assign o_done     = run_done;
  assign o_checks   = checks;
  assign o_failures = failures;
  assign o_cycles   = run_cycles;
  assign o_commits  = run_commits;
endmodule
