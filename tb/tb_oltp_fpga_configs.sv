// tb_oltp_fpga_configs: the three hardware configurations of the evaluation,
// and three points of its design-space study, run side by side on the same
// kind of synthetic workload.
//
//   2C2L-2A2T  2 lock channels x 2 lock agents, 2 txn agents x 2 txns
//   2C2L-4A8T  2 lock channels x 2 lock agents, 4 txn agents x 8 txns
//   4C2L-4A8T  4 lock channels x 2 lock agents, 4 txn agents x 8 txns
//
// All use 64K-entry lock tables, and every agent runs 400 txns of 1 to 24
// locks over 4096 lock ids (a spread-out workload; with only 256 hot ids,
// contention dominates and 2A2T comes out ahead instead). Each run is
// checked in full by the shared top-level body (oltp_config_run): lock
// compatibility of every Grant, tuple access rights, statistics, and cleanup.
// The testbench then prints the committed txn/s of each configuration at
// 125 MHz. It checks one ordering from the evaluation: 4 txn agents with
// 8 txns each commit faster than 2 agents with 2 txns each on the same lock
// tables. The absolute rates differ from the measured TPC-C figures
// (120840, 283835 and 256261 txn/s): the workload is synthetic, and the
// transaction logic behind the measured figures is not modelled. The 4C2L
// build ran at a slower clock on the board (5 ns against 4 ns); here all
// three count cycles of one clock, so 4C2L is not expected to be slower.
// Typical result: about 1.37M, 2.86M and 3.00M txn/s.
//
// Three design-space points of the simulation study follow: 1C1L-4A8T,
// 4C4L-1A2T and 4C4L-8A8T (about 2.9M, 0.74M and 5.5M txn/s). The check is
// that 8A8T commits faster than 1A2T.
module tb_oltp_fpga_configs;
  import lock_pkg::*;

  localparam int NCFG = 6;
  logic            d   [NCFG];
  int              c   [NCFG];
  int              f   [NCFG];
  longint unsigned cyc [NCFG];
  longint unsigned com [NCFG];

  oltp_config_run #(.CFG_TA(2), .CFG_CH(2), .CFG_P(2), .CFG_CS(2)) u_2c2l_2a2t (
    .o_done(d[0]), .o_checks(c[0]), .o_failures(f[0]), .o_cycles(cyc[0]), .o_commits(com[0]));
  oltp_config_run #(.CFG_TA(4), .CFG_CH(2), .CFG_P(2), .CFG_CS(8)) u_2c2l_4a8t (
    .o_done(d[1]), .o_checks(c[1]), .o_failures(f[1]), .o_cycles(cyc[1]), .o_commits(com[1]));
  oltp_config_run #(.CFG_TA(4), .CFG_CH(4), .CFG_P(2), .CFG_CS(8)) u_4c2l_4a8t (
    .o_done(d[2]), .o_checks(c[2]), .o_failures(f[2]), .o_cycles(cyc[2]), .o_commits(com[2]));
  // Design-space points of the simulation study.
  oltp_config_run #(.CFG_TA(4), .CFG_CH(1), .CFG_P(1), .CFG_CS(8)) u_1c1l_4a8t (
    .o_done(d[3]), .o_checks(c[3]), .o_failures(f[3]), .o_cycles(cyc[3]), .o_commits(com[3]));
  oltp_config_run #(.CFG_TA(1), .CFG_CH(4), .CFG_P(4), .CFG_CS(2)) u_4c4l_1a2t (
    .o_done(d[4]), .o_checks(c[4]), .o_failures(f[4]), .o_cycles(cyc[4]), .o_commits(com[4]));
  oltp_config_run #(.CFG_TA(8), .CFG_CH(4), .CFG_P(4), .CFG_CS(8)) u_4c4l_8a8t (
    .o_done(d[5]), .o_checks(c[5]), .o_failures(f[5]), .o_cycles(cyc[5]), .o_commits(com[5]));

  int checks = 0, failures = 0;

  function automatic longint unsigned rate(int i);
    return (cyc[i] == 0) ? 0 : longint'(real'(com[i]) * 125.0e6 / real'(cyc[i]));
  endfunction

  initial begin
    string names [NCFG] = '{"2C2L-2A2T", "2C2L-4A8T", "4C2L-4A8T", "1C1L-4A8T", "4C4L-1A2T", "4C4L-8A8T"};
    #10;  // let the outputs settle from their random start values
    wait (d[0] && d[1] && d[2] && d[3] && d[4] && d[5]);
    for (int i = 0; i < NCFG; i++) begin
      $display("%s: %0d committed in %0d cycles, %0d txn/s at 125 MHz, %0d checks, %0d failures",
               names[i], com[i], cyc[i], rate(i), c[i], f[i]);
      checks += c[i];
      failures += f[i];
    end
    checks++;
    if (!(rate(1) > rate(0))) begin
      failures++;
      $display("FAIL: 4A8T not faster than 2A2T on 2C2L");
    end
    // More txn agents commit more txns. (1C1L is printed for comparison only:
    // here the one-at-a-time memory accesses of the txn agents, not the lock
    // tables, limit the rate, so it is not slower than 2C2L.)
    checks++;
    if (!(rate(5) > rate(4))) begin
      failures++;
      $display("FAIL: 8A8T not faster than 1A2T on 4C4L");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog, in time units of the 4-unit clock period of the runs.
  initial begin
    #(4 * 5000000);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
