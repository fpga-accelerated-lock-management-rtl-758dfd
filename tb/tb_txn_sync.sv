// tb_txn_sync: self-checking test of the signal synchronization center.
//
// Drives the components' event pulses by hand and checks every stage move
// of a txn entry and its timing (a barrier opens one cycle after its last
// event): a clean commit path; an Abort that must wait until every sent Get
// has had its first response before RELEASE; a popped Grant (not a first
// response) that must not count as one; a timeout that fires TIMEOUT cycles
// after the entry entered GET, only once, and not for a txn that holds all
// its locks; cleanup of two entries finishing in the same cycle on two
// consecutive cycles.
module tb_txn_sync;
  import lock_pkg::*;

  localparam int unsigned TXN_CS  = 4;
  localparam int unsigned TIMEOUT = 64;
  localparam int unsigned SW = 2, CW = LIDX_W + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_start = 0, ld_done = 0, get_sent = 0, get_done = 0, rx_first = 0, rx_grant = 0, rx_abort = 0;
  logic rx_released = 0, commit_done = 0, rel_sent = 0, rel_done = 0;
  logic [SW-1:0] ld_start_slot = 0, ld_done_slot = 0, get_sent_slot = 0, get_done_slot = 0, rx_slot = 0;
  logic [SW-1:0] commit_done_slot = 0, rel_sent_slot = 0, rel_done_slot = 0;
  logic [CW-1:0] ld_done_nlocks = 0, get_done_ndata = 0;
  txn_phase_e        phase   [TXN_CS];
  logic [TXN_CS-1:0] aborted;
  logic [CW-1:0]     n_locks [TXN_CS], n_sent [TXN_CS], n_data [TXN_CS];
  logic txn_done, txn_done_abort, timeout_fire;

  txn_sync #(.TXN_CS(TXN_CS), .TIMEOUT(TIMEOUT)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0, n_done = 0, n_done_abort = 0, n_tmo = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    if (txn_done) begin n_done++; if (txn_done_abort) n_done_abort++; end
    if (timeout_fire) n_tmo++;
  end
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  // one-cycle event pulses, driven at negedge
  task automatic tick(); @(negedge clk);
    {ld_start, ld_done, get_sent, get_done, rx_first, rx_grant, rx_abort, rx_released, commit_done, rel_sent, rel_done} = '0;
  endtask
  task automatic ev_load(int s, int n);  ld_start = 1; ld_start_slot = SW'(s); tick();
                                          ld_done = 1; ld_done_slot = SW'(s); ld_done_nlocks = CW'(n); tick(); endtask
  task automatic ev_sent(int s);          get_sent = 1; get_sent_slot = SW'(s); tick(); endtask
  task automatic ev_gdone(int s, int nd); get_done = 1; get_done_slot = SW'(s); get_done_ndata = CW'(nd); tick(); endtask
  task automatic ev_rx(int s, logic first, logic grant, logic abrt, logic rel);
    rx_slot = SW'(s); rx_first = first; rx_grant = grant; rx_abort = abrt; rx_released = rel; tick();
  endtask
  task automatic ev_commit(int s);        commit_done = 1; commit_done_slot = SW'(s); tick(); endtask
  task automatic ev_rsent(int s);         rel_sent = 1; rel_sent_slot = SW'(s); tick(); endtask
  task automatic ev_rdone(int s);         rel_done = 1; rel_done_slot = SW'(s); tick(); endtask

  initial begin
    int unsigned t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tick();
    for (int s = 0; s < TXN_CS; s++) check(phase[s] == PH_FREE, "free after reset");

    // 1. commit path on slot 2
    ld_start = 1; ld_start_slot = 2; tick();
    check(phase[2] == PH_LOAD, "FREE -> LOAD");
    ld_done = 1; ld_done_slot = 2; ld_done_nlocks = 3; tick();
    check(phase[2] == PH_GET && n_locks[2] == 3, "LOAD -> GET with lock count");
    repeat (3) ev_sent(2);
    check(n_sent[2] == 3, "Gets counted");
    ev_gdone(2, 2);
    check(phase[2] == PH_GRANT && n_data[2] == 2, "GET -> GRANT with data count");
    ev_rx(2, 1, 1, 0, 0); ev_rx(2, 1, 0, 0, 0); // grant, waiting
    check(phase[2] == PH_GRANT, "not all granted");
    ev_rx(2, 0, 1, 0, 0);                     // popped grant
    ev_rx(2, 1, 1, 0, 0);                     // last grant
    check(phase[2] == PH_GRANT, "barrier opens one cycle after the last grant");
    tick();
    check(phase[2] == PH_COMMIT, "GRANT -> COMMIT");
    ev_commit(2);
    check(phase[2] == PH_RELEASE, "COMMIT -> RELEASE");
    repeat (3) ev_rsent(2);
    ev_rdone(2);
    check(phase[2] == PH_RELWAIT, "RELEASE -> RELWAIT");
    ev_rx(2, 0, 0, 0, 1); ev_rx(2, 0, 0, 0, 1);
    tick();
    check(phase[2] == PH_RELWAIT, "waits for all Released");
    ev_rx(2, 0, 0, 0, 1);
    tick();
    check(phase[2] == PH_FREE, "RELWAIT -> FREE one cycle after the last Released");
    tick();
    check(phase[2] == PH_FREE && n_done == 1 && n_done_abort == 0, "RELWAIT -> FREE, committed");

    // 2. abort on slot 1: 2 Gets sent, Abort on one, the other still unanswered
    ev_load(1, 4); ev_sent(1); ev_sent(1);
    ev_rx(1, 1, 0, 1, 0);
    check(aborted[1], "Abort response marks the txn");
    ev_gdone(1, 1);
    repeat (3) tick();
    check(phase[1] == PH_GRANT, "aborted txn waits for first responses");
    ev_rx(1, 1, 0, 0, 0);                     // Waiting arrives
    tick();
    check(phase[1] == PH_RELEASE, "aborted txn releases once all answered");
    ev_rsent(1); ev_rdone(1); ev_rx(1, 0, 0, 0, 1); tick(); tick();
    check(phase[1] == PH_FREE && n_done == 2 && n_done_abort == 1, "aborted txn cleaned up");

    // 3. timeout on slot 0; slot 3 holds all its locks and must not time out
    ev_load(3, 1); ev_sent(3); ev_gdone(3, 0); ev_rx(3, 1, 1, 0, 0);
    ld_start = 1; ld_start_slot = 0; tick();
    ld_done = 1; ld_done_slot = 0; ld_done_nlocks = 1; t0 = cyc; tick();
    ev_sent(0); ev_gdone(0, 1); ev_rx(0, 1, 0, 0, 0);   // Waiting
    while (!timeout_fire && cyc < t0 + 4 * TIMEOUT) @(negedge clk);
    t1 = cyc;
    check(timeout_fire && aborted[0], "timeout aborts the waiting txn");
    check(t1 - t0 >= TIMEOUT && t1 - t0 <= TIMEOUT + 2, $sformatf("timeout after %0d cycles", t1 - t0));
    tick();
    check(phase[0] == PH_RELEASE, "timed-out txn goes to RELEASE");
    check(!aborted[3] && phase[3] == PH_COMMIT, "txn holding all locks not timed out");
    repeat (2 * TIMEOUT) tick();
    check(n_tmo == 1, "one timeout only");
    // 4. slots 0 and 3 finish in the same cycle
    ev_rsent(0); ev_rdone(0);
    ev_commit(3); ev_rsent(3); ev_rdone(3);
    rx_slot = 0; rx_released = 1; @(negedge clk);
    rx_slot = 3; rx_released = 1; tick();
    @(negedge clk);
    check(n_done == 3 || n_done == 4, "first of two cleaned up");
    @(negedge clk);
    check(n_done == 4 && phase[0] == PH_FREE && phase[3] == PH_FREE, "both cleaned up, one per cycle");
    check(n_done_abort == 2, "abort flags of cleaned-up txns");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
