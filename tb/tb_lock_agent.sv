// tb_lock_agent: self-checking test of one lock agent.
//
// Directed part: grant, conflict -> waiting, queue walk, release with pop of
// compatible waiters in order, stop at the first conflict, timeout release
// that deletes a queued request, and Abort when the waiting queue is full.
// Response latencies are checked against the cycle counts of the design
// (3 for grant/release, 5 + hops for waiting and timeout release,
// 3 + WQ_SEARCH + hops for abort, 3 per popped grant).
// Random part: 16 requesters issue Get/Release on 4 hot locks; every Grant
// is checked against the modes of all current holders using an independent
// copy of the compatibility matrix, and every requester must end idle.
module tb_lock_agent;
  import lock_pkg::*;

  localparam int unsigned WQ_ENTRIES = 8;
  localparam int unsigned WQ_SEARCH  = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      req_valid, req_ready, rsp_valid, rsp_ready, busy_init;
  lock_req_t req;
  lock_rsp_t rsp;

  lock_agent #(.LT_ENTRIES(256), .WQ_ENTRIES(WQ_ENTRIES), .WQ_SEARCH(WQ_SEARCH), .HASH_SHIFT(0)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp, .busy_init
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // Independent compatibility table (requested row, granted column).
  function automatic logic ref_compat(lock_mode_e r, lock_mode_e g);
    case ({r, g})
      {M_IS, M_IS}, {M_IS, M_IX}, {M_IS, M_S}, {M_IS, M_SIX},
      {M_IX, M_IS}, {M_IX, M_IX},
      {M_S,  M_IS}, {M_S,  M_S},
      {M_SIX, M_IS}:                 return 1'b1;
      default:                       return (r == M_NL) || (g == M_NL);
    endcase
  endfunction

  // ---------------- directed helpers ----------------
  int unsigned t_acc;
  // Handshakes are sampled at the falling edge, where all DUT outputs are
  // stable; transfers happen on the following rising edge.
  task automatic send(input lock_op_e op, input logic to, input lock_mode_e m,
                      input int id, input int ag, input int sl);
    @(negedge clk);
    req.op = op; req.timeout = to; req.mode = m; req.lock_id = LOCK_ID_W'(id);
    req.agent = AGENT_W'(ag); req.slot = SLOT_W'(sl); req.lidx = '0;
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    t_acc = cyc;                   // the next rising edge accepts: cycle 0
    @(posedge clk); #1 req_valid = 0;
  endtask

  // lat: cycles from the accepting edge's cycle to the response cycle, inclusive.
  task automatic expect_rsp(input lock_rsp_e r, input int ag, input int lat, input string what);
    int unsigned t;
    forever begin @(negedge clk); if (rsp_valid) break; end
    t = cyc - t_acc + 1;
    check(rsp.rsp == r && rsp.agent == AGENT_W'(ag), $sformatf("%s: rsp %s agent %0d", what, rsp.rsp.name(), rsp.agent));
    if (lat > 0) check(t == lat, $sformatf("%s: latency %0d expected %0d", what, t, lat));
    t_acc = cyc + 1;               // a following popped grant counts from here
    @(posedge clk); #1;
  endtask

  // ---------------- random phase model ----------------
  typedef enum {R_IDLE, R_GETSENT, R_WAIT, R_HELD, R_RELSENT} rs_e;
  rs_e        rs    [16];
  lock_mode_e rmode [16];
  int         rlock [16];
  logic       held  [16];
  logic       rand_on = 0;

  always @(posedge clk) if (rand_on && rsp_valid && rsp_ready) begin
    automatic int r = int'(rsp.agent) * 4 + int'(rsp.slot);
    case (rsp.rsp)
      RSP_GRANT: begin
        automatic logic ok = (rs[r] == R_GETSENT || rs[r] == R_WAIT || rs[r] == R_RELSENT) && !held[r];
        for (int k = 0; k < 16; k++)
          if (k != r && held[k] && rlock[k] == rlock[r] && !ref_compat(rmode[r], rmode[k])) ok = 0;
        check(ok, $sformatf("random grant to %0d lock %0d mode %s", r, rlock[r], rmode[r].name()));
        held[r] <= 1'b1;
        if (rs[r] != R_RELSENT) rs[r] <= R_HELD;
      end
      RSP_WAITING:  begin check(rs[r] == R_GETSENT, "random waiting"); rs[r] <= R_WAIT; end
      RSP_ABORTED:  begin check(rs[r] == R_GETSENT, "random abort");   rs[r] <= R_IDLE; end
      RSP_RELEASED: begin check(rs[r] == R_RELSENT, "random released"); rs[r] <= R_IDLE; held[r] <= 1'b0; end
    endcase
  end

  int n_grant_pop = 0;
  initial begin
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int k = 0; k < 16; k++) begin rs[k] = R_IDLE; held[k] = 0; rmode[k] = M_NL; rlock[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (busy_init) @(posedge clk);
    #1;

    // 1. Free lock: grant in 3 cycles.
    send(OP_GET, 0, M_X, 5, 0, 0);   expect_rsp(RSP_GRANT, 0, 3, "get X free");
    // 2. Conflict, no queue: waiting in 5 cycles.
    send(OP_GET, 0, M_S, 5, 1, 0);   expect_rsp(RSP_WAITING, 1, 5, "get S vs X");
    // 3. Conflict, queue of 1: one tail hop.
    send(OP_GET, 0, M_IS, 5, 2, 0);  expect_rsp(RSP_WAITING, 2, 6, "get IS vs X");
    send(OP_GET, 0, M_X, 5, 3, 0);   expect_rsp(RSP_WAITING, 3, 7, "get X vs X");
    // 4. Release of the only owner: Released, then S and IS popped, X stays.
    send(OP_REL, 0, M_X, 5, 0, 0);   expect_rsp(RSP_RELEASED, 0, 3, "release X");
    expect_rsp(RSP_GRANT, 1, 3, "pop S");
    expect_rsp(RSP_GRANT, 2, 3, "pop IS");
    repeat (4) @(posedge clk);
    check(!rsp_valid, "no grant of conflicting X");
    // 5. Timeout release of the queued X: deleted from the queue.
    send(OP_REL, 1, M_X, 5, 3, 0);   expect_rsp(RSP_RELEASED, 3, 5, "timeout release queued X");
    // 6. Two owners release; lock becomes free; no spurious grant.
    send(OP_REL, 0, M_S, 5, 1, 0);   expect_rsp(RSP_RELEASED, 1, 3, "release S (2 owners)");
    send(OP_REL, 0, M_IS, 5, 2, 0);  expect_rsp(RSP_RELEASED, 2, 3, "release IS (last)");
    send(OP_GET, 0, M_X, 5, 4, 0);   expect_rsp(RSP_GRANT, 4, 3, "lock free again");
    // 7. Intention modes: IX and IS share, S waits, SIX not compatible with IX.
    send(OP_GET, 0, M_IX, 9, 0, 1);  expect_rsp(RSP_GRANT, 0, 3, "IX free");
    send(OP_GET, 0, M_IS, 9, 1, 1);  expect_rsp(RSP_GRANT, 1, 3, "IS with IX");
    send(OP_GET, 0, M_S, 9, 2, 1);   expect_rsp(RSP_WAITING, 2, 0, "S vs IX");
    send(OP_REL, 0, M_IX, 9, 0, 1);  expect_rsp(RSP_RELEASED, 0, 3, "IX release, 1 owner left");
    repeat (3) @(posedge clk);
    check(!rsp_valid, "S still waits while IS holds (mode not lowered)");
    send(OP_REL, 0, M_IS, 9, 1, 1);  expect_rsp(RSP_RELEASED, 1, 3, "IS release");
    expect_rsp(RSP_GRANT, 2, 3, "S popped");
    send(OP_REL, 0, M_S, 9, 2, 1);   expect_rsp(RSP_RELEASED, 2, 3, "S release");
    // 8. Timeout release of a lock that was already granted: normal release.
    send(OP_GET, 0, M_S, 12, 0, 2);  expect_rsp(RSP_GRANT, 0, 3, "S on 12");
    send(OP_GET, 0, M_X, 12, 1, 2);  expect_rsp(RSP_WAITING, 1, 5, "X on 12 waits");
    send(OP_REL, 1, M_S, 12, 0, 2);  expect_rsp(RSP_RELEASED, 0, 0, "timeout rel of granted S");
    expect_rsp(RSP_GRANT, 1, 3, "X popped");
    // 9. Fill the queue (X on 12 held by agent 1): 7 more waiters fit, the
    //    next one aborts after the full search.
    for (int k = 0; k < int'(WQ_ENTRIES); k++) begin
      send(OP_GET, 0, M_S, 12, 2 + k % 8, 3 + k / 8);
      expect_rsp(RSP_WAITING, 2 + k % 8, 0, $sformatf("fill waiter %0d", k));
    end
    send(OP_GET, 0, M_S, 12, 11, 7);
    expect_rsp(RSP_ABORTED, 11, 3 + int'(WQ_SEARCH) + int'(WQ_ENTRIES), "abort when queue full");
    // Release X: all 8 S waiters are compatible and pop in order.
    send(OP_REL, 0, M_X, 12, 1, 2);  expect_rsp(RSP_RELEASED, 1, 3, "release X on 12");
    for (int k = 0; k < int'(WQ_ENTRIES); k++) expect_rsp(RSP_GRANT, 2 + k % 8, 3, $sformatf("pop %0d", k));
    for (int k = 0; k < int'(WQ_ENTRIES); k++) begin
      send(OP_REL, 0, M_S, 12, 2 + k % 8, 3 + k / 8);
      expect_rsp(RSP_RELEASED, 2 + k % 8, 3, "release popped S");
    end

    // ---------------- random phase ----------------
    rand_on = 1;
    for (int it = 0; it < 3000; it++) begin
      automatic int r = $urandom_range(0, 15);
      automatic lock_mode_e ms [5] = '{M_IS, M_IX, M_S, M_SIX, M_X};
      @(posedge clk); #1;
      if (rs[r] == R_IDLE) begin
        rmode[r] = ms[$urandom_range(0, 4)];
        rlock[r] = $urandom_range(0, 3);
        rs[r] = R_GETSENT;
        send(OP_GET, 0, rmode[r], rlock[r], r / 4, r % 4);
      end else if (rs[r] == R_HELD) begin
        rs[r] = R_RELSENT;
        send(OP_REL, 0, rmode[r], rlock[r], r / 4, r % 4);
      end else if (rs[r] == R_WAIT && $urandom_range(0, 9) == 0) begin
        rs[r] = R_RELSENT;
        send(OP_REL, 1, rmode[r], rlock[r], r / 4, r % 4);
      end
    end
    // Drain: release everything still held or waiting.
    for (int pass = 0; pass < 40; pass++) begin
      repeat (30) @(posedge clk); #1;
      for (int r = 0; r < 16; r++) begin
        if (rs[r] == R_HELD) begin rs[r] = R_RELSENT; send(OP_REL, 0, rmode[r], rlock[r], r / 4, r % 4); end
        else if (rs[r] == R_WAIT) begin rs[r] = R_RELSENT; send(OP_REL, 1, rmode[r], rlock[r], r / 4, r % 4); end
      end
    end
    repeat (50) @(posedge clk);
    for (int r = 0; r < 16; r++) check(rs[r] == R_IDLE, $sformatf("requester %0d ends idle (%s)", r, rs[r].name()));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
