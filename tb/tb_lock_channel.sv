// tb_lock_channel: self-checking test of a lock table channel (4 lock agents
// behind a 1-to-4 crossbar).
//
// Lock ids are chosen so that bits [3:2] (after the 2 channel bits) pick each
// of the 4 lock agents and bits [7:4] the bucket (ids sharing a bucket share
// a lock table entry). Checks: a Get reaches the lock agent its id selects
// (seen inside the channel), grants come back in the lock agent's 3 cycles
// (the crossbars add none), Gets to 4 different agents are accepted one per
// cycle, a conflicting Get waits and is granted from the queue when the
// holder releases, and a random run of Get/Release from 8 requesters on 16
// ids keeps every granted set compatible and ends with nothing held.
module tb_lock_channel;
  import lock_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      req_valid, req_ready, rsp_valid, rsp_ready, busy_init;
  lock_req_t req;
  lock_rsp_t rsp;

  lock_channel #(.P(4), .CH_BITS(2), .LT_ENTRIES(256), .WQ_ENTRIES(8), .WQ_SEARCH(8)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp, .busy_init
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // which lock agent accepted a request this cycle (sampled at negedge)
  int last_agent = -1;
  always @(negedge clk)
    for (int p = 0; p < 4; p++)
      if (dut.la_req_valid[p] && dut.la_req_ready[p]) begin
        last_agent = p;
        check(int'(dut.la_req[p].lock_id[3:2]) == p, "request routed to the wrong lock agent");
      end

  int unsigned t_acc;
  task automatic send(input lock_op_e op, input lock_mode_e m, input int id, input int ag);
    @(negedge clk);
    req = '0; req.op = op; req.mode = m; req.lock_id = LOCK_ID_W'(id); req.agent = AGENT_W'(ag);
    req_valid = 1;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    t_acc = cyc;
    @(posedge clk); #1 req_valid = 0;
  endtask

  task automatic expect_rsp(input lock_rsp_e r, input int ag, input int id, input int lat, input string what);
    int unsigned t;
    forever begin @(negedge clk); if (rsp_valid) break; end
    t = cyc - t_acc + 1;
    check(rsp.rsp == r && rsp.agent == AGENT_W'(ag) && rsp.lock_id == LOCK_ID_W'(id),
          $sformatf("%s: got %s agent %0d lock %0d", what, rsp.rsp.name(), rsp.agent, rsp.lock_id));
    if (lat > 0) check(t == lat, $sformatf("%s: latency %0d expected %0d", what, t, lat));
    t_acc = cyc + 1;
    @(posedge clk); #1;
  endtask

  // random phase
  typedef enum {R_IDLE, R_GETSENT, R_WAIT, R_HELD, R_RELSENT} rs_e;
  rs_e        rs    [8];
  lock_mode_e rmode [8];
  int         rlock [8];
  logic       held  [8];
  logic       rand_on = 0;
  int         n_wait = 0, n_grant = 0;

  always @(negedge clk) if (rand_on && rsp_valid && rsp_ready) begin
    automatic int r = int'(rsp.agent);
    case (rsp.rsp)
      RSP_GRANT: begin
        automatic logic ok = !held[r];
        for (int k = 0; k < 8; k++)
          if (k != r && held[k] && rlock[k] == rlock[r] && !compatible(rmode[r], rmode[k])) ok = 0;
        check(ok, $sformatf("random grant to %0d lock %0d", r, rlock[r]));
        held[r] = 1'b1; n_grant++;
        if (rs[r] != R_RELSENT) rs[r] = R_HELD;
      end
      RSP_WAITING:  begin check(rs[r] == R_GETSENT, "random waiting"); rs[r] = R_WAIT; n_wait++; end
      RSP_ABORTED:  begin check(rs[r] == R_GETSENT, "random abort");   rs[r] = R_IDLE; end
      default:      begin check(rs[r] == R_RELSENT, "random released"); rs[r] = R_IDLE; held[r] = 1'b0; end
    endcase
  end

  initial begin
    int unsigned t0;
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int k = 0; k < 8; k++) begin rs[k] = R_IDLE; held[k] = 0; rmode[k] = M_NL; rlock[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (busy_init) @(posedge clk);
    #1;

    // One Get to each lock agent: routing and 3-cycle grants.
    for (int p = 0; p < 4; p++) begin
      send(OP_GET, M_X, (p << 2) | 1, p);
      expect_rsp(RSP_GRANT, p, (p << 2) | 1, 3, "grant through channel");
      check(last_agent == p, "agent chosen by lock id bits [3:2]");
    end
    // Four Gets to four agents back to back: one accepted per cycle.
    rsp_ready = 0;
    @(negedge clk);
    t0 = cyc;
    for (int p = 0; p < 4; p++) begin
      req = '0; req.op = OP_GET; req.mode = M_S; req.lock_id = LOCK_ID_W'((p << 2) | 2 | 16); req.agent = AGENT_W'(p);
      req_valid = 1;
      #1; while (!req_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    req_valid = 0;
    check(cyc - t0 == 4, $sformatf("4 requests to 4 agents took %0d cycles", cyc - t0));
    rsp_ready = 1;
    for (int p = 0; p < 4; p++) begin
      while (!rsp_valid) @(negedge clk);
      check(rsp.rsp == RSP_GRANT && rsp.lock_id[1:0] == 2'd2, "merged grants");
      @(negedge clk);
    end
    // Conflict: waits, then is popped when the holder releases.
    send(OP_GET, M_S, 1, 5);           expect_rsp(RSP_WAITING, 5, 1, 5, "S waits for X");
    send(OP_REL, M_X, 1, 0);           expect_rsp(RSP_RELEASED, 0, 1, 3, "release X");
    expect_rsp(RSP_GRANT, 5, 1, 3, "popped S");
    send(OP_REL, M_S, 1, 5);           expect_rsp(RSP_RELEASED, 5, 1, 3, "release S");
    for (int p = 1; p < 4; p++) begin
      send(OP_REL, M_X, (p << 2) | 1, p); expect_rsp(RSP_RELEASED, p, (p << 2) | 1, 3, "release X");
    end
    for (int p = 0; p < 4; p++) begin
      send(OP_REL, M_S, (p << 2) | 2 | 16, p); expect_rsp(RSP_RELEASED, p, (p << 2) | 2 | 16, 3, "release S");
    end

    // Random Get/Release from 8 requesters on 16 lock ids.
    rand_on = 1;
    for (int it = 0; it < 3000; it++) begin
      automatic int r = $urandom_range(7);
      @(negedge clk);
      if (rs[r] == R_IDLE) begin
        lock_mode_e m;
        case ($urandom_range(4)) 0: m = M_IS; 1: m = M_IX; 2: m = M_S; 3: m = M_SIX; default: m = M_X; endcase
        rmode[r] = m; rlock[r] = $urandom_range(15); rs[r] = R_GETSENT;
        req = '0; req.op = OP_GET; req.mode = m; req.lock_id = LOCK_ID_W'(rlock[r]); req.agent = AGENT_W'(r);
        req_valid = 1;
        #1; while (!req_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 req_valid = 0;
      end else if (rs[r] == R_HELD || (rs[r] == R_WAIT && $urandom_range(20) == 0)) begin
        req = '0; req.op = OP_REL; req.timeout = (rs[r] == R_WAIT); req.mode = rmode[r];
        req.lock_id = LOCK_ID_W'(rlock[r]); req.agent = AGENT_W'(r);
        rs[r] = R_RELSENT;
        req_valid = 1;
        #1; while (!req_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 req_valid = 0;
      end
    end
    // drain: release whatever is held or waiting
    for (int round = 0; round < 40; round++) begin
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        if (rs[r] == R_HELD || rs[r] == R_WAIT) begin
          req = '0; req.op = OP_REL; req.timeout = (rs[r] == R_WAIT); req.mode = rmode[r];
          req.lock_id = LOCK_ID_W'(rlock[r]); req.agent = AGENT_W'(r);
          rs[r] = R_RELSENT;
          req_valid = 1;
          #1; while (!req_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1 req_valid = 0;
        end
      end
      repeat (30) @(negedge clk);
    end
    for (int r = 0; r < 8; r++) check(rs[r] == R_IDLE && !held[r], $sformatf("requester %0d not idle", r));
    check(n_wait > 0 && n_grant > 0, "random run had waits and grants");
    $display("random run: %0d grants, %0d waits", n_grant, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
