// tb_txn_agent: self-checking test of one txn agent against a behavioural
// lock server.
//
// The agent runs 80 txns (1..20 locks, ids unique within a txn) from an
// AXI memory model with the 36-cycle HBM latency. The server answers each
// Get after a random delay with Grant (most), Waiting then a later Grant,
// Waiting and never a Grant (the txn must time out), or Abort; it answers
// every Release with Released, removing a waiting request when the Release
// is marked timeout. Checks: only locks the server holds for the txn are
// released normally; timeout releases only for waiting requests; Abort-ed
// locks are never released; every tuple read/write is for a lock the txn
// entry holds in S/SIX or X; the agent's counters agree with the server's;
// all txns end (commit + abort = 80) with both abort causes seen; at the end
// nothing is held or waiting. The request port is stalled at random.
module tb_txn_agent;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 4;
  localparam int unsigned NTXN   = 80;
  localparam int unsigned MAXL   = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [AXI_ADDR_W-1:0] wl_base = 34'h1000_0000, db_base = 34'h2000_0000;
  logic [31:0] n_txn = NTXN;
  logic req_valid, req_ready, rsp_valid, rsp_ready, done;
  lock_req_t req;
  lock_rsp_t rsp;
  axi_req_t ld_axi_req, db_axi_req;
  axi_rsp_t ld_axi_rsp, db_axi_rsp;
  logic [31:0] n_commit, n_abort, n_timeout, n_loaded, cnt_grant, cnt_wait, cnt_abort, cnt_released, cnt_reads, cnt_writes;

  txn_agent #(.TXN_CS(TXN_CS), .AGENT_ID(5), .TIMEOUT(300)) dut (
    .clk, .rst_n, .start, .wl_base, .n_txn, .db_base,
    .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp,
    .ld_axi_req, .ld_axi_rsp, .db_axi_req, .db_axi_rsp,
    .done, .n_commit, .n_abort, .n_timeout, .n_loaded, .cnt_grant, .cnt_wait, .cnt_abort,
    .cnt_released, .cnt_reads, .cnt_writes
  );
  axi_mem_model #(.LATENCY(36), .STALL_PCT(20)) u_ld (.clk, .rst_n, .req(ld_axi_req), .rsp(ld_axi_rsp));
  axi_mem_model #(.LATENCY(36)) u_db (.clk, .rst_n, .req(db_axi_req), .rsp(db_axi_rsp));

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  // ---------------- lock server ----------------
  typedef enum {L_NONE, L_HELD, L_WAIT, L_STUCK, L_ABORTED} ls_e;
  ls_e         lst  [TXN_CS][512];
  int unsigned lid  [TXN_CS][512];
  lock_mode_e  lmd  [TXN_CS][512];
  int unsigned gtime[TXN_CS][512];     // cycle a waiting request gets its Grant
  lock_rsp_t   outq [$];
  int unsigned srv_grant = 0, srv_wait = 0, srv_abort = 0, srv_rel = 0, n_tmo_rel = 0, n_stall = 0;

  function automatic lock_rsp_t mk(lock_rsp_e r, int s, int l, logic q);
    lock_rsp_t x = '0;
    x.rsp = r; x.queued = q; x.mode = lmd[s][l]; x.lock_id = lid[s][l];
    x.agent = 4'd5; x.slot = SLOT_W'(s); x.lidx = LIDX_W'(l);
    return x;
  endfunction

  initial begin rsp_valid = 0; rsp = '0; end

  always @(negedge clk) begin
    req_ready = ($urandom_range(9) != 0);
    if (rsp_valid && rsp_ready) void'(outq.pop_front());
    // queued grants that are due
    for (int s = 0; s < TXN_CS; s++)
      for (int l = 0; l < 512; l++)
        if (lst[s][l] == L_WAIT && gtime[s][l] == cyc) begin
          lst[s][l] = L_HELD; srv_grant++;
          outq.push_back(mk(RSP_GRANT, s, l, 1'b1));
        end
    if (req_valid && !req_ready) n_stall++;
    if (req_valid && req_ready) begin
      automatic int s = int'(req.slot), l = int'(req.lidx);
      check(req.agent == 4'd5, "agent id in request");
      if (req.op == OP_GET) begin
        automatic int r = $urandom_range(99);
        check(lst[s][l] == L_NONE || lst[s][l] == L_ABORTED, "Get for a lock already pending");
        lid[s][l] = req.lock_id; lmd[s][l] = req.mode;
        if (r < 75)      begin lst[s][l] = L_HELD;  srv_grant++; outq.push_back(mk(RSP_GRANT, s, l, 1'b0)); end
        else if (r < 90) begin lst[s][l] = L_WAIT;  srv_wait++;  gtime[s][l] = cyc + $urandom_range(200, 5);
                               outq.push_back(mk(RSP_WAITING, s, l, 1'b0)); end
        else if (r < 95) begin lst[s][l] = L_STUCK; srv_wait++;  outq.push_back(mk(RSP_WAITING, s, l, 1'b0)); end
        else             begin lst[s][l] = L_ABORTED; srv_abort++; outq.push_back(mk(RSP_ABORTED, s, l, 1'b0)); end
      end else begin
        check(req.lock_id == lid[s][l], "Release names the lock of its Get");
        if (req.timeout) begin
          n_tmo_rel++;
          check(lst[s][l] == L_WAIT || lst[s][l] == L_STUCK || lst[s][l] == L_HELD, "timeout release of a lock not requested");
        end else begin
          check(lst[s][l] == L_HELD, $sformatf("release of lock not held (slot %0d idx %0d state %0d)", s, l, lst[s][l]));
        end
        srv_rel++;
        lst[s][l] = L_NONE;
        outq.push_back(mk(RSP_RELEASED, s, l, 1'b0));
      end
    end
    // tuple accesses must be covered by a held lock of the right mode
    if (db_axi_req.aw_valid && db_axi_rsp.aw_ready) begin
      automatic int unsigned id = int'((db_axi_req.aw_addr - db_base) >> 6);
      automatic int s = int'(db_axi_req.w_data[68:64]);
      automatic bit ok = 0;
      for (int l = 0; l < 512; l++) if (lst[s][l] == L_HELD && lid[s][l] == id && lmd[s][l] == M_X) ok = 1;
      check(ok, $sformatf("write of tuple %0d without X lock", id));
    end
    if (db_axi_req.ar_valid && db_axi_rsp.ar_ready) begin
      automatic int unsigned id = int'((db_axi_req.ar_addr - db_base) >> 6);
      automatic bit ok = 0;
      for (int s = 0; s < TXN_CS; s++)
        for (int l = 0; l < 512; l++)
          if (lst[s][l] == L_HELD && lid[s][l] == id && (lmd[s][l] == M_S || lmd[s][l] == M_SIX)) ok = 1;
      check(ok, $sformatf("read of tuple %0d without S/SIX lock", id));
    end
    rsp_valid = outq.size() > 0;
    rsp       = (outq.size() > 0) ? outq[0] : '0;
  end

  initial begin
    for (int s = 0; s < TXN_CS; s++) for (int l = 0; l < 512; l++) begin lst[s][l] = L_NONE; gtime[s][l] = 0; end
    // workload records
    for (int k = 0; k < NTXN; k++) begin
      automatic int unsigned nl = $urandom_range(MAXL, 1);
      automatic logic [63:0] words [$];
      automatic int unsigned ids [$];
      while (ids.size() < nl) begin
        automatic int unsigned id = $urandom_range(999);
        automatic bit dup = 0;
        foreach (ids[i]) if (ids[i] == id) dup = 1;
        if (!dup) ids.push_back(id);
      end
      words.push_back(64'(nl));
      foreach (ids[i]) words.push_back({29'd0, 3'($urandom_range(5) == 0 ? M_IS : ($urandom_range(1) ? M_S : M_X)), 32'(ids[i])});
      for (int b = 0; b * 8 < words.size(); b++) begin
        automatic logic [AXI_DATA_W-1:0] beat = '0;
        for (int j = 0; j < 8 && b * 8 + j < words.size(); j++) beat[64*j +: 64] = words[b*8+j];
        u_ld.poke(longint'(wl_base) + longint'(k) * 4096 + longint'(b) * 64, beat);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("commit %0d abort %0d timeout %0d grant %0d wait %0d abort-rsp %0d released %0d reads %0d writes %0d stalls %0d",
             n_commit, n_abort, n_timeout, cnt_grant, cnt_wait, cnt_abort, cnt_released, cnt_reads, cnt_writes, n_stall);
    check(n_commit + n_abort == NTXN && n_loaded == NTXN, "all txns finished");
    check(n_timeout > 0 && n_abort > n_timeout, "aborts by timeout and by Abort response");
    check(n_commit > 0 && cnt_reads > 0 && cnt_writes > 0, "commits with reads and writes");
    check(cnt_grant == srv_grant && cnt_wait == srv_wait && cnt_abort == srv_abort && cnt_released == srv_rel,
          "agent counters agree with the server");
    check(n_tmo_rel > 0 && n_stall > 0, "timeout releases and request stalls happened");
    for (int s = 0; s < TXN_CS; s++)
      for (int l = 0; l < 512; l++)
        check(lst[s][l] == L_NONE || lst[s][l] == L_ABORTED, $sformatf("slot %0d lock %0d left in state %0d", s, l, lst[s][l]));
    check(u_ld.n_reads >= NTXN, "records read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
