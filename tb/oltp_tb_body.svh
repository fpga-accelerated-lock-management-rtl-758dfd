// oltp_tb_body.svh: shared body of the top-level testbenches.
//
// The including module defines the localparams N_TA, N_CH, P, TXN_CS,
// LT_ENTRIES, WQ_ENTRIES, RSPQ_DEPTH (matching the DUT), and the workload
// knobs NTXN (txns per agent), MAXL (max locks per txn), ID_RANGE (lock ids
// used), MEM_LAT (memory latency), WATCHDOG (cycles), REQUIRE_ABORT_RSP,
// then instantiates the DUT as `dut` and includes this file. STANDALONE = 1
// makes the body print TB_RESULT and finish; with 0 it sets run_done and
// leaves run_cycles and run_commits for the includer. REQUIRE_MECH = 0 only
// reports the mechanism counts instead of requiring each one.
//
// It plays the host: builds a random workload per txn agent in the memory
// models, programs the CSRs, starts the run and waits for done. Monitors
// check, cycle by cycle:
//  - every Grant leaving a lock table is compatible with all locks of the
//    same id currently held by other txns (Table 1 of the paper);
//  - every Released matches a held lock, or a Release marked timeout for a
//    request that was still queued;
//  - every tuple write is made by the agent holding the lock in X, every
//    tuple read by an agent holding it in S or SIX;
// and at the end that every txn finished, that the CSR statistics agree with
// what was observed, that no lock is still held and that all waiting queues
// are empty. Each mechanism of the design (Waiting, Abort response, timeout,
// pop grant, timeout release, queued-request removal, request stall, multi-
// beat load, commit, abort, read, write) is counted and a failure is counted
// for any that never happened.

  // Run results, for a module that includes this body without finishing
  // the simulation itself (STANDALONE = 0).
  bit              run_done = 1'b0;
  longint unsigned run_cycles, run_commits;

  localparam longint unsigned WL_STRIDE = 64'h0100_0000;  // per-agent workload area
  localparam longint unsigned DB_BASE   = 64'h2_0000_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic         csr_wr_en = 1'b0, csr_rd_en = 1'b0;
  logic [11:0]  csr_addr = '0;
  logic [63:0]  csr_wr_data = '0;
  logic         csr_rd_valid;
  logic [63:0]  csr_rd_data;
  axi_req_t     ld_axi_req [N_TA];
  axi_rsp_t     ld_axi_rsp [N_TA];
  axi_req_t     db_axi_req [N_TA];
  axi_rsp_t     db_axi_rsp [N_TA];
  logic         done, init_busy;
  logic [$clog2(RSPQ_DEPTH):0] rspq_level [N_TA];

  for (genvar a = 0; a < N_TA; a++) begin : g_mem
    axi_mem_model #(.LATENCY(MEM_LAT), .STALL_PCT(10)) u_ld (
      .clk, .rst_n, .req(ld_axi_req[a]), .rsp(ld_axi_rsp[a]));
    axi_mem_model #(.LATENCY(MEM_LAT), .STALL_PCT(0)) u_db (
      .clk, .rst_n, .req(db_axi_req[a]), .rsp(db_axi_rsp[a]));
  end

  // Waiting queue occupancy of every lock agent.
  int unsigned wq_used_all [N_CH*P];
  for (genvar c = 0; c < N_CH; c++) begin : g_c
    for (genvar p = 0; p < P; p++) begin : g_p
      assign wq_used_all[c*P+p] = int'(dut.g_ch[c].u_ch.g_la[p].u_la.wq_used);
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  // ---------------------------------------------------------------- workload
  // Txn records per agent, as beats keyed by byte address; copied into each
  // agent's load memory model once built.
  logic [AXI_DATA_W-1:0] wl_beats [N_TA][longint unsigned];
  int unsigned n_locks_of [N_TA][NTXN];
  int unsigned n_multi_beat = 0;
  bit          wl_ready = 1'b0;

  for (genvar a = 0; a < N_TA; a++) begin : g_fill
    initial begin
      wait (wl_ready);
      foreach (wl_beats[a][addr]) g_mem[a].u_ld.poke(addr, wl_beats[a][addr]);
    end
  end

  task automatic build_workload();
    for (int a = 0; a < N_TA; a++) begin
      for (int k = 0; k < NTXN; k++) begin
        longint unsigned rec = longint'(a) * WL_STRIDE + longint'(k) * 4096;
        int unsigned nl = ($urandom_range(3) == 0) ? $urandom_range(MAXL, 1) : $urandom_range(6, 1);
        int unsigned ids [$];
        logic [63:0] words [$];
        n_locks_of[a][k] = nl;
        if (nl > 7) n_multi_beat++;
        while (ids.size() < nl) begin
          int unsigned id = $urandom_range(ID_RANGE - 1);
          bit dup = 0;
          foreach (ids[i]) if (ids[i] == id) dup = 1;
          if (!dup) ids.push_back(id);
        end
        words.push_back(64'(nl));
        for (int w = 0; w < int'(nl); w++) begin
          lock_mode_e m;
          case ($urandom_range(9))
            0, 1:    m = M_IS;
            2:       m = M_IX;
            3, 4, 5: m = M_S;
            6:       m = M_SIX;
            default: m = M_X;
          endcase
          words.push_back({29'd0, 3'(m), 32'(ids[w])});
        end
        for (int b = 0; b * 8 < words.size(); b++) begin
          logic [AXI_DATA_W-1:0] beat = '0;
          for (int j = 0; j < 8 && b * 8 + j < words.size(); j++) beat[64*j +: 64] = words[b*8+j];
          wl_beats[a][rec + longint'(b) * 64] = beat;
        end
      end
    end
  endtask

  // ---------------------------------------------------------------- monitors
  lock_mode_e held    [ID_RANGE][N_TA][TXN_CS];
  bit         tmo_rel [ID_RANGE][N_TA][TXN_CS];
  int unsigned obs_grant [N_TA], obs_wait [N_TA], obs_abort [N_TA], obs_released [N_TA];
  int unsigned obs_rel_req [N_TA], obs_reads [N_TA], obs_writes [N_TA];
  int unsigned n_pop = 0, n_tmo_rel = 0, n_wq_removed = 0, n_req_stall = 0;
  int unsigned n_multi_load = 0, max_rspq = 0;

  initial begin
    for (int i = 0; i < ID_RANGE; i++)
      for (int a = 0; a < N_TA; a++)
        for (int s = 0; s < TXN_CS; s++) begin
          held[i][a][s]    = M_NL;
          tmo_rel[i][a][s] = 1'b0;
        end
    for (int a = 0; a < N_TA; a++) begin
      obs_grant[a] = 0; obs_wait[a] = 0; obs_abort[a] = 0; obs_released[a] = 0;
      obs_rel_req[a] = 0; obs_reads[a] = 0; obs_writes[a] = 0;
    end
  end

  always @(negedge clk) if (rst_n) begin
    // lock requests leaving the txn agents
    for (int a = 0; a < N_TA; a++) begin
      if (dut.ta_req_valid[a] && !dut.ta_req_ready[a]) n_req_stall++;
      if (dut.ta_req_valid[a] && dut.ta_req_ready[a] && dut.ta_req[a].op == OP_REL) begin
        automatic lock_req_t r = dut.ta_req[a];
        obs_rel_req[a]++;
        check(r.lock_id < ID_RANGE && int'(r.slot) < TXN_CS, "release of unknown lock");
        if (r.lock_id < ID_RANGE && int'(r.slot) < TXN_CS) begin
          if (r.timeout) begin
            n_tmo_rel++;
            tmo_rel[r.lock_id][a][r.slot] = 1'b1;
          end else begin
            check(held[r.lock_id][a][r.slot] != M_NL,
                  $sformatf("agent %0d slot %0d releases lock %0d it does not hold", a, r.slot, r.lock_id));
          end
        end
      end
      if (int'(rspq_level[a]) > max_rspq) max_rspq = int'(rspq_level[a]);
      if (ld_axi_req[a].ar_valid && ld_axi_rsp[a].ar_ready && ld_axi_req[a].ar_len != 0) n_multi_load++;
    end

    // lock responses leaving the lock table channels
    for (int c = 0; c < N_CH; c++) begin
      if (dut.ch_rsp_valid[c] && dut.ch_rsp_ready[c]) begin
        automatic lock_rsp_t rs = dut.ch_rsp[c];
        automatic int unsigned id = rs.lock_id;
        automatic int a = int'(rs.agent), s = int'(rs.slot);
        check(id < ID_RANGE && a < N_TA && s < TXN_CS, "response for unknown lock/agent/slot");
        if (id < ID_RANGE && a < N_TA && s < TXN_CS) begin
          unique case (rs.rsp)
            RSP_GRANT: begin
              obs_grant[a]++;
              if (rs.queued) n_pop++;
              check(held[id][a][s] == M_NL, $sformatf("lock %0d granted twice to %0d/%0d", id, a, s));
              for (int a2 = 0; a2 < N_TA; a2++)
                for (int s2 = 0; s2 < TXN_CS; s2++)
                  if (!(a2 == a && s2 == s) && held[id][a2][s2] != M_NL)
                    check(compatible(rs.mode, held[id][a2][s2]),
                          $sformatf("lock %0d: %s granted to %0d/%0d while %0d/%0d holds %s",
                                    id, rs.mode.name(), a, s, a2, s2, held[id][a2][s2].name()));
              held[id][a][s] = rs.mode;
            end
            RSP_WAITING: obs_wait[a]++;
            RSP_ABORTED: obs_abort[a]++;
            default: begin
              obs_released[a]++;
              if (held[id][a][s] != M_NL) begin
                held[id][a][s] = M_NL;
              end else begin
                check(tmo_rel[id][a][s], $sformatf("Released for lock %0d not held by %0d/%0d", id, a, s));
                n_wq_removed++;
              end
              tmo_rel[id][a][s] = 1'b0;
            end
          endcase
        end
      end
    end

    // tuple accesses
    for (int a = 0; a < N_TA; a++) begin
      if (db_axi_req[a].aw_valid && db_axi_rsp[a].aw_ready) begin
        automatic longint unsigned id = (longint'(db_axi_req[a].aw_addr) - DB_BASE) >> 6;
        automatic int s = int'(db_axi_req[a].w_data[68:64]);
        obs_writes[a]++;
        check(id < ID_RANGE && s < TXN_CS && held[id][a][s] == M_X,
              $sformatf("agent %0d slot %0d writes tuple %0d without X lock", a, s, id));
      end
      if (db_axi_req[a].ar_valid && db_axi_rsp[a].ar_ready) begin
        automatic longint unsigned id = (longint'(db_axi_req[a].ar_addr) - DB_BASE) >> 6;
        automatic bit ok = 0;
        obs_reads[a]++;
        if (id < ID_RANGE)
          for (int s = 0; s < TXN_CS; s++)
            if (held[id][a][s] == M_S || held[id][a][s] == M_SIX) ok = 1;
        check(ok, $sformatf("agent %0d reads tuple %0d without S/SIX lock", a, id));
      end
    end
  end

  // ---------------------------------------------------------------- CSR access
  task automatic csr_write(input logic [11:0] addr, input logic [63:0] data);
    @(negedge clk);
    csr_wr_en = 1'b1; csr_addr = addr; csr_wr_data = data;
    @(negedge clk);
    csr_wr_en = 1'b0;
  endtask

  task automatic csr_read(input logic [11:0] addr, output logic [63:0] data);
    @(negedge clk);
    csr_rd_en = 1'b1; csr_addr = addr;
    @(negedge clk);
    csr_rd_en = 1'b0;
    check(csr_rd_valid, "CSR read data not valid one cycle after the read strobe");
    data = csr_rd_data;
  endtask

  task automatic mech(input string name, input longint unsigned n, input bit required);
    $display("  %-28s %0d", name, n);
    if (required && REQUIRE_MECH) check(n > 0, {"mechanism never happened: ", name});
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    logic [63:0] v;
    longint unsigned t0, t1, tot_commit, tot_abort, tot_timeout, tot_rd, tot_wr;
    longint unsigned tot_wait, tot_abrsp;
    build_workload();
    wl_ready = 1'b1;
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    while (init_busy) @(negedge clk);
    $display("lock tables cleared after %0d cycles", cyc);
    csr_read(12'h005, v);
    check(v[31:0] == {8'(N_CH), 8'(P), 8'(N_TA), 8'(TXN_CS)}, "CONFIG register does not match the testbench");
    csr_write(12'h002, 64'(NTXN));
    csr_write(12'h003, DB_BASE);
    for (int a = 0; a < N_TA; a++) csr_write(12'h100 + 12'(a), longint'(a) * WL_STRIDE);
    for (int a = 0; a < N_TA; a++) begin
      csr_read(12'h100 + 12'(a), v);
      check(v == longint'(a) * WL_STRIDE, "WL_BASE read back");
    end
    csr_write(12'h000, 64'd1);
    t0 = cyc;
    while (!done) @(negedge clk);
    t1 = cyc;
    repeat (4) @(negedge clk);
    csr_read(12'h001, v);
    check(v[0] == 1'b1 && v[2] == 1'b0, "STATUS does not show done");
    csr_read(12'h004, v);
    check(v + 4 >= t1 - t0 && v <= t1 - t0 + 4, $sformatf("CYCLES %0d vs measured %0d", v, t1 - t0));

    tot_commit = 0; tot_abort = 0; tot_timeout = 0; tot_rd = 0; tot_wr = 0; tot_wait = 0; tot_abrsp = 0;
    for (int a = 0; a < N_TA; a++) begin
      logic [31:0] st [N_STATS];
      for (int k = 0; k < N_STATS; k++) begin
        csr_read(12'h200 + 12'(16 * a + k), v);
        st[k] = v[31:0];
      end
      $display("agent %0d: commit %0d abort %0d timeout %0d loaded %0d grant %0d wait %0d abort-rsp %0d released %0d reads %0d writes %0d",
               a, st[0], st[1], st[2], st[3], st[4], st[5], st[6], st[7], st[8], st[9]);
      check(st[0] + st[1] == NTXN, $sformatf("agent %0d finished %0d txns", a, st[0] + st[1]));
      check(st[3] == NTXN, "txns loaded");
      check(st[4] == obs_grant[a],    "Grant count");
      check(st[5] == obs_wait[a],     "Waiting count");
      check(st[6] == obs_abort[a],    "Abort count");
      check(st[7] == obs_released[a], "Released count");
      check(obs_released[a] == obs_rel_req[a], "every Release answered");
      check(st[8] == obs_reads[a],    "read count");
      check(st[9] == obs_writes[a],   "write count");
      check(st[2] <= st[1], "timeouts counted as aborts");
      tot_commit += st[0]; tot_abort += st[1]; tot_timeout += st[2];
      tot_rd += st[8]; tot_wr += st[9]; tot_wait += st[5]; tot_abrsp += st[6];
    end
    for (int i = 0; i < ID_RANGE; i++)
      for (int a = 0; a < N_TA; a++)
        for (int s = 0; s < TXN_CS; s++)
          check(held[i][a][s] == M_NL, $sformatf("lock %0d still held by %0d/%0d", i, a, s));
    for (int i = 0; i < N_CH * P; i++)
      check(wq_used_all[i] == 0, $sformatf("waiting queue %0d not empty", i));

    $display("run: %0d txns in %0d cycles; %0d committed, %0d aborted",
             N_TA * NTXN, t1 - t0, tot_commit, tot_abort);
    $display("throughput at 125 MHz: %0d committed txn/s",
             longint'(real'(tot_commit) * 125.0e6 / real'(t1 - t0)));
    $display("mechanisms:");
    mech("Waiting responses",           tot_wait,     1);
    mech("Abort responses",             tot_abrsp,    REQUIRE_ABORT_RSP);
    mech("timeouts",                    tot_timeout,  1);
    mech("pop grants from queue",       n_pop,        1);
    mech("timeout releases",            n_tmo_rel,    1);
    mech("queued requests removed",     n_wq_removed, 1);
    mech("lock request stalls",         n_req_stall,  1);
    mech("multi-beat txn loads",        n_multi_load, n_multi_beat > 0);
    mech("committed txns",              tot_commit,   1);
    mech("aborted txns",                tot_abort,    1);
    mech("tuple reads",                 tot_rd,       1);
    mech("tuple writes",                tot_wr,       1);
    mech("max response queue level",    max_rspq,     1);
    run_cycles  = t1 - t0;
    run_commits = tot_commit;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    run_done = 1'b1;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("watchdog expired at cycle %0d (done=%0b)", cyc, done);
    failures++;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    run_done = 1'b1;
  end
