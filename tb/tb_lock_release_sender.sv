// tb_lock_release_sender: self-checking test of the lock-release sender.
//
// The testbench holds the response table (one-cycle read) and puts random
// entries in RELEASE with 0..25 sent Gets whose last responses are Grant,
// Waiting or Abort; the request port stalls at random in odd rounds.
// Checks: in index order, a Grant-ed lock gets a normal Release, a Waiting
// lock a Release marked timeout, an Abort-ed lock none; each Release carries
// the lock's mode and id, the agent, entry and index; rel_sent pulses once
// per accepted Release; rel_done names the entry after its last Release;
// with the port always ready a lock takes 2 cycles (plus up to TXN_CS
// cycles for the scan to reach the entry).
module tb_lock_release_sender;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 4, SW = 2, CW = LIDX_W + 1, LLA = SW + LIDX_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  txn_phase_e     phase [TXN_CS];
  logic [CW-1:0]  n_sent [TXN_CS];
  logic           rt_rd_en, req_valid, req_ready = 1, rel_sent, rel_done;
  logic [LLA-1:0] rt_rd_addr;
  logic [36:0]    rt_rd_data;
  lock_req_t      req;
  logic [SW-1:0]  rel_sent_slot, rel_done_slot;

  lock_release_sender #(.TXN_CS(TXN_CS), .AGENT_ID(3)) dut (.*);

  logic [36:0] rt_mem [TXN_CS * 512];
  always @(posedge clk) if (rt_rd_en) rt_rd_data <= rt_mem[rt_rd_addr];

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  int exp_q [TXN_CS][$];     // indexes expected to be released, in order
  bit stall_on = 0;
  int n_rel = 0, n_tmo = 0;
  int unsigned t_first [TXN_CS];

  always @(negedge clk) if (rst_n) begin
    req_ready = stall_on ? ($urandom_range(2) != 0) : 1'b1;
    #1;
    if (req_valid && req_ready) begin
      automatic int s = int'(req.slot);
      automatic int i = (exp_q[s].size() > 0) ? exp_q[s].pop_front() : -1;
      automatic logic [36:0] w = rt_mem[{SW'(s), LIDX_W'(req.lidx)}];
      check(phase[s] == PH_RELEASE, "Release for an entry not in RELEASE");
      check(int'(req.lidx) == i, $sformatf("Release of index %0d, expected %0d", req.lidx, i));
      check(req.op == OP_REL && req.agent == 4'd3 && req.mode == lock_mode_e'(w[34:32]) && req.lock_id == w[31:0],
            "Release fields");
      check(req.timeout == (w[36:35] == 2'(LS_WAIT)), "timeout flag for a waiting lock only");
      check(rel_sent && int'(rel_sent_slot) == s, "rel_sent pulse");
      n_rel++; if (req.timeout) n_tmo++;
    end else check(!rel_sent, "rel_sent without a transfer");
    if (rel_done) begin
      automatic int s = int'(rel_done_slot);
      check(phase[s] == PH_RELEASE && exp_q[s].size() == 0, "rel_done after all Releases");
      if (!stall_on && n_sent[s] != 0)
        check(cyc - t_first[s] >= 2 * n_sent[s] + 1 && cyc - t_first[s] <= 2 * n_sent[s] + 1 + TXN_CS, $sformatf("%0d locks in %0d cycles", n_sent[s], cyc - t_first[s]));
      phase[s] = PH_RELWAIT;
    end
  end

  initial begin
    for (int s = 0; s < TXN_CS; s++) begin phase[s] = PH_COMMIT; n_sent[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      automatic int s = $urandom_range(TXN_CS - 1);
      automatic int n = (round % 9 == 0) ? 0 : $urandom_range(25, 1);
      stall_on = round % 2;
      exp_q[s].delete();
      for (int i = 0; i < n; i++) begin
        automatic int r = $urandom_range(9);
        automatic lock_stat_e st = (r < 6) ? LS_GRANT : (r < 8) ? LS_WAIT : LS_ABORT;
        rt_mem[{SW'(s), LIDX_W'(i)}] = {2'(st), 3'($urandom_range(5) + 1), $urandom};
        if (st != LS_ABORT) exp_q[s].push_back(i);
      end
      n_sent[s] = CW'(n);
      @(negedge clk);
      phase[s] = PH_RELEASE; t_first[s] = cyc;
      while (phase[s] == PH_RELEASE && cyc < 200000) @(negedge clk);
      check(phase[s] == PH_RELWAIT, "entry released");
      phase[s] = PH_COMMIT;
      repeat ($urandom_range(4)) @(negedge clk);
    end
    check(n_rel > 0 && n_tmo > 0, "normal and timeout releases sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
