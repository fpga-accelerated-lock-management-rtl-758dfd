// tb_lock_get_sender: self-checking test of the lock-get sender.
//
// The testbench holds the lock-list RAM (one-cycle read) and plays the
// synchronization center for 4 entries. Each round puts random entries in
// GET with 1..30 random locks; the request port is stalled at random. Checks:
// Gets of an entry come in list order with the right mode, id, agent, slot
// and index; get_sent pulses once per accepted Get; only S, SIX and X locks
// are copied to the lock buffer, in order, and get_done reports their count;
// with the port always ready a list of n locks is sent in n consecutive
// cycles; an entry aborted in mid-list stops sending at once.
module tb_lock_get_sender;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 4, SW = 2, CW = LIDX_W + 1, LLA = SW + LIDX_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  txn_phase_e        phase [TXN_CS];
  logic [TXN_CS-1:0] aborted = '0;
  logic [CW-1:0]     n_locks [TXN_CS];
  logic              ll_rd_en, lb_wr_en, req_valid, req_ready = 1, get_sent, get_done;
  logic [LLA-1:0]    ll_rd_addr, lb_wr_addr;
  logic [35:0]       ll_rd_data, lb_wr_data;
  lock_req_t         req;
  logic [SW-1:0]     get_sent_slot, get_done_slot;
  logic [CW-1:0]     get_done_ndata;

  lock_get_sender #(.TXN_CS(TXN_CS), .AGENT_ID(9)) dut (.*);

  logic [35:0] ll_mem [TXN_CS * 512];
  always @(posedge clk) if (ll_rd_en) ll_rd_data <= ll_mem[ll_rd_addr];

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  int next_i [TXN_CS], next_b [TXN_CS], n_sent_s [TXN_CS], first_cyc [TXN_CS], last_cyc [TXN_CS];
  int abort_at [TXN_CS];
  bit stall_on = 0;
  int n_done = 0;

  function automatic bit is_data(logic [2:0] m);
    return m == 3'(M_S) || m == 3'(M_SIX) || m == 3'(M_X);
  endfunction

  always @(negedge clk) if (rst_n) begin
    // an abort arrives after the abort_at-th Get was taken
    for (int s = 0; s < TXN_CS; s++) if (phase[s] == PH_GET && next_i[s] == abort_at[s]) aborted[s] = 1'b1;
    req_ready = stall_on ? ($urandom_range(3) != 0) : 1'b1;
    #1;
    if (req_valid && req_ready) begin
      automatic int s = int'(req.slot);
      automatic logic [35:0] w = ll_mem[{SW'(s), LIDX_W'(next_i[s])}];
      check(phase[s] == PH_GET && !aborted[s], "Get for an entry not in GET");
      check(req.op == OP_GET && !req.timeout && req.agent == 4'd9 && int'(req.lidx) == next_i[s], "Get header");
      check(req.mode == lock_mode_e'(w[34:32]) && req.lock_id == w[31:0], $sformatf("Get %0d of slot %0d", next_i[s], s));
      check(get_sent && int'(get_sent_slot) == s, "get_sent pulse");
      check(lb_wr_en == is_data(w[34:32]), "lock buffer write only for data locks");
      if (lb_wr_en) begin
        check(lb_wr_addr == {SW'(s), LIDX_W'(next_b[s])} && lb_wr_data == w, "lock buffer entry");
        next_b[s]++;
      end
      if (next_i[s] == 0) first_cyc[s] = cyc;
      last_cyc[s] = cyc;
      next_i[s]++;
    end else begin
      check(!get_sent && !lb_wr_en, "no event without a transfer");
    end
    if (get_done) begin
      automatic int s = int'(get_done_slot);
      check(phase[s] == PH_GET, "get_done for an entry not in GET");
      check(aborted[s] ? next_i[s] == abort_at[s] : next_i[s] == int'(n_locks[s]), "all Gets sent, or stopped at abort");
      check(int'(get_done_ndata) == next_b[s], $sformatf("data lock count %0d vs %0d (n %0d abort_at %0d sent %0d stall %0d)", get_done_ndata, next_b[s], n_locks[s], abort_at[s], next_i[s], stall_on));
      if (!stall_on && !aborted[s]) check(last_cyc[s] - first_cyc[s] == int'(n_locks[s]) - 1, "one Get per cycle");
      phase[s] = PH_GRANT; n_done++;
    end
  end

  initial begin
    for (int s = 0; s < TXN_CS; s++) begin phase[s] = PH_FREE; n_locks[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      automatic int target = n_done;
      stall_on = (round % 2 == 1);
      for (int s = 0; s < TXN_CS; s++) begin
        if ($urandom_range(1) || s == 0) begin
          automatic int n = $urandom_range(30, 1);
          for (int i = 0; i < n; i++) ll_mem[{SW'(s), LIDX_W'(i)}] = {1'b0, 3'($urandom_range(5) + 1), $urandom};
          n_locks[s] = CW'(n); next_i[s] = 0; next_b[s] = 0;
          abort_at[s] = ($urandom_range(4) == 0) ? $urandom_range(n, 1) : -1;
          aborted[s] = 1'b0;
          phase[s] = PH_GET; target++;
        end
      end
      while (n_done < target && cyc < 100000) @(negedge clk);
      check(n_done == target, "round finished");
      for (int s = 0; s < TXN_CS; s++) phase[s] = PH_FREE;
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
