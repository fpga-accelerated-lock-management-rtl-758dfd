// tb_task_loader: self-checking test of the task loader.
//
// 40 txn records of 1..40 locks (so 1 to 6 beats) sit in an AXI memory model
// with the 36-cycle HBM latency and random read stalls. The testbench plays
// the synchronization center: an entry goes FREE -> LOAD on ld_start, to GET
// on ld_done, and back to FREE a random time later. Checks: only free
// entries are claimed; each ld_done names the claimed entry and the record's
// lock count; every lock word lands at {slot, index} in order with its mode
// and id; records are taken in order from wl_base + k*4096; exactly n_txn
// txns are loaded and then the loader stops; the lock words of one beat are
// written on consecutive cycles (one lock per cycle); a one-beat record takes
// at least the memory latency.
module tb_task_loader;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 4, NTXN = 40, SW = 2, CW = LIDX_W + 1, LLA = SW + LIDX_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [AXI_ADDR_W-1:0] wl_base = 34'h0_4000_0000;
  logic [31:0] n_txn = NTXN;
  txn_phase_e phase [TXN_CS];
  logic ld_start, ld_done, ll_wr_en;
  logic [SW-1:0] ld_start_slot, ld_done_slot;
  logic [CW-1:0] ld_done_nlocks;
  logic [LLA-1:0] ll_wr_addr;
  logic [35:0] ll_wr_data;
  logic [31:0] n_loaded;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;

  task_loader #(.TXN_CS(TXN_CS)) dut (.*);
  axi_mem_model #(.LATENCY(36), .STALL_PCT(15)) u_mem (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp));

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  logic [35:0] ref_words [NTXN][$];
  int          slot_txn  [TXN_CS];
  int          next_idx  [TXN_CS];
  int          free_at   [TXN_CS];
  int unsigned t_claim   [TXN_CS];
  int          n_claimed = 0, n_done = 0, last_wr_cyc = -10, gaps = 0;
  logic [35:0] last_wr_data;

  always @(negedge clk) if (rst_n) begin
    if (ll_wr_en) begin
      automatic int s = int'(ll_wr_addr[LLA-1:LIDX_W]), i = int'(ll_wr_addr[LIDX_W-1:0]);
      automatic int k = slot_txn[s];
      check(phase[s] == PH_LOAD, "write to an entry not loading");
      check(i == next_idx[s], $sformatf("lock index %0d expected %0d", i, next_idx[s]));
      if (k >= 0 && i < ref_words[k].size())
        check(ll_wr_data == ref_words[k][i], $sformatf("txn %0d lock %0d word", k, i));
      next_idx[s]++;
      // lock i opens a new beat when i % 8 == 7; others follow on the next cycle
      if (i != 0 && i % 8 != 7 && int'(cyc) != last_wr_cyc + 1) gaps++;
      last_wr_cyc = cyc;
    end
    if (ld_done) begin
      automatic int s = int'(ld_done_slot);
      check(phase[s] == PH_LOAD, "ld_done for an entry not loading");
      check(int'(ld_done_nlocks) == ref_words[slot_txn[s]].size() && next_idx[s] == ref_words[slot_txn[s]].size(),
            "lock count of the loaded txn");
      if (ref_words[slot_txn[s]].size() <= 7) check(cyc - t_claim[s] >= 36, "one-beat record takes the memory latency");
      phase[s] = PH_GET; free_at[s] = cyc + $urandom_range(60, 1); n_done++;
    end
    for (int s = 0; s < TXN_CS; s++) if (phase[s] == PH_GET && int'(cyc) == free_at[s]) phase[s] = PH_FREE;
    if (ld_start) begin
      automatic int s = int'(ld_start_slot);
      check(phase[s] == PH_FREE, "claimed an entry that is not free");
      check(axi_req.ar_valid == 1'b0 || axi_req.ar_addr == wl_base + 34'(n_claimed) * 4096, "record address");
      phase[s] = PH_LOAD; slot_txn[s] = n_claimed; next_idx[s] = 0; t_claim[s] = cyc; n_claimed++;
    end
  end

  initial begin
    for (int s = 0; s < TXN_CS; s++) begin phase[s] = PH_FREE; slot_txn[s] = -1; next_idx[s] = 0; free_at[s] = 0; end
    for (int k = 0; k < NTXN; k++) begin
      automatic int unsigned nl = (k < 4) ? 7 + k : $urandom_range(40, 1);
      automatic logic [63:0] w [$];
      w.push_back(64'(nl));
      for (int i = 0; i < int'(nl); i++) begin
        automatic logic [2:0] m = 3'($urandom_range(5) + 1);
        automatic logic [31:0] id = $urandom;
        w.push_back({29'($urandom), m, id});   // unused high bits carry junk
        ref_words[k].push_back({1'b0, m, id});
      end
      for (int b = 0; b * 8 < w.size(); b++) begin
        automatic logic [AXI_DATA_W-1:0] beat = '0;
        for (int j = 0; j < 8 && b * 8 + j < w.size(); j++) beat[64*j +: 64] = w[b*8+j];
        u_mem.poke(longint'(wl_base) + longint'(k) * 4096 + longint'(b) * 64, beat);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(n_claimed == 0, "nothing loaded before start");
    start = 1; @(negedge clk); start = 0;
    while (n_done < NTXN && cyc < 200000) @(negedge clk);
    repeat (500) @(negedge clk);
    check(n_done == NTXN && n_claimed == NTXN && n_loaded == NTXN, $sformatf("loaded %0d of %0d", n_done, NTXN));
    check(gaps == 0, $sformatf("%0d gaps between lock words of one beat", gaps));
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
