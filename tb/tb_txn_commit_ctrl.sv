// tb_txn_commit_ctrl: self-checking test of the txn commit controller.
//
// The testbench holds the lock buffer (one-cycle read) and an AXI memory
// model with the 36-cycle HBM latency, and puts random entries in COMMIT
// with 0..12 data locks. Checks: each lock in the buffer gets, in order,
// exactly one access at db_base + id*64, a read for S/SIX and a write for X;
// written tuples carry {agent, slot, lock id} and land in memory; accesses
// are one at a time, so an entry with n accesses takes at least n times the
// memory latency; commit_done names the entry only after its last access
// completed; entries not in COMMIT are never touched; the read and write
// counters match.
module tb_txn_commit_ctrl;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 4, SW = 2, CW = LIDX_W + 1, LLA = SW + LIDX_W, LAT = 36;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AXI_ADDR_W-1:0] db_base = 34'h1_0000_0000;
  txn_phase_e     phase [TXN_CS];
  logic [CW-1:0]  n_data [TXN_CS];
  logic           lb_rd_en, commit_done;
  logic [LLA-1:0] lb_rd_addr;
  logic [35:0]    lb_rd_data;
  logic [SW-1:0]  commit_done_slot;
  logic [31:0]    cnt_reads, cnt_writes;
  axi_req_t       axi_req;
  axi_rsp_t       axi_rsp;

  txn_commit_ctrl #(.TXN_CS(TXN_CS), .AGENT_ID(6)) dut (.*);
  axi_mem_model #(.LATENCY(LAT)) u_mem (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp));

  logic [35:0] lb_mem [TXN_CS * 512];
  always @(posedge clk) if (lb_rd_en) lb_rd_data <= lb_mem[lb_rd_addr];

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  int cur = -1, next_k = 0, n_rd = 0, n_wr = 0, n_done = 0;
  int unsigned t_start;
  longint unsigned wr_addr_q [$];

  always @(negedge clk) if (rst_n) begin
    if ((axi_req.ar_valid && axi_rsp.ar_ready) || (axi_req.aw_valid && axi_rsp.aw_ready)) begin
      // which entry: the one in COMMIT that is being served
      if (cur < 0) begin
        for (int s = 0; s < TXN_CS; s++) if (phase[s] == PH_COMMIT && cur < 0) cur = s;
        next_k = 0; t_start = cyc;
      end
      if (cur >= 0) begin
        automatic logic [35:0] w = lb_mem[{SW'(cur), LIDX_W'(next_k)}];
        automatic logic [AXI_ADDR_W-1:0] a = axi_req.ar_valid ? axi_req.ar_addr : axi_req.aw_addr;
        check(next_k < int'(n_data[cur]), "more accesses than data locks");
        check(a == db_base + (AXI_ADDR_W'(w[31:0]) << 6), $sformatf("tuple address of lock %0d", next_k));
        check(axi_req.ar_valid == (w[34:32] != 3'(M_X)), "read for S/SIX, write for X");
        check(!(axi_req.ar_valid && axi_req.aw_valid), "one access at a time");
        if (axi_req.aw_valid) begin
          check(axi_req.w_valid && axi_req.w_last && axi_req.w_data[72:64] == {4'd6, 5'(cur)} &&
                axi_req.w_data[63:32] == w[31:0], "written tuple stamp");
          wr_addr_q.push_back(longint'(a));
          n_wr++;
        end else n_rd++;
        next_k++;
      end
    end
    if (commit_done) begin
      automatic int s = int'(commit_done_slot);
      check(phase[s] == PH_COMMIT, "commit_done for an entry not committing");
      if (n_data[s] != 0) begin
        check(s == cur && next_k == int'(n_data[s]), "all data locks accessed before commit_done");
        check(cyc - t_start >= LAT * n_data[s], $sformatf("%0d accesses in %0d cycles", n_data[s], cyc - t_start));
      end
      phase[s] = PH_RELEASE; cur = -1; n_done++;
    end
  end

  initial begin
    for (int s = 0; s < TXN_CS; s++) begin phase[s] = PH_GRANT; n_data[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      automatic int s = $urandom_range(TXN_CS - 1);
      automatic int n = (round % 7 == 0) ? 0 : $urandom_range(12, 1);
      for (int k = 0; k < n; k++) begin
        automatic logic [2:0] m = ($urandom_range(2) == 0) ? 3'(M_X) : ($urandom_range(1) ? 3'(M_S) : 3'(M_SIX));
        lb_mem[{SW'(s), LIDX_W'(k)}] = {1'b0, m, 32'($urandom_range(100000))};
      end
      n_data[s] = CW'(n);
      phase[s] = PH_COMMIT;
      while (phase[s] == PH_COMMIT && cyc < 400000) @(negedge clk);
      check(phase[s] == PH_RELEASE, "entry committed");
      repeat ($urandom_range(5)) @(negedge clk);
    end
    repeat (LAT + 5) @(negedge clk);
    check(cnt_reads == n_rd && cnt_writes == n_wr && n_wr > 0 && n_rd > 0, "access counters");
    check(u_mem.n_writes == n_wr, "writes reached memory");
    foreach (wr_addr_q[i]) check(u_mem.peek(wr_addr_q[i])[72:69] == 4'd6, "written tuple in memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
