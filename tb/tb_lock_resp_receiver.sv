// tb_lock_resp_receiver: self-checking test of the lock response receiver.
//
// Random responses of all four kinds (Grants both first and popped from a
// queue) for random entries and lock indexes, with idle cycles between.
// Checks, in the cycle of each response: always ready; the response table
// is written at {slot, index} with {state, mode, lock id} for Grant, Waiting
// and Abort and not for Released; exactly the right event pulses (rx_first
// for a Grant not popped, Waiting or Abort; rx_grant; rx_abort; rx_released)
// with the entry; and at the end the four statistics counters.
module tb_lock_resp_receiver;
  import lock_pkg::*;

  localparam int unsigned TXN_CS = 8, SW = 3, LLA = SW + LIDX_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rsp_valid = 0, rsp_ready, rt_wr_en, rx_first, rx_grant, rx_abort, rx_released;
  lock_rsp_t rsp = '0;
  logic [LLA-1:0] rt_wr_addr;
  logic [36:0] rt_wr_data;
  logic [SW-1:0] rx_slot;
  logic [31:0] cnt_grant, cnt_wait, cnt_abort, cnt_released;

  lock_resp_receiver #(.TXN_CS(TXN_CS)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    int unsigned n [4];
    n = '{0, 0, 0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      rsp_valid = ($urandom_range(3) != 0);
      rsp.rsp = lock_rsp_e'($urandom_range(3)); rsp.queued = $urandom_range(1);
      rsp.mode = lock_mode_e'($urandom_range(5) + 1); rsp.lock_id = $urandom;
      rsp.agent = AGENT_W'($urandom); rsp.slot = SLOT_W'($urandom_range(TXN_CS - 1)); rsp.lidx = LIDX_W'($urandom);
      #1;
      check(rsp_ready, "always ready");
      if (rsp_valid) begin
        automatic lock_stat_e st = (rsp.rsp == RSP_GRANT) ? LS_GRANT : (rsp.rsp == RSP_WAITING) ? LS_WAIT : LS_ABORT;
        n[rsp.rsp]++;
        check(rt_wr_en == (rsp.rsp != RSP_RELEASED), "table written except for Released");
        if (rt_wr_en) check(rt_wr_addr == {SW'(rsp.slot), rsp.lidx} && rt_wr_data == {st, rsp.mode, rsp.lock_id}, "table entry");
        check(rx_slot == SW'(rsp.slot), "event entry");
        check(rx_first == ((rsp.rsp == RSP_GRANT && !rsp.queued) || rsp.rsp == RSP_WAITING || rsp.rsp == RSP_ABORTED), "rx_first");
        check(rx_grant == (rsp.rsp == RSP_GRANT) && rx_abort == (rsp.rsp == RSP_ABORTED) &&
              rx_released == (rsp.rsp == RSP_RELEASED), "event kind");
      end else begin
        check(!rt_wr_en && !rx_first && !rx_grant && !rx_abort && !rx_released, "quiet when idle");
      end
    end
    @(negedge clk); rsp_valid = 0; @(negedge clk);
    check(cnt_grant == n[RSP_GRANT] && cnt_released == n[RSP_RELEASED] && cnt_wait == n[RSP_WAITING] &&
          cnt_abort == n[RSP_ABORTED], "statistics counters");
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
