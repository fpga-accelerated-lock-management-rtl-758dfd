// txn_agent: the asynchronous pipelined transaction agent.
//
// Five components work on different txns at the same time and meet only in
// the signal synchronization center (txn_sync), which holds each entry's
// stage, counters and timeout timer:
//   task_loader         FREE -> LOAD -> GET   (load AXI channel, lock list RAM)
//   lock_get_sender     GET -> GRANT          (Get requests, lock buffer RAM)
//   lock_resp_receiver  responses             (response table RAM)
//   txn_commit_ctrl     COMMIT -> RELEASE     (data AXI channel, lock buffer)
//   lock_release_sender RELEASE -> RELWAIT    (Release requests, response table)
// Each component steps through the TXN_CS entries on its own (context
// switch), so while one txn waits for a lock another is loaded or committed.
//
// Interface: one lock request port (Get and Release share it; a pending
// Release goes first so that locks are freed early) and one lock response
// port, fed by the agent's response queue. Two AXI4 master channels: "load"
// reads txn records, "data" reads and writes tuples. The on-chip memories are
// TXN_CS*512 words each (lock list, lock buffer, response table).
//
// Control: start (pulse) with wl_base/n_txn/db_base valid. An aborted txn is
// not retried (this design's choice; the paper does not say whether aborted
// txns are re-run). done rises once n_txn txns have been cleaned up. The
// statistics outputs count committed, aborted and timed-out txns, txns
// loaded, responses by type and tuple reads/writes.
//
// Lint note: rst_n in the sub-modules' assertion 'disable iff' terms is
// reported as a synchronous use; the flops use it asynchronously.
module txn_agent
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS    = 8,
  parameter int unsigned AGENT_ID  = 0,
  parameter int unsigned TIMEOUT   = 8192,
  parameter int unsigned MAX_LOCKS = 511,
  localparam int unsigned SW       = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW       = LIDX_W + 1,
  localparam int unsigned LLA      = SW + LIDX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [AXI_ADDR_W-1:0] wl_base,
  input  logic [31:0]           n_txn,
  input  logic [AXI_ADDR_W-1:0] db_base,
  // lock requests / responses
  output logic                  req_valid,
  input  logic                  req_ready,
  output lock_req_t             req,
  input  logic                  rsp_valid,
  output logic                  rsp_ready,
  input  lock_rsp_t             rsp,
  // memory
  output axi_req_t              ld_axi_req,
  input  axi_rsp_t              ld_axi_rsp,
  output axi_req_t              db_axi_req,
  input  axi_rsp_t              db_axi_rsp,
  // status and statistics
  output logic                  done,
  output logic [31:0]           n_commit,
  output logic [31:0]           n_abort,
  output logic [31:0]           n_timeout,
  output logic [31:0]           n_loaded,
  output logic [31:0]           cnt_grant,
  output logic [31:0]           cnt_wait,
  output logic [31:0]           cnt_abort,
  output logic [31:0]           cnt_released,
  output logic [31:0]           cnt_reads,
  output logic [31:0]           cnt_writes
);
  localparam int unsigned WORDS = TXN_CS * 512;

  txn_phase_e        phase  [TXN_CS];
  logic [TXN_CS-1:0] aborted;
  logic [CW-1:0]     n_locks [TXN_CS];
  logic [CW-1:0]     n_sent  [TXN_CS];
  logic [CW-1:0]     n_data  [TXN_CS];

  logic ld_start, ld_done, get_sent, get_done, rx_first, rx_grant, rx_abort, rx_released;
  logic commit_done, rel_sent, rel_done, txn_done, txn_done_abort, timeout_fire;
  logic [SW-1:0] ld_start_slot, ld_done_slot, get_sent_slot, get_done_slot, rx_slot;
  logic [SW-1:0] commit_done_slot, rel_sent_slot, rel_done_slot;
  logic [CW-1:0] ld_done_nlocks, get_done_ndata;

  logic           ll_wr_en, ll_rd_en, lb_wr_en, lb_rd_en, rt_wr_en, rt_rd_en;
  logic [LLA-1:0] ll_wr_addr, ll_rd_addr, lb_wr_addr, lb_rd_addr, rt_wr_addr, rt_rd_addr;
  logic [35:0]    ll_wr_data, ll_rd_data, lb_wr_data, lb_rd_data;
  logic [36:0]    rt_wr_data, rt_rd_data;

  logic      get_valid, get_ready, rel_valid, rel_ready;
  lock_req_t get_req, rel_req;
  logic        running;

  // Shared lock request port: Release before Get.
  assign req_valid = rel_valid || get_valid;
  assign req       = rel_valid ? rel_req : get_req;
  assign rel_ready = req_ready;
  assign get_ready = req_ready && !rel_valid;

  txn_sync #(.TXN_CS(TXN_CS), .TIMEOUT(TIMEOUT)) u_sync (
    .clk, .rst_n,
    .ld_start, .ld_start_slot, .ld_done, .ld_done_slot, .ld_done_nlocks,
    .get_sent, .get_sent_slot, .get_done, .get_done_slot, .get_done_ndata,
    .rx_first, .rx_grant, .rx_abort, .rx_released, .rx_slot,
    .commit_done, .commit_done_slot,
    .rel_sent, .rel_sent_slot, .rel_done, .rel_done_slot,
    .phase, .aborted, .n_locks, .n_sent, .n_data,
    .txn_done, .txn_done_abort, .timeout_fire
  );

  task_loader #(.TXN_CS(TXN_CS), .MAX_LOCKS(MAX_LOCKS)) u_loader (
    .clk, .rst_n, .start, .wl_base, .n_txn, .phase,
    .ld_start, .ld_start_slot, .ld_done, .ld_done_slot, .ld_done_nlocks,
    .ll_wr_en, .ll_wr_addr, .ll_wr_data, .n_loaded,
    .axi_req(ld_axi_req), .axi_rsp(ld_axi_rsp)
  );

  lock_get_sender #(.TXN_CS(TXN_CS), .AGENT_ID(AGENT_ID)) u_get (
    .clk, .rst_n, .phase, .aborted, .n_locks,
    .ll_rd_en, .ll_rd_addr, .ll_rd_data,
    .lb_wr_en, .lb_wr_addr, .lb_wr_data,
    .req_valid(get_valid), .req_ready(get_ready), .req(get_req),
    .get_sent, .get_sent_slot, .get_done, .get_done_slot, .get_done_ndata
  );

  lock_resp_receiver #(.TXN_CS(TXN_CS)) u_rx (
    .clk, .rst_n, .rsp_valid, .rsp_ready, .rsp,
    .rt_wr_en, .rt_wr_addr, .rt_wr_data,
    .rx_first, .rx_grant, .rx_abort, .rx_released, .rx_slot,
    .cnt_grant, .cnt_wait, .cnt_abort, .cnt_released
  );

  txn_commit_ctrl #(.TXN_CS(TXN_CS), .AGENT_ID(AGENT_ID)) u_commit (
    .clk, .rst_n, .db_base, .phase, .n_data,
    .lb_rd_en, .lb_rd_addr, .lb_rd_data,
    .commit_done, .commit_done_slot, .cnt_reads, .cnt_writes,
    .axi_req(db_axi_req), .axi_rsp(db_axi_rsp)
  );

  lock_release_sender #(.TXN_CS(TXN_CS), .AGENT_ID(AGENT_ID)) u_rel (
    .clk, .rst_n, .phase, .n_sent,
    .rt_rd_en, .rt_rd_addr, .rt_rd_data,
    .req_valid(rel_valid), .req_ready(rel_ready), .req(rel_req),
    .rel_sent, .rel_sent_slot, .rel_done, .rel_done_slot
  );

  sdp_ram #(.WORDS(WORDS), .WIDTH(36)) u_lock_list (
    .clk, .wr_en(ll_wr_en), .wr_addr(ll_wr_addr), .wr_data(ll_wr_data),
    .rd_en(ll_rd_en), .rd_addr(ll_rd_addr), .rd_data(ll_rd_data)
  );
  sdp_ram #(.WORDS(WORDS), .WIDTH(36)) u_lock_buf (
    .clk, .wr_en(lb_wr_en), .wr_addr(lb_wr_addr), .wr_data(lb_wr_data),
    .rd_en(lb_rd_en), .rd_addr(lb_rd_addr), .rd_data(lb_rd_data)
  );
  sdp_ram #(.WORDS(WORDS), .WIDTH(37)) u_rsp_table (
    .clk, .wr_en(rt_wr_en), .wr_addr(rt_wr_addr), .wr_data(rt_wr_data),
    .rd_en(rt_rd_en), .rd_addr(rt_rd_addr), .rd_data(rt_rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      n_commit  <= '0;
      n_abort   <= '0;
      n_timeout <= '0;
    end else begin
      if (start) begin
        running   <= 1'b1;
        n_commit  <= '0;
        n_abort   <= '0;
        n_timeout <= '0;
      end else begin
        if (txn_done && !txn_done_abort) n_commit  <= n_commit + 1;
        if (txn_done &&  txn_done_abort) n_abort   <= n_abort + 1;
        if (timeout_fire)                n_timeout <= n_timeout + 1;
      end
    end
  end
  assign done = running && !start && (n_commit + n_abort == n_txn);
endmodule
