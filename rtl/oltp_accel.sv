// oltp_accel: top level of the lock management and transaction processing
// accelerator.
//
// N_TA txn agents send lock requests through an N_TA-to-N_CH crossbar to
// N_CH lock table channels; each channel holds P lock agents behind its own
// 1-to-P crossbar, so N_CH*P lock tables serve all agents in parallel.
// Responses come back through an N_CH-to-N_TA crossbar (routed by the agent
// id carried in every response) into a response queue in front of each txn
// agent. The CSR block starts the agents and exposes their statistics.
//
// Hashing (this design's choice): lock id bits [CH_BITS-1:0] select the
// channel, the next log2(P) bits the lock agent inside it, and the remaining
// bits the bucket of that agent's lock table.
//
// Ports: clock, active-low reset, the CSR register bus, and per txn agent two
// AXI4 master channels (load: txn records; data: tuples) as arrays of the
// axi_req_t/axi_rsp_t structs. The FPGA shell, HBM and host are outside this
// module and connect to these ports. done = all agents finished;
// init_busy = lock tables still clearing after reset (requests wait).
//
// Defaults are the basic configuration of the evaluation: 4 channels,
// 4 lock agents per channel, 4 txn agents with 8 concurrent txns each,
// 2^13-cycle timeout, 64K lock table and 4K waiting queue entries per agent.
//
// Lint note: rst_n in the sub-modules' assertion 'disable iff' terms is
// reported as a synchronous use; the flops use it asynchronously.
module oltp_accel
  import lock_pkg::*;
#(
  parameter int unsigned N_TA       = 4,      // txn agents
  parameter int unsigned N_CH       = 4,      // lock table channels
  parameter int unsigned P          = 4,      // lock agents per channel
  parameter int unsigned TXN_CS     = 8,      // concurrent txns per txn agent
  parameter int unsigned TIMEOUT    = 8192,   // cycles
  parameter int unsigned MAX_LOCKS  = 511,
  parameter int unsigned LT_ENTRIES = 65536,
  parameter int unsigned WQ_ENTRIES = 4096,
  parameter int unsigned WQ_SEARCH  = 8,
  parameter int unsigned RSPQ_DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // CSR bus
  input  logic         csr_wr_en,
  input  logic [11:0]  csr_addr,
  input  logic [63:0]  csr_wr_data,
  input  logic         csr_rd_en,
  output logic         csr_rd_valid,
  output logic [63:0]  csr_rd_data,
  // memory (HBM through the shell)
  output axi_req_t     ld_axi_req [N_TA],
  input  axi_rsp_t     ld_axi_rsp [N_TA],
  output axi_req_t     db_axi_req [N_TA],
  input  axi_rsp_t     db_axi_rsp [N_TA],
  // status
  output logic         done,
  output logic         init_busy,
  output logic [$clog2(RSPQ_DEPTH):0] rspq_level [N_TA]  // response queue fill
);
  localparam int unsigned CH_BITS = (N_CH > 1) ? $clog2(N_CH) : 0;
  localparam int unsigned CW      = (N_CH > 1) ? $clog2(N_CH) : 1;
  localparam int unsigned AW      = (N_TA > 1) ? $clog2(N_TA) : 1;

  // The request and response formats carry agent and slot ids of fixed width.
  if (N_TA > (1 << AGENT_W)) begin : g_chk_agents
    $error("oltp_accel: N_TA exceeds the agent id field");
  end
  if (TXN_CS > (1 << SLOT_W)) begin : g_chk_slots
    $error("oltp_accel: TXN_CS exceeds the slot id field");
  end

  logic                  start;
  logic [31:0]           n_txn;
  logic [AXI_ADDR_W-1:0] db_base;
  logic [AXI_ADDR_W-1:0] wl_base [N_TA];
  logic [N_TA-1:0]       agent_done;
  agent_stats_t          stats [N_TA];

  // txn agent side
  logic [N_TA-1:0] ta_req_valid, ta_req_ready, ta_rsp_valid, ta_rsp_ready;
  lock_req_t       ta_req [N_TA];
  lock_rsp_t       ta_rsp [N_TA];
  logic [CW-1:0]   ta_req_dest [N_TA];
  // response queue inputs (crossbar outputs)
  logic [N_TA-1:0] q_in_valid, q_in_ready;
  lock_rsp_t       q_in [N_TA];
  // channel side
  logic [N_CH-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid, ch_rsp_ready, ch_init;
  lock_req_t       ch_req [N_CH];
  lock_rsp_t       ch_rsp [N_CH];
  logic [AW-1:0]   ch_rsp_dest [N_CH];

  csr_regs #(.N_TA(N_TA), .N_CH(N_CH), .P(P), .TXN_CS(TXN_CS)) u_csr (
    .clk, .rst_n, .csr_wr_en, .csr_addr, .csr_wr_data, .csr_rd_en, .csr_rd_valid, .csr_rd_data,
    .start, .n_txn, .db_base, .wl_base, .agent_done, .init_busy, .stats
  );

  for (genvar a = 0; a < N_TA; a++) begin : g_ta
    txn_agent #(
      .TXN_CS(TXN_CS), .AGENT_ID(a), .TIMEOUT(TIMEOUT), .MAX_LOCKS(MAX_LOCKS)
    ) u_ta (
      .clk, .rst_n, .start, .wl_base(wl_base[a]), .n_txn, .db_base,
      .req_valid(ta_req_valid[a]), .req_ready(ta_req_ready[a]), .req(ta_req[a]),
      .rsp_valid(ta_rsp_valid[a]), .rsp_ready(ta_rsp_ready[a]), .rsp(ta_rsp[a]),
      .ld_axi_req(ld_axi_req[a]), .ld_axi_rsp(ld_axi_rsp[a]),
      .db_axi_req(db_axi_req[a]), .db_axi_rsp(db_axi_rsp[a]),
      .done(agent_done[a]),
      .n_commit(stats[a].n_commit), .n_abort(stats[a].n_abort),
      .n_timeout(stats[a].n_timeout), .n_loaded(stats[a].n_loaded),
      .cnt_grant(stats[a].cnt_grant), .cnt_wait(stats[a].cnt_wait),
      .cnt_abort(stats[a].cnt_abort), .cnt_released(stats[a].cnt_released),
      .cnt_reads(stats[a].cnt_reads), .cnt_writes(stats[a].cnt_writes)
    );
    assign ta_req_dest[a] = (N_CH > 1) ? CW'(ta_req[a].lock_id) : '0;

    sync_fifo #(.DEPTH(RSPQ_DEPTH), .T(lock_rsp_t)) u_rspq (
      .clk, .rst_n,
      .in_valid(q_in_valid[a]), .in_ready(q_in_ready[a]), .in_data(q_in[a]),
      .out_valid(ta_rsp_valid[a]), .out_ready(ta_rsp_ready[a]), .out_data(ta_rsp[a]),
      .count(rspq_level[a])
    );
  end

  lock_xbar #(.NI(N_TA), .NO(N_CH), .T(lock_req_t)) u_req_xbar (
    .clk, .rst_n,
    .in_valid(ta_req_valid), .in_ready(ta_req_ready), .in_data(ta_req), .in_dest(ta_req_dest),
    .out_valid(ch_req_valid), .out_ready(ch_req_ready), .out_data(ch_req)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    lock_channel #(
      .P(P), .CH_BITS(CH_BITS), .LT_ENTRIES(LT_ENTRIES), .WQ_ENTRIES(WQ_ENTRIES),
      .WQ_SEARCH(WQ_SEARCH)
    ) u_ch (
      .clk, .rst_n,
      .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]), .req(ch_req[c]),
      .rsp_valid(ch_rsp_valid[c]), .rsp_ready(ch_rsp_ready[c]), .rsp(ch_rsp[c]),
      .busy_init(ch_init[c])
    );
    assign ch_rsp_dest[c] = (N_TA > 1) ? AW'(ch_rsp[c].agent) : '0;
  end

  lock_xbar #(.NI(N_CH), .NO(N_TA), .T(lock_rsp_t)) u_rsp_xbar (
    .clk, .rst_n,
    .in_valid(ch_rsp_valid), .in_ready(ch_rsp_ready), .in_data(ch_rsp), .in_dest(ch_rsp_dest),
    .out_valid(q_in_valid), .out_ready(q_in_ready), .out_data(q_in)
  );

  assign init_busy = |ch_init;
  assign done      = &agent_done;
endmodule
