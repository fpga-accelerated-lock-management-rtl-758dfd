// csr_regs: control and status registers of the accelerator.
//
// The host's control software programs the workload through these registers
// and reads the results back. A simple synchronous register bus (write strobe
// with address and data; read strobe, data valid one cycle later) stands in
// for the shell's CSR interface. Word addresses:
//   0x000 CTRL     write 1 to bit 0: start all txn agents (one-cycle pulse)
//   0x001 STATUS   [0] all agents done  [1] lock tables initialising
//                  [2] running (started and not yet done)
//   0x002 N_TXN    txns per agent
//   0x003 DB_BASE  base address of the tuples
//   0x004 CYCLES   cycles from start to all-done (run time, read only)
//   0x005 CONFIG   read only {N_CH, P, N_TA, TXN_CS} one byte each
//   0x100+a        WL_BASE of txn agent a (its workload in memory)
//   0x200+16a+k    statistics word k of agent a (agent_stats_t, k=0 n_commit
//                  .. k=9 cnt_writes), read only
// Unknown addresses read as zero. The register map is this design's choice;
// the paper only says that the software writes CSRs.
//
// Lint note: csr_wr_data bits above the 34-bit address width are unused on
// purpose; the widest writable register is an address.
module csr_regs
  import lock_pkg::*;
#(
  parameter int unsigned N_TA   = 4,
  parameter int unsigned N_CH   = 4,
  parameter int unsigned P      = 4,
  parameter int unsigned TXN_CS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // register bus
  input  logic                  csr_wr_en,
  input  logic [11:0]           csr_addr,
  input  logic [63:0]           csr_wr_data,
  input  logic                  csr_rd_en,
  output logic                  csr_rd_valid,
  output logic [63:0]           csr_rd_data,
  // to the design
  output logic                  start,
  output logic [31:0]           n_txn,
  output logic [AXI_ADDR_W-1:0] db_base,
  output logic [AXI_ADDR_W-1:0] wl_base [N_TA],
  input  logic [N_TA-1:0]       agent_done,
  input  logic                  init_busy,
  input  agent_stats_t          stats [N_TA]
);
  logic        running;
  logic [63:0] cycles;
  wire         all_done = &agent_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start        <= 1'b0;
      n_txn        <= '0;
      db_base      <= '0;
      running      <= 1'b0;
      cycles       <= '0;
      csr_rd_valid <= 1'b0;
      csr_rd_data  <= '0;
      for (int a = 0; a < N_TA; a++) wl_base[a] <= '0;
    end else begin
      start        <= 1'b0;
      csr_rd_valid <= csr_rd_en;
      if (csr_wr_en) begin
        unique casez (csr_addr)
          12'h000: if (csr_wr_data[0]) begin
            start   <= 1'b1;
            running <= 1'b1;
            cycles  <= '0;
          end
          12'h002: n_txn   <= csr_wr_data[31:0];
          12'h003: db_base <= csr_wr_data[AXI_ADDR_W-1:0];
          12'h1??: for (int a = 0; a < N_TA; a++)
                     if (int'(csr_addr[7:0]) == a) wl_base[a] <= csr_wr_data[AXI_ADDR_W-1:0];
          default: ;
        endcase
      end
      if (running && !start) begin
        if (all_done) running <= 1'b0;
        else          cycles  <= cycles + 1;
      end
      if (csr_rd_en) begin
        csr_rd_data <= '0;
        unique casez (csr_addr)
          12'h001: csr_rd_data <= 64'({running, init_busy, all_done});
          12'h002: csr_rd_data <= 64'(n_txn);
          12'h003: csr_rd_data <= 64'(db_base);
          12'h004: csr_rd_data <= cycles;
          12'h005: csr_rd_data <= 64'({8'(N_CH), 8'(P), 8'(N_TA), 8'(TXN_CS)});
          12'h1??: for (int a = 0; a < N_TA; a++)
                     if (int'(csr_addr[7:0]) == a) csr_rd_data <= 64'(wl_base[a]);
          12'h2??: for (int a = 0; a < N_TA; a++)
                     if (int'(csr_addr[7:4]) == a && int'(csr_addr[3:0]) < N_STATS)
                       csr_rd_data <= 64'(stats[a][32*(N_STATS-1-int'(csr_addr[3:0])) +: 32]);
          default: ;
        endcase
      end
    end
  end
endmodule
