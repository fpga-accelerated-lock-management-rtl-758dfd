// txn_commit_ctrl: commits txns whose locks are all granted.
//
// The controller visits the txn entries one per cycle until it finds one in
// the COMMIT stage, then walks that entry's lock buffer (only the locks that
// access data, as filled by the lock-get sender): for an S or SIX lock it
// reads the tuple, for an X lock it writes it, one access at a time over its
// own AXI channel, waiting for the read data or the write response before the
// next. When the buffer is done it pulses commit_done and the Release stage
// may start. Reads for all read locks and writes for all write locks thus
// finish before any lock is released.
//
// Address and data (this design's choices): tuple of lock L at
// db_base + L*64, one 512-bit beat. The written beat carries
// {agent, slot, lock id, txn count} so that a test can see who wrote last.
//
// Lint notes: r_data is consumed by the read but its value is not needed
// (the tuple is only fetched), so those bits are unused, as is the spare bit
// 35 of a buffer word. rst_n in assertion 'disable iff' is reported as a
// synchronous use; the flops use it asynchronously.
module txn_commit_ctrl
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS   = 8,
  parameter int unsigned AGENT_ID = 0,
  localparam int unsigned SW      = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW      = LIDX_W + 1,
  localparam int unsigned LLA     = SW + LIDX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [AXI_ADDR_W-1:0] db_base,
  input  txn_phase_e            phase  [TXN_CS],
  input  logic [CW-1:0]         n_data [TXN_CS],
  // lock buffer read port
  output logic                  lb_rd_en,
  output logic [LLA-1:0]        lb_rd_addr,
  input  logic [35:0]           lb_rd_data,
  output logic                  commit_done,
  output logic [SW-1:0]         commit_done_slot,
  output logic [31:0]           cnt_reads,
  output logic [31:0]           cnt_writes,
  output axi_req_t              axi_req,
  input  axi_rsp_t              axi_rsp
);
  typedef enum logic [2:0] {C_SCAN, C_READ, C_DECIDE, C_AR, C_R, C_AW, C_B, C_DONE} st_e;
  st_e st;

  logic [SW-1:0]  scan, slot;
  logic [CW-1:0]  idx;
  logic [35:0]    ent;
  logic           aw_done, w_done;
  logic [31:0]    n_commit;

  wire lock_mode_e             ent_mode = lock_mode_e'(ent[34:32]);
  wire [AXI_ADDR_W-1:0]        tup_addr = db_base + (AXI_ADDR_W'(ent[31:0]) << 6);

  assign lb_rd_en   = (st == C_READ);
  assign lb_rd_addr = {slot, idx[LIDX_W-1:0]};

  always_comb begin
    axi_req          = '0;
    axi_req.ar_valid = (st == C_AR);
    axi_req.ar_addr  = tup_addr;
    axi_req.r_ready  = (st == C_R);
    axi_req.aw_valid = (st == C_AW) && !aw_done;
    axi_req.aw_addr  = tup_addr;
    axi_req.w_valid  = (st == C_AW) && !w_done;
    axi_req.w_data   = AXI_DATA_W'({AGENT_W'(AGENT_ID), SLOT_W'(slot), ent[31:0], n_commit});
    axi_req.w_last   = 1'b1;
    axi_req.b_ready  = (st == C_B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st               <= C_SCAN;
      scan             <= '0;
      slot             <= '0;
      idx              <= '0;
      ent              <= '0;
      aw_done          <= 1'b0;
      w_done           <= 1'b0;
      n_commit         <= '0;
      commit_done      <= 1'b0;
      commit_done_slot <= '0;
      cnt_reads        <= '0;
      cnt_writes       <= '0;
    end else begin
      commit_done <= 1'b0;
      unique case (st)
        C_SCAN: begin
          scan <= (int'(scan) == TXN_CS - 1) ? '0 : scan + 1'b1;
          if (phase[scan] == PH_COMMIT && !commit_done) begin
            slot <= scan;
            idx  <= '0;
            st   <= (n_data[scan] == '0) ? C_DONE : C_READ;
          end
        end
        C_READ:   st <= C_DECIDE;
        C_DECIDE: begin
          ent     <= lb_rd_data;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          st      <= mode_writes(lock_mode_e'(lb_rd_data[34:32])) ? C_AW : C_AR;
        end
        C_AR: if (axi_rsp.ar_ready) st <= C_R;
        C_R:  if (axi_rsp.r_valid) begin
          cnt_reads <= cnt_reads + 1;
          idx       <= idx + 1'b1;
          st        <= (idx + 1'b1 == n_data[slot]) ? C_DONE : C_READ;
        end
        C_AW: begin
          if (axi_rsp.aw_ready) aw_done <= 1'b1;
          if (axi_rsp.w_ready)  w_done  <= 1'b1;
          if ((aw_done || axi_rsp.aw_ready) && (w_done || axi_rsp.w_ready)) st <= C_B;
        end
        C_B: if (axi_rsp.b_valid) begin
          cnt_writes <= cnt_writes + 1;
          idx        <= idx + 1'b1;
          st         <= (idx + 1'b1 == n_data[slot]) ? C_DONE : C_READ;
        end
        C_DONE: begin
          commit_done      <= 1'b1;
          commit_done_slot <= slot;
          n_commit         <= n_commit + 1;
          st               <= C_SCAN;
        end
        default: st <= C_SCAN;
      endcase
    end
  end

  // A read is issued only for a read-mode lock, a write only for X.
  assert property (@(posedge clk) disable iff (!rst_n)
                   axi_req.ar_valid |-> mode_reads(ent_mode))
    else $error("txn_commit_ctrl: read for a lock that does not read");
endmodule
