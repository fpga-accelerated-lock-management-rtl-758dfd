// lock_release_sender: sends the Release lock requests of finished txns.
//
// The sender visits the txn entries one per cycle until it finds one in the
// RELEASE stage (committed, or aborted with every Get answered), then walks
// the entry's response table over the n_sent locks whose Get was sent. A lock
// last answered Grant gets a normal Release; a lock last answered Waiting gets
// a Release marked timeout, which makes the lock agent look for it in the
// waiting queue first (if it was granted in the meantime the agent releases
// it normally); a lock answered Abort holds nothing and is skipped. Each sent
// request pulses rel_sent; rel_done closes the stage. A lock takes 2 cycles
// plus any wait for the request port.
module lock_release_sender
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS   = 8,
  parameter int unsigned AGENT_ID = 0,
  localparam int unsigned SW      = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW      = LIDX_W + 1,
  localparam int unsigned LLA     = SW + LIDX_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  txn_phase_e     phase  [TXN_CS],
  input  logic [CW-1:0]  n_sent [TXN_CS],
  // response table read port
  output logic           rt_rd_en,
  output logic [LLA-1:0] rt_rd_addr,
  input  logic [36:0]    rt_rd_data,
  // Release requests
  output logic           req_valid,
  input  logic           req_ready,
  output lock_req_t      req,
  // events
  output logic           rel_sent,
  output logic [SW-1:0]  rel_sent_slot,
  output logic           rel_done,
  output logic [SW-1:0]  rel_done_slot
);
  typedef enum logic [1:0] {R_SCAN, R_READ, R_SEND, R_DONE} st_e;
  st_e st;

  logic [SW-1:0] scan, slot;
  logic [CW-1:0] idx;

  lock_stat_e stat;
  assign stat = lock_stat_e'(rt_rd_data[36:35]);

  assign rt_rd_en   = (st == R_READ);
  assign rt_rd_addr = {slot, idx[LIDX_W-1:0]};

  always_comb begin
    req         = '0;
    req.op      = OP_REL;
    req.timeout = (stat == LS_WAIT);
    req.mode    = lock_mode_e'(rt_rd_data[34:32]);
    req.lock_id = rt_rd_data[31:0];
    req.agent   = AGENT_W'(AGENT_ID);
    req.slot    = SLOT_W'(slot);
    req.lidx    = idx[LIDX_W-1:0];
  end
  assign req_valid     = (st == R_SEND) && (stat == LS_GRANT || stat == LS_WAIT);
  assign rel_sent      = req_valid && req_ready;
  assign rel_sent_slot = slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= R_SCAN;
      scan          <= '0;
      slot          <= '0;
      idx           <= '0;
      rel_done      <= 1'b0;
      rel_done_slot <= '0;
    end else begin
      rel_done <= 1'b0;
      unique case (st)
        R_SCAN: begin
          scan <= (int'(scan) == TXN_CS - 1) ? '0 : scan + 1'b1;
          if (phase[scan] == PH_RELEASE && !rel_done) begin
            slot <= scan;
            idx  <= '0;
            st   <= (n_sent[scan] == '0) ? R_DONE : R_READ;
          end
        end
        R_READ: st <= R_SEND;
        R_SEND: if (!req_valid || req_ready) begin
          idx <= idx + 1'b1;
          st  <= (idx + 1'b1 == n_sent[slot]) ? R_DONE : R_READ;
        end
        R_DONE: begin
          rel_done      <= 1'b1;
          rel_done_slot <= slot;
          st            <= R_SCAN;
        end
        default: st <= R_SCAN;
      endcase
    end
  end
endmodule
