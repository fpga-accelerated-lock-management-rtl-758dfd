// lock_get_sender: sends the Get lock requests of loaded txns.
//
// The sender visits the txn entries one per cycle until it finds one in the
// GET stage, then walks its lock list: present a Get request
// {mode, lock_id, agent, slot, i} for lock i and wait for it to be taken,
// while lock i+1 is already being read from the lock-list RAM. Every lock whose mode reads (S, SIX) or writes (X) data
// is also copied into the entry's lock buffer, so that the commit stage reads
// only those. Each sent request pulses get_sent; when the list is done, or as
// soon as the txn is aborted, get_done reports the number of buffered data
// locks and the sender looks for the next entry. Timing: the first Get is
// presented the cycle after the entry is found, then one Get per cycle while
// the request port is ready.
//
// Lint note: bit 35 of a lock-list word is a spare bit, always 0, and unused.
module lock_get_sender
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS   = 8,
  parameter int unsigned AGENT_ID = 0,
  localparam int unsigned SW      = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW      = LIDX_W + 1,
  localparam int unsigned LLA     = SW + LIDX_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  txn_phase_e        phase   [TXN_CS],
  input  logic [TXN_CS-1:0] aborted,
  input  logic [CW-1:0]     n_locks [TXN_CS],
  // lock-list RAM read port
  output logic              ll_rd_en,
  output logic [LLA-1:0]    ll_rd_addr,
  input  logic [35:0]       ll_rd_data,
  // lock buffer RAM write port
  output logic              lb_wr_en,
  output logic [LLA-1:0]    lb_wr_addr,
  output logic [35:0]       lb_wr_data,
  // Get requests
  output logic              req_valid,
  input  logic              req_ready,
  output lock_req_t         req,
  // events
  output logic              get_sent,
  output logic [SW-1:0]     get_sent_slot,
  output logic              get_done,
  output logic [SW-1:0]     get_done_slot,
  output logic [CW-1:0]     get_done_ndata
);
  typedef enum logic [1:0] {G_SCAN, G_SEND, G_DONE} st_e;
  st_e st;

  logic [SW-1:0] scan, slot;
  logic [CW-1:0] idx, nd;

  lock_mode_e cur_mode;
  assign cur_mode = lock_mode_e'(ll_rd_data[34:32]);

  assign ll_rd_en   = (st == G_SCAN && phase[scan] == PH_GET && !get_done) ||
                      (st == G_SEND && req_ready && idx + 1'b1 < n_locks[slot]);
  assign ll_rd_addr = (st == G_SCAN) ? {scan, LIDX_W'(0)} : {slot, LIDX_W'(idx + 1'b1)};

  always_comb begin
    req         = '0;
    req.op      = OP_GET;
    req.timeout = 1'b0;
    req.mode    = cur_mode;
    req.lock_id = ll_rd_data[31:0];
    req.agent   = AGENT_W'(AGENT_ID);
    req.slot    = SLOT_W'(slot);
    req.lidx    = idx[LIDX_W-1:0];
  end
  assign req_valid = (st == G_SEND) && !aborted[slot];

  assign lb_wr_en   = req_valid && req_ready && (mode_reads(cur_mode) || mode_writes(cur_mode));
  assign lb_wr_addr = {slot, nd[LIDX_W-1:0]};
  assign lb_wr_data = {1'b0, ll_rd_data[34:0]};

  assign get_sent      = req_valid && req_ready;
  assign get_sent_slot = slot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= G_SCAN;
      scan           <= '0;
      slot           <= '0;
      idx            <= '0;
      nd             <= '0;
      get_done       <= 1'b0;
      get_done_slot  <= '0;
      get_done_ndata <= '0;
    end else begin
      get_done <= 1'b0;
      unique case (st)
        G_SCAN: begin
          scan <= (int'(scan) == TXN_CS - 1) ? '0 : scan + 1'b1;
          if (phase[scan] == PH_GET && !get_done) begin
            slot <= scan;
            idx  <= '0;
            nd   <= '0;
            st   <= (n_locks[scan] == '0 || aborted[scan]) ? G_DONE : G_SEND;
          end
        end
        G_SEND: begin
          if (aborted[slot]) begin
            st <= G_DONE;
          end else if (req_ready) begin
            if (lb_wr_en) nd <= nd + 1'b1;
            idx <= idx + 1'b1;
            st  <= (idx + 1'b1 == n_locks[slot]) ? G_DONE : G_SEND;
          end
        end
        G_DONE: begin
          get_done       <= 1'b1;
          get_done_slot  <= slot;
          get_done_ndata <= nd;
          st             <= G_SCAN;
        end
        default: st <= G_SCAN;
      endcase
    end
  end
endmodule
