// txn_sync: the txn agent's signal synchronization center and timeout timers.
//
// Holds, for each of the TXN_CS txn entries, the stage the txn is in and the
// counters the components report into. The components only pulse events
// (a lock sent, a response of some kind, a stage finished); all stage flags
// change here, in one place. The stage barriers of the pipeline are:
//
//   FREE -> LOAD      task loader claims the entry          (ld_start)
//   LOAD -> GET       lock list written                     (ld_done: rLoaded)
//   GET  -> GRANT     all Gets sent, or abort seen          (get_done: rLockGetSent)
//   GRANT-> COMMIT    every lock granted and no abort       (rGrantAll)
//   GRANT-> RELEASE   aborted and every Get sent has had its first response
//   COMMIT-> RELEASE  all data read and written             (commit_done: rDataRead/rDataWrote)
//   RELEASE-> RELWAIT all Releases sent                     (rel_done: rReleaseSent)
//   RELWAIT-> FREE    as many Released as Releases sent     (rReleaseDone: cleanup)
//
// A txn is aborted by an Abort response or by its timer: TIMEOUT cycles after
// it entered GET without reaching COMMIT. txn_done pulses at cleanup with
// txn_done_abort telling how it ended. A free-running time stamp drives the
// timers. Events are applied the cycle they arrive; stage checks use the
// registered counters, so a barrier opens one cycle after its last event.
// Stage encoding and the start point of the timer are this design's choices.
module txn_sync
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS  = 8,
  parameter int unsigned TIMEOUT = 8192,
  localparam int unsigned SW     = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW     = LIDX_W + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // task loader
  input  logic              ld_start,
  input  logic [SW-1:0]     ld_start_slot,
  input  logic              ld_done,
  input  logic [SW-1:0]     ld_done_slot,
  input  logic [CW-1:0]     ld_done_nlocks,
  // lock-get sender
  input  logic              get_sent,
  input  logic [SW-1:0]     get_sent_slot,
  input  logic              get_done,
  input  logic [SW-1:0]     get_done_slot,
  input  logic [CW-1:0]     get_done_ndata,
  // lock response receiver
  input  logic              rx_first,      // Grant (not from queue), Waiting or Abort
  input  logic              rx_grant,
  input  logic              rx_abort,
  input  logic              rx_released,
  input  logic [SW-1:0]     rx_slot,
  // commit controller
  input  logic              commit_done,
  input  logic [SW-1:0]     commit_done_slot,
  // lock-release sender
  input  logic              rel_sent,
  input  logic [SW-1:0]     rel_sent_slot,
  input  logic              rel_done,
  input  logic [SW-1:0]     rel_done_slot,
  // state seen by the components
  output txn_phase_e        phase    [TXN_CS],
  output logic [TXN_CS-1:0] aborted,
  output logic [CW-1:0]     n_locks  [TXN_CS],
  output logic [CW-1:0]     n_sent   [TXN_CS],
  output logic [CW-1:0]     n_data   [TXN_CS],
  // completion
  output logic              txn_done,
  output logic              txn_done_abort,
  output logic              timeout_fire
);
  logic [CW-1:0] n_first [TXN_CS];
  logic [CW-1:0] n_grant [TXN_CS];
  logic [CW-1:0] n_rsent [TXN_CS];
  logic [CW-1:0] n_rdone [TXN_CS];
  logic [31:0]   t_start [TXN_CS];
  logic [31:0]   now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now            <= '0;
      aborted        <= '0;
      txn_done       <= 1'b0;
      txn_done_abort <= 1'b0;
      timeout_fire   <= 1'b0;
      for (int s = 0; s < TXN_CS; s++) begin
        phase[s]   <= PH_FREE;
        n_locks[s] <= '0;
        n_sent[s]  <= '0;
        n_data[s]  <= '0;
        n_first[s] <= '0;
        n_grant[s] <= '0;
        n_rsent[s] <= '0;
        n_rdone[s] <= '0;
        t_start[s] <= '0;
      end
    end else begin
      automatic logic done_taken = 1'b0;
      now            <= now + 1;
      txn_done       <= 1'b0;
      txn_done_abort <= 1'b0;
      timeout_fire   <= 1'b0;

      // Counter events from the components.
      if (get_sent)    n_sent[get_sent_slot]  <= n_sent[get_sent_slot] + 1'b1;
      if (rx_first)    n_first[rx_slot]       <= n_first[rx_slot] + 1'b1;
      if (rx_grant)    n_grant[rx_slot]       <= n_grant[rx_slot] + 1'b1;
      if (rx_released) n_rdone[rx_slot]       <= n_rdone[rx_slot] + 1'b1;
      if (rel_sent)    n_rsent[rel_sent_slot] <= n_rsent[rel_sent_slot] + 1'b1;

      for (int s = 0; s < TXN_CS; s++) begin
        unique case (phase[s])
          PH_FREE: if (ld_start && ld_start_slot == SW'(s)) phase[s] <= PH_LOAD;
          PH_LOAD: if (ld_done && ld_done_slot == SW'(s)) begin
            // Cleanup of the counters happens here, as the new txn starts.
            phase[s]   <= PH_GET;
            n_locks[s] <= ld_done_nlocks;
            n_sent[s]  <= '0;
            n_data[s]  <= '0;
            n_first[s] <= '0;
            n_grant[s] <= '0;
            n_rsent[s] <= '0;
            n_rdone[s] <= '0;
            aborted[s] <= 1'b0;
            t_start[s] <= now;
          end
          PH_GET: if (get_done && get_done_slot == SW'(s)) begin
            phase[s]  <= PH_GRANT;
            n_data[s] <= get_done_ndata;
          end
          PH_GRANT: begin
            if (aborted[s]) begin
              if (n_first[s] == n_sent[s]) phase[s] <= PH_RELEASE;
            end else if (n_grant[s] == n_locks[s]) begin
              phase[s] <= PH_COMMIT;
            end
          end
          PH_COMMIT:  if (commit_done && commit_done_slot == SW'(s)) phase[s] <= PH_RELEASE;
          PH_RELEASE: if (rel_done && rel_done_slot == SW'(s)) phase[s] <= PH_RELWAIT;
          PH_RELWAIT: if (n_rdone[s] == n_rsent[s] && !done_taken) begin
            // One entry is cleaned up per cycle; others wait a cycle.
            done_taken      = 1'b1;
            phase[s]       <= PH_FREE;
            txn_done       <= 1'b1;
            txn_done_abort <= aborted[s];
          end
          default: phase[s] <= PH_FREE;
        endcase

        // Abort sources: an Abort response, or the timer while locks are pending.
        if ((phase[s] == PH_GET || phase[s] == PH_GRANT) && !aborted[s]) begin
          if (rx_abort && rx_slot == SW'(s)) begin
            aborted[s] <= 1'b1;
          end else if (now - t_start[s] >= 32'(TIMEOUT) &&
                       !(phase[s] == PH_GRANT && n_grant[s] == n_locks[s])) begin
            aborted[s]   <= 1'b1;
            timeout_fire <= 1'b1;
          end
        end
      end
    end
  end

  // Event rules: a component reports only for an entry in its own stage.
  assert property (@(posedge clk) disable iff (!rst_n) ld_done |-> phase[ld_done_slot] == PH_LOAD)
    else $error("txn_sync: ld_done for an entry not loading");
  assert property (@(posedge clk) disable iff (!rst_n) get_sent |-> phase[get_sent_slot] == PH_GET)
    else $error("txn_sync: Get sent for an entry not in GET");
  assert property (@(posedge clk) disable iff (!rst_n) commit_done |-> phase[commit_done_slot] == PH_COMMIT)
    else $error("txn_sync: commit_done for an entry not committing");
endmodule
