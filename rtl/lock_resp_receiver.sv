// lock_resp_receiver: parses the lock responses of all txn entries.
//
// One unified response port carries Grant, Waiting, Abort and Released
// responses for any txn entry of this agent, in any order. The receiver is
// always ready: each response is handled in the cycle it arrives. It records
// the lock's latest state (Grant/Waiting/Abort, with lock id and mode) in the
// response table at {slot, lock index}, which the release sender later reads
// to decide which locks to release, and pulses the counter events of the
// entry in the synchronization center:
//   rx_first    first response to a Get (Grant not popped from a queue,
//               Waiting or Abort)
//   rx_grant    any Grant
//   rx_abort    Abort
//   rx_released Released (the last one lets the entry be cleaned up)
// It also counts responses by type for the statistics registers.
//
// Lint note: the response's agent field is unused here; the response
// crossbar has already routed on it.
module lock_resp_receiver
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS = 8,
  localparam int unsigned SW    = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned LLA   = SW + LIDX_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           rsp_valid,
  output logic           rsp_ready,
  input  lock_rsp_t      rsp,
  // response table write port
  output logic           rt_wr_en,
  output logic [LLA-1:0] rt_wr_addr,
  output logic [36:0]    rt_wr_data,   // {lock_stat_e, mode, lock_id}
  // events
  output logic           rx_first,
  output logic           rx_grant,
  output logic           rx_abort,
  output logic           rx_released,
  output logic [SW-1:0]  rx_slot,
  // statistics
  output logic [31:0]    cnt_grant,
  output logic [31:0]    cnt_wait,
  output logic [31:0]    cnt_abort,
  output logic [31:0]    cnt_released
);
  wire fire = rsp_valid && rsp_ready;
  lock_stat_e st;

  assign rsp_ready = 1'b1;

  always_comb begin
    unique case (rsp.rsp)
      RSP_GRANT:   st = LS_GRANT;
      RSP_WAITING: st = LS_WAIT;
      RSP_ABORTED: st = LS_ABORT;
      default:     st = LS_NONE;
    endcase
  end

  assign rt_wr_en    = fire && rsp.rsp != RSP_RELEASED;
  assign rt_wr_addr  = {SW'(rsp.slot), rsp.lidx};
  assign rt_wr_data  = {st, rsp.mode, rsp.lock_id};
  assign rx_slot     = SW'(rsp.slot);
  assign rx_grant    = fire && rsp.rsp == RSP_GRANT;
  assign rx_first    = fire && ((rsp.rsp == RSP_GRANT && !rsp.queued) ||
                                rsp.rsp == RSP_WAITING || rsp.rsp == RSP_ABORTED);
  assign rx_abort    = fire && rsp.rsp == RSP_ABORTED;
  assign rx_released = fire && rsp.rsp == RSP_RELEASED;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_grant    <= '0;
      cnt_wait     <= '0;
      cnt_abort    <= '0;
      cnt_released <= '0;
    end else if (fire) begin
      unique case (rsp.rsp)
        RSP_GRANT:    cnt_grant    <= cnt_grant + 1;
        RSP_WAITING:  cnt_wait     <= cnt_wait + 1;
        RSP_ABORTED:  cnt_abort    <= cnt_abort + 1;
        default:      cnt_released <= cnt_released + 1;
      endcase
    end
  end
endmodule
