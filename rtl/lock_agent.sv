// lock_agent: serves Get and Release lock requests for one lock table.
//
// A single FSM owns a hash table of lock states (lock_table_ram) and a pool of
// linked-list waiting-queue entries (waitq_ram); the insert/delete/pop logic of
// both structures is folded into the FSM instead of sitting behind separate
// command interfaces. States and decisions follow the Get and Release flow
// charts of the design:
//
//   WAIT_REQ   accept a request, issue the hash-table read
//   READ_LT    entry arrives; Get: no owner or compatible -> Grant;
//              conflict -> FIND_TAIL (queue exists) or FIND_EMPTY.
//              Release: timeout and queue -> DEL_WQ, else normal release
//   FIND_TAIL  walk the lock's list, one hop per cycle
//   FIND_EMPTY probe one waitQ entry per cycle, at most WQ_SEARCH probes,
//              then Abort
//   WQ_INSERT  write the new waitQ entry -> Waiting
//   DEL_WQ     walk the list looking for the releasing requester
//   WQ_DEL     unlink and free the found entry -> Released
//   LOCK_RESP  present the response; write back the hash entry (and the old
//              tail's next pointer); if the pop flag is set go to POP_RD
//   POP_RD     all of the queue visited -> WAIT_REQ, else read the head
//   POP_CHK    head conflicts -> WAIT_REQ, else grant it, delete it, set
//              the pop flag -> LOCK_RESP
//
// Normal release: owners>1 -> owners-1; owners==1 -> entry cleared to NL, and
// if a queue exists the pop flag is set. The Released response is always sent
// before any Grant popped from the queue. Popping stops at the first conflict.
//
// Timing (request accepted in cycle 0): Grant and normal Released responses
// are valid in cycle 2 (3 cycles). Waiting takes 5 cycles plus one per tail hop
// and per occupied entry probed; Abort takes 3 + WQ_SEARCH cycles plus tail
// hops; a timeout Released takes 5 cycles plus one per list hop. Each Grant
// popped from the queue takes 3 cycles. One request is served at a time.
//
// Interfaces: req (valid/ready, lock_req_t) in, rsp (valid/ready, lock_rsp_t)
// out. The FSM does not accept requests while the table clears after reset.
// Grants popped from the queue carry rsp.queued = 1, so that the requester can
// tell them from first responses.
//
// Own choices, not given by the design: the bucket index is the lock id bits
// above the channel/table select bits (HASH_SHIFT); the empty-entry search
// starts at a rotating pointer that persists between requests; the mode kept
// after a compatible grant is the join of the two modes and is not lowered
// when a holder releases; releases are matched in the queue on
// (agent, slot, lock index).
//
// Lint notes: the assertions use rst_n in 'disable iff', which lint reports
// as a reset used both asynchronously and synchronously; the flops themselves
// use it only as an asynchronous reset. The release helper function reads
// only the owner count and waitQ-valid fields of the entry it is given.
module lock_agent
  import lock_pkg::*;
#(
  parameter int unsigned LT_ENTRIES = 65536,  // hash table buckets
  parameter int unsigned WQ_ENTRIES = 4096,   // waiting-queue entries
  parameter int unsigned WQ_SEARCH  = 8,      // entries probed for an empty one
  parameter int unsigned HASH_SHIFT = 4       // lock id bits used to pick channel and table
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  lock_req_t req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output lock_rsp_t rsp,
  output logic      busy_init
);
  localparam int unsigned LTA = $clog2(LT_ENTRIES);
  localparam int unsigned WQA = $clog2(WQ_ENTRIES);
  localparam int unsigned SCW = $clog2(WQ_SEARCH + 1);

  typedef enum logic [3:0] {
    S_WAIT_REQ, S_READ_LT, S_FIND_TAIL, S_FIND_EMPTY, S_WQ_INSERT,
    S_DEL_WQ, S_WQ_DEL, S_LOCK_RESP, S_POP_RD, S_POP_CHK
  } state_e;

  state_e     state;
  lock_req_t  cur;          // request being served
  lt_entry_t  ent;          // working copy of its hash entry
  logic       lt_dirty;     // ent must be written back in LOCK_RESP
  logic       pop_flag;

  logic [WQA-1:0] ptr;      // current list position
  logic [WQA-1:0] prev_ptr;
  wq_entry_t      prev_d;
  logic           prev_vld;
  logic           has_tail;
  logic [WQA-1:0] tail_ptr;
  wq_entry_t      tail_d;
  logic           tail_upd; // old tail's next pointer is written in LOCK_RESP
  logic [WQA-1:0] free_ptr; // rotating start of the empty-entry search
  logic [WQA-1:0] new_ptr;
  logic [SCW-1:0] probes;

  // ---------------- memories ----------------
  logic            lt_init;
  logic            lt_rd_en, lt_wr_en;
  logic [LTA-1:0]  lt_rd_addr;
  lt_entry_t       lt_rd_data;

  logic            wq_rd_en, wq_wr_en, wq_clr_en;
  logic [WQA-1:0]  wq_rd_addr, wq_wr_addr;
  wq_entry_t       wq_rd_data, wq_wr_data;
  logic            wq_probe_valid;
  logic [$clog2(WQ_ENTRIES):0] wq_used;

  function automatic logic [LTA-1:0] bucket(logic [LOCK_ID_W-1:0] id);
    return LTA'(id >> HASH_SHIFT);
  endfunction

  lock_table_ram #(.ENTRIES(LT_ENTRIES)) u_lt (
    .clk, .rst_n, .init_busy(lt_init),
    .rd_en(lt_rd_en), .rd_addr(lt_rd_addr), .rd_data(lt_rd_data),
    .wr_en(lt_wr_en), .wr_addr(bucket(cur.lock_id)), .wr_data(ent)
  );

  waitq_ram #(.ENTRIES(WQ_ENTRIES)) u_wq (
    .clk, .rst_n,
    .rd_en(wq_rd_en), .rd_addr(wq_rd_addr), .rd_data(wq_rd_data),
    .wr_en(wq_wr_en), .wr_addr(wq_wr_addr), .wr_data(wq_wr_data),
    .clr_en(wq_clr_en), .clr_addr(ptr),
    .probe_addr(free_ptr), .probe_valid(wq_probe_valid),
    .used(wq_used)
  );

  assign busy_init = lt_init;
  assign req_ready = (state == S_WAIT_REQ) && !lt_init;
  assign rsp_valid = (state == S_LOCK_RESP);

  wire req_fire = req_valid && req_ready;
  wire rsp_fire = rsp_valid && rsp_ready;

  // Entry of the queued request the controller stands on.
  wire match_here = wq_rd_data.agent == cur.agent && wq_rd_data.slot == cur.slot &&
                    wq_rd_data.lidx == cur.lidx;

  // ---------------- memory port control ----------------
  always_comb begin
    lt_rd_en   = req_fire;
    lt_rd_addr = bucket(req.lock_id);
    lt_wr_en   = rsp_fire && lt_dirty;

    wq_rd_en   = 1'b0;
    wq_rd_addr = lt_rd_data.wq_head[WQA-1:0];
    wq_wr_en   = 1'b0;
    wq_wr_addr = new_ptr;
    wq_wr_data = '{mode: cur.mode, agent: cur.agent, slot: cur.slot, lidx: cur.lidx,
                   next_valid: 1'b0, next: '0};
    wq_clr_en  = 1'b0;
    unique case (state)
      S_READ_LT: begin
        // Start a list walk right away when the flow will need one.
        wq_rd_addr = lt_rd_data.wq_head[WQA-1:0];
        wq_rd_en   = lt_rd_data.wq_valid &&
                     ((cur.op == OP_GET && lt_rd_data.owners != '0 &&
                       !compatible(cur.mode, lt_rd_data.mode)) ||
                      (cur.op == OP_REL && cur.timeout));
      end
      S_FIND_TAIL: begin
        wq_rd_addr = wq_rd_data.next[WQA-1:0];
        wq_rd_en   = wq_rd_data.next_valid;
      end
      S_DEL_WQ: begin
        wq_rd_addr = wq_rd_data.next[WQA-1:0];
        wq_rd_en   = !match_here && wq_rd_data.next_valid;
      end
      S_WQ_INSERT: begin
        wq_wr_en   = 1'b1;
      end
      S_WQ_DEL: begin
        // Unlink: the predecessor (if any) inherits the deleted entry's link.
        wq_clr_en  = 1'b1;
        wq_wr_en   = prev_vld;
        wq_wr_addr = prev_ptr;
        wq_wr_data = prev_d;
        wq_wr_data.next_valid = wq_rd_data.next_valid;
        wq_wr_data.next       = wq_rd_data.next;
      end
      S_LOCK_RESP: begin
        wq_wr_en   = rsp_fire && tail_upd;
        wq_wr_addr = tail_ptr;
        wq_wr_data = tail_d;
        wq_wr_data.next_valid = 1'b1;
        wq_wr_data.next       = WQ_PTR_W'(new_ptr);
      end
      S_POP_RD: begin
        wq_rd_addr = ent.wq_head[WQA-1:0];
        wq_rd_en   = ent.wq_valid;
      end
      S_POP_CHK: begin
        wq_clr_en  = ent.owners == '0 || compatible(wq_rd_data.mode, ent.mode);
      end
      default: ;
    endcase
  end

  // ---------------- FSM ----------------
  // Normal release against entry e: the new entry, and whether to pop its queue.
  function automatic lt_entry_t rel_entry(lt_entry_t e);
    lt_entry_t n;
    n = e;
    if (e.owners > OWN_W'(1)) begin
      n.owners = e.owners - 1'b1;
    end else begin
      n.mode   = M_NL;
      n.owners = '0;
    end
    return n;
  endfunction
  function automatic logic rel_pop(lt_entry_t e);
    return e.wq_valid && e.owners == OWN_W'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_WAIT_REQ;
      cur      <= '0;
      ent      <= '0;
      lt_dirty <= 1'b0;
      pop_flag <= 1'b0;
      ptr      <= '0;
      prev_ptr <= '0;
      prev_d   <= '0;
      prev_vld <= 1'b0;
      has_tail <= 1'b0;
      tail_ptr <= '0;
      tail_d   <= '0;
      tail_upd <= 1'b0;
      free_ptr <= '0;
      new_ptr  <= '0;
      probes   <= '0;
      rsp      <= '0;
    end else begin
      unique case (state)
        S_WAIT_REQ: if (req_fire) begin
          cur      <= req;
          lt_dirty <= 1'b0;
          tail_upd <= 1'b0;
          pop_flag <= 1'b0;
          state    <= S_READ_LT;
        end

        S_READ_LT: begin
          ent         <= lt_rd_data;
          rsp.mode    <= cur.mode;
          rsp.lock_id <= cur.lock_id;
          rsp.agent   <= cur.agent;
          rsp.slot    <= cur.slot;
          rsp.lidx    <= cur.lidx;
          rsp.queued  <= 1'b0;
          ptr         <= lt_rd_data.wq_head[WQA-1:0];
          prev_vld    <= 1'b0;
          probes      <= '0;
          if (cur.op == OP_GET) begin
            if (lt_rd_data.owners == '0 || compatible(cur.mode, lt_rd_data.mode)) begin
              ent.mode   <= (lt_rd_data.owners == '0) ? cur.mode
                                                      : mode_join(lt_rd_data.mode, cur.mode);
              ent.owners <= lt_rd_data.owners + 1'b1;
              lt_dirty   <= 1'b1;
              rsp.rsp    <= RSP_GRANT;
              state      <= S_LOCK_RESP;
            end else begin
              has_tail <= lt_rd_data.wq_valid;
              state    <= lt_rd_data.wq_valid ? S_FIND_TAIL : S_FIND_EMPTY;
            end
          end else if (cur.timeout && lt_rd_data.wq_valid) begin
            state <= S_DEL_WQ;
          end else begin
            ent      <= rel_entry(lt_rd_data);
            pop_flag <= rel_pop(lt_rd_data);
            lt_dirty <= 1'b1;
            rsp.rsp  <= RSP_RELEASED;
            state    <= S_LOCK_RESP;
          end
        end

        S_FIND_TAIL: begin
          if (wq_rd_data.next_valid) begin
            ptr <= wq_rd_data.next[WQA-1:0];
          end else begin
            tail_ptr <= ptr;
            tail_d   <= wq_rd_data;
            state    <= S_FIND_EMPTY;
          end
        end

        S_FIND_EMPTY: begin
          free_ptr <= free_ptr + 1'b1;
          if (!wq_probe_valid) begin
            new_ptr <= free_ptr;
            state   <= S_WQ_INSERT;
          end else if (probes == SCW'(WQ_SEARCH - 1)) begin
            rsp.rsp <= RSP_ABORTED;
            state   <= S_LOCK_RESP;
          end else begin
            probes  <= probes + 1'b1;
          end
        end

        S_WQ_INSERT: begin
          if (has_tail) begin
            tail_upd <= 1'b1;
          end else begin
            ent.wq_valid <= 1'b1;
            ent.wq_head  <= WQ_PTR_W'(new_ptr);
            lt_dirty     <= 1'b1;
          end
          rsp.rsp <= RSP_WAITING;
          state   <= S_LOCK_RESP;
        end

        S_DEL_WQ: begin
          if (match_here) begin
            state <= S_WQ_DEL;
          end else if (wq_rd_data.next_valid) begin
            prev_vld <= 1'b1;
            prev_ptr <= ptr;
            prev_d   <= wq_rd_data;
            ptr      <= wq_rd_data.next[WQA-1:0];
          end else begin
            // Not queued: it was granted meanwhile, release it normally.
            ent      <= rel_entry(ent);
            pop_flag <= rel_pop(ent);
            lt_dirty <= 1'b1;
            rsp.rsp  <= RSP_RELEASED;
            state    <= S_LOCK_RESP;
          end
        end

        S_WQ_DEL: begin
          if (!prev_vld) begin
            ent.wq_valid <= wq_rd_data.next_valid;
            ent.wq_head  <= wq_rd_data.next;
            lt_dirty     <= 1'b1;
          end
          rsp.rsp <= RSP_RELEASED;
          state   <= S_LOCK_RESP;
        end

        S_LOCK_RESP: if (rsp_fire) begin
          lt_dirty <= 1'b0;
          tail_upd <= 1'b0;
          state    <= pop_flag ? S_POP_RD : S_WAIT_REQ;
        end

        S_POP_RD: begin
          ptr <= ent.wq_head[WQA-1:0];
          if (!ent.wq_valid) begin
            pop_flag <= 1'b0;
            state    <= S_WAIT_REQ;
          end else begin
            state    <= S_POP_CHK;
          end
        end

        S_POP_CHK: begin
          if (ent.owners == '0 || compatible(wq_rd_data.mode, ent.mode)) begin
            ent.mode     <= (ent.owners == '0) ? wq_rd_data.mode
                                               : mode_join(ent.mode, wq_rd_data.mode);
            ent.owners   <= ent.owners + 1'b1;
            ent.wq_valid <= wq_rd_data.next_valid;
            ent.wq_head  <= wq_rd_data.next;
            lt_dirty     <= 1'b1;
            pop_flag     <= 1'b1;
            rsp.rsp      <= RSP_GRANT;
            rsp.queued   <= 1'b1;
            rsp.mode     <= wq_rd_data.mode;
            rsp.agent    <= wq_rd_data.agent;
            rsp.slot     <= wq_rd_data.slot;
            rsp.lidx     <= wq_rd_data.lidx;
            state        <= S_LOCK_RESP;
          end else begin
            pop_flag <= 1'b0;
            state    <= S_WAIT_REQ;
          end
        end

        default: state <= S_WAIT_REQ;
      endcase
    end
  end

  // Handshake rule: a presented response is held until taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp))
    else $error("lock_agent: response changed while stalled");
  // A waiting request is inserted only into a queue that is not full.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_WQ_INSERT |-> int'(wq_used) < WQ_ENTRIES)
    else $error("lock_agent: insert into a full waiting queue");
endmodule
