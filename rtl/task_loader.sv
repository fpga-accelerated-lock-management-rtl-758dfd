// task_loader: loads transactions from memory into free txn entries.
//
// While started and txns remain, the loader visits the txn entries one per
// cycle (its context-switch state) until it finds a free one, claims it
// (ld_start) and reads the next txn record over its own AXI read channel.
// The raw record is converted into the internal lock list: one word
// {mode, lock_id} per lock at address {slot, lock index} of the lock-list RAM,
// written one lock per cycle while the read channel is held. ld_done reports
// the entry and its lock count.
//
// Record format (this design's choice; the raw format is not published): a
// txn occupies REC_BYTES = 4096 bytes at wl_base + k*4096, as 64-bit lock
// words, eight per 512-bit beat. Word 0 of beat 0 is the header with the lock
// count in bits [9:0]; word w >= 1 is lock w-1 with lock_id in [31:0] and the
// S/I/X mode in [34:32]. The first beat is read alone; the remaining
// ceil((n-7)/8) beats, if any, follow in one burst. A txn holds at most
// MAX_LOCKS = 511 locks, the design's default maximum.
//
// Lint notes: the loader uses only the read half of its AXI channel, so the
// write-response bits are unused; lock words carry spare bits [63:35].
module task_loader
  import lock_pkg::*;
#(
  parameter int unsigned TXN_CS    = 8,
  parameter int unsigned MAX_LOCKS = 511,
  localparam int unsigned SW       = (TXN_CS > 1) ? $clog2(TXN_CS) : 1,
  localparam int unsigned CW       = LIDX_W + 1,
  localparam int unsigned LLA      = SW + LIDX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,        // pulse: begin loading n_txn txns
  input  logic [AXI_ADDR_W-1:0] wl_base,
  input  logic [31:0]           n_txn,
  input  txn_phase_e            phase [TXN_CS],
  output logic                  ld_start,
  output logic [SW-1:0]         ld_start_slot,
  output logic                  ld_done,
  output logic [SW-1:0]         ld_done_slot,
  output logic [CW-1:0]         ld_done_nlocks,
  output logic                  ll_wr_en,     // lock-list RAM write port
  output logic [LLA-1:0]        ll_wr_addr,
  output logic [35:0]           ll_wr_data,   // {1'b0, mode, lock_id}
  output logic [31:0]           n_loaded,     // txns handed to the pipeline
  output axi_req_t              axi_req,
  input  axi_rsp_t              axi_rsp
);
  localparam int unsigned REC_BYTES = 4096;

  typedef enum logic [2:0] {L_SCAN, L_AR0, L_R0, L_UNPACK, L_AR1, L_R1, L_DONE} st_e;
  st_e st;

  logic                  running;
  logic [31:0]           txn_idx;
  logic [SW-1:0]         scan, slot;
  logic [AXI_ADDR_W-1:0] rec_addr;
  logic [AXI_DATA_W-1:0] beat;
  logic [2:0]            word;       // word within beat being unpacked
  logic                  first_beat;
  logic [CW-1:0]         nlocks;
  logic [CW-1:0]         lidx;       // next lock index to write

  wire [63:0] cur_word = beat[64*word +: 64];

  assign n_loaded = txn_idx;

  always_comb begin
    axi_req          = '0;
    axi_req.ar_valid = (st == L_AR0) || (st == L_AR1);
    axi_req.ar_addr  = (st == L_AR0) ? rec_addr : rec_addr + AXI_ADDR_W'(AXI_DATA_W / 8);
    // beats after the first: ceil((nlocks - 7) / 8)
    axi_req.ar_len   = (st == L_AR0) ? '0 : AXI_LEN_W'(nlocks / CW'(8) - CW'(1));
    axi_req.r_ready  = (st == L_R0) || (st == L_R1);
  end

  always_comb begin
    ll_wr_en   = (st == L_UNPACK) && !(first_beat && word == 3'd0) && lidx < nlocks;
    ll_wr_addr = {slot, lidx[LIDX_W-1:0]};
    ll_wr_data = {1'b0, cur_word[34:32], cur_word[31:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st             <= L_SCAN;
      running        <= 1'b0;
      txn_idx        <= '0;
      scan           <= '0;
      slot           <= '0;
      rec_addr       <= '0;
      beat           <= '0;
      word           <= '0;
      first_beat     <= 1'b0;
      nlocks         <= '0;
      lidx           <= '0;
      ld_start       <= 1'b0;
      ld_start_slot  <= '0;
      ld_done        <= 1'b0;
      ld_done_slot   <= '0;
      ld_done_nlocks <= '0;
    end else begin
      ld_start <= 1'b0;
      ld_done  <= 1'b0;
      if (start) begin
        running <= 1'b1;
        txn_idx <= '0;
      end
      unique case (st)
        L_SCAN: begin
          scan <= (int'(scan) == TXN_CS - 1) ? '0 : scan + 1'b1;
          if (running && !start && txn_idx < n_txn && phase[scan] == PH_FREE && !ld_start) begin
            slot          <= scan;
            ld_start      <= 1'b1;
            ld_start_slot <= scan;
            rec_addr      <= wl_base + AXI_ADDR_W'(txn_idx) * AXI_ADDR_W'(REC_BYTES);
            st            <= L_AR0;
          end
        end
        L_AR0: if (axi_rsp.ar_ready) st <= L_R0;
        L_R0: if (axi_rsp.r_valid) begin
          beat       <= axi_rsp.r_data;
          nlocks     <= (axi_rsp.r_data[9:0] > 10'(MAX_LOCKS)) ? CW'(MAX_LOCKS) : CW'(axi_rsp.r_data[9:0]);
          first_beat <= 1'b1;
          word       <= '0;
          lidx       <= '0;
          st         <= L_UNPACK;
        end
        L_UNPACK: begin
          if (ll_wr_en) lidx <= lidx + 1'b1;
          word <= word + 1'b1;
          if (word == 3'd7 || (ll_wr_en && lidx + 1'b1 == nlocks) || nlocks == '0) begin
            if ((ll_wr_en && lidx + 1'b1 == nlocks) || nlocks == '0) begin
              st <= L_DONE;
            end else if (first_beat) begin
              st <= L_AR1;
            end else begin
              st <= L_R1;
            end
          end
        end
        L_AR1: if (axi_rsp.ar_ready) st <= L_R1;
        L_R1: if (axi_rsp.r_valid) begin
          beat       <= axi_rsp.r_data;
          first_beat <= 1'b0;
          word       <= '0;
          st         <= L_UNPACK;
        end
        L_DONE: begin
          ld_done        <= 1'b1;
          ld_done_slot   <= slot;
          ld_done_nlocks <= nlocks;
          txn_idx        <= txn_idx + 1;
          st             <= L_SCAN;
        end
        default: st <= L_SCAN;
      endcase
    end
  end
endmodule
