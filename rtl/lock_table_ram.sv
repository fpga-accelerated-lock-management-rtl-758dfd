// lock_table_ram: the lock agent's hash table, one lt_entry_t per bucket.
//
// The lock id is implicit: the bucket address is the hashed lock id, so no
// tag is stored and two ids with the same hash share an entry (a false
// conflict, as in any tagless lock table). One synchronous read port (data
// valid the cycle after rd_en) and one write port. After reset the module
// clears every entry to "no lock" (NL, 0 owners, no waiting queue), one entry
// per cycle; init_busy is high during that sweep and the owner must not use
// the ports until it falls. Entry count defaults to 64K, the table size used
// throughout the evaluation.
module lock_table_ram
  import lock_pkg::*;
#(
  parameter int unsigned ENTRIES = 65536
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       init_busy,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output lt_entry_t                  rd_data,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_addr,
  input  lt_entry_t                  wr_data
);
  localparam int unsigned AW = $clog2(ENTRIES);

  lt_entry_t         mem [ENTRIES];
  logic [AW-1:0]     init_addr;
  logic              init_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q    <= 1'b1;
      init_addr <= '0;
    end else if (init_q) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == AW'(ENTRIES - 1)) init_q <= 1'b0;
    end
  end
  assign init_busy = init_q;

  always_ff @(posedge clk) begin
    if (init_q)     mem[init_addr] <= '{mode: M_NL, owners: '0, wq_valid: 1'b0, wq_head: '0};
    else if (wr_en) mem[wr_addr]   <= wr_data;
    if (rd_en)      rd_data        <= mem[rd_addr];
  end
endmodule
