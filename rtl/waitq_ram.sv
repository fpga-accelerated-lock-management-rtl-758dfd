// waitq_ram: storage of the lock agent's waiting queues (linked lists).
//
// Each entry holds a waiting request (mode, requester) and the address of the
// next entry of the same lock. Entry data sits in a RAM with one synchronous
// read port (data the cycle after rd_en) and one write port; writing an entry
// also marks it occupied. Occupancy is a separate vector of valid bits kept in
// flip-flops so that it can be reset in one cycle and probed combinationally
// (probe_addr -> probe_valid) while the controller looks for an empty entry.
// clr_en frees an entry. Write and clear of the same entry in one cycle is not
// allowed. Default size is 4K entries, the size the evaluation uses per 64K
// lock table.
module waitq_ram
  import lock_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       rd_en,
  input  logic [$clog2(ENTRIES)-1:0] rd_addr,
  output wq_entry_t                  rd_data,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_addr,
  input  wq_entry_t                  wr_data,
  input  logic                       clr_en,
  input  logic [$clog2(ENTRIES)-1:0] clr_addr,
  input  logic [$clog2(ENTRIES)-1:0] probe_addr,
  output logic                       probe_valid,
  output logic [$clog2(ENTRIES):0]   used          // number of occupied entries
);
  wq_entry_t            mem [ENTRIES];
  logic [ENTRIES-1:0]   valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data      <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      used  <= '0;
    end else begin
      if (wr_en)  valid[wr_addr]  <= 1'b1;
      if (clr_en) valid[clr_addr] <= 1'b0;
      used <= used + ($clog2(ENTRIES)+1)'(wr_en && !valid[wr_addr])
                   - ($clog2(ENTRIES)+1)'(clr_en && valid[clr_addr]);
    end
  end

  assign probe_valid = valid[probe_addr];

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && clr_en && wr_addr == clr_addr))
    else $error("waitq_ram: write and clear of the same entry");
endmodule
