// sdp_ram: simple dual-port RAM, one write port and one synchronous read port.
//
// Holds the txn agent's on-chip transaction state: the lock lists of all txn
// entries (one region of MAX_LOCKS words per entry), the per-lock response
// table and the buffer of locks that read or write data in the commit stage.
// Read data is valid the cycle after rd_en and holds until the next read.
// A read and a write of the same word in one cycle return the old word.
module sdp_ram #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned WIDTH = 36,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [WORDS];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data      <= mem[rd_addr];
  end
endmodule
