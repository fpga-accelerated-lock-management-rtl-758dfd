// sync_fifo: single-clock FIFO of DEPTH entries of type T with valid/ready on
// both sides.
//
// Used as the lock-response buffer queue in front of each txn agent, so that a
// busy agent never holds a lock agent in its response state. Data is written
// at the tail when in_valid && in_ready and shown at the head
// (out_valid/out_data) from the cycle after. in_ready is low only when full.
// The depth is this design's choice. count reports the occupancy.
module sync_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter type         T     = logic [7:0],
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  T        in_data,
  output logic    out_valid,
  input  logic    out_ready,
  output T        out_data,
  output logic [AW:0] count
);
  T              mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk) if (push) mem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (int'(wr_ptr) == DEPTH - 1) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (int'(rd_ptr) == DEPTH - 1) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule
