// axi_mem_model: behavioural model of one HBM pseudo-channel port, for
// simulation only.
//
// Serves one AXI4 master (axi_req_t/axi_rsp_t of lock_pkg) with one
// transaction at a time, which is all the txn agent's load and data channels
// issue. Memory is a sparse array of 512-bit beats indexed by address/64;
// unwritten beats read as zero. A read burst returns its first beat LATENCY
// cycles after the address is accepted, then one beat per cycle unless
// STALL_PCT randomly withholds a beat. A write accepts its address and its
// single data beat together (it waits until both are valid) and responds LATENCY cycles later. The
// default LATENCY of 36 cycles is the 288 ns HBM latency at 125 MHz.
// The testbench fills the memory with poke() and reads it with peek();
// n_reads/n_writes count bursts.
module axi_mem_model
  import lock_pkg::*;
#(
  parameter int unsigned LATENCY   = 36,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req,
  output axi_rsp_t rsp
);
  logic [AXI_DATA_W-1:0] mem [longint unsigned];
  int unsigned n_reads, n_writes;

  typedef enum logic [1:0] {M_IDLE, M_RDELAY, M_RDATA, M_WDELAY} st_e;
  st_e st;
  longint unsigned addr;
  int unsigned     beats_left, wait_cnt;
  logic            stall;

  function automatic void poke(longint unsigned byte_addr, logic [AXI_DATA_W-1:0] d);
    mem[byte_addr >> 6] = d;
  endfunction

  function automatic logic [AXI_DATA_W-1:0] peek(longint unsigned byte_addr);
    return mem.exists(byte_addr >> 6) ? mem[byte_addr >> 6] : '0;
  endfunction

  always_comb begin
    rsp          = '0;
    rsp.ar_ready = (st == M_IDLE) && !req.aw_valid;
    rsp.r_valid  = (st == M_RDATA) && !stall;
    rsp.r_data   = peek(addr);
    rsp.r_last   = (beats_left == 1);
    rsp.aw_ready = (st == M_IDLE) && req.aw_valid && req.w_valid;
    rsp.w_ready  = (st == M_IDLE) && req.aw_valid && req.w_valid;
    rsp.b_valid  = (st == M_WDELAY) && wait_cnt == 0;
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= M_IDLE;
      addr       <= 0;
      beats_left <= 0;
      wait_cnt   <= 0;
      stall      <= 1'b0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      stall <= (STALL_PCT != 0) && ($urandom_range(99) < STALL_PCT);
      unique case (st)
        M_IDLE: begin
          if (req.ar_valid && rsp.ar_ready) begin
            addr       <= longint'(req.ar_addr);
            beats_left <= int'(req.ar_len) + 1;
            wait_cnt   <= LATENCY - 1;
            n_reads    <= n_reads + 1;
            st         <= M_RDELAY;
          end else if (req.aw_valid && req.w_valid) begin
            mem[longint'(req.aw_addr) >> 6] = req.w_data;
            wait_cnt <= LATENCY - 1;
            n_writes <= n_writes + 1;
            st       <= M_WDELAY;
          end
        end
        M_RDELAY: if (wait_cnt == 0) st <= M_RDATA; else wait_cnt <= wait_cnt - 1;
        M_RDATA: if (rsp.r_valid && req.r_ready) begin
          addr       <= addr + 64;
          beats_left <= beats_left - 1;
          if (beats_left == 1) st <= M_IDLE;
        end
        M_WDELAY: if (wait_cnt != 0) wait_cnt <= wait_cnt - 1;
                  else if (req.b_ready) st <= M_IDLE;
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
