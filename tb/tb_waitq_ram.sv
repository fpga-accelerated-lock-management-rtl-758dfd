// tb_waitq_ram: checks that all entries are free after reset, that a write
// marks an entry occupied and a clear frees it (probe and occupancy count
// against a shadow model), and that reads return the written entry one cycle
// later.
module tb_waitq_ram;
  import lock_pkg::*;
  localparam int unsigned N = 64;
  localparam int unsigned AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, wr_en = 0, clr_en = 0, probe_valid;
  logic [AW-1:0] rd_addr = '0, wr_addr = '0, clr_addr = '0, probe_addr = '0;
  wq_entry_t rd_data, wr_data = '0;
  logic [AW:0] used;
  wq_entry_t sh_d [N];
  logic      sh_v [N];
  int checks = 0, failures = 0, n_used = 0;
  waitq_ram #(.ENTRIES(N)) dut (.*);
  task automatic check(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < N; i++) begin
      probe_addr = i[AW-1:0]; #1 check(!probe_valid, "free after reset"); sh_v[i] = 0;
    end
    check(used == 0, "used 0 after reset");
    for (int k = 0; k < 3000; k++) begin
      wr_en = $urandom_range(0, 1); wr_addr = $urandom_range(0, N - 1);
      wr_data = wq_entry_t'({$urandom, $urandom});
      clr_en = $urandom_range(0, 2) == 0; clr_addr = $urandom_range(0, N - 1);
      if (clr_addr == wr_addr) clr_en = 0;
      rd_en = 1; rd_addr = $urandom_range(0, N - 1);
      probe_addr = $urandom_range(0, N - 1);
      #1 check(probe_valid == sh_v[probe_addr], "probe matches model");
      @(posedge clk); #1;
      if (sh_v[rd_addr]) check(rd_data == sh_d[rd_addr], "read data");
      if (wr_en) begin if (!sh_v[wr_addr]) n_used++; sh_v[wr_addr] = 1; sh_d[wr_addr] = wr_data; end
      if (clr_en) begin if (sh_v[clr_addr]) n_used--; sh_v[clr_addr] = 0; end
      check(int'(used) == n_used, $sformatf("used %0d model %0d", used, n_used));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
