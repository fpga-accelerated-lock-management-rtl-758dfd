// tb_lock_table_ram: checks the reset sweep (every entry reads back as "no
// lock" after init_busy falls, even though the array starts random), the
// sweep length, synchronous read timing and write/read-back of random entries.
module tb_lock_table_ram;
  import lock_pkg::*;
  localparam int unsigned N = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init_busy, rd_en = 0, wr_en = 0;
  logic [$clog2(N)-1:0] rd_addr = '0, wr_addr = '0;
  lt_entry_t rd_data, wr_data = '0;
  lt_entry_t shadow [N];
  int checks = 0, failures = 0;
  lock_table_ram #(.ENTRIES(N)) dut (.*);
  task automatic check(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    int n_busy = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (init_busy) begin @(posedge clk); #1 n_busy++; end
    check(n_busy == N, $sformatf("init sweep %0d cycles, expected %0d", n_busy, N));
    for (int i = 0; i < N; i++) begin
      rd_en = 1; rd_addr = i[$clog2(N)-1:0]; @(posedge clk); #1;
      check(rd_data.owners == 0 && rd_data.mode == M_NL && !rd_data.wq_valid, $sformatf("entry %0d cleared", i));
      shadow[i] = '0;
    end
    rd_en = 0;
    for (int k = 0; k < 2000; k++) begin
      wr_en = $urandom_range(0, 1); wr_addr = $urandom_range(0, N - 1);
      wr_data = lt_entry_t'({$urandom, $urandom});
      rd_en = 1; rd_addr = $urandom_range(0, N - 1);
      @(posedge clk); #1;
      check(rd_data == shadow[rd_addr], "read returns the old contents");
      if (wr_en) shadow[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
