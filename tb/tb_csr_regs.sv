// tb_csr_regs: self-checking test of the control and status registers.
//
// Writes and reads back N_TXN, DB_BASE and every WL_BASE, checks that CTRL
// gives exactly one start pulse, that CYCLES counts from start until all
// agents report done and then holds, that STATUS reflects done/init/running,
// that every statistics word of every agent reads back its own field, that
// the read data is valid exactly one cycle after the strobe, and that unknown
// addresses read zero. Random register traffic is compared against a model.
module tb_csr_regs;
  import lock_pkg::*;

  localparam int unsigned N_TA = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  csr_wr_en = 0, csr_rd_en = 0, csr_rd_valid;
  logic [11:0]           csr_addr = '0;
  logic [63:0]           csr_wr_data = '0, csr_rd_data;
  logic                  start;
  logic [31:0]           n_txn;
  logic [AXI_ADDR_W-1:0] db_base;
  logic [AXI_ADDR_W-1:0] wl_base [N_TA];
  logic [N_TA-1:0]       agent_done = '0;
  logic                  init_busy = 0;
  agent_stats_t          stats [N_TA];

  csr_regs #(.N_TA(N_TA), .N_CH(2), .P(4), .TXN_CS(8)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned cyc = 0, n_start = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (start) n_start++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [63:0] d);
    @(negedge clk); csr_wr_en = 1; csr_addr = a; csr_wr_data = d;
    @(negedge clk); csr_wr_en = 0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [63:0] d);
    @(negedge clk); csr_rd_en = 1; csr_addr = a;
    @(negedge clk); csr_rd_en = 0;
    check(csr_rd_valid, "read valid one cycle after strobe");
    d = csr_rd_data;
    @(negedge clk);
    check(!csr_rd_valid, "read valid for one cycle only");
  endtask

  initial begin
    logic [63:0] v, mdl_ntxn, mdl_db, mdl_wl [N_TA];
    int unsigned c1, c2;
    for (int a = 0; a < N_TA; a++)
      for (int k = 0; k < N_STATS; k++) stats[a][32*k +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd(12'h005, v);
    check(v[31:0] == {8'd2, 8'd4, 8'd3, 8'd8}, "CONFIG fields");
    mdl_ntxn = 0; mdl_db = 0;
    for (int a = 0; a < N_TA; a++) mdl_wl[a] = 0;
    // random register traffic against a model
    for (int it = 0; it < 300; it++) begin
      automatic int which = $urandom_range(2 + N_TA);
      automatic logic [63:0] d = {$urandom, $urandom};
      if ($urandom_range(1)) begin
        if (which == 0)      begin wr(12'h002, d); mdl_ntxn = {32'd0, d[31:0]}; end
        else if (which == 1) begin wr(12'h003, d); mdl_db = 64'(d[AXI_ADDR_W-1:0]); end
        else if (which < 2 + N_TA) begin wr(12'h100 + 12'(which - 2), d); mdl_wl[which-2] = 64'(d[AXI_ADDR_W-1:0]); end
        else wr(12'h1f0, d);          // no such agent: ignored
      end else begin
        if (which == 0)      begin rd(12'h002, v); check(v == mdl_ntxn, "N_TXN"); end
        else if (which == 1) begin rd(12'h003, v); check(v == mdl_db, "DB_BASE"); end
        else if (which < 2 + N_TA) begin rd(12'h100 + 12'(which - 2), v); check(v == mdl_wl[which-2], "WL_BASE"); end
        else begin rd(12'h3a5, v); check(v == 0, "unknown address reads zero"); end
      end
    end
    check(n_txn == mdl_ntxn[31:0] && db_base == mdl_db[AXI_ADDR_W-1:0], "outputs follow registers");
    for (int a = 0; a < N_TA; a++) check(wl_base[a] == mdl_wl[a][AXI_ADDR_W-1:0], "wl_base output");
    // statistics words
    for (int a = 0; a < N_TA; a++)
      for (int k = 0; k < N_STATS; k++) begin
        rd(12'h200 + 12'(16 * a + k), v);
        check(v == 64'(stats[a][32*(N_STATS-1-k) +: 32]), $sformatf("stat %0d of agent %0d", k, a));
      end
    rd(12'h200 + 12'(16 * 0 + 12), v); check(v == 0, "stat index past the last reads zero");
    // start, run time and status
    check(n_start == 0, "no start before CTRL");
    wr(12'h000, 64'd0); check(n_start == 0, "CTRL bit 0 clear: no start");
    wr(12'h000, 64'd1); repeat (3) @(negedge clk); check(n_start == 1, "one start pulse");
    repeat (50) @(negedge clk);
    rd(12'h001, v); check(v[2:0] == 3'b100, "STATUS running");
    agent_done = 3'b011; repeat (5) @(negedge clk);
    rd(12'h004, v); c1 = v;
    agent_done = 3'b111; init_busy = 1; repeat (2) @(negedge clk);
    rd(12'h004, v); c2 = v;
    repeat (10) @(negedge clk);
    rd(12'h004, v);
    check(c2 > c1 && v == c2, $sformatf("CYCLES stops at done (%0d %0d %0d)", c1, c2, v));
    check(c2 >= 58 && c2 <= 66, $sformatf("CYCLES value %0d", c2));
    rd(12'h001, v); check(v[2:0] == 3'b011, "STATUS done and init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
