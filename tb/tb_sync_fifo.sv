// tb_sync_fifo: random push/pop traffic against a queue model; checks order,
// full (in_ready low at DEPTH entries), empty and the occupancy count.
module tb_sync_fifo;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = '0, out_data;
  logic [3:0] count;
  logic [15:0] q [$];
  int checks = 0, failures = 0, n_full = 0;
  sync_fifo #(.DEPTH(DEPTH), .T(logic [15:0])) dut (.*);
  task automatic check(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      in_valid = $urandom_range(0, 3) != 0 || k < 50; in_data = $urandom;
      out_ready = (k > 60) && $urandom_range(0, 2) == 0 || k > 3000;
      check(in_ready == (q.size() < DEPTH), "in_ready vs model");
      check(out_valid == (q.size() > 0), "out_valid vs model");
      check(int'(count) == q.size(), "count");
      if (out_valid) check(out_data == q[0], "head data");
      if (q.size() == DEPTH) n_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(n_full > 0, "FIFO was full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
