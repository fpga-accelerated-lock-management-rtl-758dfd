// tb_sdp_ram: random writes and reads against a shadow array; read data
// appears one cycle after rd_en and a same-cycle read returns the old word.
module tb_sdp_ram;
  localparam int unsigned W = 128, D = 40;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [$clog2(W)-1:0] wr_addr = '0, rd_addr = '0;
  logic [D-1:0] wr_data = '0, rd_data;
  logic [D-1:0] sh [W];
  logic         shv [W];
  int checks = 0, failures = 0;
  sdp_ram #(.WORDS(W), .WIDTH(D)) dut (.*);
  initial begin
    for (int i = 0; i < W; i++) shv[i] = 0;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_addr = $urandom_range(0, W - 1); wr_data = {$urandom, $urandom};
      rd_en = 1; rd_addr = $urandom_range(0, W - 1);
      @(posedge clk); #1;
      if (shv[rd_addr]) begin
        checks++;
        if (rd_data != sh[rd_addr]) begin failures++; $display("FAIL: word %0d", rd_addr); end
      end
      if (wr_en) begin sh[wr_addr] = wr_data; shv[wr_addr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
