// tb_lock_xbar: 3 inputs x 4 outputs. Each input sends numbered packets to
// random outputs with random stalls on the outputs; checks that every packet
// arrives exactly once at its own output, in order per input/output pair, and
// that an output serves waiting inputs in turn (no input is passed over more
// than NI-1 times while it waits).
module tb_lock_xbar;
  localparam int unsigned NI = 3, NO = 4;
  typedef logic [15:0] pkt_t;   // {input[3:0], output[3:0], seq[7:0]}
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NI-1:0] in_valid, in_ready;
  pkt_t          in_data [NI];
  logic [1:0]    in_dest [NI];
  logic [NO-1:0] out_valid, out_ready;
  pkt_t          out_data [NO];
  int checks = 0, failures = 0;
  logic [NI-1:0] fired;
  int sent [NI], got [NI][NO], seqno [NI][NO], passed [NI];
  lock_xbar #(.NI(NI), .NO(NO), .T(pkt_t)) dut (.*);
  task automatic check(input logic ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic new_pkt(input int i);
    automatic int o = $urandom_range(0, NO - 1);
    in_dest[i] = o[1:0];
    in_data[i] = {i[3:0], o[3:0], seqno[i][o][7:0]};
    seqno[i][o]++;
  endtask
  initial begin
    for (int i = 0; i < NI; i++) begin sent[i] = 0; passed[i] = 0; for (int o = 0; o < NO; o++) begin got[i][o] = 0; seqno[i][o] = 0; end end
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) new_pkt(i);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) if (!in_valid[i] && $urandom_range(0, 1) && sent[i] < 800) in_valid[i] = 1;
      for (int o = 0; o < NO; o++) out_ready[o] = $urandom_range(0, 3) != 0;
      #1;
      for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
        automatic int i = int'(out_data[o][15:12]);
        check(int'(out_data[o][11:8]) == o, "packet at its own output");
        check(int'(out_data[o][7:0]) == (got[i][o] & 255), "in order");
        check(in_ready[i], "sender sees ready");
        got[i][o]++;
        for (int j = 0; j < NI; j++)
          if (j != i && in_valid[j] && int'(in_dest[j]) == o) passed[j]++;
        passed[i] = 0;
      end
      for (int j = 0; j < NI; j++) check(passed[j] < NI, "round robin bound");
      fired = in_valid & in_ready;
      @(posedge clk); #1;
      for (int i = 0; i < NI; i++) if (fired[i]) begin
        sent[i]++; in_valid[i] = 0; new_pkt(i);
      end
    end
    for (int i = 0; i < NI; i++) begin
      automatic int tot = 0;
      for (int o = 0; o < NO; o++) tot += got[i][o];
      check(tot == sent[i] && tot > 100, $sformatf("input %0d: %0d sent %0d received", i, sent[i], tot));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
