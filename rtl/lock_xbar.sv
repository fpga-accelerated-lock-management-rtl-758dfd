// lock_xbar: NI-input, NO-output crossbar with a round-robin arbiter per output.
//
// Every input carries a payload of type T, a destination index and a valid;
// every output has its own arbiter that picks among the inputs addressed to it,
// so an NI x NO crossbar is NO independent NI-to-1 multiplexers plus NI 1-to-NO
// demultiplexers (the 2*NI*NO cost the design counts). The same module is
// used for the lock requests (txn agents -> channels, channel -> lock tables)
// and for the lock responses (tables -> channel, channels -> txn agents).
//
// Timing: combinational; in_ready[i] is high in the cycle the input's
// destination output selects it and that output is ready. Payload is held by
// the sender until taken (valid/ready). The arbiter pointer moves one past the
// winner after each transfer. Arbitration policy and the absence of a pipeline
// register are this design's own choices.
//
// Lint note: the loop index of the round-robin search is a 32-bit int of
// which only the low bits are used.
module lock_xbar #(
  parameter int unsigned NI = 4,
  parameter int unsigned NO = 4,
  parameter type         T  = logic [7:0],
  localparam int unsigned DW = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NI-1:0] in_valid,
  output logic [NI-1:0] in_ready,
  input  T              in_data  [NI],
  input  logic [DW-1:0] in_dest  [NI],
  output logic [NO-1:0] out_valid,
  input  logic [NO-1:0] out_ready,
  output T              out_data [NO]
);
  logic [IW-1:0] rr_ptr [NO];
  logic [IW-1:0] sel    [NO];
  logic [NO-1:0] found;

  // Arbitration depends on the inputs' valid only; ready is derived apart so
  // that no path runs from out_ready back to out_valid.
  always_comb begin
    for (int o = 0; o < NO; o++) begin
      found[o] = 1'b0;
      sel[o]   = '0;
      for (int k = 0; k < NI; k++) begin
        int unsigned i;
        i = (int'(rr_ptr[o]) + k) % NI;
        if (!found[o] && in_valid[i] && (NO == 1 || int'(in_dest[i]) == o)) begin
          found[o] = 1'b1;
          sel[o]   = IW'(i);
        end
      end
      out_valid[o] = found[o];
      out_data[o]  = in_data[sel[o]];
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NO; o++)
      if (found[o] && out_ready[o]) in_ready[sel[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NO; o++) rr_ptr[o] <= '0;
    end else begin
      for (int o = 0; o < NO; o++)
        if (found[o] && out_ready[o])
          rr_ptr[o] <= (int'(sel[o]) == NI - 1) ? '0 : sel[o] + 1'b1;
    end
  end
endmodule
