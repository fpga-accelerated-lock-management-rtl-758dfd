// lock_channel: a lock table channel, P lock agents behind a 1-to-P crossbar.
//
// Requests arriving on the channel port are routed to lock agent
// lock_id[CH_BITS +: log2(P)] (the channel itself was chosen by the low
// CH_BITS bits of the lock id); the P agents' responses are merged back onto
// the single response port by a round-robin P-to-1 crossbar. Because a lock
// agent needs at least 3 cycles per request, up to 4 agents can share one
// channel port without starving it. Latency through the channel equals the
// lock agent's (the crossbars are combinational). Selecting tables by lock id
// bits is this design's choice of hash.
//
// Lint note: rst_n also appears in the sub-modules' assertion 'disable iff'
// terms, reported as a synchronous use; the flops use it asynchronously.
module lock_channel
  import lock_pkg::*;
#(
  parameter int unsigned P          = 4,      // lock agents (tables) per channel
  parameter int unsigned CH_BITS    = 2,      // lock id bits that select the channel
  parameter int unsigned LT_ENTRIES = 65536,
  parameter int unsigned WQ_ENTRIES = 4096,
  parameter int unsigned WQ_SEARCH  = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  lock_req_t req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output lock_rsp_t rsp,
  output logic      busy_init
);
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 0;
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1;

  logic [P-1:0]  la_req_valid, la_req_ready, la_rsp_valid, la_rsp_ready, la_init;
  lock_req_t     la_req [P];
  lock_rsp_t     la_rsp [P];
  logic [0:0]    la_rsp_dest [P];

  logic [0:0]    in_v, in_r, out_v, out_r;
  lock_req_t     in_d [1];
  logic [PW-1:0] in_dest [1];
  lock_rsp_t     out_d [1];

  assign in_v[0]    = req_valid;
  assign req_ready  = in_r[0];
  assign in_d[0]    = req;
  assign in_dest[0] = (P > 1) ? PW'(req.lock_id >> CH_BITS) : '0;

  lock_xbar #(.NI(1), .NO(P), .T(lock_req_t)) u_req_xbar (
    .clk, .rst_n,
    .in_valid(in_v), .in_ready(in_r), .in_data(in_d), .in_dest(in_dest),
    .out_valid(la_req_valid), .out_ready(la_req_ready), .out_data(la_req)
  );

  for (genvar p = 0; p < P; p++) begin : g_la
    lock_agent #(
      .LT_ENTRIES(LT_ENTRIES), .WQ_ENTRIES(WQ_ENTRIES), .WQ_SEARCH(WQ_SEARCH),
      .HASH_SHIFT(CH_BITS + PB)
    ) u_la (
      .clk, .rst_n,
      .req_valid(la_req_valid[p]), .req_ready(la_req_ready[p]), .req(la_req[p]),
      .rsp_valid(la_rsp_valid[p]), .rsp_ready(la_rsp_ready[p]), .rsp(la_rsp[p]),
      .busy_init(la_init[p])
    );
    assign la_rsp_dest[p] = '0;
  end

  lock_xbar #(.NI(P), .NO(1), .T(lock_rsp_t)) u_rsp_xbar (
    .clk, .rst_n,
    .in_valid(la_rsp_valid), .in_ready(la_rsp_ready), .in_data(la_rsp), .in_dest(la_rsp_dest),
    .out_valid(out_v), .out_ready(out_r), .out_data(out_d)
  );
  assign rsp_valid = out_v[0];
  assign out_r[0]  = rsp_ready;
  assign rsp       = out_d[0];
  assign busy_init = |la_init;
endmodule
