// scheduler: the NIC's multi-level scheduler.
//
// Decoded requests (slot, service) enter one FIFO per service. The kernel
// keeps the NIC told, per core, whether that core is running a service's
// process in its user-mode receive loop (bind_valid/bind_svc). Every core
// owns two endpoints: a kernel endpoint (index c) watched by a kernel thread
// and a user endpoint (index NUM_CORES+c) watched by the process bound to
// the core. ep_waiting says which endpoints have a core stalled on a load.
//
// Each cycle at most one request is dispatched:
//   level 1, fast path: a waiting user endpoint whose bound service has a
//     queued request gets it (round robin among such endpoints);
//   level 2, kernel path: otherwise a waiting kernel endpoint gets the
//     oldest request of a service that no core is running (services chosen
//     round robin), so the kernel can schedule that process.
// A request for a running service is left for that service's own cores.
// grant (one-hot over endpoints) and grant_slot/grant_svc are combinational
// and the queue is popped at the same edge.
//
// Load information for the OS: per-service queue occupancy (q_count), a
// hot flag when it reaches HOT_THRESH (the OS may add cores), and
// unserved, set for services with queued requests and no running process.
// The two levels follow the paper; the exact priority, round-robin order
// and the statistics offered are this design's own choices.
module scheduler #(
  parameter int unsigned NUM_CORES    = 48,
  parameter int unsigned NUM_SERVICES = 16,
  parameter int unsigned QDEPTH       = 16,
  parameter int unsigned NUM_SLOTS    = 64,
  parameter int unsigned HOT_THRESH   = 8,
  localparam int unsigned NUM_EP = 2 * NUM_CORES,
  localparam int unsigned SW = $clog2(NUM_SLOTS),
  localparam int unsigned VW = $clog2(NUM_SERVICES),
  localparam int unsigned EW = $clog2(NUM_EP),
  localparam int unsigned CW = $clog2(QDEPTH+1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // from the RPC decoder
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [SW-1:0]           in_slot,
  input  logic [VW-1:0]           in_svc,
  // OS scheduling state
  input  logic [NUM_CORES-1:0]    bind_valid,
  input  logic [VW-1:0]           bind_svc [NUM_CORES],
  // endpoints
  input  logic [NUM_EP-1:0]       ep_waiting,
  output logic [NUM_EP-1:0]       grant,
  output logic [SW-1:0]           grant_slot,
  output logic [VW-1:0]           grant_svc,
  // load information
  output logic [CW-1:0]           q_count [NUM_SERVICES],
  output logic [NUM_SERVICES-1:0] svc_running,
  output logic [NUM_SERVICES-1:0] hot,
  output logic [NUM_SERVICES-1:0] unserved
);
  logic [NUM_SERVICES-1:0] q_in_valid, q_in_ready, q_out_valid, q_pop;
  logic [SW-1:0]           q_head [NUM_SERVICES];

  for (genvar s = 0; s < NUM_SERVICES; s++) begin : g_q
    sync_fifo #(.WIDTH(SW), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (q_in_valid[s]), .in_ready (q_in_ready[s]), .in_data (in_slot),
      .out_valid(q_out_valid[s]), .out_ready(q_pop[s]), .out_data(q_head[s]),
      .count    (q_count[s])
    );
    assign q_in_valid[s] = in_valid && (in_svc == VW'(s));
    assign hot[s]        = (32'(q_count[s]) >= HOT_THRESH);
    assign unserved[s]   = q_out_valid[s] && !svc_running[s];
  end
  assign in_ready = q_in_ready[in_svc];

  always_comb begin
    svc_running = '0;
    for (int c = 0; c < NUM_CORES; c++)
      if (bind_valid[c]) svc_running[bind_svc[c]] = 1'b1;
  end

  // level 1 candidates: user endpoints
  logic [NUM_CORES-1:0] user_elig, user_grant;
  logic [$clog2(NUM_CORES)-1:0] user_idx;
  logic [NUM_CORES-1:0] kern_elig, kern_grant;
  logic [$clog2(NUM_CORES)-1:0] kern_idx;
  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      user_elig[c] = ep_waiting[NUM_CORES + c] && bind_valid[c] && q_out_valid[bind_svc[c]];
      kern_elig[c] = ep_waiting[c] && (|unserved);
    end
  end

  logic use_user, use_kern;
  assign use_user = |user_elig;
  assign use_kern = !use_user && (|kern_elig);

  rr_arbiter #(.N(NUM_CORES)) u_user_arb (
    .clk, .rst_n, .req(user_elig), .advance(use_user), .grant(user_grant), .grant_idx(user_idx));
  rr_arbiter #(.N(NUM_CORES)) u_kern_arb (
    .clk, .rst_n, .req(kern_elig), .advance(use_kern), .grant(kern_grant), .grant_idx(kern_idx));

  // service picked for a kernel endpoint
  logic [NUM_SERVICES-1:0] ksvc_grant;
  logic [VW-1:0]           ksvc_idx;
  rr_arbiter #(.N(NUM_SERVICES)) u_svc_arb (
    .clk, .rst_n, .req(unserved), .advance(use_kern), .grant(ksvc_grant), .grant_idx(ksvc_idx));

  always_comb begin
    grant     = '0;
    grant_svc = '0;
    q_pop     = '0;
    if (use_user) begin
      grant[NUM_CORES + 32'(user_idx)] = 1'b1;
      grant_svc = bind_svc[user_idx];
    end else if (use_kern) begin
      grant[EW'(kern_idx)] = 1'b1;
      grant_svc = ksvc_idx;
    end
    if (use_user || use_kern) q_pop[grant_svc] = 1'b1;
    grant_slot = q_head[grant_svc];
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_grant_waiting: assert property (@(posedge clk) disable iff (!rst_n) (grant & ~ep_waiting) == '0);

  // the arbiters' one-hot outputs are not needed, their indices are
  logic unused;
  assign unused = ^{ksvc_grant, user_grant, kern_grant};

endmodule
