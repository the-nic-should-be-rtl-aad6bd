// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nobody requests) and is computed
// combinationally from req and a priority pointer. When the caller asserts
// advance together with a non-zero grant, the pointer moves to the requester
// after the granted one, so every requester is served within N grants.
//
// Round robin is this design's choice of fairness; the NIC design does not
// say how waiting endpoints or services are ordered.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = 32'(ptr) + 32'(k);              // both below N: wrap by one subtract
      if (idx >= N) idx = idx - N;
      if (req[idx]) begin
        grant     = '0;
        grant[idx] = 1'b1;
        grant_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ptr <= '0;
    else if (advance && |grant)  ptr <= (grant_idx == IW'(N-1)) ? '0 : grant_idx + 1'b1;
  end

endmodule
