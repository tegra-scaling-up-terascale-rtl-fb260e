// rr_arbiter: round-robin arbiter used by the message network and the memory
// network to share one output among several requesters.
//
// It grants one of the active requests, searching from the requester after the
// last one granted, so every requester is served within N grants. The grant is
// combinational in req; the pointer advances only when the caller signals with
// `advance` that the granted request was actually taken. Round-robin is this
// design's choice; the source names no arbitration policy.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic [N-1:0]                 grant,
  output logic [(N>1?$clog2(N):1)-1:0] grant_idx,
  output logic                         grant_valid
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;

  always_comb begin
    grant       = '0;
    grant_idx   = '0;
    grant_valid = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (!grant_valid && req[i]) begin
        grant_valid = 1'b1;
        grant_idx   = IW'(i);
        grant[i]    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last <= IW'(N - 1);
    else if (advance && grant_valid) last <= grant_idx;
  end

endmodule
