// msg_network: all-to-all message network between the cores.
//
// Any core may have to update a vertex owned by any other core, so every
// source can reach every destination. The network is a full crossbar: each
// destination port has its own round-robin arbiter that picks one of the
// sources currently addressing it, and a one-entry output register that
// feeds that destination's message queue. Sources that address different
// destinations move in the same cycle; sources that collide on a destination
// wait (src_ready low) and are served in round-robin order. A destination
// whose queue is full holds its output register and so back-pressures only
// the sources addressing it. The all-to-all connectivity and the
// point-to-point delivery into per-core FIFOs follow the source; the crossbar
// structure, the arbitration policy and the single register stage are this
// design's choices.
//
// Interface: per source s: src_valid/src_ready/src_dest/src_msg; per
// destination d: dst_valid/dst_ready/dst_msg (valid/ready handshakes).
// Timing: a message accepted at clock edge k is presented at its destination
// from edge k onward, i.e. it can enter the queue at edge k+1; one message
// per destination per cycle, up to N messages per cycle in total.
module msg_network
  import tegra_pkg::*;
#(
  parameter int unsigned N = 32   // number of cores
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  src_valid,
  output logic [N-1:0]                  src_ready,
  input  logic [N-1:0][(N>1?$clog2(N):1)-1:0] src_dest,
  input  msg_t [N-1:0]                  src_msg,
  output logic [N-1:0]                  dst_valid,
  input  logic [N-1:0]                  dst_ready,
  output msg_t [N-1:0]                  dst_msg
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  // grant_m[d][s]: destination d accepts source s in this cycle
  logic [N-1:0][N-1:0] grant_m;
  logic [N-1:0]        take;

  for (genvar d = 0; d < N; d++) begin : g_dst
    logic [N-1:0]  req;
    logic [N-1:0]  grant;
    logic [IW-1:0] gidx;
    logic          gvalid;

    always_comb begin
      for (int s = 0; s < N; s++) req[s] = src_valid[s] && (src_dest[s] == IW'(d));
    end

    // The output register can take a new message when empty or draining.
    assign take[d] = !dst_valid[d] || dst_ready[d];

    rr_arbiter #(.N(N)) u_arb (
      .clk, .rst_n,
      .req        (req),
      .advance    (take[d]),
      .grant      (grant),
      .grant_idx  (gidx),
      .grant_valid(gvalid)
    );

    assign grant_m[d] = take[d] ? grant : '0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dst_valid[d] <= 1'b0;
        dst_msg[d]   <= '0;
      end else if (take[d]) begin
        dst_valid[d] <= gvalid;
        if (gvalid) dst_msg[d] <= src_msg[gidx];
      end
    end
  end

  always_comb begin
    src_ready = '0;
    for (int d = 0; d < N; d++) src_ready |= grant_m[d];
  end

  // A source is granted by at most one destination: the one it addresses.
  for (genvar s = 0; s < N; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     src_ready[s] |-> src_valid[s]);
  end

endmodule
