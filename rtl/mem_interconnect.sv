// mem_interconnect: the memory network that shares the remote-memory link.
//
// All cores reach one shared, disaggregated memory pool over a single
// CXL/silicon-photonics link. Because the edge arrays live in that pool,
// this network carries every edge read, separately from the message network
// that carries vertex updates: the design has one network for memory traffic
// and one for messages. Requests from the N nodes are merged by a
// round-robin arbiter into one register stage that drives the link; the
// arbiter stamps each request with its source number in the tag field, and
// the tag returned with each read response steers it back to that node.
// The single shared link and the split into a memory network and a message
// network follow the source; the arbitration, the tag scheme and the
// register stage are this design's choices.
//
// Interface: per node n: req_valid/req_ready/req (the node's tag field is
// ignored) and rsp_valid/rsp_data (a node must always accept its response);
// link side: link_req_valid/link_req_ready/link_req and link_rsp_valid/
// link_rsp (the link must return the tag it was given).
// Timing: a request accepted from a node at edge k is offered on the link from
// edge k on; up to one request per cycle overall; responses pass through
// combinationally in the cycle the link presents them.
module mem_interconnect
  import tegra_pkg::*;
#(
  parameter int unsigned N = 32   // number of cores
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    req_valid,
  output logic [N-1:0]    req_ready,
  input  mem_req_t [N-1:0] req,
  output logic [N-1:0]    rsp_valid,
  output data_t [N-1:0]   rsp_data,
  output logic            link_req_valid,
  input  logic            link_req_ready,
  output mem_req_t        link_req,
  input  logic            link_rsp_valid,
  input  mem_rsp_t        link_rsp
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]  grant;
  logic [IW-1:0] gidx;
  logic          gvalid;
  logic          take;

  assign take = !link_req_valid || link_req_ready;

  rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n,
    .req        (req_valid),
    .advance    (take),
    .grant      (grant),
    .grant_idx  (gidx),
    .grant_valid(gvalid)
  );

  assign req_ready = take ? grant : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      link_req_valid <= 1'b0;
      link_req       <= '0;
    end else if (take) begin
      link_req_valid <= gvalid;
      if (gvalid) begin
        link_req     <= req[gidx];
        link_req.tag <= TAG_W'(gidx);
      end
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      rsp_valid[n] = link_rsp_valid && (link_rsp.tag == TAG_W'(n));
      rsp_data[n]  = link_rsp.rdata;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   link_rsp_valid |-> (link_rsp.tag < TAG_W'(N)));

endmodule
