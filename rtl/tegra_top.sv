// tegra_top: the TEGRA scale-up graph-processing fabric.
//
// N small cores share one pool of disaggregated memory and talk to each other
// by point-to-point messages instead of through memory. This module holds
// everything around the cores: one tegra_node per core (queue-address
// interception, receive message queue, send buffer, active list with
// overflow), the all-to-all message network between the nodes, and the
// memory network that funnels all nodes' edge accesses onto the single link
// to the remote memory pool. The cores themselves, each core's local vertex
// memory (an HBM stack) and the remote link with its memory pool are outside
// this module and connect through its ports.
//
// Arrangement (following the block diagram of the design): every core has a
// private local memory; all cores hang on the message network; the network
// side connects through one CXL/silicon-photonics link to the remote pool.
// The 32-core default is the design's main configuration. Keeping messages
// and memory traffic on two separate networks also follows the design.
//
// Interface: per core c, the core port (core_req_*/core_rsp_*, see
// tegra_node) and the local memory port (lmem_*); once, the remote link
// (link_*). fabric_idle is high when no node holds a message, an active
// vertex or a pending access and the message network is empty; a system
// uses it to detect that an SSSP run has converged (this signal is this
// design's addition).
// Timing: a message sent by core a to core b reaches b's queue 2 cycles after
// the store is accepted when nothing collides (send buffer, network register).
module tegra_top
  import tegra_pkg::*;
#(
  parameter int unsigned N                = 32,
  parameter int unsigned MQ_DEPTH         = 64,
  parameter int unsigned SEND_DEPTH       = 4,
  parameter int unsigned AL_DEPTH         = 16,
  parameter int unsigned AL_SPILL_ENTRIES = 65536,
  parameter addr_t       AL_SPILL_BASE    = 48'h2000_0000_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  // cores
  input  logic [N-1:0]     core_req_valid,
  output logic [N-1:0]     core_req_ready,
  input  core_req_t [N-1:0] core_req,
  output logic [N-1:0]     core_rsp_valid,
  output data_t [N-1:0]    core_rsp_data,
  // local vertex memories
  output logic [N-1:0]     lmem_req_valid,
  input  logic [N-1:0]     lmem_req_ready,
  output mem_req_t [N-1:0] lmem_req,
  input  logic [N-1:0]     lmem_rsp_valid,
  input  mem_rsp_t [N-1:0] lmem_rsp,
  // remote memory link
  output logic             link_req_valid,
  input  logic             link_req_ready,
  output mem_req_t         link_req,
  input  logic             link_rsp_valid,
  input  mem_rsp_t         link_rsp,
  // convergence
  output logic             fabric_idle
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]         send_valid, send_ready, recv_valid, recv_ready;
  logic [N-1:0][IW-1:0] send_dest;
  msg_t [N-1:0]         send_msg, recv_msg;
  logic [N-1:0]         rmem_req_valid, rmem_req_ready, rmem_rsp_valid;
  mem_req_t [N-1:0]     rmem_req;
  data_t [N-1:0]        rmem_rsp_data;
  logic [N-1:0]         node_idle;

  for (genvar c = 0; c < N; c++) begin : g_node
    tegra_node #(
      .N(N), .MQ_DEPTH(MQ_DEPTH), .SEND_DEPTH(SEND_DEPTH), .AL_DEPTH(AL_DEPTH),
      .AL_SPILL_ENTRIES(AL_SPILL_ENTRIES), .AL_SPILL_BASE(AL_SPILL_BASE)
    ) u_node (
      .clk, .rst_n,
      .core_req_valid(core_req_valid[c]),
      .core_req_ready(core_req_ready[c]),
      .core_req      (core_req[c]),
      .core_rsp_valid(core_rsp_valid[c]),
      .core_rsp_data (core_rsp_data[c]),
      .send_valid    (send_valid[c]),
      .send_ready    (send_ready[c]),
      .send_dest     (send_dest[c]),
      .send_msg      (send_msg[c]),
      .recv_valid    (recv_valid[c]),
      .recv_ready    (recv_ready[c]),
      .recv_msg      (recv_msg[c]),
      .lmem_req_valid(lmem_req_valid[c]),
      .lmem_req_ready(lmem_req_ready[c]),
      .lmem_req      (lmem_req[c]),
      .lmem_rsp_valid(lmem_rsp_valid[c]),
      .lmem_rsp      (lmem_rsp[c]),
      .rmem_req_valid(rmem_req_valid[c]),
      .rmem_req_ready(rmem_req_ready[c]),
      .rmem_req      (rmem_req[c]),
      .rmem_rsp_valid(rmem_rsp_valid[c]),
      .rmem_rsp_data (rmem_rsp_data[c]),
      .idle          (node_idle[c])
    );
  end

  msg_network #(.N(N)) u_net (
    .clk, .rst_n,
    .src_valid(send_valid),
    .src_ready(send_ready),
    .src_dest (send_dest),
    .src_msg  (send_msg),
    .dst_valid(recv_valid),
    .dst_ready(recv_ready),
    .dst_msg  (recv_msg)
  );

  mem_interconnect #(.N(N)) u_mem_net (
    .clk, .rst_n,
    .req_valid     (rmem_req_valid),
    .req_ready     (rmem_req_ready),
    .req           (rmem_req),
    .rsp_valid     (rmem_rsp_valid),
    .rsp_data      (rmem_rsp_data),
    .link_req_valid(link_req_valid),
    .link_req_ready(link_req_ready),
    .link_req      (link_req),
    .link_rsp_valid(link_rsp_valid),
    .link_rsp      (link_rsp)
  );

  assign fabric_idle = (&node_idle) && !(|recv_valid) && !link_req_valid;

endmodule
