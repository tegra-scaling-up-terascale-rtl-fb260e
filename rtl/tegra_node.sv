// tegra_node: everything that sits between one core and the rest of TEGRA.
//
// The core is a small general-purpose core running two threads, the SSSP
// message consumer and message generator. It talks to the system only
// through ordinary loads and stores. The node catches the stores and loads
// aimed at its dedicated queue addresses before they reach any cache and turns
// them into queue operations; every other access is steered by address to
// the vertex memory (the core's local HBM stack) or to the edge memory (the
// shared remote pool, through the memory network). That interception, one
// receive message queue per core, vertices kept in local memory and edges in
// remote memory all follow the source. The address map, the status
// register, the small send buffer and the one-outstanding-access core port
// are this design's choices.
//
// Address map (bits [47:46] select the region; see tegra_pkg):
//   00  local vertex memory            read / write, forwarded with tag 0
//   01  remote edge memory             read / write, through the memory network
//   10  queue registers:
//       +0x0000  read   status: {al_count[31:0], send_free[15:0], mq_count[15:0]}
//       +0x0008  read   pop the next message {vid, dist} from the own queue
//       +0x0010  write  push vertex ID (low 32 bits) onto the active list
//       +0x0018  read   pop a vertex ID from the active list
//       +0x1000 + 8*d   write  send the 8-byte message to core d's queue
// Reads of an empty queue and writes to a full send buffer wait (core_req_ready
// stays low), so software reads the status word first and never waits there;
// that keeps the consumer thread free to drain its queue at all times.
//
// Send buffer: stores to a send address go into a small FIFO of
// {destination, message} that feeds the message network, so a store completes
// at once even when the network is busy.
//
// Local memory port: shared, round-robin, between the core and the active
// list's overflow traffic (tag 0 = core, tag 1 = active list).
//
// Interface timing: the core port takes one access at a time. A store is
// acknowledged with core_rsp_valid one cycle after it is accepted; a load
// returns core_rsp_valid with its data one cycle after the data is available
// (queue reads and status: the cycle after acceptance; memory: the cycle after
// the memory response).
module tegra_node
  import tegra_pkg::*;
#(
  parameter int unsigned N                = 32,     // cores in the system
  parameter int unsigned MQ_DEPTH         = 64,     // receive queue entries
  parameter int unsigned SEND_DEPTH       = 4,      // send buffer entries
  parameter int unsigned AL_DEPTH         = 16,     // on-chip active list entries
  parameter int unsigned AL_SPILL_ENTRIES = 65536,  // active list ring in memory
  parameter addr_t       AL_SPILL_BASE    = 48'h2000_0000_0000
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // core port
  input  logic                        core_req_valid,
  output logic                        core_req_ready,
  input  core_req_t                   core_req,
  output logic                        core_rsp_valid,
  output data_t                       core_rsp_data,
  // to the message network
  output logic                        send_valid,
  input  logic                        send_ready,
  output logic [(N>1?$clog2(N):1)-1:0] send_dest,
  output msg_t                        send_msg,
  // from the message network into the own message queue
  input  logic                        recv_valid,
  output logic                        recv_ready,
  input  msg_t                        recv_msg,
  // local vertex memory
  output logic                        lmem_req_valid,
  input  logic                        lmem_req_ready,
  output mem_req_t                    lmem_req,
  input  logic                        lmem_rsp_valid,
  input  mem_rsp_t                    lmem_rsp,
  // remote edge memory, through the memory network
  output logic                        rmem_req_valid,
  input  logic                        rmem_req_ready,
  output mem_req_t                    rmem_req,
  input  logic                        rmem_rsp_valid,
  input  data_t                       rmem_rsp_data,
  // nothing queued or pending in this node
  output logic                        idle
);
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned MCW = $clog2(MQ_DEPTH + 1);
  localparam int unsigned SCW = $clog2(SEND_DEPTH + 1);

  typedef enum logic [1:0] {S_IDLE, S_WAIT_LOCAL, S_WAIT_REMOTE} state_e;
  typedef enum logic [2:0] {
    T_LOCAL, T_REMOTE, T_STATUS, T_MQ_POP, T_AL_PUSH, T_AL_POP, T_SEND, T_NONE
  } target_e;

  state_e  state;
  target_e target;
  logic [IW-1:0] dec_dest;

  // ---------------- receive message queue ----------------
  logic           mq_pop_valid, mq_pop_ready;
  msg_t           mq_head;
  logic [MCW-1:0] mq_count;

  msg_queue #(.WIDTH(MSG_W), .DEPTH(MQ_DEPTH)) u_mq (
    .clk, .rst_n,
    .in_valid (recv_valid),
    .in_ready (recv_ready),
    .in_data  (recv_msg),
    .out_valid(mq_pop_valid),
    .out_ready(mq_pop_ready),
    .out_data (mq_head),
    .count    (mq_count)
  );

  // ---------------- send buffer ----------------
  logic           sb_in_valid, sb_in_ready, sb_out_valid;
  logic [IW+MSG_W-1:0] sb_head;
  logic [SCW-1:0] sb_count;

  msg_queue #(.WIDTH(IW + MSG_W), .DEPTH(SEND_DEPTH)) u_sb (
    .clk, .rst_n,
    .in_valid (sb_in_valid),
    .in_ready (sb_in_ready),
    .in_data  ({dec_dest, msg_t'(core_req.wdata)}),
    .out_valid(sb_out_valid),
    .out_ready(send_ready),
    .out_data (sb_head),
    .count    (sb_count)
  );

  assign send_valid = sb_out_valid;
  assign send_dest  = sb_head[IW+MSG_W-1:MSG_W];
  assign send_msg   = msg_t'(sb_head[MSG_W-1:0]);

  // ---------------- active list ----------------
  logic        al_push_valid, al_push_ready, al_pop_valid, al_pop_ready;
  vid_t        al_pop_vid;
  logic [31:0] al_count;
  logic        al_mem_valid, al_mem_ready, al_rsp_valid;
  mem_req_t    al_mem_req;

  active_list #(
    .DEPTH(AL_DEPTH), .SPILL_ENTRIES(AL_SPILL_ENTRIES), .SPILL_BASE(AL_SPILL_BASE)
  ) u_al (
    .clk, .rst_n,
    .push_valid   (al_push_valid),
    .push_ready   (al_push_ready),
    .push_vid     (vid_t'(core_req.wdata[VID_W-1:0])),
    .pop_valid    (al_pop_valid),
    .pop_ready    (al_pop_ready),
    .pop_vid      (al_pop_vid),
    .count        (al_count),
    .mem_req_valid(al_mem_valid),
    .mem_req_ready(al_mem_ready),
    .mem_req      (al_mem_req),
    .mem_rsp_valid(al_rsp_valid),
    .mem_rsp_data (lmem_rsp.rdata)
  );

  // ---------------- address decode ----------------
  always_comb begin
    logic [15:0] off;
    off      = core_req.addr[15:0];
    target   = T_NONE;
    dec_dest = IW'((off - MMIO_SEND) >> 3);
    unique case (core_req.addr[ADDR_W-1 -: 2])
      REGION_LOCAL:  target = T_LOCAL;
      REGION_REMOTE: target = T_REMOTE;
      REGION_MMIO: begin
        if (core_req.addr[ADDR_W-3:16] != '0) target = T_NONE;
        else if (off >= MMIO_SEND && off < MMIO_SEND + 16'(N * 8) && core_req.we)
          target = T_SEND;
        else if (off == MMIO_STATUS && !core_req.we) target = T_STATUS;
        else if (off == MMIO_MQ_POP && !core_req.we) target = T_MQ_POP;
        else if (off == MMIO_AL_PUSH && core_req.we) target = T_AL_PUSH;
        else if (off == MMIO_AL_POP && !core_req.we) target = T_AL_POP;
        else target = T_NONE;
      end
      default: target = T_NONE;
    endcase
  end

  // ---------------- local memory arbitration ----------------
  logic       core_lmem_valid, core_lmem_ready;
  logic [1:0] lm_grant;
  logic       lm_idx, lm_gvalid;

  assign core_lmem_valid = (state == S_IDLE) && core_req_valid && (target == T_LOCAL);

  rr_arbiter #(.N(2)) u_lm_arb (
    .clk, .rst_n,
    .req        ({al_mem_valid, core_lmem_valid}),
    .advance    (lmem_req_ready),
    .grant      (lm_grant),
    .grant_idx  (lm_idx),
    .grant_valid(lm_gvalid)
  );

  always_comb begin
    lmem_req_valid = lm_gvalid;
    if (lm_idx) begin
      lmem_req     = al_mem_req;
      lmem_req.tag = TAG_W'(1);
    end else begin
      lmem_req       = '0;
      lmem_req.we    = core_req.we;
      lmem_req.addr  = core_req.addr;
      lmem_req.wdata = core_req.wdata;
      lmem_req.tag   = TAG_W'(0);
    end
  end

  assign core_lmem_ready = lm_grant[0] && lmem_req_ready;
  assign al_mem_ready    = lm_grant[1] && lmem_req_ready;
  assign al_rsp_valid    = lmem_rsp_valid && (lmem_rsp.tag == TAG_W'(1));

  // ---------------- remote memory ----------------
  assign rmem_req_valid = (state == S_IDLE) && core_req_valid && (target == T_REMOTE);
  always_comb begin
    rmem_req       = '0;
    rmem_req.we    = core_req.we;
    rmem_req.addr  = core_req.addr;
    rmem_req.wdata = core_req.wdata;
  end

  // ---------------- core port handshake ----------------
  logic accept;

  always_comb begin
    core_req_ready = 1'b0;
    if (state == S_IDLE) begin
      unique case (target)
        T_LOCAL:   core_req_ready = core_lmem_ready;
        T_REMOTE:  core_req_ready = rmem_req_ready;
        T_STATUS:  core_req_ready = 1'b1;
        T_MQ_POP:  core_req_ready = mq_pop_valid;
        T_AL_PUSH: core_req_ready = al_push_ready;
        T_AL_POP:  core_req_ready = al_pop_valid;
        T_SEND:    core_req_ready = sb_in_ready;
        default:   core_req_ready = 1'b1;
      endcase
    end
  end

  assign accept        = core_req_valid && core_req_ready;
  assign mq_pop_ready  = accept && (target == T_MQ_POP);
  assign al_pop_ready  = accept && (target == T_AL_POP);
  assign al_push_valid = (state == S_IDLE) && core_req_valid && (target == T_AL_PUSH);
  assign sb_in_valid   = (state == S_IDLE) && core_req_valid && (target == T_SEND);

  status_t status;
  always_comb begin
    status.al_count  = al_count;
    status.send_free = 16'(SEND_DEPTH) - 16'(sb_count);
    status.mq_count  = 16'(mq_count);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      core_rsp_valid <= 1'b0;
      core_rsp_data  <= '0;
    end else begin
      core_rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          core_rsp_data <= '0;
          unique case (target)
            T_LOCAL:  if (core_req.we) core_rsp_valid <= 1'b1; else state <= S_WAIT_LOCAL;
            T_REMOTE: if (core_req.we) core_rsp_valid <= 1'b1; else state <= S_WAIT_REMOTE;
            T_STATUS: begin core_rsp_valid <= 1'b1; core_rsp_data <= data_t'(status); end
            T_MQ_POP: begin core_rsp_valid <= 1'b1; core_rsp_data <= data_t'(mq_head); end
            T_AL_POP: begin core_rsp_valid <= 1'b1; core_rsp_data <= data_t'(al_pop_vid); end
            default:  core_rsp_valid <= 1'b1;
          endcase
        end
        S_WAIT_LOCAL: if (lmem_rsp_valid && lmem_rsp.tag == TAG_W'(0)) begin
          core_rsp_valid <= 1'b1;
          core_rsp_data  <= lmem_rsp.rdata;
          state          <= S_IDLE;
        end
        S_WAIT_REMOTE: if (rmem_rsp_valid) begin
          core_rsp_valid <= 1'b1;
          core_rsp_data  <= rmem_rsp_data;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign idle = (state == S_IDLE) && (mq_count == '0) && (sb_count == '0) &&
                (al_count == '0) && !al_mem_valid;

  // Core port rule: a request, once offered, stays stable until accepted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   core_req_valid && !core_req_ready |=> core_req_valid && $stable(core_req));

endmodule
