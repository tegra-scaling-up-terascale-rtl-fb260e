// sssp_core_model: behavioural model of one core running SSSP, used by the
// system testbenches in place of a RISC-V core. Not synthesizable.
//
// It runs the two SSSP threads of the programming model, interleaved one step
// at a time over the node's core port (one access outstanding, the request
// held stable until accepted):
//   consumer:  pop a message {vid, new_dist}; load the vertex's distance from
//              local memory; if new_dist is shorter, store it and push the
//              vertex onto the active list, otherwise drop the message.
//   generator: pop an active vertex; load its distance, edge pointer and edge
//              count from local memory; for each edge, load {dst, weight}
//              from remote memory and send {dst, dist + weight} to the core
//              that owns dst.
// Before either step it reads the node's status word, so it never waits on an
// empty queue or a full send buffer.
//
// Data layout (a choice of these testbenches): vertex v is owned by core
// v mod N and sits at local index i = v div N; word 2i holds the distance,
// word 2i+1 holds {edge count, edge pointer}. Edge j of the CSR edge array is
// the remote word j: {dst, weight}.
module sssp_core_model
  import tegra_pkg::*;
#(
  parameter int unsigned CORE_ID    = 0,
  parameter int unsigned N          = 4,
  parameter int unsigned SEND_DEPTH = 4,
  parameter int unsigned SOURCE     = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      req_valid,
  input  logic      req_ready,
  output core_req_t req,
  input  logic      rsp_valid,
  input  data_t     rsp_data,
  output logic      idle
);
  localparam addr_t REMOTE_BASE = {REGION_REMOTE, (ADDR_W-2)'(0)};

  int unsigned consumed = 0, valid_updates = 0, dropped = 0, sent = 0, activations = 0;

  initial begin
    req_valid = 0;
    req       = '0;
    idle      = 0;
  end

  task automatic access(input bit we, input addr_t a, input data_t d, output data_t rd);
    @(negedge clk);
    req_valid = 1; req.we = we; req.addr = a; req.wdata = d;
    forever begin
      #1;
      if (req_ready) break;
      @(negedge clk);
    end
    @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    rd = rsp_data;
  endtask

  function automatic addr_t vaddr(input vid_t v, input int word);
    return addr_t'((64'(v) / N) * 16 + 64'(word) * 8);
  endfunction

  initial begin
    data_t   rd;
    status_t st;
    bit      gen_busy = 0;
    dist_t   cur_dist = '0;
    logic [31:0] e_ptr = '0, e_left = '0;
    @(posedge rst_n);
    repeat (2) @(negedge clk);
    if (SOURCE % N == CORE_ID) access(1, mmio_addr(MMIO_AL_PUSH), data_t'(SOURCE), rd);
    forever begin
      access(0, mmio_addr(MMIO_STATUS), '0, rd);
      st   = status_t'(rd);
      idle = (st.mq_count == 0) && (st.al_count == 0) && !gen_busy &&
             (st.send_free == 16'(SEND_DEPTH));
      // consumer step
      if (st.mq_count != 0) begin
        msg_t  m;
        dist_t d;
        access(0, mmio_addr(MMIO_MQ_POP), '0, rd);
        m = msg_t'(rd);
        consumed++;
        access(0, vaddr(m.vid, 0), '0, rd);
        d = dist_t'(rd[31:0]);
        if (m.new_dist < d) begin
          access(1, vaddr(m.vid, 0), data_t'(m.new_dist), rd);
          access(1, mmio_addr(MMIO_AL_PUSH), data_t'(m.vid), rd);
          valid_updates++;
        end else begin
          dropped++;
        end
      end
      // generator step
      if (gen_busy && st.send_free != 0) begin
        vid_t  dst;
        dist_t w;
        access(0, REMOTE_BASE + addr_t'(64'(e_ptr) * 8), '0, rd);
        dst = vid_t'(rd[63:32]);
        w   = dist_t'(rd[31:0]);
        access(1, send_addr(int'(dst) % N), data_t'(msg_t'({dst, cur_dist + w})), rd);
        sent++;
        e_ptr++;
        e_left--;
        if (e_left == 0) gen_busy = 0;
      end else if (!gen_busy && st.al_count != 0) begin
        vid_t v;
        access(0, mmio_addr(MMIO_AL_POP), '0, rd);
        v = vid_t'(rd[31:0]);
        access(0, vaddr(v, 0), '0, rd);
        cur_dist = dist_t'(rd[31:0]);
        access(0, vaddr(v, 1), '0, rd);
        e_ptr  = rd[31:0];
        e_left = rd[63:32];
        gen_busy = (e_left != 0);
        activations++;
      end
    end
  end
endmodule
