// active_list: per-core list of active vertices, a hardware queue that
// overflows into main memory.
//
// The SSSP consumer thread pushes a vertex here whenever it lowers that
// vertex's distance; the generator thread pops vertices and sends their edges'
// updates. If the consumer could ever block on a full list, two cores could
// wait on each other's message queues and deadlock, so the list never refuses
// a push for lack of queue space: when the on-chip queue is full, new entries
// are written to a ring buffer in main memory (the node's local memory), and
// are read back into the queue as it drains. The source gives that
// mechanism (a hardware queue overflowing into main memory); the queue depth,
// the ring location and size, and the refill policy are this design's own.
//
// Order: entries leave in the order they arrived. While anything is in the
// memory ring (or a refill read is in flight), every new push also goes to
// the ring, and the queue is refilled from the ring head, one read at a time.
// A push is refused only when the memory ring itself is full.
//
// Interface: push_valid/push_ready/push_vid, pop_valid/pop_ready/pop_vid,
// count = entries held (queue + ring + in-flight refill); memory side
// mem_req_valid/mem_req_ready/mem_req (spill writes and refill reads, tag 0)
// and mem_rsp_valid/mem_rsp_data (the refill read data).
// Timing: a direct push can be popped one cycle later; a spilled entry comes
// back after one memory read latency once it reaches the ring head.
module active_list
  import tegra_pkg::*;
#(
  parameter int unsigned DEPTH         = 16,          // on-chip queue entries
  parameter int unsigned SPILL_ENTRIES = 65536,       // ring entries in memory
  parameter addr_t       SPILL_BASE    = 48'h2000_0000_0000 // ring byte address
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_valid,
  output logic        push_ready,
  input  vid_t        push_vid,
  output logic        pop_valid,
  input  logic        pop_ready,
  output vid_t        pop_vid,
  output logic [31:0] count,
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  data_t       mem_rsp_data
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned SW = $clog2(SPILL_ENTRIES);

  logic          q_in_valid, q_in_ready;
  vid_t          q_in_data;
  logic [CW-1:0] q_count;

  logic [SW:0]   spill_cnt;
  logic [SW-1:0] spill_head, spill_tail;
  logic          inflight;

  logic direct, spill_push, ring_room, refill;

  msg_queue #(.WIDTH(VID_W), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (q_in_valid),
    .in_ready (q_in_ready),
    .in_data  (q_in_data),
    .out_valid(pop_valid),
    .out_ready(pop_ready),
    .out_data (pop_vid),
    .count    (q_count)
  );

  // A push goes straight into the queue only when nothing older is outside it.
  assign direct     = (spill_cnt == '0) && !inflight && q_in_ready;
  assign spill_push = push_valid && !direct;
  assign ring_room  = (spill_cnt < (SW+1)'(SPILL_ENTRIES));
  // Refill one entry when the ring holds some, no read is pending, the queue
  // has room for it and the memory port is not needed for a spill write (a
  // push waiting on a full ring does not hold the port).
  assign refill     = !(spill_push && ring_room) && (spill_cnt != '0) && !inflight &&
                      (q_count < CW'(DEPTH));

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (spill_push && ring_room) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = SPILL_BASE + addr_t'({spill_tail, 3'b000});
      mem_req.wdata = data_t'(push_vid);
    end else if (refill) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b0;
      mem_req.addr  = SPILL_BASE + addr_t'({spill_head, 3'b000});
    end
  end

  assign push_ready = direct || (ring_room && mem_req_ready);

  assign q_in_valid = (push_valid && direct) || mem_rsp_valid;
  assign q_in_data  = mem_rsp_valid ? vid_t'(mem_rsp_data[VID_W-1:0]) : push_vid;

  logic do_spill, do_refill;
  assign do_spill  = spill_push && push_ready;
  assign do_refill = refill && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spill_cnt  <= '0;
      spill_head <= '0;
      spill_tail <= '0;
      inflight   <= 1'b0;
    end else begin
      if (do_spill)  spill_tail <= spill_tail + 1'b1;
      if (do_refill) spill_head <= spill_head + 1'b1;
      spill_cnt <= spill_cnt + (SW+1)'(do_spill) - (SW+1)'(do_refill);
      if (do_refill)          inflight <= 1'b1;
      else if (mem_rsp_valid) inflight <= 1'b0;
    end
  end

  assign count = 32'(q_count) + 32'(spill_cnt) + 32'(inflight);

  // A refill response only arrives for a pending read, and always fits.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_rsp_valid |-> (inflight && q_in_ready));

endmodule
