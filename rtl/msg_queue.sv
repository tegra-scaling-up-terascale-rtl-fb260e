// msg_queue: the per-core hardware message queue, a plain synchronous FIFO.
//
// Each core owns one receive queue. The all-to-all network writes incoming
// messages at the tail and the core reads them straight from the head through
// a dedicated address, without any trip through memory or caches. The source
// describes the queue as a basic FIFO that the core reads directly; its depth,
// and the valid/ready handshake used here, are this design's choices.
//
// The same module, at a smaller width, also holds the hardware part of the
// active list and the per-node send buffer.
//
// Interface: push side in_valid/in_ready/in_data, pop side
// out_valid/out_ready/out_data (a transfer happens when valid and ready are
// both high at a clock edge), plus the current occupancy in count.
// Timing: first-word latency one cycle (data pushed at edge k can be popped at
// edge k+1); one push and one pop per cycle; out_data is the head entry and
// is valid whenever out_valid is high. A push into a full queue is refused
// (in_ready low), so nothing is ever lost. Storage is a register array.
module msg_queue #(
  parameter int unsigned WIDTH = 64,   // 8-byte message
  parameter int unsigned DEPTH = 64    // entries (power of two)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PTR_W'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  // A full queue must never be written, an empty one never read.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);

endmodule
