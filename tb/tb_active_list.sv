// tb_active_list: self-checking test of the active list with memory overflow.
//
// The on-chip queue is cut to 4 entries and the memory ring to 16 so that
// overflow happens quickly. Phase 1 pushes 20 vertices without popping: the
// first 4 must stay on chip, the next 16 must be written to consecutive ring
// slots in memory, and a 21st push must be refused (ring full). Phase 2 pops
// everything and checks that the vertices come back in push order, refilled
// from memory. Phase 3 mixes random pushes and pops against a reference
// queue, checking order and the count output throughout.
module tb_active_list;
  import tegra_pkg::*;
  localparam int unsigned D = 4, S = 16;
  localparam addr_t BASE = 48'h2000_0000_0000;

  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, pop_valid, pop_ready = 0;
  vid_t push_vid = '0, pop_vid;
  logic [31:0] count;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;

  int checks = 0, failures = 0;
  int spills = 0, refills = 0;
  vid_t ref_q[$];

  active_list #(.DEPTH(D), .SPILL_ENTRIES(S), .SPILL_BASE(BASE)) dut (
    .clk, .rst_n, .push_valid, .push_ready, .push_vid, .pop_valid, .pop_ready,
    .pop_vid, .count, .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_rsp_valid, .mem_rsp_data(mem_rsp.rdata)
  );

  mem_model #(.LATENCY(5), .STALL_PCT(10)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n && mem_req_valid && mem_req_ready) begin
    if (mem_req.we) spills++; else refills++;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // push one vertex, waiting while it is refused; returns cycles waited
  task automatic push(input vid_t v, input int max_wait, output bit ok);
    int w = 0;
    push_valid = 1; push_vid = v;
    ok = 0;
    while (w < max_wait) begin
      #1;
      if (push_ready) begin
        @(posedge clk); ok = 1; ref_q.push_back(v);
        break;
      end
      @(posedge clk); w++;
      @(negedge clk);
    end
    if (ok) @(negedge clk);
    push_valid = 0;
  endtask

  task automatic pop_one();
    int w = 0;
    pop_ready = 1;
    while (!pop_valid && w < 100) begin @(negedge clk); w++; end
    check(pop_valid, "pop available");
    if (pop_valid) begin
      check(pop_vid == ref_q[0], "pop order");
      @(posedge clk); void'(ref_q.pop_front());
      @(negedge clk);
    end
    pop_ready = 0;
  endtask

  initial begin
    bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: fill queue and ring
    for (int i = 0; i < D + S; i++) begin
      push(vid_t'(100 + i), 50, ok);
      check(ok, "push accepted while ring has room");
    end
    check(count == D + S, "count after fill");
    check(spills == S && refills == 0, "exactly the overflow went to memory");
    for (int i = 0; i < S; i++)
      check(u_mem.read_word(BASE + addr_t'(8 * i)) == data_t'(100 + D + i), "ring slot contents");
    push(vid_t'(999), 20, ok);
    check(!ok, "push refused when ring is full");
    // phase 2: drain
    for (int i = 0; i < D + S; i++) pop_one();
    check(refills == S, "every spilled entry read back");
    check(count == 0 && !pop_valid, "empty after drain");
    // phase 3: random mix
    for (int i = 0; i < 600; i++) begin
      if ($urandom_range(0, 99) < 55 && ref_q.size() < D + S) begin
        push(vid_t'($urandom), 400, ok);
        check(ok, "random push accepted");
      end else if (ref_q.size() > 0) begin
        pop_one();
      end
      check(count == ref_q.size(), "count matches");
    end
    while (ref_q.size() > 0) pop_one();
    check(count == 0, "empty at end");
    $display("spills=%0d refills=%0d", spills, refills);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
