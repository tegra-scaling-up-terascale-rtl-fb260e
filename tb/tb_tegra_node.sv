// tb_tegra_node: self-checking test of one node's core port.
//
// A bus-functional core issues loads and stores through the node's core port;
// the node's local and remote memory ports are connected to memory models
// (latencies 4 and 12 cycles), its network ports are driven and watched
// directly. Checked: the status word after reset; local and remote loads and
// stores reach the right memory and the right data comes back, with a
// remote-load latency of memory latency + 1; a store to the send address of
// core d appears on the network port with destination d and the same 8 bytes,
// a full send buffer stalls the store, and status reports the free slots;
// messages arriving from the network are counted in status and popped in
// order; active-list pushes beyond the on-chip depth spill into local memory
// and all pop back in order; the idle output.
module tb_tegra_node;
  import tegra_pkg::*;
  localparam int unsigned N = 4, LLAT = 4, RLAT = 12, SD = 2, ALD = 2;
  localparam addr_t SPILL = 48'h2000_0000_0000;

  logic clk = 0, rst_n = 0;
  logic core_req_valid = 0, core_req_ready, core_rsp_valid;
  core_req_t core_req = '0;
  data_t core_rsp_data;
  logic send_valid, send_ready = 0;
  logic [1:0] send_dest;
  msg_t send_msg;
  logic recv_valid = 0, recv_ready;
  msg_t recv_msg = '0;
  logic lmem_req_valid, lmem_req_ready, lmem_rsp_valid;
  mem_req_t lmem_req;
  mem_rsp_t lmem_rsp;
  logic rmem_req_valid, rmem_req_ready, rmem_rsp_valid;
  mem_req_t rmem_req;
  mem_rsp_t rmem_rsp;
  logic idle;

  int checks = 0, failures = 0;
  int sent_vid[$], sent_dest[$];

  always @(posedge clk) if (send_valid && send_ready) begin
    sent_vid.push_back(int'(send_msg.vid));
    sent_dest.push_back(int'(send_dest));
  end

  tegra_node #(.N(N), .MQ_DEPTH(8), .SEND_DEPTH(SD), .AL_DEPTH(ALD),
               .AL_SPILL_ENTRIES(64), .AL_SPILL_BASE(SPILL)) dut (
    .clk, .rst_n, .core_req_valid, .core_req_ready, .core_req, .core_rsp_valid,
    .core_rsp_data, .send_valid, .send_ready, .send_dest, .send_msg,
    .recv_valid, .recv_ready, .recv_msg, .lmem_req_valid, .lmem_req_ready,
    .lmem_req, .lmem_rsp_valid, .lmem_rsp, .rmem_req_valid, .rmem_req_ready,
    .rmem_req, .rmem_rsp_valid, .rmem_rsp_data(rmem_rsp.rdata), .idle
  );

  mem_model #(.LATENCY(LLAT)) u_lmem (
    .clk, .rst_n, .req_valid(lmem_req_valid), .req_ready(lmem_req_ready),
    .req(lmem_req), .rsp_valid(lmem_rsp_valid), .rsp(lmem_rsp));
  mem_model #(.LATENCY(RLAT)) u_rmem (
    .clk, .rst_n, .req_valid(rmem_req_valid), .req_ready(rmem_req_ready),
    .req(rmem_req), .rsp_valid(rmem_rsp_valid), .rsp(rmem_rsp));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One core access; returns the read data and the cycles from acceptance to
  // response, or stalled=1 if not accepted within max_wait cycles.
  task automatic access(input bit we, input addr_t a, input data_t d,
                        output data_t rd, output int lat, output bit stalled,
                        input int max_wait = 1000);
    int w = 0;
    core_req_valid = 1; core_req.we = we; core_req.addr = a; core_req.wdata = d;
    stalled = 0; lat = 0; rd = '0;
    forever begin
      #1;
      if (core_req_ready) break;
      if (w == max_wait) begin stalled = 1; break; end
      @(negedge clk); w++;
    end
    if (!stalled) begin
      @(posedge clk);
      @(negedge clk);
      core_req_valid = 0;
      lat = 1;
      while (!core_rsp_valid && lat < 1000) begin @(negedge clk); lat++; end
      check(core_rsp_valid, "core response");
      rd = core_rsp_data;
    end
  endtask

  // Finish an access that access() left stalled (the request stays offered,
  // as the core port requires).
  task automatic complete(output data_t rd);
    int lat;
    while (!core_req_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    core_req_valid = 0;
    lat = 1;
    while (!core_rsp_valid && lat < 1000) begin @(negedge clk); lat++; end
    check(core_rsp_valid, "core response after stall");
    rd = core_rsp_data;
  endtask

  initial begin
    data_t rd;
    int lat;
    bit st;
    status_t s;
    u_rmem.write_word(48'h4000_0000_0040, 64'hFEED_0000_0000_0042);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle, "idle after reset");
    access(0, mmio_addr(MMIO_STATUS), '0, rd, lat, st);
    s = status_t'(rd);
    check(s.mq_count == 0 && s.send_free == SD && s.al_count == 0, "status after reset");
    check(lat == 1, "status latency one cycle");

    // local memory
    access(1, 48'h0000_0000_0100, 64'h1111_2222_3333_4444, rd, lat, st);
    check(u_lmem.read_word(48'h0000_0000_0100) == 64'h1111_2222_3333_4444, "local store landed");
    access(0, 48'h0000_0000_0100, '0, rd, lat, st);
    check(rd == 64'h1111_2222_3333_4444, "local load data");
    // remote memory
    access(0, 48'h4000_0000_0040, '0, rd, lat, st);
    check(rd == 64'hFEED_0000_0000_0042, "remote load data");
    check(lat == RLAT + 1, "remote load latency = memory latency + 1");
    access(1, 48'h4000_0000_0080, 64'h77, rd, lat, st);
    check(u_rmem.read_word(48'h4000_0000_0080) == 64'h77 && u_lmem.read_word(48'h0000_0000_0080) == 0,
          "remote store landed in remote memory only");

    // send path: network refuses, so the send buffer fills and then stalls
    for (int i = 0; i < SD; i++) begin
      access(1, send_addr(3), {32'(10 + i), 32'(500 + i)}, rd, lat, st, 20);
      check(!st, "send accepted while buffer has room");
    end
    access(0, mmio_addr(MMIO_STATUS), '0, rd, lat, st);
    s = status_t'(rd);
    check(s.send_free == 0, "status shows full send buffer");
    access(1, send_addr(1), {32'd99, 32'd99}, rd, lat, st, 20);
    check(st, "send to full buffer stalls");
    check(send_valid && send_dest == 2'd3 && send_msg.vid == 10 && send_msg.new_dist == 500,
          "message offered to network with its destination");
    send_ready = 1;
    @(posedge clk); @(negedge clk);
    check(send_valid && send_msg.vid == 11, "second message next, in order");
    complete(rd);
    repeat (3) @(negedge clk);
    check(!send_valid, "send buffer drained");
    check(sent_vid.size() == 3 && sent_vid[0] == 10 && sent_vid[1] == 11 && sent_vid[2] == 99 &&
          sent_dest[0] == 3 && sent_dest[2] == 1, "stalled send went out after, in order");
    send_ready = 0;

    // receive path
    for (int i = 0; i < 3; i++) begin
      recv_valid = 1; recv_msg.vid = vid_t'(70 + i); recv_msg.new_dist = dist_t'(7 * i);
      #1 check(recv_ready, "queue accepts");
      @(posedge clk); @(negedge clk);
    end
    recv_valid = 0;
    check(!idle, "not idle with queued messages");
    access(0, mmio_addr(MMIO_STATUS), '0, rd, lat, st);
    s = status_t'(rd);
    check(s.mq_count == 3, "status counts received messages");
    for (int i = 0; i < 3; i++) begin
      access(0, mmio_addr(MMIO_MQ_POP), '0, rd, lat, st);
      check(msg_t'(rd) == msg_t'({32'(70 + i), 32'(7 * i)}), "message pop order and content");
    end
    access(0, mmio_addr(MMIO_MQ_POP), '0, rd, lat, st, 10);
    check(st, "pop of empty queue waits");
    recv_valid = 1; recv_msg.vid = 88; recv_msg.new_dist = 8;
    @(posedge clk); @(negedge clk);
    recv_valid = 0;
    complete(rd);
    check(msg_t'(rd) == msg_t'({32'd88, 32'd8}), "waiting pop gets the late message");

    // active list with spill into local memory
    for (int i = 0; i < 6; i++) access(1, mmio_addr(MMIO_AL_PUSH), data_t'(300 + i), rd, lat, st);
    access(0, mmio_addr(MMIO_STATUS), '0, rd, lat, st);
    s = status_t'(rd);
    check(s.al_count == 6, "status counts active vertices");
    check(u_lmem.read_word(SPILL) == 64'(300 + ALD), "overflow written to local memory");
    for (int i = 0; i < 6; i++) begin
      access(0, mmio_addr(MMIO_AL_POP), '0, rd, lat, st);
      check(rd == data_t'(300 + i), "active list pop order");
    end
    repeat (3) @(negedge clk);
    check(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
