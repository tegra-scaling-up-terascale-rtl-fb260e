// tb_mem_interconnect: self-checking test of the memory network that shares
// the remote-memory link.
//
// Four requesters behave like nodes: each keeps at most one read outstanding
// and issues reads (and some writes) to random addresses of a preloaded
// remote memory model with a 10-cycle latency. Every read response must reach
// the requester that issued it and carry the word stored at the address it
// asked for. A lone read must take exactly 1 + 10 cycles from acceptance to
// response (one register stage plus the memory latency). Under full load,
// every requester must be served (round-robin), and writes must land in
// memory.
module tb_mem_interconnect;
  import tegra_pkg::*;
  localparam int unsigned N = 4, LAT = 10;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] req_valid = '0, req_ready, rsp_valid;
  mem_req_t [N-1:0] req = '0;
  data_t [N-1:0] rsp_data;
  logic link_req_valid, link_req_ready, link_rsp_valid;
  mem_req_t link_req;
  mem_rsp_t link_rsp;

  int checks = 0, failures = 0;
  int served [N];
  int busy_all_cycles = 0;

  mem_interconnect #(.N(N)) dut (.*);

  mem_model #(.LATENCY(LAT)) u_link_mem (
    .clk, .rst_n, .req_valid(link_req_valid), .req_ready(link_req_ready),
    .req(link_req), .rsp_valid(link_rsp_valid), .rsp(link_rsp)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic data_t pattern(input addr_t a);
    return {a[31:0] ^ 32'hA5A5_0000, a[47:16]};
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one requester process per port
  for (genvar n = 0; n < N; n++) begin : g_req
    task automatic access(input bit we, input addr_t a, input data_t d, output int lat);
      int t = 0;
      req_valid[n]  = 1;
      req[n].we     = we;
      req[n].addr   = a;
      req[n].wdata  = d;
      req[n].tag    = 8'hEE;   // must be replaced by the interconnect
      forever begin
        #1;
        if (req_ready[n]) break;
        @(negedge clk);
      end
      @(posedge clk);
      served[n]++;
      @(negedge clk);
      req_valid[n] = 0;
      lat = 0;
      if (!we) begin
        t = 1;
        while (!rsp_valid[n]) begin
          @(negedge clk); t++;
          if (t > 1000) break;
        end
        lat = t;
        check(rsp_valid[n], "response arrived");
        check(rsp_data[n] == pattern(a), "response data for own address");
      end
    endtask
  end

  initial begin
    int lat;
    foreach (served[i]) served[i] = 0;
    for (int i = 0; i < 4096; i++) u_link_mem.write_word(addr_t'(i * 8), pattern(addr_t'(i * 8)));
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // lone read from port 2
    g_req[2].access(0, 48'h0000_0100, '0, lat);
    check(lat == 1 + LAT, "lone read latency = register + memory latency");
    $display("lone latency %0d", lat);
    check(link_req.tag == 8'd2, "tag stamped with source number");
    // all four ports busy
    fork
      begin for (int k = 0; k < 200; k++) begin int l; g_req[0].access(0, addr_t'($urandom_range(0, 4095) * 8), '0, l); end end
      begin for (int k = 0; k < 200; k++) begin int l; g_req[1].access(0, addr_t'($urandom_range(0, 4095) * 8), '0, l); end end
      begin for (int k = 0; k < 200; k++) begin int l; g_req[2].access(0, addr_t'($urandom_range(0, 4095) * 8), '0, l); end end
      begin for (int k = 0; k < 200; k++) begin int l; g_req[3].access(0, addr_t'($urandom_range(0, 4095) * 8), '0, l); end end
    join
    for (int n = 0; n < N; n++) check(served[n] >= 200, "every port served");
    // writes through the link
    g_req[1].access(1, 48'h0000_8000, 64'h1234_5678_9ABC_DEF0, lat);
    repeat (5) @(negedge clk);
    check(u_link_mem.read_word(48'h0000_8000) == 64'h1234_5678_9ABC_DEF0, "write reached remote memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
