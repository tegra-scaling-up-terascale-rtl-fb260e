// tb_tegra_full: the TEGRA fabric at its full default size (32 cores,
// 64-entry message queues, 4-entry send buffers, 16-entry on-chip active
// lists) running one complete SSSP computation end to end.
//
// Same harness as tb_tegra_top: behavioural core models run the SSSP consumer
// and generator threads, memory models stand in for the local HBM vertex
// memories and for the remote edge memory (150 cycles slower than local). A
// random graph of 768 vertices is solved from one source; the distances left
// in vertex memory must equal Dijkstra's, and every message sent must have
// been consumed. The fabric's mechanisms are counted and printed; at this size
// and load some of them (full queues, overflow) need not occur.
module tb_tegra_full;
  import tegra_pkg::*;
  localparam int unsigned N     = 32;   // tegra_top defaults
  localparam int unsigned SD    = 4;
  localparam int unsigned V     = 768;
  localparam int unsigned MAXDEG = 8;
  localparam int unsigned SRC   = 5;
  localparam int unsigned LLAT  = 10;
  localparam int unsigned RLAT  = LLAT + 150;
  localparam longint      MAX_CYCLES = 3000000;
  localparam dist_t       INF   = '1;

  logic clk = 0, rst_n = 0;
  logic [N-1:0]     core_req_valid, core_req_ready, core_rsp_valid;
  core_req_t [N-1:0] core_req;
  data_t [N-1:0]    core_rsp_data;
  logic [N-1:0]     lmem_req_valid, lmem_req_ready, lmem_rsp_valid;
  mem_req_t [N-1:0] lmem_req;
  mem_rsp_t [N-1:0] lmem_rsp;
  logic             link_req_valid, link_req_ready, link_rsp_valid;
  mem_req_t         link_req;
  mem_rsp_t         link_rsp;
  logic             fabric_idle;
  logic [N-1:0]     core_idle;

  int checks = 0, failures = 0;
  longint cycles = 0;

  // graph (CSR) and results
  int unsigned edge_ptr [V], edge_cnt [V];
  int unsigned edst [$], ewt [$];
  dist_t       ref_dist [V], got_dist [V];
  bit          loaded = 0, collect = 0;

  // mechanism counters
  longint n_collide = 0, n_net_bp = 0, n_mq_full = 0, n_link_contend = 0;
  longint n_sb_full [N], n_spill [N], n_refill [N], n_lm_conflict [N];
  int unsigned n_sent [N], n_consumed [N], n_dropped [N];

  tegra_top dut (.*);

  mem_model #(.LATENCY(RLAT)) u_remote (
    .clk, .rst_n, .req_valid(link_req_valid), .req_ready(link_req_ready),
    .req(link_req), .rsp_valid(link_rsp_valid), .rsp(link_rsp));

  for (genvar c = 0; c < N; c++) begin : g_core
    mem_model #(.LATENCY(LLAT)) u_lmem (
      .clk, .rst_n, .req_valid(lmem_req_valid[c]), .req_ready(lmem_req_ready[c]),
      .req(lmem_req[c]), .rsp_valid(lmem_rsp_valid[c]), .rsp(lmem_rsp[c]));

    sssp_core_model #(.CORE_ID(c), .N(N), .SEND_DEPTH(SD), .SOURCE(SRC)) u_core (
      .clk, .rst_n, .req_valid(core_req_valid[c]), .req_ready(core_req_ready[c]),
      .req(core_req[c]), .rsp_valid(core_rsp_valid[c]), .rsp_data(core_rsp_data[c]),
      .idle(core_idle[c]));

    // preload this core's vertices, and read them back at the end
    initial begin
      wait (loaded);
      for (int v = c; v < V; v += N) begin
        u_lmem.write_word(addr_t'((v / N) * 16), data_t'(v == SRC ? 0 : INF));
        u_lmem.write_word(addr_t'((v / N) * 16 + 8), {32'(edge_cnt[v]), 32'(edge_ptr[v])});
      end
      wait (collect);
      for (int v = c; v < V; v += N) got_dist[v] = dist_t'(u_lmem.read_word(addr_t'((v / N) * 16)));
      n_sent[c]     = u_core.sent;
      n_consumed[c] = u_core.consumed;
      n_dropped[c]  = u_core.dropped;
    end

    always @(posedge clk) if (rst_n) begin
      if (dut.g_node[c].u_node.sb_count == SD) n_sb_full[c]++;
      if (dut.g_node[c].u_node.u_al.do_spill) n_spill[c]++;
      if (dut.g_node[c].u_node.u_al.do_refill) n_refill[c]++;
      if (dut.g_node[c].u_node.u_lm_arb.req == 2'b11) n_lm_conflict[c]++;
    end
  end

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int a = 0; a < N; a++) begin
      if (dut.send_valid[a] && !dut.send_ready[a]) n_net_bp++;
      if (dut.recv_valid[a] && !dut.recv_ready[a]) n_mq_full++;
      for (int b = a + 1; b < N; b++)
        if (dut.send_valid[a] && dut.send_valid[b] && dut.send_dest[a] == dut.send_dest[b])
          n_collide++;
    end
    if ($countones(dut.rmem_req_valid) > 1) n_link_contend++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Dijkstra on the generated graph (O(V^2), V is small)
  task automatic reference();
    bit done [V];
    foreach (ref_dist[v]) begin ref_dist[v] = INF; done[v] = 0; end
    ref_dist[SRC] = 0;
    for (int it = 0; it < V; it++) begin
      int u = -1;
      for (int v = 0; v < V; v++)
        if (!done[v] && ref_dist[v] != INF && (u < 0 || ref_dist[v] < ref_dist[u])) u = v;
      if (u < 0) break;
      done[u] = 1;
      for (int unsigned j = edge_ptr[u]; j < edge_ptr[u] + edge_cnt[u]; j++)
        if (ref_dist[u] + dist_t'(ewt[j]) < ref_dist[edst[j]])
          ref_dist[edst[j]] = ref_dist[u] + dist_t'(ewt[j]);
    end
  endtask

  initial begin
    int quiet = 0;
    int unsigned total_sent = 0, total_consumed = 0, total_dropped = 0, reached = 0;
    foreach (n_sb_full[c]) begin
      n_sb_full[c] = 0; n_spill[c] = 0; n_refill[c] = 0; n_lm_conflict[c] = 0;
    end
    // random graph; the source gets many edges so its out-burst floods queues
    for (int v = 0; v < V; v++) begin
      edge_ptr[v] = edst.size();
      edge_cnt[v] = (v == SRC) ? 64 : $urandom_range(0, MAXDEG);
      for (int k = 0; k < int'(edge_cnt[v]); k++) begin
        edst.push_back($urandom_range(0, V - 1));
        ewt.push_back($urandom_range(1, 40));
      end
    end
    for (int j = 0; j < edst.size(); j++)
      u_remote.write_word(addr_t'(j * 8), {32'(edst[j]), 32'(ewt[j])});
    reference();
    loaded = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run to quiescence
    while (quiet < 2 * RLAT + 100) begin
      @(posedge clk);
      if (fabric_idle && (&core_idle)) quiet++; else quiet = 0;
    end
    collect = 1;
    #1;

    foreach (ref_dist[v]) begin
      check(got_dist[v] == ref_dist[v], "SSSP distance matches reference");
      if (got_dist[v] != ref_dist[v])
        $display("  vertex %0d: got %0d expected %0d", v, got_dist[v], ref_dist[v]);
      if (ref_dist[v] != INF) reached++;
    end
    foreach (n_sent[c]) begin
      total_sent += n_sent[c]; total_consumed += n_consumed[c]; total_dropped += n_dropped[c];
    end
    check(total_sent == total_consumed, "every message sent was consumed");
    check(reached > V / 2, "graph mostly reachable");
    begin
      longint sb = 0, sp = 0, rf = 0, lm = 0;
      foreach (n_sb_full[c]) begin
        sb += n_sb_full[c]; sp += n_spill[c]; rf += n_refill[c]; lm += n_lm_conflict[c];
      end
      $display("cycles=%0d reached=%0d sent=%0d consumed=%0d dropped=%0d", cycles, reached,
               total_sent, total_consumed, total_dropped);
      $display("collisions=%0d net_bp=%0d mq_full=%0d sb_full=%0d spills=%0d refills=%0d lm_conflict=%0d link_contend=%0d",
               n_collide, n_net_bp, n_mq_full, sb, sp, rf, lm, n_link_contend);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
