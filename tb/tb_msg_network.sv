// tb_msg_network: self-checking test of the all-to-all message network.
//
// With 4 cores: (1) a lone message is checked for its one-register latency
// and for arriving at the addressed destination only; (2) two sources that
// keep addressing the same destination must be served alternately
// (round-robin); (3) random traffic from all sources to random destinations,
// with destinations that randomly refuse (full queues), must deliver every
// message exactly once, at the destination it named, in the order each
// source sent it. Every message carries its source and a sequence number.
module tb_msg_network;
  import tegra_pkg::*;
  localparam int unsigned N  = 4;
  localparam int unsigned IW = 2;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] src_valid = '0, src_ready, dst_valid, dst_ready = '0;
  logic [N-1:0][IW-1:0] src_dest = '0;
  msg_t [N-1:0] src_msg = '0, dst_msg;

  int checks = 0, failures = 0;
  int collisions = 0, sent = 0, received = 0;
  int next_seq [N];
  logic [N-1:0] taken = '0;
  int exp_seq  [N][N];     // [dst][src] next expected sequence number

  msg_network #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // message = {vid = src*1000000 + seq, new_dist = dest}
  function automatic msg_t mk(int s, int seq, int d);
    msg_t m;
    m.vid      = vid_t'(s * 1000000 + seq);
    m.new_dist = dist_t'(d);
    return m;
  endfunction

  // receive side checker, sampled at each rising edge
  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) begin
      if (dst_valid[d] && dst_ready[d]) begin
        int s, seq;
        s   = int'(dst_msg[d].vid) / 1000000;
        seq = int'(dst_msg[d].vid) % 1000000;
        check(int'(dst_msg[d].new_dist) == d, "delivered to addressed core");
        check(s < N && seq >= exp_seq[d][s], "per-source order");
        if (s < N) exp_seq[d][s] = seq + 1;
        received++;
      end
    end
  end

  initial begin
    foreach (next_seq[i]) next_seq[i] = 0;
    foreach (exp_seq[i, j]) exp_seq[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // (1) latency: source 1 -> destination 2
    dst_ready = '1;
    src_valid[1] = 1; src_dest[1] = 2; src_msg[1] = mk(1, next_seq[1], 2);
    #1 check(src_ready[1], "lone message accepted at once");
    @(posedge clk); next_seq[1]++; sent++;
    @(negedge clk); src_valid = '0;
    check(dst_valid == 4'b0100, "lone message at destination 2 only, one cycle later");
    @(negedge clk);
    check(dst_valid == 4'b0000, "delivered once");

    // (2) round-robin: sources 0 and 3 both to destination 1 for 6 cycles
    begin
      int got0 = 0, got3 = 0, last = -1, alternations = 0;
      for (int c = 0; c < 6; c++) begin
        src_valid = 4'b1001;
        src_dest[0] = 1; src_msg[0] = mk(0, next_seq[0], 1);
        src_dest[3] = 1; src_msg[3] = mk(3, next_seq[3], 1);
        #1;
        check(src_ready[0] ^ src_ready[3], "exactly one of two colliding sources wins");
        if (src_ready[0]) begin got0++; if (last == 3) alternations++; last = 0; end
        if (src_ready[3]) begin got3++; if (last == 0) alternations++; last = 3; end
        collisions++;
        @(posedge clk);
        if (src_ready[0]) begin next_seq[0]++; sent++; end
        if (src_ready[3]) begin next_seq[3]++; sent++; end
        @(negedge clk);
      end
      check(got0 == 3 && got3 == 3 && alternations == 5, "round-robin alternation");
      src_valid = '0;
      repeat (2) @(negedge clk);
    end

    // (3) random traffic with back-pressure
    for (int c = 0; c < 4000; c++) begin
      for (int s = 0; s < N; s++) begin
        if (!src_valid[s] || taken[s]) begin
          // previous offer taken (or none): maybe offer a new one
          src_valid[s] = ($urandom_range(0, 99) < 60);
          src_dest[s]  = IW'($urandom_range(0, N - 1));
          src_msg[s]   = mk(s, next_seq[s], int'(src_dest[s]));
        end
      end
      for (int d = 0; d < N; d++) dst_ready[d] = ($urandom_range(0, 99) < 70);
      #1;
      for (int a = 0; a < N; a++)
        for (int b = a + 1; b < N; b++)
          if (src_valid[a] && src_valid[b] && src_dest[a] == src_dest[b]) collisions++;
      @(posedge clk);
      for (int s = 0; s < N; s++) begin
        taken[s] = src_valid[s] && src_ready[s];
        if (taken[s]) begin next_seq[s]++; sent++; end
      end
      @(negedge clk);
    end
    src_valid = '0;
    dst_ready = '1;
    repeat (5) @(negedge clk);
    check(sent == received, "all sent messages delivered");
    check(sent > 3000, "enough traffic");
    check(collisions > 0, "destination collisions happened");
    $display("sent=%0d received=%0d collisions=%0d", sent, received, collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
