// tb_msg_queue: self-checking test of the message queue FIFO.
//
// Random pushes and pops (inputs driven on the falling edge, handshakes
// sampled on the rising edge) are mirrored in a reference queue; every popped
// word, the occupancy count and the full/empty flags are compared with it.
// It also checks the one-cycle first-word latency and that a full queue
// refuses a push. Depth is reduced to 8 so that full and empty both occur.
module tb_msg_queue;
  localparam int unsigned W = 64;
  localparam int unsigned D = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;

  int checks = 0, failures = 0;
  int fulls = 0;
  logic [W-1:0] ref_q[$];

  msg_queue #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // first-word latency: push at one edge, visible right after it
    in_valid = 1; in_data = 64'hDEAD_BEEF_0000_0001;
    @(posedge clk); ref_q.push_back(in_data);
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 64'hDEAD_BEEF_0000_0001, "one-cycle latency");
    out_ready = 1;
    @(posedge clk); void'(ref_q.pop_front());
    @(negedge clk); out_ready = 0;
    check(!out_valid, "empty again");
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      // bias phases toward filling and toward draining
      bit fill;
      fill      = ((i / 200) % 2) == 0;
      in_valid  = ($urandom_range(0, 99) < (fill ? 80 : 30));
      in_data   = {$urandom, $urandom};
      out_ready = ($urandom_range(0, 99) < (fill ? 30 : 80));
      @(posedge clk);
      check(count == ref_q.size(), "count");
      check(in_ready == (ref_q.size() < D), "in_ready");
      check(out_valid == (ref_q.size() > 0), "out_valid");
      if (ref_q.size() == D) begin
        fulls++;
      end
      if (out_valid && out_ready) begin
        check(out_data == ref_q[0], "data order");
        void'(ref_q.pop_front());
      end
      if (in_valid && in_ready) ref_q.push_back(in_data);
      @(negedge clk);
    end
    check(fulls > 0, "queue became full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
