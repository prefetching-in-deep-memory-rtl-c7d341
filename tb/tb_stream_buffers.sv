// tb_stream_buffers: directed test of the stream buffers: allocation of a
// stream, continuation without duplicates, negative strides, round-robin
// issue across buffers, overflow drops, and replacement of the oldest stream
// when a ninth one arrives. Expected addresses are written out by hand.
module tb_stream_buffers;
  localparam int LW = 34;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              push_valid = 0;
  logic [LW-1:0]     push_base = '0;
  logic signed [15:0] push_stride = '0;
  logic [2:0]        push_count = '0;
  logic [5:0]        push_owner = '0;
  logic              issue_valid, issue_ready = 0;
  logic [LW-1:0]     issue_addr;
  logic              ev_alloc, ev_continue, ev_drop;

  stream_buffers #(.NUM_BUF(8), .ENTRIES(32), .LINE_W(LW), .STRIDE_W(16),
                   .MAX_COUNT(4), .OWNER_W(6)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // push one stream step; returns the event flags seen in that cycle
  task automatic push(input longint base, input int stride, input int cnt, input int own,
                      output bit a, output bit c, output bit d);
    push_valid = 1; push_base = LW'(base); push_stride = 16'(stride);
    push_count = 3'(cnt); push_owner = 6'(own);
    #1; a = ev_alloc; c = ev_continue; d = ev_drop;
    @(posedge clk); #1;
    push_valid = 0;
  endtask

  // drain everything queued, in issue order
  task automatic drain(output longint got[$]);
    got = {};
    issue_ready = 1;
    #1;
    while (issue_valid) begin
      got.push_back(longint'(issue_addr));
      @(posedge clk); #1;
    end
    issue_ready = 0;
  endtask

  initial begin
    #200_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit a, c, d;
    longint got[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!issue_valid, "empty after reset");

    // new ascending stream
    push(100, 1, 2, 0, a, c, d);
    check(a && !c && !d, "first push allocates");
    drain(got);
    check(got.size() == 2 && got[0] == 101 && got[1] == 102, "stream 101,102");

    // continuation: 101+1 = 102 already queued, only 103 is new
    push(101, 1, 2, 0, a, c, d);
    check(!a && c, "second push continues the stream");
    drain(got);
    check(got.size() == 1 && got[0] == 103, "continuation queues only 103");

    // repeated trigger with nothing new
    push(101, 1, 2, 0, a, c, d);
    drain(got);
    check(c && got.size() == 0, "already-queued candidates are not repeated");

    // negative stride, other owner
    push(500, -3, 4, 5, a, c, d);
    check(a, "negative stream allocates");
    drain(got);
    check(got.size() == 4 && got[0] == 497 && got[1] == 494 && got[2] == 491 && got[3] == 488,
          "negative stride 497,494,491,488");

    // two streams queued together are issued alternately
    push(1000, 1, 2, 1, a, c, d);
    push(2000, 1, 2, 2, a, c, d);
    drain(got);
    check(got.size() == 4, "four lines from two streams");
    if (got.size() == 4) begin
      check((got[0] / 1000) != (got[1] / 1000), "round-robin alternates buffers (1)");
      check((got[2] / 1000) != (got[3] / 1000), "round-robin alternates buffers (2)");
    end

    // overflow: continue one stream without issuing until it exceeds 32
    push(3000, 1, 4, 3, a, c, d);       // 3001..3004
    for (int i = 1; i <= 7; i++) push(3000 + 4 * i, 1, 4, 3, a, c, d);  // 32 queued
    check(!d, "32 entries fit");
    push(3032, 1, 4, 3, a, c, d);
    check(d && c, "33rd entry dropped");
    drain(got);
    check(got.size() == 32 && got[0] == 3001 && got[31] == 3032, "overflowed buffer keeps 3001..3032");

    // nine streams: the oldest allocation is replaced
    for (int s = 0; s < 9; s++) push(10000 + 100 * s, 1, 2, 7, a, c, d);
    drain(got);
    check(got.size() == 16, "eight buffers of two lines survive");
    begin
      bit seen0, seen8;
      seen0 = 0; seen8 = 0;
      foreach (got[i]) begin
        if (got[i] == 10001) seen0 = 1;
        if (got[i] == 10801) seen8 = 1;
      end
      check(!seen0 && seen8, "oldest stream replaced by the ninth");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
