// tb_next_line_prefetcher: checks the trigger rule (miss or prefetch hit,
// nothing on a plain hit), the lookahead of DEPTH = 2 lines, continuation of
// a stream on a prefetch hit, and the one-cycle trigger-to-issue latency.
module tb_next_line_prefetcher;
  localparam int LW = 34;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          acc_valid = 0, acc_miss = 0, acc_pf_hit = 0;
  logic [LW-1:0] acc_line = '0;
  logic          pf_valid, pf_ready = 0;
  logic [LW-1:0] pf_line;
  logic          ev_trigger, ev_drop;

  next_line_prefetcher #(.LINE_W(LW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input longint line, input bit miss, input bit pfh, output bit trig);
    acc_valid = 1; acc_line = LW'(line); acc_miss = miss; acc_pf_hit = pfh;
    #1; trig = ev_trigger;
    @(posedge clk); #1;
    acc_valid = 0; acc_miss = 0; acc_pf_hit = 0;
  endtask

  task automatic drain(output longint got[$]);
    got = {};
    pf_ready = 1;
    #1;
    while (pf_valid) begin
      got.push_back(longint'(pf_line));
      @(posedge clk); #1;
    end
    pf_ready = 0;
  endtask

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit t;
    longint got[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // a miss triggers; the first prefetch is offered right after the access cycle
    access(40, 1, 0, t);
    check(t, "miss triggers");
    check(pf_valid && pf_line == 41, "line 41 offered one cycle after the miss");
    drain(got);
    check(got.size() == 2 && got[0] == 41 && got[1] == 42, "depth 2: 41, 42");

    // a plain hit does nothing
    access(41, 0, 0, t);
    #1;
    check(!t && !pf_valid, "plain hit does not trigger");

    // a hit on the prefetched line 42 continues the stream with 43, 44
    access(42, 0, 1, t);
    check(t, "prefetch hit triggers");
    drain(got);
    check(got.size() == 2 && got[0] == 43 && got[1] == 44, "prefetch hit continues: 43, 44");

    // a hit on 43 (prefetched) adds only 45 (44 already queued before)
    access(43, 0, 1, t);
    drain(got);
    check(got.size() == 1 && got[0] == 45, "continuation adds only 45");

    // an unrelated miss starts another stream
    access(900, 1, 0, t);
    drain(got);
    check(got.size() == 2 && got[0] == 901 && got[1] == 902, "new stream 901, 902");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
