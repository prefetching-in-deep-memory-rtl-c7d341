// tb_stride_prefetcher: trains the stride table with the access sequences of
// a few loads and checks the prefetches against hand-computed lines: a stride
// hit after two equal distances, DEPTH = 4 lookahead, continuation of the
// stream, negative strides, no prefetch for stride 0, and replacement of an
// entry by a different load that maps to the same table row.
module tb_stride_prefetcher;
  localparam int LW = 34, PW = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          ld_valid = 0;
  logic [PW-1:0] ld_pc = '0;
  logic [LW-1:0] ld_line = '0;
  logic          pf_valid, pf_ready = 0;
  logic [LW-1:0] pf_line;
  logic          ev_stride_hit, ev_drop;

  stride_prefetcher #(.LINE_W(LW), .PC_W(PW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(input longint pc, input longint line, output bit hit);
    ld_valid = 1; ld_pc = PW'(pc); ld_line = LW'(line);
    #1; hit = ev_stride_hit;
    @(posedge clk); #1;
    ld_valid = 0;
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
    bit h;
    longint got[$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    load('h400, 100, h); check(!h, "first access: no hit");
    load('h400, 103, h); check(!h, "second access learns stride 3");
    load('h400, 106, h); check(h, "third access: stride hit");
    drain(got);
    check(got.size() == 4 && got[0] == 109 && got[1] == 112 && got[2] == 115 && got[3] == 118,
          "prefetches 109,112,115,118");
    load('h400, 109, h); check(h, "fourth access hits");
    drain(got);
    check(got.size() == 1 && got[0] == 121, "stream continued with 121 only");

    // negative stride on another load
    load('h804, 1000, h);
    load('h804, 990, h);
    load('h804, 980, h); check(h, "negative stride hit");
    drain(got);
    check(got.size() == 4 && got[0] == 970 && got[3] == 940, "prefetches 970..940");

    // stride 0 never prefetches
    load('h900, 50, h);
    load('h900, 50, h);
    load('h900, 50, h); check(!h, "stride 0 gives no hit");

    // a load with the same table row but another tag replaces the entry
    load('h400 + 64 * 'h1000, 5000, h); check(!h, "aliasing load misses the tag");
    load('h400, 112, h); check(!h, "original load lost its entry");
    drain(got);
    check(got.size() == 0, "nothing prefetched after replacement");

    // a broken stride retrains
    load('h500, 10, h);
    load('h500, 12, h);
    load('h500, 20, h); check(!h, "changed distance: no hit");
    load('h500, 28, h); check(h, "new stride 8 confirmed");
    drain(got);
    check(got.size() == 4 && got[0] == 36 && got[3] == 60, "prefetches 36..60");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
