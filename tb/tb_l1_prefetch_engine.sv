// tb_l1_prefetch_engine: drives an L1 access stream into the engine and
// checks the merged prefetch stream: next-line prefetches on misses, stride
// prefetches on loads, stride-first priority when both are pending, the
// filter for a line issued twice in a row, and that stores do not train the
// stride table.
module tb_l1_prefetch_engine;
  import nvsd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      l1_valid = 0, l1_is_load = 0, l1_miss = 0, l1_pf_hit = 0;
  pc_t       l1_pc = '0;
  blk_addr_t l1_line = '0;
  logic      pf_valid, pf_ready = 0;
  blk_addr_t pf_line;
  logic      ev_nl_trigger, ev_stride_hit, ev_sb_drop, ev_dup_filtered;

  l1_prefetch_engine dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input longint pc, input longint line, input bit load, input bit miss);
    l1_valid = 1; l1_pc = pc_t'(pc); l1_line = blk_addr_t'(line);
    l1_is_load = load; l1_miss = miss; l1_pf_hit = 0;
    @(posedge clk); #1;
    l1_valid = 0; l1_miss = 0;
  endtask

  int n_dup;
  always @(posedge clk) if (ev_dup_filtered) n_dup++;

  task automatic drain(output longint got[$]);
    got = {};
    pf_ready = 1;
    #1;
    for (int i = 0; i < 20; i++) begin
      if (pf_valid) got.push_back(longint'(pf_line));
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
    longint got[$];
    n_dup = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // a load that hits: trains the table, no next-line trigger
    access('h1000, 200, 1, 0);
    access('h1000, 210, 1, 0);
    drain(got);
    check(got.size() == 0, "hits with one distance give nothing");
    // third load with stride 10 and a miss: both prefetchers fire
    access('h1000, 220, 1, 1);
    drain(got);
    // stride first: 230 240 250 260, then next-line 221 222
    check(got.size() == 6, "six prefetches");
    if (got.size() == 6)
      check(got[0] == 230 && got[1] == 240 && got[2] == 250 && got[3] == 260 &&
            got[4] == 221 && got[5] == 222, "stride lines before next-line lines");

    // stores do not train the stride table
    access('h2000, 500, 0, 0);
    access('h2000, 501, 0, 0);
    access('h2000, 502, 0, 0);
    drain(got);
    check(got.size() == 0, "stores are not tracked");

    // stride-1 stream: 301..304 from the stride table, 301, 302 from next line
    access('h3000, 298, 1, 0);
    access('h3000, 299, 1, 0);
    access('h3000, 300, 1, 1);
    drain(got);
    check(got.size() == 6 && got[0] == 301 && got[3] == 304 && got[4] == 301 && got[5] == 302,
          "stride 301..304 then next-line 301, 302");
    // duplicate filter: the stride stream continues with 305 only, then a
    // store miss on 304 makes the next-line prefetcher queue 305, 306: the
    // second 305 directly follows the first and is filtered
    access('h3000, 301, 1, 0);
    access('h5000, 304, 0, 1);
    drain(got);
    check(got.size() == 2 && got[0] == 305 && got[1] == 306, "305 sent once, then 306");
    check(n_dup >= 1, "duplicate filter used");
    foreach (got[i]) if (i > 0) check(got[i] != got[i-1], "no line twice in a row");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
