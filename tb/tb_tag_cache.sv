// tb_tag_cache: a 16-frame instance (4 KB DRAM cache). Checks the reset
// sweep, misses on an empty table, hits after a fill, conflict replacement in
// the direct-mapped table, and that an invalidation only removes the sector
// it names.
module tb_tag_cache;
  import nvsd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done, lk_valid = 0, lk_hit, fill = 0, inval = 0;
  sec_addr_t lk_sec = '0, wr_sec = '0;

  tag_cache #(.DRAM_BYTES(4096)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic look(input longint s, output bit h);
    lk_valid = 1; lk_sec = sec_addr_t'(s);
    @(posedge clk); #1;
    lk_valid = 0;
    h = lk_hit;
  endtask
  task automatic do_fill(input longint s);
    fill = 1; wr_sec = sec_addr_t'(s);
    @(posedge clk); #1 fill = 0;
  endtask
  task automatic do_inval(input longint s);
    inval = 1; wr_sec = sec_addr_t'(s);
    @(posedge clk); #1 inval = 0;
  endtask

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h;
    int cyc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); #1; cyc++; end
    check(cyc == 16, "sweep clears 16 frames");
    for (int s = 0; s < 40; s += 3) begin look(s, h); check(!h, "empty table misses"); end
    do_fill(7);
    look(7, h);  check(h, "hit after fill");
    look(23, h); check(!h, "same frame, other tag misses");
    do_fill(23);
    look(23, h); check(h, "conflict fill replaces");
    look(7, h);  check(!h, "old sector gone");
    do_inval(7);
    look(23, h); check(h, "invalidating another sector keeps the frame");
    do_inval(23);
    look(23, h); check(!h, "invalidated");
    do_fill(5); do_fill(6);
    look(5, h); check(h, "frame 5 valid");
    look(6, h); check(h, "frame 6 valid");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
