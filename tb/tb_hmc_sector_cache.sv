// tb_hmc_sector_cache: a 4-set, 4-way instance. Checks the reset sweep, miss
// and hit lookups, victim choice (invalid ways first, then round-robin),
// per-block dirty bits and the victim's sector address, block writes into a
// sector, whole-sector reads and the prefetch bit.
module tb_hmc_sector_cache;
  import nvsd_pkg::*;
  import nvsd_tb_pkg::*;
  localparam int WAYS = 4;
  localparam longint SIZE = 4 * WAYS * 256;   // 4 sets
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_done;
  logic lk_valid = 0, lk_hit, lk_pf, vic_valid;
  sec_addr_t lk_sec = '0, vic_sec, rd_sec = '0, wr_sec = '0;
  logic [1:0] lk_way, vic_way, rd_way = '0, wr_way = '0;
  blk_mask_t vic_dirty;
  logic rd_valid = 0;
  sector_t rd_data, wr_sector_data = '0;
  logic wr_block = 0, wr_fill = 0, wr_clr_pf = 0, wr_fill_pf = 0;
  logic [1:0] wr_blk = '0;
  block_t wr_block_data = '0;

  hmc_sector_cache #(.SIZE_BYTES(SIZE), .WAYS(WAYS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic lookup(input longint s);
    lk_valid = 1; lk_sec = sec_addr_t'(s);
    @(posedge clk); #1;
    lk_valid = 0;
  endtask
  task automatic fill(input longint s, input int way, input bit pf);
    wr_fill = 1; wr_sec = sec_addr_t'(s); wr_way = 2'(way); wr_fill_pf = pf;
    wr_sector_data = init_sector(sec_addr_t'(s), 32'h0);
    @(posedge clk); #1;
    wr_fill = 0;
  endtask
  task automatic write_blk(input longint s, input int way, input int blk, input block_t d);
    wr_block = 1; wr_sec = sec_addr_t'(s); wr_way = 2'(way); wr_blk = 2'(blk); wr_block_data = d;
    @(posedge clk); #1;
    wr_block = 0;
  endtask
  task automatic read(input longint s, input int way);
    rd_valid = 1; rd_sec = sec_addr_t'(s); rd_way = 2'(way);
    @(posedge clk); #1;
    rd_valid = 0;
  endtask

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); #1; cyc++; end
    check(cyc == 4, $sformatf("reset sweep takes one cycle per set (%0d)", cyc));

    // sectors 1, 5, 9, 13, 17 all map to set 1
    lookup(5);
    check(!lk_hit && !vic_valid && vic_way == 0, "empty set: miss, victim way 0");
    fill(5, 0, 0);
    lookup(5);
    check(lk_hit && lk_way == 0 && !lk_pf, "hit after fill");
    lookup(9);
    check(!lk_hit && vic_way == 1 && !vic_valid, "next invalid way chosen");
    fill(9, 1, 1);
    fill(13, 2, 0);
    fill(17, 3, 0);
    lookup(9);
    check(lk_hit && lk_way == 1 && lk_pf, "prefetched sector hit with prefetch bit");
    wr_clr_pf = 1; wr_sec = 9; wr_way = 1;
    @(posedge clk); #1 wr_clr_pf = 0;
    lookup(9);
    check(lk_hit && !lk_pf, "prefetch bit cleared");

    // dirty block 2 of sector 5, then read the sector back
    write_blk(5, 0, 2, {16{32'hCAFE_0005}});
    read(5, 0);
    check(rd_data[2*BLOCK_BITS +: BLOCK_BITS] == {16{32'hCAFE_0005}}, "written block read back");
    check(rd_data[0 +: BLOCK_BITS] == init_block({sec_addr_t'(5), 2'd0}, 0), "other block intact");

    // set full: victim is the round-robin pointer; way 0 (sector 5) first,
    // it is dirty in block 2 and its address is reported
    lookup(21);
    check(!lk_hit && vic_valid && vic_way == 0, "full set: round-robin victim way 0");
    check(vic_dirty == 4'b0100 && vic_sec == 5, "victim dirty mask and address");
    fill(21, 0, 0);
    lookup(5);
    check(!lk_hit, "evicted sector misses");
    lookup(25);
    check(vic_way == 1, "round-robin pointer advanced to way 1");
    lookup(21);
    check(lk_hit && lk_way == 0, "new sector in way 0");
    // other sets are unaffected
    lookup(4);
    check(!lk_hit && !vic_valid, "set 0 still empty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
