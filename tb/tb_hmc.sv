// tb_hmc: the hybrid memory controller with DRAM and NVRAM latency models
// (33/11 and 353/86 cycles), a 4-set x 4-way sector cache and a 16-frame
// tag cache. Every read is compared with a reference memory kept by the
// testbench. Directed phases check the hit latency (TAG_LAT + DATA_LAT + 2),
// the NVRAM miss path and its latency, the copy of demand fills into the DRAM
// cache, DRAM-cache hits after an eviction, dirty write-backs to NVRAM, and
// the prefetcher: prefetched sectors become hits, are counted as useful and
// are never copied into the DRAM cache. A random phase then mixes reads and
// writes over 48 sectors.
module tb_hmc;
  import nvsd_pkg::*;
  import nvsd_tb_pkg::*;
  localparam int TAG_LAT = 17, DATA_LAT = 17;
  localparam int DRAM_RD = 33, DRAM_WR = 11, NVM_RD = 353, NVM_WR = 86;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pf_enable = 0, ready;
  logic req_valid = 0, req_ready, resp_valid, resp_write;
  hmc_req_t req = '0;
  block_t resp_data;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic nvm_req_valid, nvm_req_ready, nvm_resp_valid;
  media_req_t dram_req, nvm_req;
  sector_t dram_resp_data, nvm_resp_data;
  logic ev_pf_trigger, ev_pf_drop;
  hmc_stats_t stats;

  hmc #(.SC_BYTES(4 * 4 * 256), .SC_WAYS(4), .DRAM_BYTES(16 * 256),
        .TAG_LAT(TAG_LAT), .DATA_LAT(DATA_LAT)) dut (.*);

  media_model #(.RD_LAT(DRAM_RD), .WR_LAT(DRAM_WR), .SEED(32'hDEAD_BEEF)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));
  media_model #(.RD_LAT(NVM_RD), .WR_LAT(NVM_WR), .SEED(32'h0)) u_nvm (
    .clk, .rst_n, .req_valid(nvm_req_valid), .req_ready(nvm_req_ready), .req(nvm_req),
    .resp_valid(nvm_resp_valid), .resp_data(nvm_resp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  block_t ref_mem [blk_addr_t];
  function automatic block_t ref_rd(blk_addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_block(a, 0);
  endfunction

  // one demand request; returns cycles from acceptance to response
  task automatic op(input bit wr, input longint blk, output int lat);
    block_t d;
    d = {16{$urandom()}};
    req_valid = 1; req.write = wr; req.addr = blk_addr_t'(blk); req.wdata = d;
    #1;
    while (!req_ready) begin @(posedge clk); #2; end
    @(posedge clk); #1;
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    check(resp_write == wr, "response kind");
    if (wr) ref_mem[blk_addr_t'(blk)] = d;
    else check(resp_data == ref_rd(blk_addr_t'(blk)), $sformatf("read data of block %0d", blk));
    @(posedge clk); #1;
  endtask

  task automatic idle(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    hmc_stats_t s0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) begin @(posedge clk); #1; end

    // ---- cold read of sector 8 (block 32): NVRAM, then copied into DRAM
    op(0, 32, lat);
    check(lat == 1 + TAG_LAT + 2 + 1 + NVM_RD + 2, $sformatf("NVRAM miss latency %0d", lat));
    idle(DRAM_WR + 4);
    check(stats.nvram_reads == 1 && stats.demand_misses == 1, "one NVRAM read");
    check(stats.dram_fills == 1 && u_dram.n_writes == 1, "demand fill copied into DRAM");

    // ---- hit on another block of the sector
    op(0, 33, lat);
    check(lat == TAG_LAT + DATA_LAT + 2, $sformatf("hit latency %0d", lat));
    op(1, 34, lat);
    check(lat == TAG_LAT + DATA_LAT + 2, "write hit latency");
    op(0, 34, lat);

    // ---- evict sector 8 (dirty block 2) with sectors 12, 16, 20, 24 (set 0)
    s0 = stats;
    for (int s = 12; s <= 24; s += 4) op(0, s * 4, lat);
    idle(DRAM_WR + 4);
    check(stats.writebacks == s0.writebacks + 1, "dirty victim written back");
    // its DRAM copy was stale and dropped: the re-read comes from NVRAM
    s0 = stats;
    op(0, 34, lat);
    check(stats.nvram_reads == s0.nvram_reads + 1 && stats.dram_reads == s0.dram_reads,
          "re-read after write-back from NVRAM");
    idle(DRAM_WR + 4);

    // ---- DRAM cache hit: sector 12 was filled into DRAM and evicted clean
    // (sectors 32, 36, 40, 52 use DRAM frames 0, 4, 8, 4, not frame 12)
    op(0, 32 * 4, lat); op(0, 36 * 4, lat); op(0, 40 * 4, lat); op(0, 52 * 4, lat);
    idle(DRAM_WR + 4);
    s0 = stats;
    op(0, 12 * 4 + 1, lat);
    check(stats.dram_reads == s0.dram_reads + 1 && stats.nvram_reads == s0.nvram_reads,
          "evicted clean sector found through the tag cache");
    check(lat == 1 + TAG_LAT + 2 + 1 + DRAM_RD + 2, $sformatf("DRAM hit latency %0d", lat));
    idle(DRAM_WR + 4);

    // ---- prefetching: a miss on sector 100 queues sectors 101, 102
    pf_enable = 1;
    s0 = stats;
    op(0, 100 * 4, lat);
    idle(2 * (NVM_RD + 40) + DRAM_WR + 40);
    check(stats.pf_issued == s0.pf_issued + 2, "two sector prefetches issued");
    check(stats.dram_fills == s0.dram_fills + 1, "prefetched sectors are not copied into DRAM");
    s0 = stats;
    op(0, 101 * 4 + 3, lat);
    check(lat == TAG_LAT + DATA_LAT + 2, "prefetched sector hits");
    check(stats.pf_useful == s0.pf_useful + 1 && stats.demand_misses == s0.demand_misses,
          "useful prefetch counted");
    idle(NVM_RD + 40);
    check(stats.pf_issued == s0.pf_issued + 1, "prefetch hit continues the stream with sector 103");

    // ---- random phase over 48 sectors
    for (int i = 0; i < 400; i++) begin
      longint b;
      b = longint'($urandom_range(0, 48 * 4 - 1)) + 200 * 4;
      op($urandom_range(0, 3) == 0, b, lat);
      if ($urandom_range(0, 7) == 0) idle($urandom_range(0, 400));
    end
    check(stats.pf_dropped > 0, "a prefetch of a cached sector was dropped");
    $display("stats: demand %0d misses %0d pf_issued %0d pf_useful %0d pf_dropped %0d dram_rd %0d nvm_rd %0d wb %0d",
             stats.demand_reqs, stats.demand_misses, stats.pf_issued, stats.pf_useful,
             stats.pf_dropped, stats.dram_reads, stats.nvram_reads, stats.writebacks);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
