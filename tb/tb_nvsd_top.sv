// tb_nvsd_top: end-to-end test of the two-level prefetching system at its
// full default size (8 MB sector cache, 64 MB DRAM cache, 17/17-cycle sector
// cache, DRAM 33/11 and NVRAM 353/86-cycle media models).
//
// The testbench stands in for the processor side: it plays an L1 data cache
// (a set of resident lines with a prefetched mark), issues load and store
// streams into the engine, sends every L1 miss and every L1 prefetch to the
// HMC as a block read (an L2 that always misses), and adds write-backs
// straight to the HMC. Every read returned by the HMC is compared with a
// reference memory. Phases make each mechanism happen: stride and next-line
// prefetching at L1, stream-buffer overflow at L1 and in the HMC, the
// duplicate filter, sector hits and misses, DRAM-cache hits through the tag
// cache, dirty write-backs, useful and dropped HMC prefetches, and switching
// both prefetching levels off. Each is counted and must have happened.
module tb_nvsd_top;
  import nvsd_pkg::*;
  import nvsd_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l1_pf_enable = 1, hmc_pf_enable = 1, hmc_ready;
  logic l1_valid = 0, l1_is_load = 0, l1_miss = 0, l1_pf_hit = 0;
  pc_t l1_pc = '0;
  blk_addr_t l1_line = '0;
  logic l1pf_valid, l1pf_ready;
  blk_addr_t l1pf_line;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_write;
  hmc_req_t mem_req;
  block_t mem_resp_data;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  logic nvm_req_valid, nvm_req_ready, nvm_resp_valid;
  media_req_t dram_req, nvm_req;
  sector_t dram_resp_data, nvm_resp_data;
  logic ev_l1_nl_trigger, ev_l1_stride_hit, ev_l1_sb_drop, ev_l1_dup_filtered;
  logic ev_hmc_pf_trigger, ev_hmc_pf_drop;
  hmc_stats_t hmc_stats;

  nvsd_top dut (.*);

  media_model #(.RD_LAT(33), .WR_LAT(11), .SEED(32'hDEAD_BEEF)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .resp_valid(dram_resp_valid), .resp_data(dram_resp_data));
  media_model #(.RD_LAT(353), .WR_LAT(86), .SEED(32'h0)) u_nvm (
    .clk, .rst_n, .req_valid(nvm_req_valid), .req_ready(nvm_req_ready), .req(nvm_req),
    .resp_valid(nvm_resp_valid), .resp_data(nvm_resp_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ reference memory
  block_t ref_mem [blk_addr_t];
  function automatic block_t ref_rd(blk_addr_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_block(a, 0);
  endfunction

  // ------------------------------------------------------------ HMC request queue
  // Requests are answered in order (the HMC serves one at a time); a read's
  // expected data is captured when it is queued, a write updates the
  // reference memory when it is queued.
  hmc_req_t q_req [$];
  block_t   q_exp [$];
  int       outstanding = 0;
  block_t   exp_fifo [$];
  bit       wr_fifo [$];

  task automatic hmc_enqueue(input bit wr, input blk_addr_t a);
    hmc_req_t r;
    r.write = wr; r.addr = a; r.wdata = {16{$urandom()}};
    if (wr) ref_mem[a] = r.wdata;
    q_req.push_back(r);
    q_exp.push_back(ref_rd(a));
  endtask

  assign mem_req_valid = q_req.size() != 0;
  assign mem_req       = (q_req.size() != 0) ? q_req[0] : '0;

  int n_resp = 0;
  always @(posedge clk) begin
    if (rst_n && mem_req_valid && mem_req_ready) begin
      exp_fifo.push_back(q_exp[0]);
      wr_fifo.push_back(q_req[0].write);
      void'(q_req.pop_front());
      void'(q_exp.pop_front());
    end
    if (rst_n && mem_resp_valid) begin
      block_t e;
      bit w;
      e = exp_fifo.pop_front();
      w = wr_fifo.pop_front();
      n_resp++;
      check(mem_resp_write == w, "response kind");
      if (!w) check(mem_resp_data == e, "read data");
    end
  end

  // ------------------------------------------------------------ L1 stand-in
  bit l1_res [blk_addr_t];      // resident lines; value = brought by a prefetch
  bit l1pf_accept = 1;
  assign l1pf_ready = l1pf_accept;

  always @(posedge clk) begin
    if (rst_n && l1pf_valid && l1pf_ready && !l1_res.exists(l1pf_line)) begin
      l1_res[l1pf_line] = 1'b1;
      hmc_enqueue(0, l1pf_line);
    end
  end

  task automatic l1_access(input longint pc, input longint line, input bit load);
    blk_addr_t a;
    bit miss, pfh;
    a = blk_addr_t'(line);
    miss = !l1_res.exists(a);
    pfh  = !miss && l1_res[a];
    l1_valid = 1; l1_pc = pc_t'(pc); l1_line = a; l1_is_load = load;
    l1_miss = miss; l1_pf_hit = pfh;
    if (miss) begin
      hmc_enqueue(!load, a);
    end else if (!load) begin
      hmc_enqueue(1, a);       // write-through stand-in: the store reaches memory
    end
    l1_res[a] = 1'b0;
    @(posedge clk); #1;
    l1_valid = 0; l1_miss = 0; l1_pf_hit = 0;
  endtask

  task automatic drain();
    while (q_req.size() != 0 || exp_fifo.size() != 0) begin @(posedge clk); #1; end
    repeat (2000) @(posedge clk);
    #1;
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_l1_nl, n_l1_stride, n_l1_drop, n_l1_dup, n_hmc_trig, n_hmc_drop, n_l1pf_off;
  always @(posedge clk) begin
    if (rst_n && ev_l1_nl_trigger)   n_l1_nl++;
    if (rst_n && ev_l1_stride_hit)   n_l1_stride++;
    if (rst_n && ev_l1_sb_drop)      n_l1_drop++;
    if (rst_n && ev_l1_dup_filtered) n_l1_dup++;
    if (rst_n && ev_hmc_pf_trigger)  n_hmc_trig++;
    if (rst_n && ev_hmc_pf_drop)     n_hmc_drop++;
    if (rst_n && !l1_pf_enable && l1pf_valid) n_l1pf_off++;
  end

  initial begin
    #60_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hmc_stats_t s0;
    int init_cycles;
    {n_l1_nl, n_l1_stride, n_l1_drop, n_l1_dup, n_hmc_trig, n_hmc_drop, n_l1pf_off} = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    init_cycles = 0;
    while (!hmc_ready) begin @(posedge clk); #1; init_cycles++; end
    check(init_cycles >= 262144, "tag cache sweep covers 262144 frames");

    // ---- phase 1: three load streams (strides +1, +3, -2 lines) and a store stream
    for (int i = 0; i < 48; i++) begin
      l1_access('h4000_0010, 'h10_0000 + i, 1);
      l1_access('h4000_0020, 'h20_0000 + 3 * i, 1);
      l1_access('h4000_0030, 'h30_0000 - 2 * i, 1);
      if (i % 4 == 0) l1_access('h4000_0040, 'h40_0000 + i, 0);
      repeat (30) @(posedge clk);
      #1;
    end
    drain();

    // ---- phase 2: L1 stream-buffer overflow: prefetches not accepted
    l1pf_accept = 0;
    for (int i = 0; i < 45; i++) l1_access('h4000_0050, 'h50_0000 + 5 * i, 1);
    l1pf_accept = 1;
    drain();

    // ---- phase 2b: duplicate filter. Lines b..b+2 are resident, so three
    // loads hit and only train the stride table (queue b+3..b+6); a store
    // miss on b+5 makes the next-line prefetcher queue b+6, b+7. The stride
    // lines go first, and the next-line b+6 right after the stride b+6 is
    // filtered.
    l1pf_accept = 0;
    for (int i = 0; i < 3; i++) l1_res[blk_addr_t'('h70_0000 + i)] = 1'b0;
    for (int i = 0; i < 3; i++) l1_access('h4000_0070, 'h70_0000 + i, 1);
    l1_access('h4000_0080, 'h70_0005, 0);
    l1pf_accept = 1;
    drain();

    // ---- phase 3: a long back-to-back sector stream at the HMC starves its
    // prefetcher until its stream buffer overflows; then idle time lets the
    // queued prefetches run
    for (int s = 0; s < 40; s++) hmc_enqueue(0, blk_addr_t'((64'h80_0000 + s) * 4));
    drain();
    for (int s = 0; s < 24; s++) hmc_enqueue(0, blk_addr_t'((64'h80_0000 + 40 + s) * 4 + 1));
    drain();

    // ---- phase 4: 20 dirty sectors in one set (sector stride 2048) force
    // write-backs; 20 clean sectors in another set are evicted and re-read
    // from the DRAM cache
    for (int k = 0; k < 20; k++) hmc_enqueue(1, blk_addr_t'((64'h100_0005 + 2048 * k) * 4 + 2));
    drain();
    for (int k = 0; k < 20; k++) hmc_enqueue(0, blk_addr_t'((64'h100_0009 + 2048 * k) * 4));
    drain();
    s0 = hmc_stats;
    for (int k = 0; k < 4; k++) hmc_enqueue(0, blk_addr_t'((64'h100_0009 + 2048 * k) * 4 + 3));
    for (int k = 0; k < 4; k++) hmc_enqueue(0, blk_addr_t'((64'h100_0005 + 2048 * k) * 4 + 2));
    drain();
    check(hmc_stats.dram_reads > s0.dram_reads, "evicted clean sectors come back from DRAM");

    // ---- phase 5: both prefetching levels off
    l1_pf_enable = 0; hmc_pf_enable = 0;
    s0 = hmc_stats;
    for (int i = 0; i < 16; i++) l1_access('h4000_0060, 'h60_0000 + 4 * i, 1);
    drain();
    check(hmc_stats.pf_issued == s0.pf_issued, "no HMC prefetch while disabled");
    check(hmc_stats.demand_misses == s0.demand_misses + 16, "each sector of the stream misses");
    check(n_l1pf_off == 0, "no L1 prefetch while disabled");
    l1_pf_enable = 1; hmc_pf_enable = 1;

    // ---- mechanisms
    $display("L1: next-line triggers %0d, stride hits %0d, buffer drops %0d, duplicates filtered %0d",
             n_l1_nl, n_l1_stride, n_l1_drop, n_l1_dup);
    $display("HMC: requests %0d, misses %0d, pf triggers %0d, pf issued %0d, pf useful %0d, pf dropped %0d, buffer drops %0d",
             hmc_stats.demand_reqs, hmc_stats.demand_misses, n_hmc_trig, hmc_stats.pf_issued,
             hmc_stats.pf_useful, hmc_stats.pf_dropped, n_hmc_drop);
    $display("HMC: DRAM reads %0d, NVRAM reads %0d, DRAM fills %0d, write-backs %0d",
             hmc_stats.dram_reads, hmc_stats.nvram_reads, hmc_stats.dram_fills, hmc_stats.writebacks);
    check(n_l1_nl > 0, "L1 next-line prefetcher triggered");
    check(n_l1_stride > 0, "L1 stride hit");
    check(n_l1_drop > 0, "L1 stream buffer overflow");
    check(n_l1_dup > 0, "L1 duplicate filter");
    check(n_hmc_trig > 0, "HMC prefetcher triggered");
    check(n_hmc_drop > 0, "HMC stream buffer overflow");
    check(hmc_stats.pf_issued > 0, "HMC prefetch issued");
    check(hmc_stats.pf_useful > 0, "HMC prefetch useful");
    check(hmc_stats.pf_dropped > 0, "HMC prefetch of a cached sector dropped");
    check(hmc_stats.demand_reqs > hmc_stats.demand_misses, "sector cache hits");
    check(hmc_stats.dram_reads > 0, "DRAM cache read");
    check(hmc_stats.nvram_reads > 0, "NVRAM read");
    check(hmc_stats.dram_fills > 0, "DRAM cache fill");
    check(hmc_stats.writebacks > 0, "dirty write-back");
    check(n_resp == hmc_stats.demand_reqs, "every request answered");
    check(hmc_stats.dram_fills == u_dram.n_writes, "DRAM written only by demand fills");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
