// tb_nvsd_metrics: measures prefetch coverage and accuracy of the two-level
// prefetching system at its full default size, the way prefetchers are
// judged: the same access stream is run once without and once with a
// prefetcher, and
//   coverage = 1 - misses_with / misses_without
//   accuracy = (misses_without - misses_with) / prefetches_issued.
//
// The stream is synthetic (the real evaluation uses server workloads that
// cannot be simulated at RTL). It mixes a sequential load stream, a load
// stream with a stride of 8 lines (two sectors) and loads to random lines of
// a 1 MB region, generated by a fixed linear congruential generator so every
// run sees the same accesses. The footprint is far below the 8 MB sector
// cache, so without prefetching every distinct sector misses exactly once.
//
// The testbench plays a blocking in-order core with an unbounded L1: an
// access that misses in L1 is sent to the HMC and waited for, then the core
// computes for GAP cycles, during which queued prefetches can run. L1
// prefetches are sent to the HMC as block reads. Four runs, each after a
// reset: no prefetching, HMC only, L1 only, HMC and L1. Checks: data of
// every read, the exact miss counts without prefetching, that the HMC
// prefetcher covers misses with an accuracy in (0, 1], and that the L1
// engine removes L1 misses. The metrics are printed for each level.
module tb_nvsd_metrics;
  import nvsd_pkg::*;
  import nvsd_tb_pkg::*;

  localparam int ITER = 300;   // iterations of the access loop (3 loads each)
  localparam int GAP  = 800;   // core compute cycles after each access

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l1_pf_enable = 0, hmc_pf_enable = 0, hmc_ready;
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

  // ------------------------------------------------------------ HMC request queue
  // Only reads are sent; memory never changes, so the expected block of a
  // read is its initial contents.
  blk_addr_t q_addr [$];
  blk_addr_t exp_fifo [$];

  assign mem_req_valid = q_addr.size() != 0;
  always_comb begin
    mem_req = '0;
    if (q_addr.size() != 0) mem_req.addr = q_addr[0];
  end

  always @(posedge clk) begin
    if (rst_n && mem_req_valid && mem_req_ready) begin
      exp_fifo.push_back(q_addr[0]);
      void'(q_addr.pop_front());
    end
    if (rst_n && mem_resp_valid) begin
      blk_addr_t a;
      a = exp_fifo.pop_front();
      check(!mem_resp_write, "read response");
      check(mem_resp_data == init_block(a, 0), "read data");
    end
  end

  // ------------------------------------------------------------ L1 stand-in
  bit l1_res [blk_addr_t];      // resident lines; value = brought by a prefetch
  int n_l1_miss, n_l1_pf;
  assign l1pf_ready = 1'b1;

  always @(posedge clk) begin
    if (rst_n && l1pf_valid && l1pf_ready && !l1_res.exists(l1pf_line)) begin
      l1_res[l1pf_line] = 1'b1;
      n_l1_pf++;
      q_addr.push_back(l1pf_line);
    end
  end

  task automatic wait_idle();
    while (q_addr.size() != 0 || exp_fifo.size() != 0) begin @(posedge clk); #1; end
  endtask

  task automatic load(input longint pc, input longint line);
    blk_addr_t a;
    bit miss, pfh;
    a = blk_addr_t'(line);
    miss = !l1_res.exists(a);
    pfh  = !miss && l1_res[a];
    l1_valid = 1; l1_pc = pc_t'(pc); l1_line = a; l1_is_load = 1;
    l1_miss = miss; l1_pf_hit = pfh;
    if (miss) begin
      n_l1_miss++;
      q_addr.push_back(a);
    end
    l1_res[a] = 1'b0;
    @(posedge clk); #1;
    l1_valid = 0; l1_miss = 0; l1_pf_hit = 0;
    if (miss) wait_idle();
    repeat (GAP) @(posedge clk);
    #1;
  endtask

  // ------------------------------------------------------------ one run
  bit uniq_line [blk_addr_t];
  bit uniq_sec  [sec_addr_t];

  task automatic run(input bit l1_on, input bit hmc_on, output int l1_miss_o,
                     output int l1_pf_o, output hmc_stats_t st);
    logic [31:0] lcg;
    longint rline;
    rst_n = 0;
    l1_pf_enable = l1_on; hmc_pf_enable = hmc_on;
    l1_res.delete();
    n_l1_miss = 0; n_l1_pf = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!hmc_ready) begin @(posedge clk); #1; end
    lcg = 32'h1234_5678;
    for (int i = 0; i < ITER; i++) begin
      load('h4000_0100, 'h10_0000 + longint'(i));
      load('h4000_0200, 'h20_0000 + 8 * longint'(i));
      lcg = lcg * 32'd1664525 + 32'd1013904223;
      rline = 'h30_0000 + longint'(lcg[29:16]);   // 16384 lines = 1 MB
      load('h4000_0300, rline);
      if (!l1_on && !hmc_on) begin
        uniq_line[blk_addr_t'('h10_0000 + longint'(i))] = 1;
        uniq_line[blk_addr_t'('h20_0000 + 8 * longint'(i))] = 1;
        uniq_line[blk_addr_t'(rline)] = 1;
      end
    end
    wait_idle();
    repeat (3000) @(posedge clk);
    #1;
    wait_idle();
    l1_miss_o = n_l1_miss;
    l1_pf_o   = n_l1_pf;
    st        = hmc_stats;
  endtask

  function automatic real cov(int with_pf, int without_pf);
    return 1.0 - real'(with_pf) / real'(without_pf);
  endfunction
  function automatic real acc(int with_pf, int without_pf, int issued);
    return issued == 0 ? 0.0 : real'(without_pf - with_pf) / real'(issued);
  endfunction

  initial begin
    #200_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int         m0, m1, m2, m3, p0, p1, p2, p3;
    hmc_stats_t s0, s1, s2, s3;
    real c_hmc, a_hmc, c_hmc_l1, a_hmc_l1, c_l1, a_l1;

    run(0, 0, m0, p0, s0);
    foreach (uniq_line[a]) uniq_sec[sec_addr_t'(a >> BLK_SEL_W)] = 1;
    check(m0 == uniq_line.num(), $sformatf("no prefetch: L1 misses %0d = distinct lines %0d",
                                           m0, uniq_line.num()));
    check(s0.demand_misses == uniq_sec.num(),
          $sformatf("no prefetch: HMC misses %0d = distinct sectors %0d",
                    s0.demand_misses, uniq_sec.num()));
    check(s0.pf_issued == 0 && p0 == 0, "no prefetch issued");

    run(0, 1, m1, p1, s1);
    run(1, 0, m2, p2, s2);
    run(1, 1, m3, p3, s3);

    c_hmc    = cov(s1.demand_misses, s0.demand_misses);
    a_hmc    = acc(s1.demand_misses, s0.demand_misses, s1.pf_issued);
    c_hmc_l1 = cov(s3.demand_misses, s2.demand_misses);
    a_hmc_l1 = acc(s3.demand_misses, s2.demand_misses, s3.pf_issued);
    c_l1     = cov(m2, m0);
    a_l1     = acc(m2, m0, p2);

    $display("no prefetch : L1 misses %0d, HMC requests %0d, HMC misses %0d",
             m0, s0.demand_reqs, s0.demand_misses);
    $display("HMC only    : HMC misses %0d, prefetches issued %0d, useful %0d, coverage %.3f, accuracy %.3f",
             s1.demand_misses, s1.pf_issued, s1.pf_useful, c_hmc, a_hmc);
    $display("L1 only     : L1 misses %0d, L1 prefetches %0d, L1 coverage %.3f, L1 accuracy %.3f, HMC misses %0d",
             m2, p2, c_l1, a_l1, s2.demand_misses);
    $display("HMC and L1  : HMC misses %0d, prefetches issued %0d, useful %0d, coverage %.3f, accuracy %.3f",
             s3.demand_misses, s3.pf_issued, s3.pf_useful, c_hmc_l1, a_hmc_l1);

    check(m1 == m0, "HMC prefetching does not change L1 misses");
    check(s1.demand_reqs == s0.demand_reqs, "same HMC demand stream with HMC prefetching");
    check(s1.pf_issued > 0, "HMC prefetches issued");
    check(c_hmc > 0.3, "HMC prefetcher covers misses");
    check(a_hmc > 0.0 && a_hmc <= 1.0, "HMC accuracy in (0, 1]");
    check(s1.pf_useful <= s1.pf_issued, "useful prefetches are issued prefetches");
    check(m2 < m0, "L1 engine removes L1 misses");
    check(a_l1 > 0.0 && a_l1 <= 1.0, "L1 accuracy in (0, 1]");
    check(s3.demand_reqs == s2.demand_reqs, "same HMC demand stream with both levels");
    check(c_hmc_l1 > 0.0, "HMC prefetcher covers misses behind the L1 engine");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
