// nvsd_top: the two-level ("HMC+L1") prefetching system of an NVRAM-based
// memory hierarchy. It holds the L1 data-cache prefetching engine, on the
// processor chip, and the hybrid memory controller (HMC), off chip, with its
// sector cache, tag cache and next-line sector prefetcher.
//
// The processor core, its L1 and L2 caches and the DRAM and NVRAM devices
// are not part of this RTL; their connections are ports of this module:
//  * l1_*      the L1 data cache's access stream, observed by the engine
//  * l1pf_*    prefetch requests from the engine to the L1/L2 caches
//  * mem_*     block requests that missed on chip (or write-backs) reaching
//              the HMC, and its responses
//  * dram_*, nvm_* the media ports of the HMC
// Either prefetching level can be switched off (l1_pf_enable,
// hmc_pf_enable), giving the HMC-only system and the no-prefetch baseline
// the two-level system is compared with.
//
// Timing is that of the two blocks: an L1 prefetch leaves one cycle after
// the access that triggers it; an HMC sector-cache hit is answered
// TAG_LAT + DATA_LAT + 2 cycles after the request is taken.
module nvsd_top
  import nvsd_pkg::*;
#(
  parameter longint unsigned SC_BYTES     = 64'd8 * 1024 * 1024,
  parameter int unsigned     SC_WAYS      = 16,
  parameter longint unsigned DRAM_BYTES   = 64'd64 * 1024 * 1024,
  parameter int unsigned     TAG_LAT      = 17,
  parameter int unsigned     DATA_LAT     = 17,
  parameter int unsigned     NL_DEPTH     = 2,
  parameter int unsigned     STRIDE_DEPTH = 4,
  parameter int unsigned     NUM_BUF      = 8,
  parameter int unsigned     SB_ENTRIES   = 32,
  parameter int unsigned     RPT_ENTRIES  = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       l1_pf_enable,
  input  logic       hmc_pf_enable,
  output logic       hmc_ready,
  // L1 data cache access stream
  input  logic       l1_valid,
  input  logic       l1_is_load,
  input  pc_t        l1_pc,
  input  blk_addr_t  l1_line,
  input  logic       l1_miss,
  input  logic       l1_pf_hit,
  // L1 prefetch requests
  output logic       l1pf_valid,
  output blk_addr_t  l1pf_line,
  input  logic       l1pf_ready,
  // off-chip requests to the HMC
  input  logic       mem_req_valid,
  output logic       mem_req_ready,
  input  hmc_req_t   mem_req,
  output logic       mem_resp_valid,
  output logic       mem_resp_write,
  output block_t     mem_resp_data,
  // DRAM cache devices
  output logic       dram_req_valid,
  input  logic       dram_req_ready,
  output media_req_t dram_req,
  input  logic       dram_resp_valid,
  input  sector_t    dram_resp_data,
  // NVRAM devices
  output logic       nvm_req_valid,
  input  logic       nvm_req_ready,
  output media_req_t nvm_req,
  input  logic       nvm_resp_valid,
  input  sector_t    nvm_resp_data,
  // events and counters
  output logic       ev_l1_nl_trigger,
  output logic       ev_l1_stride_hit,
  output logic       ev_l1_sb_drop,
  output logic       ev_l1_dup_filtered,
  output logic       ev_hmc_pf_trigger,
  output logic       ev_hmc_pf_drop,
  output hmc_stats_t hmc_stats
);

  logic eng_valid;

  l1_prefetch_engine #(
    .NL_DEPTH(NL_DEPTH), .STRIDE_DEPTH(STRIDE_DEPTH), .NUM_BUF(NUM_BUF),
    .ENTRIES(SB_ENTRIES), .RPT_ENTRIES(RPT_ENTRIES)
  ) u_l1pf (
    .clk, .rst_n,
    .l1_valid (l1_valid && l1_pf_enable),
    .l1_is_load, .l1_pc, .l1_line, .l1_miss, .l1_pf_hit,
    .pf_valid (eng_valid),
    .pf_line  (l1pf_line),
    .pf_ready (l1pf_ready),
    .ev_nl_trigger  (ev_l1_nl_trigger),
    .ev_stride_hit  (ev_l1_stride_hit),
    .ev_sb_drop     (ev_l1_sb_drop),
    .ev_dup_filtered(ev_l1_dup_filtered)
  );
  assign l1pf_valid = eng_valid;

  hmc #(
    .SC_BYTES(SC_BYTES), .SC_WAYS(SC_WAYS), .DRAM_BYTES(DRAM_BYTES),
    .TAG_LAT(TAG_LAT), .DATA_LAT(DATA_LAT), .PF_DEPTH(NL_DEPTH),
    .PF_BUFS(NUM_BUF), .PF_ENTRIES(SB_ENTRIES)
  ) u_hmc (
    .clk, .rst_n,
    .pf_enable (hmc_pf_enable),
    .ready     (hmc_ready),
    .req_valid (mem_req_valid),
    .req_ready (mem_req_ready),
    .req       (mem_req),
    .resp_valid(mem_resp_valid),
    .resp_write(mem_resp_write),
    .resp_data (mem_resp_data),
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_resp_valid, .dram_resp_data,
    .nvm_req_valid, .nvm_req_ready, .nvm_req, .nvm_resp_valid, .nvm_resp_data,
    .ev_pf_trigger(ev_hmc_pf_trigger),
    .ev_pf_drop   (ev_hmc_pf_drop),
    .stats        (hmc_stats)
  );

endmodule
