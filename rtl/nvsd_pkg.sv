// nvsd_pkg: types and constants shared by the prefetching memory system.
//
// The system is a three-level memory behind an out-of-order core: an SRAM
// sector cache inside a hybrid memory controller (HMC), a DRAM cache whose
// tags live in an SRAM tag cache in the HMC, and NVRAM as main memory.
// Addresses are byte addresses of ADDR_W bits. The processor side moves 64 B
// blocks; the HMC and the memory media move 256 B sectors of four blocks.
// Block and sector sizes follow the paper's configuration table; the 40-bit
// physical address width is this design's own choice (the paper gives none).
package nvsd_pkg;

  localparam int unsigned ADDR_W       = 40;   // physical byte address width (assumed)
  localparam int unsigned BLOCK_BYTES  = 64;   // processor cache block
  localparam int unsigned SECTOR_BYTES = 256;  // HMC sector
  localparam int unsigned BLOCK_OFF_W  = $clog2(BLOCK_BYTES);
  localparam int unsigned SECTOR_OFF_W = $clog2(SECTOR_BYTES);
  localparam int unsigned BLK_PER_SEC  = SECTOR_BYTES / BLOCK_BYTES;       // 4
  localparam int unsigned BLK_SEL_W    = $clog2(BLK_PER_SEC);              // 2
  localparam int unsigned BLOCK_BITS   = BLOCK_BYTES * 8;                  // 512
  localparam int unsigned SECTOR_BITS  = SECTOR_BYTES * 8;                 // 2048
  localparam int unsigned BLK_ADDR_W   = ADDR_W - BLOCK_OFF_W;             // 34
  localparam int unsigned SEC_ADDR_W   = ADDR_W - SECTOR_OFF_W;            // 32
  localparam int unsigned PC_W         = 48;   // instruction pointer width (assumed)

  typedef logic [BLK_ADDR_W-1:0]  blk_addr_t;
  typedef logic [SEC_ADDR_W-1:0]  sec_addr_t;
  typedef logic [BLOCK_BITS-1:0]  block_t;
  typedef logic [SECTOR_BITS-1:0] sector_t;
  typedef logic [BLK_PER_SEC-1:0] blk_mask_t;
  typedef logic [PC_W-1:0]        pc_t;

  // Request from the processor side (an L2 miss or write-back) to the HMC.
  typedef struct packed {
    logic      write;
    blk_addr_t addr;
    block_t    wdata;
  } hmc_req_t;

  // Request from the HMC to a memory medium (DRAM cache data array or NVRAM).
  // A write carries a whole sector; mask says which of its blocks to store.
  typedef struct packed {
    logic      write;
    sec_addr_t addr;
    blk_mask_t mask;
    sector_t   wdata;
  } media_req_t;

  // Event counters of the HMC, from which the paper's accuracy and coverage
  // metrics are computed.
  typedef struct packed {
    logic [31:0] demand_reqs;      // demand block requests served
    logic [31:0] demand_misses;    // demand requests that missed the sector cache
    logic [31:0] pf_issued;        // prefetches sent to DRAM or NVRAM
    logic [31:0] pf_dropped;       // prefetches whose sector was already cached
    logic [31:0] pf_useful;        // prefetched sectors later hit by a demand request
    logic [31:0] dram_reads;       // sector reads from the DRAM cache (tag-cache hits)
    logic [31:0] nvram_reads;      // sector reads from NVRAM (tag-cache misses)
    logic [31:0] dram_fills;       // sectors written into the DRAM cache
    logic [31:0] writebacks;       // dirty sector evictions written to NVRAM
  } hmc_stats_t;

endpackage
