// hmc_sector_cache: the SRAM sector cache of the hybrid memory controller.
//
// SIZE_BYTES of storage, organised as WAYS-way sets of 256 B sectors. Each
// sector holds four 64 B blocks and keeps one valid bit, one dirty bit per
// block (the cache is write-back), and a prefetch bit that marks a sector
// brought in by the prefetcher and not yet used by a demand request.
// Default 8 MB, 16 ways: 2048 sets.
//
// The module is the storage and its bookkeeping; the controller that uses it
// sequences the accesses and models their latency. Ports:
//  * lookup: lk_valid with a sector address; one cycle later lk_hit/lk_way/
//    lk_pf give the result for that sector, and vic_* the way a fill of it
//    would replace (an invalid way first, otherwise a round-robin pointer per
//    set) with that way's state and sector address.
//  * data read: rd_valid with set and way; one cycle later rd_data holds the
//    sector.
//  * one write command per cycle: write one block (sets its dirty bit and
//    clears the prefetch bit), fill a whole sector (clean, prefetch bit as
//    given, advances the set's replacement pointer), or clear the prefetch
//    bit.
//  * after reset the module clears one set per cycle; init_done rises when
//    all sets are invalid. Commands before then are ignored.
//
// From the paper: sector organisation, 8 MB, 256 B sectors, 64 B blocks,
// 16 ways, write-back, and that prefetched sectors are stored here. Its
// choices: round-robin replacement, the prefetch bit, the command set.
module hmc_sector_cache
  import nvsd_pkg::*;
#(
  parameter longint unsigned SIZE_BYTES = 64'd8 * 1024 * 1024,
  parameter int unsigned     WAYS       = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    init_done,
  // lookup
  input  logic                    lk_valid,
  input  sec_addr_t               lk_sec,
  output logic                    lk_hit,
  output logic [$clog2(WAYS)-1:0] lk_way,
  output logic                    lk_pf,
  output logic [$clog2(WAYS)-1:0] vic_way,
  output logic                    vic_valid,
  output blk_mask_t               vic_dirty,
  output sec_addr_t               vic_sec,
  // data read
  input  logic                    rd_valid,
  input  sec_addr_t               rd_sec,
  input  logic [$clog2(WAYS)-1:0] rd_way,
  output sector_t                 rd_data,
  // write commands
  input  logic                    wr_block,
  input  logic                    wr_fill,
  input  logic                    wr_clr_pf,
  input  sec_addr_t               wr_sec,
  input  logic [$clog2(WAYS)-1:0] wr_way,
  input  logic [BLK_SEL_W-1:0]    wr_blk,
  input  block_t                  wr_block_data,
  input  sector_t                 wr_sector_data,
  input  logic                    wr_fill_pf
);

  localparam longint unsigned SETS = SIZE_BYTES / (SECTOR_BYTES * WAYS);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = SEC_ADDR_W - SET_W;
  localparam int unsigned WAY_W = $clog2(WAYS);

  typedef struct packed {
    logic             valid;
    logic             pf;
    blk_mask_t        dirty;
    logic [TAG_W-1:0] tag;
  } meta_t;

  meta_t            meta [SETS][WAYS];
  logic [WAY_W-1:0] rr   [SETS];
  sector_t          data [SETS*WAYS];

  function automatic logic [SET_W-1:0] set_of(sec_addr_t s);
    return s[SET_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(sec_addr_t s);
    return s[SEC_ADDR_W-1:SET_W];
  endfunction

  // ---------------------------------------------------------------- init sweep
  logic [SET_W-1:0] init_set;
  logic             init_busy;
  assign init_done = !init_busy;

  // ---------------------------------------------------------------- lookup
  logic [SET_W-1:0] lk_set_q;
  logic [TAG_W-1:0] lk_tag_q;
  meta_t            set_meta [WAYS];
  logic [WAY_W-1:0] set_rr;

  always_ff @(posedge clk) begin
    if (lk_valid) begin
      lk_set_q <= set_of(lk_sec);
      lk_tag_q <= tag_of(lk_sec);
    end
  end

  always_comb begin
    logic found_inv;
    for (int unsigned w = 0; w < WAYS; w++) set_meta[w] = meta[lk_set_q][w];
    set_rr    = rr[lk_set_q];
    lk_hit    = 1'b0;
    lk_way    = '0;
    lk_pf     = 1'b0;
    found_inv = 1'b0;
    vic_way   = set_rr;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!lk_hit && set_meta[w].valid && set_meta[w].tag == lk_tag_q) begin
        lk_hit = 1'b1;
        lk_way = WAY_W'(w);
        lk_pf  = set_meta[w].pf;
      end
      if (!found_inv && !set_meta[w].valid) begin
        found_inv = 1'b1;
        vic_way   = WAY_W'(w);
      end
    end
    vic_valid = set_meta[vic_way].valid;
    vic_dirty = set_meta[vic_way].valid ? set_meta[vic_way].dirty : '0;
    vic_sec   = {set_meta[vic_way].tag, lk_set_q};
  end

  // ---------------------------------------------------------------- data read
  always_ff @(posedge clk) begin
    if (rd_valid) rd_data <= data[{set_of(rd_sec), rd_way}];
  end

  // ---------------------------------------------------------------- writes
  wire [SET_W-1:0] wset = set_of(wr_sec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + 1'b1;
      if (init_set == SET_W'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy) begin
      for (int unsigned w = 0; w < WAYS; w++) meta[init_set][w].valid <= 1'b0;
      rr[init_set] <= '0;
    end else begin
      if (wr_block) begin
        data[{wset, wr_way}][wr_blk*BLOCK_BITS +: BLOCK_BITS] <= wr_block_data;
        meta[wset][wr_way].dirty[wr_blk] <= 1'b1;
        meta[wset][wr_way].pf            <= 1'b0;
      end else if (wr_fill) begin
        data[{wset, wr_way}]        <= wr_sector_data;
        meta[wset][wr_way].valid    <= 1'b1;
        meta[wset][wr_way].pf       <= wr_fill_pf;
        meta[wset][wr_way].dirty    <= '0;
        meta[wset][wr_way].tag      <= tag_of(wr_sec);
        if (wr_way == rr[wset]) rr[wset] <= rr[wset] + 1'b1;
      end else if (wr_clr_pf) begin
        meta[wset][wr_way].pf <= 1'b0;
      end
    end
  end

  // at most one write command per cycle
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                              $onehot0({wr_block, wr_fill, wr_clr_pf}));

endmodule
