// hmc: hybrid memory controller. It sits between the processor's last
// on-chip cache and two memory media: DRAM DIMMs used as a cache of NVRAM,
// and NVRAM as main memory. Inside it are an SRAM sector cache (8 MB,
// 256 B sectors), the SRAM tag cache that holds the DRAM cache's tags, and a
// next-line prefetcher that brings whole sectors into the sector cache.
//
// A demand request (a 64 B block read or write) is handled as follows.
//  1. Sector cache lookup, TAG_LAT cycles. On a hit the block is read or
//     written after DATA_LAT more cycles. A hit on a sector still marked as
//     prefetched counts as a useful prefetch and triggers the prefetcher.
//  2. On a miss the prefetcher is triggered and a way is chosen. A dirty
//     victim is written to NVRAM (its dirty blocks only) and its DRAM copy,
//     now stale, is dropped from the tag cache.
//  3. The tag cache is looked up: on a hit the sector is read from DRAM,
//     otherwise from NVRAM. The sector is filled into the sector cache and
//     the request is answered from it.
//  4. A sector that came from NVRAM on demand is then also written into the
//     DRAM cache and recorded in the tag cache.
// A prefetch goes through the same steps, except that a sector already in
// the sector cache is dropped, the filled sector is marked as prefetched, and
// it is never copied into the DRAM cache: prefetched data lives only in the
// sector cache. Demand requests have priority over queued prefetches, which
// are served only while no demand request waits. With pf_enable low the
// prefetcher is neither trained nor served.
// The controller handles one request at a time.
//
// Interfaces: req_* takes a block request (valid/ready); resp_valid pulses
// once per request, with the block for a read. dram_* and nvm_* carry sector
// requests (valid/ready) to the media; each request, read or write, is
// answered by one *_resp_valid pulse. stats counts the events the paper's
// accuracy and coverage metrics are built from.
//
// From the paper: the organisation, the sector cache sizes and 17/17 cycle
// tag/data latency, the tag cache and its use before DRAM, next-line
// prefetching of sectors into the sector cache only, and that the prefetch
// looks up the tag cache and reads DRAM on a hit and NVRAM otherwise.
// This design's choices: blocking operation, demand priority, write-allocate
// for block writes, dirty victims written to NVRAM (so DRAM cache copies stay
// clean), demand NVRAM fills copied into the DRAM cache, answering a missed
// request straight from the filled sector, one DRAM port for both channels.
module hmc
  import nvsd_pkg::*;
#(
  parameter longint unsigned SC_BYTES   = 64'd8 * 1024 * 1024,   // sector cache size
  parameter int unsigned     SC_WAYS    = 16,
  parameter longint unsigned DRAM_BYTES = 64'd64 * 1024 * 1024,  // DRAM cache size
  parameter int unsigned     TAG_LAT    = 17,
  parameter int unsigned     DATA_LAT   = 17,
  parameter int unsigned     PF_DEPTH   = 2,
  parameter int unsigned     PF_BUFS    = 8,
  parameter int unsigned     PF_ENTRIES = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pf_enable,
  output logic       ready,          // initialisation finished
  // processor side
  input  logic       req_valid,
  output logic       req_ready,
  input  hmc_req_t   req,
  output logic       resp_valid,
  output logic       resp_write,
  output block_t     resp_data,
  // DRAM cache data array
  output logic       dram_req_valid,
  input  logic       dram_req_ready,
  output media_req_t dram_req,
  input  logic       dram_resp_valid,
  input  sector_t    dram_resp_data,
  // NVRAM main memory
  output logic       nvm_req_valid,
  input  logic       nvm_req_ready,
  output media_req_t nvm_req,
  input  logic       nvm_resp_valid,
  input  sector_t    nvm_resp_data,
  // prefetcher events and counters
  output logic       ev_pf_trigger,
  output logic       ev_pf_drop,
  output hmc_stats_t stats
);

  localparam int unsigned WAY_W = $clog2(SC_WAYS);
  localparam int unsigned LAT_W = $clog2((TAG_LAT > DATA_LAT ? TAG_LAT : DATA_LAT) + 1);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_TAG, S_DATA, S_RESP, S_WB_RD, S_WB_REQ, S_WB_WAIT,
    S_TC, S_TC_RES, S_MREQ, S_MWAIT, S_DFILL_REQ, S_DFILL_WAIT
  } state_t;

  state_t state;

  // current request
  logic             cur_pf;      // 1: prefetch, 0: demand
  logic             cur_write;
  sec_addr_t        cur_sec;
  logic [BLK_SEL_W-1:0] cur_blk;
  block_t           cur_wdata;
  logic [WAY_W-1:0] cur_way;
  logic             from_dram;
  sector_t          buf_sec;     // sector read from a medium or a victim
  blk_mask_t        vic_dirty_q;
  sec_addr_t        vic_sec_q;
  logic [LAT_W-1:0] cnt;

  // ---------------------------------------------------------------- sector cache
  logic             sc_init_done, tc_init_done;
  logic             lk_valid, lk_hit, lk_pf, vic_valid;
  sec_addr_t        lk_sec, vic_sec;
  logic [WAY_W-1:0] lk_way, vic_way;
  blk_mask_t        vic_dirty;
  logic             rd_valid;
  logic [WAY_W-1:0] sc_wr_way;
  sec_addr_t        rd_sec;
  logic [WAY_W-1:0] rd_way;
  sector_t          rd_data;
  logic             wr_block, wr_fill, wr_clr_pf, wr_fill_pf;
  block_t           wr_block_data;
  sector_t          wr_sector_data;

  hmc_sector_cache #(.SIZE_BYTES(SC_BYTES), .WAYS(SC_WAYS)) u_sc (
    .clk, .rst_n,
    .init_done(sc_init_done),
    .lk_valid, .lk_sec, .lk_hit, .lk_way, .lk_pf,
    .vic_way, .vic_valid, .vic_dirty, .vic_sec,
    .rd_valid, .rd_sec, .rd_way, .rd_data,
    .wr_block, .wr_fill, .wr_clr_pf,
    .wr_sec(cur_sec), .wr_way(sc_wr_way), .wr_blk(cur_blk),
    .wr_block_data, .wr_sector_data, .wr_fill_pf
  );

  // ---------------------------------------------------------------- tag cache
  logic      tc_lk_valid, tc_hit, tc_fill, tc_inval;
  sec_addr_t tc_wr_sec;

  tag_cache #(.DRAM_BYTES(DRAM_BYTES)) u_tc (
    .clk, .rst_n,
    .init_done(tc_init_done),
    .lk_valid (tc_lk_valid),
    .lk_sec   (cur_sec),
    .lk_hit   (tc_hit),
    .fill     (tc_fill),
    .inval    (tc_inval),
    .wr_sec   (tc_wr_sec)
  );

  // ---------------------------------------------------------------- prefetcher
  logic      pf_acc_valid, pf_acc_miss, pf_acc_pf_hit;
  logic      pf_valid, pf_ready;
  sec_addr_t pf_sec;

  next_line_prefetcher #(
    .LINE_W(SEC_ADDR_W), .DEPTH(PF_DEPTH), .NUM_BUF(PF_BUFS), .ENTRIES(PF_ENTRIES)
  ) u_pf (
    .clk, .rst_n,
    .acc_valid (pf_acc_valid),
    .acc_line  (cur_sec),
    .acc_miss  (pf_acc_miss),
    .acc_pf_hit(pf_acc_pf_hit),
    .pf_valid,
    .pf_line   (pf_sec),
    .pf_ready,
    .ev_trigger(ev_pf_trigger),
    .ev_drop   (ev_pf_drop)
  );

  // ---------------------------------------------------------------- control
  wire take_demand = (state == S_IDLE) && req_valid;
  wire take_pf     = (state == S_IDLE) && !req_valid && pf_valid && pf_enable;
  wire tag_done    = (state == S_TAG) && cnt == '0;

  assign ready     = (state != S_INIT);
  assign req_ready = take_demand;
  assign pf_ready  = take_pf;
  assign lk_valid  = take_demand || take_pf;
  assign lk_sec    = take_demand ? req.addr[BLK_ADDR_W-1:BLK_SEL_W] : pf_sec;

  // prefetcher training: demand lookups that miss or hit a prefetched sector
  assign pf_acc_valid  = tag_done && !cur_pf && pf_enable && (!lk_hit || lk_pf);
  assign pf_acc_miss   = !lk_hit;
  assign pf_acc_pf_hit = lk_hit && lk_pf;

  always_comb begin
    rd_valid       = 1'b0;
    rd_sec         = cur_sec;
    rd_way         = cur_way;
    wr_block       = 1'b0;
    wr_fill        = 1'b0;
    wr_clr_pf      = 1'b0;
    wr_fill_pf     = cur_pf;
    wr_block_data  = cur_wdata;
    wr_sector_data = buf_sec;
    tc_lk_valid    = (state == S_TC);
    tc_fill        = 1'b0;
    tc_inval       = 1'b0;
    tc_wr_sec      = cur_sec;
    dram_req_valid = 1'b0;
    nvm_req_valid  = 1'b0;
    dram_req       = '{write: 1'b0, addr: cur_sec, mask: '1, wdata: buf_sec};
    nvm_req        = '{write: 1'b0, addr: cur_sec, mask: '1, wdata: buf_sec};
    case (state)
      S_TAG: begin
        // demand hit on a prefetched sector: it has now been used
        if (tag_done && !cur_pf && lk_hit && lk_pf && !cur_write) begin
          wr_clr_pf = 1'b1;
        end
      end
      S_DATA: begin
        if (cnt == '0 && !cur_write) rd_valid = 1'b1;
      end
      S_WB_RD: begin
        rd_valid = 1'b1;
        rd_sec   = vic_sec_q;
      end
      S_WB_REQ: begin
        nvm_req_valid = 1'b1;
        nvm_req       = '{write: 1'b1, addr: vic_sec_q, mask: vic_dirty_q, wdata: rd_data};
        tc_inval      = nvm_req_ready;
        tc_wr_sec     = vic_sec_q;
      end
      S_MREQ: begin
        dram_req_valid = from_dram;
        nvm_req_valid  = !from_dram;
      end
      S_MWAIT: begin
        if (from_dram ? dram_resp_valid : nvm_resp_valid) begin
          wr_fill        = 1'b1;
          wr_sector_data = from_dram ? dram_resp_data : nvm_resp_data;
          // a demand write lands in the freshly filled sector one cycle later
        end
      end
      S_RESP: begin
        if (cur_write) wr_block = 1'b1;
      end
      S_DFILL_REQ: begin
        dram_req_valid = 1'b1;
        dram_req       = '{write: 1'b1, addr: cur_sec, mask: '1, wdata: buf_sec};
        tc_fill        = dram_req_ready;
      end
      default: ;
    endcase
  end

  // In S_TAG the way register is loaded only at the end of the lookup, so the
  // prefetch-bit clear issued then addresses the hit way directly.
  assign sc_wr_way = (state == S_TAG) ? lk_way : cur_way;

  logic filled;   // the current demand was served by a fill

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_INIT;
      cur_pf          <= 1'b0;
      cur_write       <= 1'b0;
      cur_sec         <= '0;
      cur_blk         <= '0;
      cur_wdata       <= '0;
      cur_way         <= '0;
      from_dram       <= 1'b0;
      buf_sec         <= '0;
      vic_dirty_q     <= '0;
      vic_sec_q       <= '0;
      cnt             <= '0;
      filled          <= 1'b0;
      resp_valid      <= 1'b0;
      resp_write      <= 1'b0;
      resp_data       <= '0;
      stats           <= '0;
    end else begin
      resp_valid <= 1'b0;
      case (state)
        S_INIT: if (sc_init_done && tc_init_done) state <= S_IDLE;
        S_IDLE: begin
          filled <= 1'b0;
          if (take_demand) begin
            cur_pf    <= 1'b0;
            cur_write <= req.write;
            cur_sec   <= req.addr[BLK_ADDR_W-1:BLK_SEL_W];
            cur_blk   <= req.addr[BLK_SEL_W-1:0];
            cur_wdata <= req.wdata;
            cnt       <= LAT_W'(TAG_LAT - 1);
            state     <= S_TAG;
            stats.demand_reqs <= stats.demand_reqs + 1;
          end else if (take_pf) begin
            cur_pf    <= 1'b1;
            cur_write <= 1'b0;
            cur_sec   <= pf_sec;
            cur_blk   <= '0;
            cnt       <= LAT_W'(TAG_LAT - 1);
            state     <= S_TAG;
          end
        end
        S_TAG: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else if (lk_hit) begin
            cur_way <= lk_way;
            if (cur_pf) begin
              stats.pf_dropped <= stats.pf_dropped + 1;
              state <= S_IDLE;
            end else begin
              if (lk_pf) stats.pf_useful <= stats.pf_useful + 1;
              cnt   <= LAT_W'(DATA_LAT - 1);
              state <= S_DATA;
            end
          end else begin
            if (!cur_pf) stats.demand_misses <= stats.demand_misses + 1;
            cur_way         <= vic_way;
            vic_sec_q       <= vic_sec;
            vic_dirty_q     <= vic_dirty;
            state           <= (vic_valid && vic_dirty != '0) ? S_WB_RD : S_TC;
          end
        end
        S_DATA: begin
          if (cnt != '0) cnt <= cnt - 1'b1;
          else state <= S_RESP;
        end
        S_RESP: begin
          resp_valid <= 1'b1;
          resp_write <= cur_write;
          resp_data  <= filled ? buf_sec[cur_blk*BLOCK_BITS +: BLOCK_BITS]
                               : rd_data[cur_blk*BLOCK_BITS +: BLOCK_BITS];
          state      <= (filled && !from_dram && !cur_pf) ? S_DFILL_REQ : S_IDLE;
        end
        S_WB_RD:  state <= S_WB_REQ;
        S_WB_REQ: if (nvm_req_ready) state <= S_WB_WAIT;
        S_WB_WAIT: begin
          if (nvm_resp_valid) begin
            stats.writebacks <= stats.writebacks + 1;
            state <= S_TC;
          end
        end
        S_TC:     state <= S_TC_RES;
        S_TC_RES: begin
          from_dram <= tc_hit;
          state     <= S_MREQ;
        end
        S_MREQ: begin
          if (from_dram ? dram_req_ready : nvm_req_ready) begin
            if (from_dram) stats.dram_reads  <= stats.dram_reads + 1;
            else           stats.nvram_reads <= stats.nvram_reads + 1;
            if (cur_pf)    stats.pf_issued   <= stats.pf_issued + 1;
            state <= S_MWAIT;
          end
        end
        S_MWAIT: begin
          if (from_dram ? dram_resp_valid : nvm_resp_valid) begin
            buf_sec <= from_dram ? dram_resp_data : nvm_resp_data;
            filled  <= 1'b1;
            state   <= cur_pf ? S_IDLE : S_RESP;
          end
        end
        S_DFILL_REQ: if (dram_req_ready) state <= S_DFILL_WAIT;
        S_DFILL_WAIT: begin
          if (dram_resp_valid) begin
            stats.dram_fills <= stats.dram_fills + 1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
