// l1_prefetch_engine: the prefetching engine of the L1 data cache, made of a
// next-line prefetcher (DEPTH 2) and an IP-based stride prefetcher (DEPTH 4),
// each with its own eight 32-entry stream buffers.
//
// The engine observes every L1 data-cache access. Every load trains the
// stride prefetcher; misses and hits on prefetched lines trigger the
// next-line prefetcher. The two prefetch streams merge into one request port
// towards the L2 cache; when both have a line ready the stride prefetcher is
// served first, and a line equal to the one issued just before is not sent
// twice. The L1 cache itself is outside this module: the port carries 64 B
// line addresses.
//
// Interface: l1_* is one observed L1 data access per cycle (is_load marks
// the loads the stride table tracks); pf_* is a valid/ready request stream
// of line addresses to prefetch into L1. Latency from a triggering access to
// its first request is one cycle.
//
// From the paper: the two prefetchers at the L1 data cache and their depths.
// Its choices: stride-first arbitration and the back-to-back duplicate filter.
module l1_prefetch_engine
  import nvsd_pkg::*;
#(
  parameter int unsigned NL_DEPTH     = 2,
  parameter int unsigned STRIDE_DEPTH = 4,
  parameter int unsigned NUM_BUF      = 8,
  parameter int unsigned ENTRIES      = 32,
  parameter int unsigned RPT_ENTRIES  = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      l1_valid,
  input  logic      l1_is_load,
  input  pc_t       l1_pc,
  input  blk_addr_t l1_line,
  input  logic      l1_miss,
  input  logic      l1_pf_hit,
  output logic      pf_valid,
  output blk_addr_t pf_line,
  input  logic      pf_ready,
  output logic      ev_nl_trigger,
  output logic      ev_stride_hit,
  output logic      ev_sb_drop,
  output logic      ev_dup_filtered
);

  logic      nl_valid, nl_ready, st_valid, st_ready;
  blk_addr_t nl_line, st_line;
  logic      nl_drop, st_drop;

  next_line_prefetcher #(
    .LINE_W(BLK_ADDR_W), .DEPTH(NL_DEPTH), .NUM_BUF(NUM_BUF), .ENTRIES(ENTRIES)
  ) u_nl (
    .clk, .rst_n,
    .acc_valid (l1_valid),
    .acc_line  (l1_line),
    .acc_miss  (l1_miss),
    .acc_pf_hit(l1_pf_hit),
    .pf_valid  (nl_valid),
    .pf_line   (nl_line),
    .pf_ready  (nl_ready),
    .ev_trigger(ev_nl_trigger),
    .ev_drop   (nl_drop)
  );

  stride_prefetcher #(
    .LINE_W(BLK_ADDR_W), .PC_W(PC_W), .TABLE_ENTRIES(RPT_ENTRIES),
    .DEPTH(STRIDE_DEPTH), .NUM_BUF(NUM_BUF), .ENTRIES(ENTRIES)
  ) u_stride (
    .clk, .rst_n,
    .ld_valid     (l1_valid && l1_is_load),
    .ld_pc        (l1_pc),
    .ld_line      (l1_line),
    .pf_valid     (st_valid),
    .pf_line      (st_line),
    .pf_ready     (st_ready),
    .ev_stride_hit(ev_stride_hit),
    .ev_drop      (st_drop)
  );

  assign ev_sb_drop = nl_drop || st_drop;

  // Fixed-priority merge with a filter for a line just issued.
  logic      last_ok;
  blk_addr_t last_line;
  wire       use_st  = st_valid;
  blk_addr_t cand;
  logic      dup;
  always_comb begin
    cand = use_st ? st_line : nl_line;
    dup  = last_ok && cand == last_line;
  end

  assign pf_valid        = (st_valid || nl_valid) && !dup;
  assign pf_line         = cand;
  assign st_ready        = use_st && (pf_ready || dup);
  assign nl_ready        = !use_st && nl_valid && (pf_ready || dup);
  assign ev_dup_filtered = (st_valid || nl_valid) && dup;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_ok   <= 1'b0;
      last_line <= '0;
    end else if (pf_valid && pf_ready) begin
      last_ok   <= 1'b1;
      last_line <= cand;
    end
  end

  // the same line is never requested twice in a row
  a_no_dup: assert property (@(posedge clk) disable iff (!rst_n)
                             pf_valid |-> !(last_ok && pf_line == last_line));

endmodule
