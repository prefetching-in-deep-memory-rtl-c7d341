// next_line_prefetcher: one-block-lookahead prefetcher with a lookahead of
// DEPTH lines, feeding its own set of stream buffers.
//
// The prefetcher watches the accesses of the cache it is attached to. A
// demand miss, or a demand hit on a line that an earlier prefetch brought in,
// triggers it; it then queues lines A+1 .. A+DEPTH (A being the accessed
// line) in the stream buffers, which continue the stream if it is already
// queued and issue the lines one per cycle.
// The same module serves the L1 data cache (64 B lines) and the HMC sector
// cache (256 B sectors): the caller passes line addresses of its own size.
//
// Interface: acc_* is one observed access per cycle; pf_* is the prefetch
// request stream with a valid/ready handshake. Triggered lines can issue
// from the cycle after the access.
//
// From the paper: next-line prefetching, DEPTH = 2, eight 32-entry stream
// buffers, its use at both the L1 data cache and the HMC cache. Its choices:
// trigger on misses and on prefetch hits (one of the variants the paper
// lists), ascending order only.
module next_line_prefetcher #(
  parameter int unsigned LINE_W  = 34,
  parameter int unsigned DEPTH   = 2,
  parameter int unsigned NUM_BUF = 8,
  parameter int unsigned ENTRIES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              acc_valid,
  input  logic [LINE_W-1:0] acc_line,
  input  logic              acc_miss,     // the access missed the cache
  input  logic              acc_pf_hit,   // the access hit a line brought by a prefetch
  output logic              pf_valid,
  output logic [LINE_W-1:0] pf_line,
  input  logic              pf_ready,
  output logic              ev_trigger,   // this access triggered the prefetcher
  output logic              ev_drop       // a stream buffer overflowed
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  assign ev_trigger = acc_valid && (acc_miss || acc_pf_hit);

  logic ev_alloc_unused, ev_continue_unused;

  stream_buffers #(
    .NUM_BUF(NUM_BUF), .ENTRIES(ENTRIES), .LINE_W(LINE_W),
    .STRIDE_W(2), .MAX_COUNT(DEPTH), .OWNER_W(1)
  ) u_sb (
    .clk, .rst_n,
    .push_valid (ev_trigger),
    .push_base  (acc_line),
    .push_stride(2'sd1),
    .push_count (CW'(DEPTH)),
    .push_owner (1'b0),
    .issue_valid(pf_valid),
    .issue_addr (pf_line),
    .issue_ready(pf_ready),
    .ev_alloc   (ev_alloc_unused),
    .ev_continue(ev_continue_unused),
    .ev_drop    (ev_drop)
  );

endmodule
