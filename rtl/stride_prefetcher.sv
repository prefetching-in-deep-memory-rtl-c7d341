// stride_prefetcher: instruction-pointer based stride prefetcher with a
// reference table and its own stream buffers.
//
// Each of the TABLE_ENTRIES table entries holds the three fields the classic
// design uses: the load's IP tag, the line address of the load's last
// access and the stride between its last two accesses. The table is direct
// mapped on the low IP bits. On a load the entry is read: if the IP tag
// matches and the new distance (line - last) equals the stored, non-zero
// stride, it is a stride hit and lines line + k*stride, k = 1..DEPTH, are
// queued in the stream buffer that follows this load's stream (allocated if
// none does). In every case the entry is updated with the new last line and
// the new distance; an IP tag mismatch replaces the entry (stride 0).
//
// Interface: ld_* is one observed load per cycle; pf_* is the prefetch
// request stream (valid/ready). A stride hit is decided in the cycle of the
// load and its first prefetch can issue in the next cycle.
//
// From the paper: the table fields and the stride-hit rule, DEPTH = 4 and
// eight 32-entry stream buffers. Its choices: 64 direct-mapped entries,
// strides in lines rather than bytes, a single stride match (no further
// confidence) to trigger, as the paper states it.
module stride_prefetcher #(
  parameter int unsigned LINE_W        = 34,
  parameter int unsigned PC_W          = 48,
  parameter int unsigned TABLE_ENTRIES = 64,
  parameter int unsigned STRIDE_W      = 16,
  parameter int unsigned DEPTH         = 4,
  parameter int unsigned NUM_BUF       = 8,
  parameter int unsigned ENTRIES       = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_valid,
  input  logic [PC_W-1:0]   ld_pc,
  input  logic [LINE_W-1:0] ld_line,
  output logic              pf_valid,
  output logic [LINE_W-1:0] pf_line,
  input  logic              pf_ready,
  output logic              ev_stride_hit,
  output logic              ev_drop
);

  localparam int unsigned IDX_W = $clog2(TABLE_ENTRIES);
  localparam int unsigned TAG_W = PC_W - IDX_W;
  localparam int unsigned CW    = $clog2(DEPTH + 1);

  typedef struct packed {
    logic [TAG_W-1:0]           tag;
    logic [LINE_W-1:0]          last;
    logic signed [STRIDE_W-1:0] stride;
  } rpt_entry_t;

  rpt_entry_t rpt       [TABLE_ENTRIES];
  logic       rpt_valid [TABLE_ENTRIES];

  wire [IDX_W-1:0] idx = ld_pc[IDX_W-1:0];
  wire [TAG_W-1:0] tag = ld_pc[PC_W-1:IDX_W];
  rpt_entry_t      ent;
  logic            tag_hit;
  logic [LINE_W-1:0] diff;
  logic signed [STRIDE_W-1:0] diff_s;
  logic            diff_fits;

  always_comb begin
    ent     = rpt[idx];
    tag_hit = rpt_valid[idx] && ent.tag == tag;
    diff    = ld_line - ent.last;
    diff_s  = diff[STRIDE_W-1:0];
    // the distance is usable only if it is representable as a stride
    diff_fits = (diff[LINE_W-1:STRIDE_W-1] == '0) || (diff[LINE_W-1:STRIDE_W-1] == '1);
  end

  assign ev_stride_hit = ld_valid && tag_hit && diff_fits &&
                         diff_s == ent.stride && ent.stride != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < TABLE_ENTRIES; i++) rpt_valid[i] <= 1'b0;
    end else if (ld_valid) begin
      rpt_valid[idx] <= 1'b1;
    end
  end

  // table fields other than the valid bit are not reset
  always_ff @(posedge clk) begin
    if (ld_valid) begin
      rpt[idx].tag    <= tag;
      rpt[idx].last   <= ld_line;
      rpt[idx].stride <= (tag_hit && diff_fits) ? diff_s : '0;
    end
  end

  logic ev_alloc_unused, ev_continue_unused;

  stream_buffers #(
    .NUM_BUF(NUM_BUF), .ENTRIES(ENTRIES), .LINE_W(LINE_W),
    .STRIDE_W(STRIDE_W), .MAX_COUNT(DEPTH), .OWNER_W(IDX_W)
  ) u_sb (
    .clk, .rst_n,
    .push_valid (ev_stride_hit),
    .push_base  (ld_line),
    .push_stride(ent.stride),
    .push_count (CW'(DEPTH)),
    .push_owner (idx),
    .issue_valid(pf_valid),
    .issue_addr (pf_line),
    .issue_ready(pf_ready),
    .ev_alloc   (ev_alloc_unused),
    .ev_continue(ev_continue_unused),
    .ev_drop    (ev_drop)
  );

endmodule
