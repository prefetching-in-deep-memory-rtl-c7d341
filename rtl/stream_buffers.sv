// stream_buffers: a set of NUM_BUF stream buffers, each a queue of up to
// ENTRIES pending prefetch line addresses belonging to one stream.
//
// A prefetcher pushes a stream step as (base, stride, count, owner): the
// candidate lines are base + j*stride for j = 1..count. If a buffer already
// follows that stream (same owner and stride, and its last queued line is
// base + k*stride for some 0 <= k <= count), the push continues it and only
// the candidates beyond that line are queued, so a stream is never queued
// twice. Otherwise a buffer is allocated round-robin, flushed and given the
// new stream. Candidates that do not fit in the buffer are dropped.
// Queued lines leave through one issue port, round-robin over the non-empty
// buffers, one per cycle when issue_ready is high.
//
// Timing: a push is taken in the cycle push_valid is high (it never stalls);
// its first line can issue in the next cycle.
//
// The paper gives the number and size of the buffers (8 buffers of 32
// entries) and says a stream buffer is allocated when a stride is detected.
// Continuation matching, round-robin allocation, dropping on overflow and
// round-robin issue are this design's own choices.
module stream_buffers #(
  parameter int unsigned NUM_BUF   = 8,
  parameter int unsigned ENTRIES   = 32,
  parameter int unsigned LINE_W    = 34,
  parameter int unsigned STRIDE_W  = 16,
  parameter int unsigned MAX_COUNT = 4,
  parameter int unsigned OWNER_W   = 6
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // stream step from the prefetcher
  input  logic                       push_valid,
  input  logic [LINE_W-1:0]          push_base,
  input  logic signed [STRIDE_W-1:0] push_stride,
  input  logic [$clog2(MAX_COUNT+1)-1:0] push_count,
  input  logic [OWNER_W-1:0]         push_owner,
  // prefetch issue
  output logic                       issue_valid,
  output logic [LINE_W-1:0]          issue_addr,
  input  logic                       issue_ready,
  // event pulses
  output logic                       ev_alloc,     // a buffer was allocated to a new stream
  output logic                       ev_continue,  // a push continued an existing stream
  output logic                       ev_drop       // candidates were dropped on a full buffer
);

  localparam int unsigned BUF_W = (NUM_BUF > 1) ? $clog2(NUM_BUF) : 1;
  localparam int unsigned PTR_W = $clog2(ENTRIES);
  localparam int unsigned CNT_W = $clog2(ENTRIES + 1);
  localparam int unsigned PC_W  = $clog2(MAX_COUNT + 1);

  logic [LINE_W-1:0]          q      [NUM_BUF][ENTRIES];
  logic [PTR_W-1:0]           head   [NUM_BUF];
  logic [PTR_W-1:0]           tail   [NUM_BUF];
  logic [CNT_W-1:0]           count  [NUM_BUF];
  logic                       active [NUM_BUF];
  logic [OWNER_W-1:0]         owner  [NUM_BUF];
  logic signed [STRIDE_W-1:0] stride [NUM_BUF];
  logic [LINE_W-1:0]          last   [NUM_BUF];
  logic [BUF_W-1:0]           alloc_ptr;
  logic [BUF_W-1:0]           rr_ptr;

  // ---------------------------------------------------------------- push
  logic [LINE_W-1:0] cand [MAX_COUNT+1];    // cand[j] = base + j*stride
  logic              match_found;
  logic [BUF_W-1:0]  match_buf;
  logic [PC_W-1:0]   match_k;
  logic [BUF_W-1:0]  tgt;
  logic [PC_W-1:0]   first_j;               // first candidate index to queue
  logic [PC_W-1:0]   want;                  // candidates wanted
  logic [PC_W-1:0]   n_enq;                 // candidates that fit
  logic [CNT_W-1:0]  tgt_count;

  always_comb begin
    for (int unsigned j = 0; j <= MAX_COUNT; j++)
      cand[j] = push_base + LINE_W'(signed'(push_stride) * signed'(j));
    match_found = 1'b0;
    match_buf   = '0;
    match_k     = '0;
    for (int unsigned b = 0; b < NUM_BUF; b++) begin
      for (int unsigned k = 0; k <= MAX_COUNT; k++) begin
        if (!match_found && active[b] && owner[b] == push_owner &&
            stride[b] == push_stride && k <= push_count && last[b] == cand[k]) begin
          match_found = 1'b1;
          match_buf   = BUF_W'(b);
          match_k     = PC_W'(k);
        end
      end
    end
    tgt       = match_found ? match_buf : alloc_ptr;
    first_j   = match_found ? PC_W'(match_k + 1'b1) : PC_W'(1);
    want      = (push_count >= first_j) ? PC_W'(push_count - first_j + 1'b1) : '0;
    tgt_count = match_found ? count[tgt] : '0;
    if (CNT_W'(want) > CNT_W'(ENTRIES) - tgt_count)
      n_enq = PC_W'(CNT_W'(ENTRIES) - tgt_count);
    else
      n_enq = want;
  end

  // ---------------------------------------------------------------- issue
  logic             any_ready;
  logic [BUF_W-1:0] sel;
  always_comb begin
    any_ready = 1'b0;
    sel       = '0;
    for (int unsigned i = 0; i < NUM_BUF; i++) begin
      logic [BUF_W-1:0] b;
      b = BUF_W'((int'(rr_ptr) + i) % NUM_BUF);
      if (!any_ready && count[b] != '0) begin
        any_ready = 1'b1;
        sel       = b;
      end
    end
  end
  assign issue_valid = any_ready;
  assign issue_addr  = q[sel][head[sel]];
  wire do_pop = any_ready && issue_ready;

  assign ev_alloc    = push_valid && !match_found;
  assign ev_continue = push_valid && match_found;
  assign ev_drop     = push_valid && (n_enq != want);

  // ---------------------------------------------------------------- state
  logic [PTR_W-1:0] base_tail;              // first free slot of the target buffer
  logic [CNT_W-1:0] count_nxt [NUM_BUF];
  always_comb begin
    base_tail = match_found ? tail[tgt] : '0;
    for (int unsigned b = 0; b < NUM_BUF; b++) begin
      count_nxt[b] = count[b];
      if (push_valid && tgt == BUF_W'(b))
        count_nxt[b] = (match_found ? count[b] : '0) + CNT_W'(n_enq);
      // a pop from a buffer that is re-allocated in this cycle is void
      if (do_pop && sel == BUF_W'(b) && !(push_valid && !match_found && tgt == BUF_W'(b)))
        count_nxt[b] = count_nxt[b] - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned b = 0; b < NUM_BUF; b++) begin
        head[b]   <= '0;
        tail[b]   <= '0;
        count[b]  <= '0;
        active[b] <= 1'b0;
        owner[b]  <= '0;
        stride[b] <= '0;
        last[b]   <= '0;
      end
      alloc_ptr <= '0;
      rr_ptr    <= '0;
    end else begin
      if (do_pop) begin
        head[sel] <= head[sel] + 1'b1;
        rr_ptr    <= BUF_W'((int'(sel) + 1) % NUM_BUF);
      end
      if (push_valid) begin
        if (!match_found) begin
          active[tgt] <= 1'b1;
          owner[tgt]  <= push_owner;
          stride[tgt] <= push_stride;
          last[tgt]   <= push_base;
          head[tgt]   <= '0;
          alloc_ptr   <= BUF_W'((int'(alloc_ptr) + 1) % NUM_BUF);
        end
        if (n_enq != '0) last[tgt] <= cand[first_j + n_enq - 1'b1];
        tail[tgt] <= PTR_W'(base_tail + PTR_W'(n_enq));
      end
      for (int unsigned b = 0; b < NUM_BUF; b++) count[b] <= count_nxt[b];
    end
  end

  // queue storage, not reset: an entry is read only after it has been written
  always_ff @(posedge clk) begin
    if (push_valid) begin
      for (int unsigned i = 0; i < MAX_COUNT; i++)
        if (i < n_enq) q[tgt][PTR_W'(base_tail + PTR_W'(i))] <= cand[first_j + PC_W'(i)];
    end
  end

  // A push never asks for more candidates than MAX_COUNT.
  always_comb assert (!push_valid || push_count <= PC_W'(MAX_COUNT));

endmodule
