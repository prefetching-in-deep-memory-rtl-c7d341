// tag_cache: SRAM table in the hybrid memory controller that holds the tags
// of the sectors stored in the DRAM cache, whose DRAM devices hold only data.
//
// The controller looks a sector up here before it touches DRAM, so DRAM is
// read only when the sector is known to be there. The table is direct
// mapped: one entry (valid bit and tag) per 256 B sector frame of the DRAM
// cache, DRAM_BYTES / 256 entries (64 MB gives 262144 entries, 14-bit tags
// for a 40-bit address).
//
// Ports:
//  * lookup: lk_valid with a sector address; lk_hit is valid one cycle later.
//  * fill: records that a sector now occupies its frame (the previous
//    occupant, always clean in this design, is simply overwritten).
//  * inval: clears the frame if it holds the given sector (used when a newer
//    copy of the sector is written back to NVRAM).
//  * after reset one entry is cleared per cycle; init_done rises when done.
//
// From the paper: the tag cache itself, its role (looked up first, DRAM
// accessed only on a hit) and the 64 MB DRAM cache. Its choices: direct
// mapping, sector-sized DRAM cache frames, the command set.
module tag_cache
  import nvsd_pkg::*;
#(
  parameter longint unsigned DRAM_BYTES = 64'd64 * 1024 * 1024
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      init_done,
  input  logic      lk_valid,
  input  sec_addr_t lk_sec,
  output logic      lk_hit,
  input  logic      fill,
  input  logic      inval,
  input  sec_addr_t wr_sec
);

  localparam longint unsigned FRAMES = DRAM_BYTES / 64'(SECTOR_BYTES);
  localparam int unsigned IDX_W = $clog2(FRAMES);
  localparam int unsigned TAG_W = SEC_ADDR_W - IDX_W;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
  } tc_entry_t;

  tc_entry_t tags [FRAMES];

  logic [IDX_W-1:0] init_idx;
  logic             init_busy;
  assign init_done = !init_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_idx  <= '0;
    end else if (init_busy) begin
      init_idx <= init_idx + 1'b1;
      if (init_idx == IDX_W'(FRAMES - 1)) init_busy <= 1'b0;
    end
  end

  tc_entry_t lk_ent;
  logic [TAG_W-1:0] lk_tag_q;
  always_ff @(posedge clk) begin
    if (lk_valid) begin
      lk_ent   <= tags[lk_sec[IDX_W-1:0]];
      lk_tag_q <= lk_sec[SEC_ADDR_W-1:IDX_W];
    end
  end
  assign lk_hit = lk_ent.valid && lk_ent.tag == lk_tag_q;

  wire [IDX_W-1:0] widx = wr_sec[IDX_W-1:0];
  wire [TAG_W-1:0] wtag = wr_sec[SEC_ADDR_W-1:IDX_W];
  tc_entry_t w_old;
  assign w_old = tags[widx];

  always_ff @(posedge clk) begin
    if (init_busy)
      tags[init_idx] <= '0;
    else if (fill)
      tags[widx] <= '{valid: 1'b1, tag: wtag};
    else if (inval && w_old.valid && w_old.tag == wtag)
      tags[widx] <= '0;
  end

endmodule
