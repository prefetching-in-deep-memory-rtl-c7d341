// nvsd_tb_pkg: helpers shared by the testbenches: the initial contents of
// main memory (a fixed function of the block address, so any read can be
// checked without storing the whole memory) and a sector builder.
package nvsd_tb_pkg;
  import nvsd_pkg::*;

  // Contents of a never-written block: word i = addr * 0x9E3779B1 + i * 0x01000193 ^ seed.
  function automatic block_t init_block(blk_addr_t a, logic [31:0] seed);
    block_t b;
    for (int i = 0; i < BLOCK_BITS / 32; i++)
      b[i*32 +: 32] = (32'(a) * 32'h9E37_79B1 + 32'(i) * 32'h0100_0193) ^ seed;
    return b;
  endfunction

  function automatic sector_t init_sector(sec_addr_t s, logic [31:0] seed);
    sector_t d;
    for (int k = 0; k < BLK_PER_SEC; k++)
      d[k*BLOCK_BITS +: BLOCK_BITS] = init_block({s, BLK_SEL_W'(k)}, seed);
    return d;
  endfunction
endpackage
