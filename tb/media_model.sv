// media_model: behavioural model of a memory medium behind the HMC (the DRAM
// devices of the DRAM cache, or the NVRAM main memory). Not synthesizable.
//
// One request at a time: req_ready is high while idle; a read is answered
// RD_LAT cycles after it is taken, a write acknowledged WR_LAT cycles after,
// both by a one-cycle resp_valid. Storage is sparse; a sector never written
// reads as init_sector(addr, SEED). A write stores the blocks selected by
// its mask. Counts reads and writes for the testbenches.
module media_model
  import nvsd_pkg::*;
  import nvsd_tb_pkg::*;
#(
  parameter int unsigned RD_LAT = 353,
  parameter int unsigned WR_LAT = 86,
  parameter logic [31:0] SEED   = 32'h0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  media_req_t req,
  output logic       resp_valid,
  output sector_t    resp_data
);
  sector_t mem [sec_addr_t];
  int      busy_cnt;
  logic    busy;
  sector_t pending;
  int      n_reads, n_writes;

  assign req_ready = !busy;

  function automatic sector_t read_sec(sec_addr_t a);
    if (mem.exists(a)) return mem[a];
    return init_sector(a, SEED);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      busy_cnt   <= 0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      pending    <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        sector_t cur;
        cur = read_sec(req.addr);
        if (req.write) begin
          for (int k = 0; k < BLK_PER_SEC; k++)
            if (req.mask[k]) cur[k*BLOCK_BITS +: BLOCK_BITS] = req.wdata[k*BLOCK_BITS +: BLOCK_BITS];
          mem[req.addr] = cur;
          n_writes <= n_writes + 1;
        end else begin
          n_reads <= n_reads + 1;
        end
        pending  <= cur;
        busy     <= 1'b1;
        busy_cnt <= int'(req.write ? WR_LAT : RD_LAT) - 1;
      end else if (busy) begin
        if (busy_cnt == 0) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_data  <= pending;
        end else busy_cnt <= busy_cnt - 1;
      end
    end
  end
endmodule
