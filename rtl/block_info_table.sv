// block_info_table: the block information table of the multiprocessor.
//
// Holds, before the run starts, one 32-bit entry per program block:
// PC start address, PC end address (inclusive) and the block's priority
// (bit_entry_t in quape_pkg, 12 + 12 + 8 bits). Blocks with equal priority
// may run in parallel; a block may start when the scheduler's priority
// counter equals its priority. 64 entries of 32 bits follow the published
// implementation; the field split is this design's choice. The direct
// dependency-vector representation is not held here (it needs one bit per
// block, which does not fit a 32-bit entry of a 64-entry table).
//
// Ports: host write (wr_en, wr_addr, wr_data), scheduler read
// (rd_addr -> rd_data, same cycle).
module block_info_table #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  quape_pkg::bit_entry_t wr_data,
  input  logic [AW-1:0]         rd_addr,
  output quape_pkg::bit_entry_t rd_data
);
  quape_pkg::bit_entry_t tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[wr_addr] <= wr_data;
  end

  assign rd_data = tbl[rd_addr];
endmodule
