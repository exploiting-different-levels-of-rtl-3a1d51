// private_icache: private instruction cache of one processor.
//
// Two banks ("Cache 1" and the extra prefetch cache) and a switch that
// selects which bank the processor fetches from. The scheduler writes a
// program block into either bank one word per cycle and then records the
// block length; while the processor runs from one bank the next block can
// be prefetched into the other, so a block switch only changes the bank
// select. The fetch side reads WAYS consecutive words per cycle starting at
// rd_addr (asynchronous read), as needed by the W-way superscalar fetch.
// Bank depth is this design's choice; words beyond the bank read as NOP.
//
// Ports: wr_en/wr_bank/wr_addr/wr_data, len_we/len_bank/len (block length),
// sel (active bank), rd_addr -> rd_data[WAYS], active_len.
module private_icache #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WAYS  = 8,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic              wr_bank,
  input  logic [AW-1:0]     wr_addr,
  input  logic [31:0]       wr_data,
  input  logic              len_we,
  input  logic              len_bank,
  input  logic [AW:0]       len,
  input  logic              sel,
  input  logic [AW:0]       rd_addr,
  output logic [31:0]       rd_data [WAYS],
  output logic [AW:0]       active_len
);
  logic [31:0] bank0 [DEPTH];
  logic [31:0] bank1 [DEPTH];
  logic [AW:0] blen [2];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) bank0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) bank1[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blen[0] <= '0;
      blen[1] <= '0;
    end else if (len_we) begin
      blen[len_bank] <= len;
    end
  end

  assign active_len = blen[sel];

  always_comb begin
    for (int i = 0; i < WAYS; i++) begin
      logic [AW:0] a;
      a = rd_addr + (AW+1)'(i);
      if (a >= (AW+1)'(DEPTH)) rd_data[i] = '0;
      else if (sel) rd_data[i] = bank1[a[AW-1:0]];
      else          rd_data[i] = bank0[a[AW-1:0]];
    end
  end
endmodule
