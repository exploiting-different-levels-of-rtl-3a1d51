// instr_mem: centralized instruction memory shared by all processors.
//
// All instructions of a quantum program live here; program blocks are
// copied from it into the processors' private instruction caches by the
// scheduler (allocation and prefetch). The host loads it through a
// synchronous write port before the run. The scheduler reads one word per
// cycle through an asynchronous read port (FPGA block RAM is assumed to be
// usable this way at the 100 MHz core clock; the published design only says
// block RAM is used). DEPTH is this design's choice.
//
// Ports: wr_en/wr_addr/wr_data (host, one word per clock), rd_addr ->
// rd_data (same cycle).
module instr_mem #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  assign rd_data = mem[rd_addr];
endmodule
