// register_file: general purpose registers of one processor.
//
// NREGS x DATA_W registers with two asynchronous read ports and one
// synchronous write port, all reset to zero. Each processor owns one; the
// published design names it but gives neither size nor port count, which
// are this design's choice (16 x 32 bits, 2R1W).
module register_file #(
  parameter int unsigned NREGS  = 16,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned AW     = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     ra,
  input  logic [AW-1:0]     rb,
  output logic [DATA_W-1:0] rdata_a,
  output logic [DATA_W-1:0] rdata_b,
  input  logic              we,
  input  logic [AW-1:0]     wa,
  input  logic [DATA_W-1:0] wdata
);
  logic [DATA_W-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wdata;
    end
  end

  assign rdata_a = regs[ra];
  assign rdata_b = regs[rb];
endmodule
