// instr_fetch: instruction fetch stage of one processor.
//
// Holds the block-relative program counter. Each cycle it offers up to
// WAYS consecutive instructions from the active private-cache bank
// (rd_addr = pc; avail = how many of them lie inside the block). The
// pre-decoder takes accept <= avail of them and the PC advances by accept;
// a taken branch (redirect) loads the PC with its target instead; a
// target past the block end ends the block. A block
// start (start) clears the PC. at_end tells that the whole block has been
// fetched. The PC width follows the cache depth; everything here is this
// design's choice, the published design only names the stage.
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module instr_fetch #(
  parameter int unsigned WAYS = 8,
  parameter int unsigned AW   = 8      // cache address width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [AW:0]            blk_len,
  input  logic                   redirect,
  input  logic [11:0]            redirect_target,
  input  logic [$clog2(WAYS):0]  accept,
  output logic [AW:0]            rd_addr,
  output logic [$clog2(WAYS):0]  avail,
  output logic                   at_end
);
  localparam int unsigned CW = $clog2(WAYS) + 1;
  logic [AW:0] pc;
  logic [AW:0] left;

  assign rd_addr = pc;
  assign at_end  = pc >= blk_len;
  assign left    = at_end ? '0 : blk_len - pc;
  assign avail   = (left > (AW+1)'(WAYS)) ? CW'(WAYS) : CW'(left);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pc <= '0;
    else if (start)    pc <= '0;
    else if (redirect) pc <= (12'(blk_len) < redirect_target) ? blk_len : (AW+1)'(redirect_target);
    else               pc <= pc + (AW+1)'(accept);
  end

  accept_in_range: assert property (@(posedge clk) disable iff (!rst_n) accept <= avail);
endmodule
