// tb_instr_fetch: self-checking test of the fetch stage. Checks the number
// of instructions offered per cycle against the block length, PC advance by
// the accepted count, a branch redirect and the end-of-block flag.
module tb_instr_fetch;
  localparam int WAYS = 4, AW = 6;
  logic clk = 0, rst_n = 0, start, redirect, at_end;
  logic [AW:0] blk_len, rd_addr;
  logic [11:0] redirect_target;
  logic [2:0] accept, avail;
  int checks = 0, failures = 0;

  instr_fetch #(.WAYS(WAYS), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pc, a, exp_avail;
    start = 0; redirect = 0; redirect_target = 0; accept = 0; blk_len = 7'd23;
    #12 rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    pc = 0;
    for (int t = 0; t < 40; t++) begin
      exp_avail = (23 - pc) > WAYS ? WAYS : (23 - pc);
      if (exp_avail < 0) exp_avail = 0;
      #1;
      checks += 3;
      if (rd_addr != 7'(pc)) failures++;
      if (avail != 3'(exp_avail)) failures++;
      if (at_end != (pc >= 23)) failures++;
      if (t == 5) begin
        redirect = 1; redirect_target = 12'd3; accept = 0;
        @(negedge clk); redirect = 0; pc = 3;
      end else begin
        a = exp_avail == 0 ? 0 : int'($urandom % (exp_avail + 1));
        if (a > int'(avail)) a = int'(avail);   // never offer more than the DUT has
        accept = 3'(a);
        @(negedge clk);
        accept = 0;
        pc += a;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
