// tb_mrce_unit: self-checking test of the fast-context-switch unit. Stores
// MRCE contexts, checks the busy-qubit mask and ready flag, then returns
// measurement results and checks that op1 (result 1) or op0 (result 0) is
// issued on the target qubit exactly one cycle after the result is valid.
module tb_mrce_unit;
  import quape_pkg::*;
  import quape_enc_pkg::*;
  localparam int NQ = 16, NCTX = 2;
  logic clk = 0, rst_n = 0, in_valid, ready, idle, out_valid;
  logic [31:0] in_instr, switch_count;
  logic [NQ-1:0] mrr_valid, mrr_value, busy_mask;
  logic [5:0] out_qubit;
  logic [6:0] out_op;
  int checks = 0, failures = 0;

  mrce_unit #(.NCTX(NCTX), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    in_valid = 0; in_instr = 0; mrr_valid = 0; mrr_value = 0;
    #12 rst_n = 1;
    @(negedge clk);
    chk(idle && ready, "idle after reset");
    in_valid = 1; in_instr = enc_mrce(0, 1, 7'h00, 7'h01);   // MRCE qr0, q1, op0, op1
    @(negedge clk);
    in_instr = enc_mrce(2, 5, 7'h0A, 7'h0B);
    @(negedge clk);
    in_valid = 0;
    chk(!ready, "both slots used");
    chk(busy_mask == 16'b0000_0000_0010_0111, "busy mask");
    repeat (3) begin @(negedge clk); chk(!out_valid, "no issue before result"); end
    mrr_valid[2] = 1; mrr_value[2] = 0;
    @(negedge clk);
    mrr_valid[2] = 0;
    chk(out_valid && out_qubit == 5 && out_op == 7'h0A, "result 0 -> op0 on q5");
    chk(busy_mask == 16'b0000_0000_0000_0011, "slot freed");
    mrr_valid[0] = 1; mrr_value[0] = 1;
    @(negedge clk);
    mrr_valid[0] = 0;
    chk(out_valid && out_qubit == 1 && out_op == 7'h01, "result 1 -> op1 on q1");
    @(negedge clk);
    chk(idle && !out_valid && switch_count == 2, "idle again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
