// tb_classical_pipeline: self-checking test of the classical pipeline.
// Runs a short instruction sequence (LDI, ADD, SUB, XOR, ADDI, CMP, BR,
// FMR, LDS, STS) and checks results through the store path to the shared
// registers, the branch redirect for each condition, the FMR stall until a
// valid measurement result, and the LDS/STS wait for a grant.
module tb_classical_pipeline;
  import quape_pkg::*;
  import quape_enc_pkg::*;
  localparam int NQ = 16;
  logic clk = 0, rst_n = 0, in_valid, ready, redirect;
  logic [31:0] in_instr, sreg_wdata, sreg_rdata, fmr_stall_cycles, retired;
  logic [11:0] redirect_target;
  logic [NQ-1:0] mrr_valid, mrr_value;
  logic sreg_req, sreg_we, sreg_gnt;
  logic [3:0] sreg_idx;
  int checks = 0, failures = 0;

  classical_pipeline #(.NQ(NQ)) dut (.*);
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

  task automatic exec(input logic [31:0] ins);
    @(negedge clk);
    in_valid = 1; in_instr = ins;
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  // store register r through STS and return the value presented
  task automatic peek(input int r, output logic [31:0] v);
    @(negedge clk);
    in_valid = 1; in_instr = enc_sreg(OP_STS, 0, r, 3); sreg_gnt = 1;
    #1;
    v = sreg_wdata;
    chk(sreg_req && sreg_we && sreg_idx == 3, "STS request");
    @(posedge clk); #1 in_valid = 0; sreg_gnt = 0;
  endtask

  initial begin
    logic [31:0] v;
    in_valid = 0; in_instr = 0; mrr_valid = 0; mrr_value = 0; sreg_gnt = 0; sreg_rdata = 0;
    #12 rst_n = 1;
    exec(enc_ldi(1, 100));
    exec(enc_ldi(2, -7));
    exec(enc_alu(OP_ADD, 3, 1, 2, 0));
    exec(enc_alu(OP_SUB, 4, 1, 2, 0));
    exec(enc_alu(OP_XOR, 5, 1, 2, 0));
    exec(enc_alu(OP_ADDI, 6, 1, 0, -3));
    peek(3, v); chk(v == 93, "ADD");
    peek(4, v); chk(v == 107, "SUB");
    peek(5, v); chk(v == (32'd100 ^ 32'hFFFFFFF9), "XOR");
    peek(6, v); chk(v == 97, "ADDI");
    // compare and branch
    exec(enc_alu(OP_CMP, 0, 2, 1, 0));       // -7 < 100
    @(negedge clk); in_valid = 1; in_instr = enc_br(BR_LT, 42); #1;
    chk(redirect && redirect_target == 42, "BR LT taken");
    in_instr = enc_br(BR_GE, 42); #1; chk(!redirect, "BR GE not taken");
    in_instr = enc_br(BR_EQ, 42); #1; chk(!redirect, "BR EQ not taken");
    in_instr = enc_br(BR_NE, 17); #1; chk(redirect && redirect_target == 17, "BR NE taken");
    in_instr = enc_br(BR_ALWAYS, 5); #1; chk(redirect && redirect_target == 5, "BR always");
    @(posedge clk); #1 in_valid = 0;
    // FMR stalls until the result is valid
    @(negedge clk); in_valid = 1; in_instr = enc_fmr(7, 9);
    repeat (4) begin #1; chk(!ready, "FMR stalls"); @(negedge clk); end
    mrr_valid[9] = 1; mrr_value[9] = 1; #1;
    chk(ready, "FMR proceeds");
    @(posedge clk); #1 in_valid = 0;
    chk(fmr_stall_cycles == 4, "FMR stall count");
    peek(7, v); chk(v == 1, "FMR value");
    // LDS waits for grant
    @(negedge clk); in_valid = 1; in_instr = enc_sreg(OP_LDS, 8, 0, 2); sreg_rdata = 32'hCAFE;
    #1; chk(sreg_req && !sreg_we && !ready, "LDS waits for grant");
    @(negedge clk); sreg_gnt = 1; #1; chk(ready, "LDS granted");
    @(posedge clk); #1 in_valid = 0; sreg_gnt = 0;
    peek(8, v); chk(v == 32'hCAFE, "LDS value");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
