// tb_predecoder: self-checking test of the pre-decoder (4-way, 8-entry
// buffer) with a behavioural fetch stage and classical unit around it.
// The program checks: grouping of a label-0 run with its leading QOP, the
// split of a run longer than the issue width, recombination of a step whose
// instructions were fetched in two cycles, lookahead dispatch of a classical
// instruction ahead of buffered QOPs, flushing of the instructions after a
// taken branch, in-order dispatch of MRCE, and the stall of a QOP on a
// qubit that a pending MRCE reserves.
module tb_predecoder;
  import quape_pkg::*;
  import quape_enc_pkg::*;
  localparam int WAYS = 4, BUF = 8, NQ = 16, LEN = 16;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [31:0] f_instr [WAYS];
  logic [2:0] f_avail, f_accept;
  logic f_at_end, q_ready, q_fire, c_valid, c_ready, redirect, m_valid, m_ready, empty;
  logic [WAYS-1:0] q_mask;
  qop_t q_op [WAYS];
  logic [6:0] q_label;
  logic [NQ-1:0] busy_mask;
  logic [31:0] c_instr, m_instr, lookahead_count, recombine_count, dep_stall_count;
  int checks = 0, failures = 0;
  logic [31:0] prog [LEN];
  int pc = 0, busy_timer = 0, cyc = 0;
  int qsteps [$];          // encoded as first-index*100 + size
  qop_t qlog [$];
  logic [31:0] clog [$], mlog [$];
  int busy_clear_cyc = -1, dep_q_cyc = -1;

  predecoder #(.WAYS(WAYS), .BUF(BUF), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  always_comb begin
    for (int i = 0; i < WAYS; i++) f_instr[i] = (pc + i < LEN) ? prog[pc+i] : 32'd0;
    f_avail  = (LEN - pc > WAYS) ? 3'(WAYS) : (pc >= LEN ? 3'd0 : 3'(LEN - pc));
    f_at_end = pc >= LEN;
    redirect = c_valid && c_ready && c_instr[31:26] == OP_BR;
  end
  assign q_ready = 1'b1;
  assign c_ready = 1'b1;
  assign m_ready = 1'b1;

  // The behavioural fetch and classical models act only around the falling
  // edge: the PC for the next cycle is applied at the edge, and the DUT's
  // outputs are sampled 1 time unit later, when they are settled.
  int pc_nxt = 0, busy_nxt = 0;
  always @(negedge clk) begin
    pc = pc_nxt;
    busy_timer = busy_nxt;
    #1;
    cyc <= cyc + 1;
    pc_nxt = pc;
    if (rst_n) begin
      if (redirect) pc_nxt = int'(c_instr[11:0]);
      else pc_nxt = pc + int'(f_accept);
      if (q_fire) begin
        qsteps.push_back(int'(q_label) * 100 + $countones(q_mask));
        for (int i = 0; i < WAYS; i++) if (q_mask[i]) begin
          qlog.push_back(q_op[i]);
          if (q_op[i].q0 == 6'd6) dep_q_cyc = cyc;
        end
      end
      if (c_valid && c_ready) clog.push_back(c_instr);
      busy_nxt = busy_timer;
      if (m_valid && m_ready) begin mlog.push_back(m_instr); busy_nxt = 8; end
      else if (busy_timer > 0) begin
        busy_nxt = busy_timer - 1;
        if (busy_timer == 1) busy_clear_cyc = cyc;
      end
    end
  end
  assign busy_mask = (busy_timer > 0) ? 16'h0060 : 16'h0000;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    prog[0]  = enc_qop(0, 1, 0, 0);
    prog[1]  = enc_qop(0, 1, 1, 0);
    prog[2]  = enc_qop(0, 1, 2, 0);
    prog[3]  = enc_qop(3, 2, 0, 0);
    prog[4]  = enc_qop(0, 2, 1, 0);
    prog[5]  = enc_qop(0, 2, 2, 0);
    prog[6]  = enc_qop(0, 2, 3, 0);
    prog[7]  = enc_qop(0, 2, 4, 0);
    prog[8]  = enc_ldi(1, 5);
    prog[9]  = enc_br(BR_ALWAYS, 12);
    prog[10] = enc_qop(0, 9, 9, 0);
    prog[11] = enc_qop(0, 9, 10, 0);
    prog[12] = enc_qop(1, 3, 5, 0);
    prog[13] = enc_mrce(5, 6, 7, 8);
    prog[14] = enc_qop(2, 4, 6, 0);
    prog[15] = enc_qop(0, 4, 7, 0);
    #8 rst_n = 1;
    wait (pc >= LEN && empty);
    repeat (3) @(posedge clk);
    chk(qsteps.size() == 5, $sformatf("five steps, got %0d", qsteps.size()));
    if (qsteps.size() == 5) begin
      chk(qsteps[0] == 3,   "step 1: three parallel QOPs");
      chk(qsteps[1] == 304, "step 2: label 3, four QOPs (recombined)");
      chk(qsteps[2] == 1,   "step 2 overflow: fifth QOP alone");
      chk(qsteps[3] == 101, "QOP after the branch target");
      chk(qsteps[4] == 202, "dependent QOPs after the MRCE");
    end
    chk(qlog.size() == 11, "eleven QOPs dispatched");
    foreach (qlog[i]) chk(qlog[i].op != 7'd9, "no QOP from the branch shadow");
    chk(clog.size() == 2 && clog[0] == prog[8] && clog[1] == prog[9], "classical LDI, BR in order");
    chk(mlog.size() == 1 && mlog[0] == prog[13], "one MRCE");
    chk(lookahead_count >= 1, "lookahead happened");
    chk(recombine_count >= 1, "recombination happened");
    chk(dep_stall_count >= 1, "MRCE dependency stall happened");
    chk(dep_q_cyc > busy_clear_cyc, "QOP on reserved qubit waits for the MRCE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
