// tb_processor: self-checking test of one processing unit (4-way, 16
// qubits) with a behavioural private cache and measurement result register.
//
// Block A checks superscalar timing: four parallel gates issued in one
// cycle, a two-qubit gate plus measurement 5 cycles later, a gate 4 cycles
// after that while an MRCE waits for its result (fast context switch), the
// MRCE's op1 issued one cycle after the result returns, and a dependent
// gate on the MRCE target held back until then (and counted late).
// Block B (other cache bank) checks classical feedback: FMR stalls until
// the result, CMP/BR skip a gate, the following gate still issues.
module tb_processor;
  import quape_pkg::*;
  import quape_enc_pkg::*;
  localparam int WAYS = 4, NQ = 16, CAW = 6;
  logic clk = 0, rst_n = 0, start, start_bank, busy, done, cache_sel;
  logic [CAW:0] cache_addr, cache_len;
  logic [31:0] cache_data [WAYS];
  logic [NQ-1:0] mrr_valid, mrr_value, meas_clr, op_valid;
  logic sreg_req, sreg_we, sreg_gnt;
  logic [3:0] sreg_idx;
  logic [31:0] sreg_wdata, sreg_rdata;
  logic [QOP_W-1:0] op_code [NQ];
  logic [31:0] late_count, fmr_stall_cycles, mrce_switches, lookahead_count, recombine_count,
               dep_stall_count, steps_issued, mrce_clash_count, retired;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] bank [2][64];
  int blen [2];
  int ev_cyc [$], ev_q [$], ev_op [$];
  int meas_cyc = -1, result_cyc = -1;
  int result_delay = 20;
  logic result_value = 1;

  processor #(.WAYS(WAYS), .NQ(NQ), .CACHE_AW(CAW)) dut (.*);
  always #5 clk = ~clk;

  always_comb begin
    for (int i = 0; i < WAYS; i++)
      cache_data[i] = (int'(cache_addr) + i < 64) ? bank[cache_sel][int'(cache_addr) + i] : 32'd0;
    cache_len = 7'(blen[cache_sel]);
  end
  assign sreg_gnt = sreg_req;
  assign sreg_rdata = 0;

  // behavioural measurement: result arrives result_delay cycles after issue
  always @(negedge clk) begin
    cyc <= cyc + 1;
    for (int q = 0; q < NQ; q++) if (op_valid[q]) begin
      ev_cyc.push_back(cyc); ev_q.push_back(q); ev_op.push_back(int'(op_code[q]));
      if (op_code[q] == QOP_MEAS) meas_cyc = cyc;
    end
    for (int q = 0; q < NQ; q++) if (meas_clr[q]) mrr_valid[q] <= 1'b0;
    if (meas_cyc >= 0 && cyc == meas_cyc + result_delay) begin
      mrr_valid <= mrr_valid | 16'hFFFF;
      mrr_value <= {NQ{result_value}};
      result_cyc = cyc;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic int find(input int q, input int op);
    foreach (ev_q[i]) if (ev_q[i] == q && ev_op[i] == op) return ev_cyc[i];
    return -1;
  endfunction

  initial begin
    int ta, tb, tc, tm, td;
    start = 0; start_bank = 0; mrr_valid = 0; mrr_value = 0;
    for (int b = 0; b < 2; b++) for (int i = 0; i < 64; i++) bank[b][i] = 0;
    bank[0][0] = enc_qop(0, 1, 0, 0);
    bank[0][1] = enc_qop(0, 1, 1, 0);
    bank[0][2] = enc_qop(0, 1, 2, 0);
    bank[0][3] = enc_qop(0, 1, 3, 0);
    bank[0][4] = enc_qop(5, 7'h41, 0, 1);
    bank[0][5] = enc_qop(0, QOP_MEAS, 2, 0);
    bank[0][6] = enc_mrce(2, 3, 2, 3);
    bank[0][7] = enc_ldi(1, 3);
    bank[0][8] = enc_qop(4, 4, 4, 0);
    bank[0][9] = enc_qop(2, 5, 3, 0);
    blen[0] = 10;
    bank[1][0] = enc_qop(0, 1, 0, 0);
    bank[1][1] = enc_qop(0, QOP_MEAS, 1, 0);
    bank[1][2] = enc_fmr(2, 1);
    bank[1][3] = enc_alu(OP_CMP, 0, 2, 0, 0);
    bank[1][4] = enc_br(BR_EQ, 6);
    bank[1][5] = enc_qop(1, 6, 0, 0);
    bank[1][6] = enc_qop(1, 7, 1, 0);
    blen[1] = 7;
    #12 rst_n = 1;
    // ---- block A
    @(negedge clk); start = 1; start_bank = 0; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    ta = find(0, 1); tb = find(0, 7'h41); tc = find(4, 4); tm = find(3, 3); td = find(3, 5);
    chk(ta >= 0 && find(1, 1) == ta && find(2, 1) == ta && find(3, 1) == ta, "step A: four gates together");
    chk(tb == ta + 5, $sformatf("step B 5 cycles after A (%0d)", tb - ta));
    chk(find(1, 7'h41) == tb && find(2, QOP_MEAS) == tb, "CZ on q0,q1 and measurement of q2 together");
    chk(tc == tb + 4, $sformatf("step C 4 cycles after B (%0d)", tc - tb));
    chk(tc < result_cyc, "step C runs while the MRCE waits");
    chk(tm == result_cyc + 1, $sformatf("MRCE op1 one cycle after result (%0d vs %0d)", tm, result_cyc));
    chk(find(3, 2) < 0, "op0 not issued");
    chk(td > tm, "dependent gate after the MRCE");
    chk(mrce_switches == 1 && dep_stall_count > 0 && late_count == 1, "MRCE counters");
    chk(steps_issued == 4, "four timeline steps");
    chk(!busy, "idle after done");
    // ---- block B: classical feedback through FMR
    ev_cyc.delete(); ev_q.delete(); ev_op.delete();
    meas_cyc = -1; result_value = 0; result_delay = 15;
    @(negedge clk); start = 1; start_bank = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    chk(find(1, QOP_MEAS) >= 0, "measurement issued");
    chk(find(0, 6) < 0, "branch skipped the gate");
    chk(find(1, 7) > find(1, QOP_MEAS), "gate after the branch issued");
    chk(fmr_stall_cycles > 10, $sformatf("FMR stalled %0d cycles", fmr_stall_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
