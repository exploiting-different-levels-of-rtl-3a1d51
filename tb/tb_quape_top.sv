// tb_quape_top: end-to-end test of the complete control processor at its
// default size (6 processors, 8-way superscalar, 64 qubits, 64-entry block
// table). A host model loads six program blocks of three priorities into
// the instruction memory and the block table and starts the scheduler; an
// acquisition model answers every readout trigger with a random result a
// fixed delay later. The testbench records every codeword on the microwave,
// flux and readout channels and checks:
//  * circuit steps: parallel gates leave together, label spacing holds, a
//    run wider than the issue width spills into the next cycle;
//  * feedback: FMR + branch and MRCE pick the operation the measurement
//    result asks for, and the operation after an MRCE on its target qubit
//    waits for it;
//  * inter-block communication through the shared registers;
//  * block dependencies: no priority-1 codeword before every priority-0 one;
//  * every mechanism happened at least once: allocation, prefetch, bank
//    switch, lookahead dispatch, recombination, late step, FMR stall, MRCE
//    context switch and MRCE dependency stall.
module tb_quape_top;
  import quape_pkg::*;
  import quape_enc_pkg::*;
  localparam int NPROC = 6, NQ = 64, NBLK = 64, DAQ_DELAY = 15;

  logic clk = 0, rst_n = 0;
  logic imem_we, bit_we, start, busy, all_done;
  logic [11:0] imem_waddr;
  logic [31:0] imem_wdata;
  logic [5:0] bit_waddr;
  bit_entry_t bit_wdata;
  logic [6:0] num_blocks;
  logic [NPROC-1:0] proc_busy;
  blk_status_e blk_status [NBLK];
  logic [7:0] prio_counter;
  logic [NQ-1:0] daq_valid, daq_value, mw_valid, flux_valid, ro_trig;
  logic [QOP_W-1:0] mw_cw [NQ], flux_cw [NQ];
  logic [31:0] alloc_count, prefetch_count, switch_count, collision_count;
  logic [31:0] late_count [NPROC], fmr_stall_cycles [NPROC], mrce_switches [NPROC],
               lookahead_count [NPROC], recombine_count [NPROC], dep_stall_count [NPROC],
               steps_issued [NPROC], retired [NPROC], mrce_clash_count [NPROC];

  quape_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  // emitted codewords: kind 0 microwave, 1 flux, 2 readout
  int ev_cyc [$], ev_kind [$], ev_q [$], ev_cw [$];
  int result_val [NQ], result_cyc [NQ], daq_due [NQ];
  logic [NQ-1:0] daq_valid_nxt, daq_value_nxt;

  // Channel monitor and acquisition model, both at the falling edge (the
  // channel outputs are registered, the acquisition inputs are driven here).
  always @(negedge clk) begin
    daq_valid = daq_valid_nxt;
    daq_value = daq_value_nxt;
    #1;
    cyc++;
    daq_valid_nxt = '0;
    daq_value_nxt = '0;
    for (int q = 0; q < NQ; q++) begin
      if (mw_valid[q])   begin ev_cyc.push_back(cyc); ev_kind.push_back(0); ev_q.push_back(q); ev_cw.push_back(int'(mw_cw[q])); end
      if (flux_valid[q]) begin ev_cyc.push_back(cyc); ev_kind.push_back(1); ev_q.push_back(q); ev_cw.push_back(int'(flux_cw[q])); end
      if (ro_trig[q]) begin
        ev_cyc.push_back(cyc); ev_kind.push_back(2); ev_q.push_back(q); ev_cw.push_back(int'(QOP_MEAS));
        daq_due[q] = cyc + DAQ_DELAY;
        result_val[q] = int'($urandom % 2);
      end
      if (daq_due[q] == cyc) begin
        daq_valid_nxt[q] = 1'b1;
        daq_value_nxt[q] = result_val[q][0];
        result_cyc[q] = cyc + 1;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: all_done never came");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // cycle of the first codeword of a kind/qubit/code, -1 if none
  function automatic int when(input int kind, input int q, input int cw);
    foreach (ev_q[i]) if (ev_kind[i] == kind && ev_q[i] == q && ev_cw[i] == cw) return ev_cyc[i];
    return -1;
  endfunction
  function automatic int count(input int kind, input int q, input int cw);
    int n;
    n = 0;
    foreach (ev_q[i]) if (ev_kind[i] == kind && ev_q[i] == q && ev_cw[i] == cw) n++;
    return n;
  endfunction
  function automatic int sum(input logic [31:0] v [NPROC]);
    int s;
    s = 0;
    for (int p = 0; p < NPROC; p++) s += int'(v[p]);
    return s;
  endfunction

  logic [31:0] prog [128];
  bit_entry_t  tbl [6];

  initial begin
    int t1, t2, t3, t4, tm, last0, first1, all_ok;
    imem_we = 0; imem_waddr = '0; imem_wdata = '0; bit_we = 0; bit_waddr = '0;
    bit_wdata = '0; num_blocks = '0; start = 0;
    daq_valid_nxt = '0; daq_value_nxt = '0;
    for (int q = 0; q < NQ; q++) begin daq_due[q] = -1; result_val[q] = 0; result_cyc[q] = -1; end
    foreach (prog[i]) prog[i] = '0;

    // block 0, priority 0: superscalar steps, feedback by FMR + branch,
    // store to a shared register
    prog[0]  = enc_qop(0, 1, 0, 0);
    prog[1]  = enc_qop(0, 1, 1, 0);
    prog[2]  = enc_qop(0, 1, 2, 0);
    prog[3]  = enc_qop(3, 2, 3, 0);                        // 10-wide run on q3..q12
    for (int i = 1; i < 10; i++) prog[3+i] = enc_qop(0, 2, 3+i, 0);
    prog[13] = enc_qop(4, 7'h41, 0, 1);                    // CZ q0,q1
    prog[14] = enc_qop(0, QOP_MEAS, 2, 0);
    prog[15] = enc_fmr(1, 2);
    prog[16] = enc_alu(OP_CMP, 0, 1, 0, 0);
    prog[17] = enc_br(BR_EQ, 19);
    prog[18] = enc_qop(1, 6, 3, 0);                        // only if q2 read 1
    prog[19] = enc_qop(2, 7, 4, 0);
    prog[20] = enc_ldi(2, 1234);
    prog[21] = enc_sreg(OP_STS, 0, 2, 3);
    tbl[0] = '{pc_start: 0, pc_end: 21, prio: 0};
    // block 1, priority 0: measurement and fast context switch
    prog[32] = enc_qop(0, QOP_MEAS, 30, 0);
    prog[33] = enc_mrce(30, 31, 2, 3);
    prog[34] = enc_qop(1, 5, 31, 0);                       // waits for the MRCE
    prog[35] = enc_qop(0, 5, 32, 0);
    tbl[1] = '{pc_start: 32, pc_end: 35, prio: 0};
    // block 2, priority 1: load the shared register, branch on it
    prog[48] = enc_sreg(OP_LDS, 3, 0, 3);
    prog[49] = enc_ldi(4, 1234);
    prog[50] = enc_alu(OP_CMP, 0, 3, 4, 0);
    prog[51] = enc_br(BR_NE, 5);
    prog[52] = enc_qop(1, 8, 40, 0);                       // only if the value arrived
    prog[53] = enc_qop(3, 9, 41, 0);
    tbl[2] = '{pc_start: 48, pc_end: 53, prio: 1};
    // block 3, priority 1
    prog[64] = enc_qop(0, 1, 42, 0);
    prog[65] = enc_qop(0, 1, 43, 0);
    prog[66] = enc_qop(0, 1, 44, 0);
    prog[67] = enc_qop(10, 1, 45, 0);
    tbl[3] = '{pc_start: 64, pc_end: 67, prio: 1};
    // blocks 4 and 5, priority 2
    prog[80] = enc_qop(0, 10, 50, 0);
    prog[81] = enc_qop(2, 11, 51, 0);
    tbl[4] = '{pc_start: 80, pc_end: 81, prio: 2};
    prog[96] = enc_qop(0, 12, 52, 0);
    tbl[5] = '{pc_start: 96, pc_end: 96, prio: 2};

    #12 rst_n = 1;
    // host: load instruction memory and block table, then start
    foreach (prog[i]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 12'(i); imem_wdata = prog[i];
    end
    foreach (tbl[b]) begin
      @(negedge clk); imem_we = 0; bit_we = 1; bit_waddr = 6'(b); bit_wdata = tbl[b];
    end
    @(negedge clk); bit_we = 0; num_blocks = 7'd6; start = 1;
    @(negedge clk); start = 0;
    wait (all_done);
    repeat (5) @(negedge clk);

    all_ok = 1;
    for (int b = 0; b < 6; b++) if (blk_status[b] != BLK_DONE) all_ok = 0;
    chk(all_ok == 1, "every block done");
    chk(!busy && proc_busy == '0, "all idle at the end");

    // block 0 timing
    t1 = when(0, 0, 1);
    chk(t1 >= 0 && when(0, 1, 1) == t1 && when(0, 2, 1) == t1, "step 1: three gates together");
    t2 = when(0, 3, 2);
    all_ok = 1;
    for (int q = 4; q <= 10; q++) if (when(0, q, 2) != t2) all_ok = 0;
    chk(t2 == t1 + 3 && all_ok == 1, $sformatf("step 2: eight gates 3 cycles after step 1 (%0d)", t2 - t1));
    t3 = when(0, 11, 2);
    chk(t3 == t2 + 1 && when(0, 12, 2) == t3, "gates 9 and 10 of the run spill one cycle");
    t4 = when(1, 0, 7'h41);
    chk(t4 == t3 + 4 && when(1, 1, 7'h41) == t4, $sformatf("CZ on q0,q1 4 cycles later (%0d)", t4 - t3));
    chk(when(2, 2, QOP_MEAS) == t4, "measurement of q2 with the CZ");
    chk(count(0, 3, 6) == result_val[2], $sformatf("FMR branch: gate on q3 iff q2 read 1 (read %0d)", result_val[2]));
    chk(when(0, 4, 7) > result_cyc[2], "gate after the FMR waits for the result");
    // block 1: MRCE
    tm = when(0, 31, result_val[30] != 0 ? 3 : 2);
    chk(tm > result_cyc[30] && count(0, 31, result_val[30] != 0 ? 2 : 3) == 0,
        $sformatf("MRCE picked op%0d after the result", result_val[30]));
    chk(when(0, 31, 5) > tm, "operation on the MRCE target waits for it");
    chk(when(0, 32, 5) >= 0, "last operation of block 1");
    // block 2: shared register
    chk(when(0, 40, 8) >= 0, "value passed through the shared register");
    chk(when(0, 41, 9) >= 0, "block 2 finished");
    // blocks 3..5
    chk(when(0, 42, 1) >= 0 && when(0, 42, 1) == when(0, 44, 1), "block 3 step");
    chk(when(0, 45, 1) == when(0, 42, 1) + 10, "block 3 label 10");
    chk(when(0, 50, 10) >= 0 && when(0, 51, 11) == when(0, 50, 10) + 2, "block 4");
    chk(when(0, 52, 12) >= 0, "block 5");
    // priorities: every priority-0 codeword before any priority-1 one
    last0 = 0; first1 = 1 << 30;
    foreach (ev_q[i]) begin
      if (ev_q[i] < 40 && ev_cyc[i] > last0) last0 = ev_cyc[i];
      if (ev_q[i] >= 40 && ev_q[i] < 50 && ev_cyc[i] < first1) first1 = ev_cyc[i];
    end
    chk(first1 > last0, "priority-1 blocks wait for priority 0");
    chk(collision_count == 0, "no channel collisions");

    // every mechanism was exercised
    chk(alloc_count > 0,                $sformatf("allocations %0d", alloc_count));
    chk(prefetch_count > 0,             $sformatf("prefetches %0d", prefetch_count));
    chk(switch_count > 0,               $sformatf("bank switches %0d", switch_count));
    chk(sum(lookahead_count) > 0,       $sformatf("lookahead dispatches %0d", sum(lookahead_count)));
    chk(sum(recombine_count) > 0,       $sformatf("recombinations %0d", sum(recombine_count)));
    chk(sum(late_count) > 0,            $sformatf("late steps %0d", sum(late_count)));
    chk(sum(fmr_stall_cycles) > 0,      $sformatf("FMR stall cycles %0d", sum(fmr_stall_cycles)));
    chk(sum(mrce_switches) > 0,         $sformatf("MRCE switches %0d", sum(mrce_switches)));
    chk(sum(dep_stall_count) > 0,       $sformatf("MRCE dependency stalls %0d", sum(dep_stall_count)));
    chk(sum(retired) > 0,               $sformatf("classical instructions %0d", sum(retired)));
    chk(sum(mrce_clash_count) == 0,     "no MRCE output clash");
    $display("allocations %0d prefetches %0d switches %0d lookahead %0d recombine %0d late %0d fmr-stall %0d mrce %0d dep-stall %0d",
             alloc_count, prefetch_count, switch_count, sum(lookahead_count), sum(recombine_count),
             sum(late_count), sum(fmr_stall_cycles), sum(mrce_switches), sum(dep_stall_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
