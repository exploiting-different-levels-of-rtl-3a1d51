// tb_op_combiner: self-checking test of the operation combiner. Random
// single- and two-qubit operations on distinct qubits, random pop masks;
// checks the per-qubit vector and the conflict flag when two ways collide.
module tb_op_combiner;
  import quape_pkg::*;
  localparam int WAYS = 4, NQ = 16;
  logic [WAYS-1:0] pop_mask;
  qop_t heads [WAYS];
  logic [NQ-1:0] q_valid;
  logic [QOP_W-1:0] q_op [NQ];
  logic conflict;
  int checks = 0, failures = 0;

  op_combiner #(.WAYS(WAYS), .NQ(NQ)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NQ-1:0] ev;
    logic [QOP_W-1:0] eop [NQ];
    int perm [NQ];
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < NQ; i++) perm[i] = i;
      perm.shuffle();
      pop_mask = 4'($urandom);
      ev = 0;
      for (int q = 0; q < NQ; q++) eop[q] = 0;
      for (int w = 0; w < WAYS; w++) begin
        heads[w].op = 7'($urandom);
        heads[w].q0 = 6'(perm[2*w]);
        heads[w].q1 = 6'(perm[2*w+1]);
        if (pop_mask[w]) begin
          ev[perm[2*w]] = 1; eop[perm[2*w]] = heads[w].op;
          if (heads[w].op[6]) begin ev[perm[2*w+1]] = 1; eop[perm[2*w+1]] = heads[w].op; end
        end
      end
      #1;
      checks += 2;
      if (q_valid != ev) failures++;
      if (conflict) failures++;
      for (int q = 0; q < NQ; q++) if (ev[q]) begin checks++; if (q_op[q] != eop[q]) failures++; end
    end
    // two ways on the same qubit: conflict, lower way wins
    pop_mask = 4'b0011;
    heads[0] = '{op: 7'h05, q0: 6'd3, q1: 6'd0};
    heads[1] = '{op: 7'h06, q0: 6'd3, q1: 6'd1};
    #1; checks += 2;
    if (!conflict) failures++;
    if (q_op[3] != 7'h05) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
