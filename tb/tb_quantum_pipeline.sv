// tb_quantum_pipeline: self-checking test of one quantum way. Pushes QOP
// instructions with random pops, checks FIFO order of the decoded
// operations, the full flag at the configured depth, and the measurement
// clear pulse on dispatch of a measurement.
module tb_quantum_pipeline;
  import quape_pkg::*;
  localparam int DEPTH = 4, NQ = 16;
  logic clk = 0, rst_n = 0, in_valid, full, pop, head_valid;
  qop_t in_op;
  qop_t head;
  logic [NQ-1:0] meas_clr;
  int checks = 0, failures = 0;
  qop_t q [$];

  quantum_pipeline #(.DEPTH(DEPTH), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int op, q0, q1;
    in_valid = 0; in_op = '0; pop = 0;
    #12 rst_n = 1;
    // fill to full
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      op = $urandom % 60; q0 = $urandom % NQ; q1 = $urandom % NQ;
      in_valid = 1; in_op = '{op: 7'(op), q0: 6'(q0), q1: 6'(q1)};
      q.push_back('{op: 7'(op), q0: 6'(q0), q1: 6'(q1)});
    end
    @(negedge clk); in_valid = 0;
    checks++; if (!full) failures++;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      pop = head_valid && ($urandom % 2 == 1);
      in_valid = 0;
      if (!full && $urandom % 2 == 1) begin
        op = ($urandom % 4 == 0) ? int'(QOP_MEAS) : int'($urandom % 60);
        q0 = $urandom % NQ; q1 = $urandom % NQ;
        in_valid = 1; in_op = '{op: 7'(op), q0: 6'(q0), q1: 6'(q1)};
        #1;
        checks++;
        if (meas_clr != ((op == int'(QOP_MEAS)) ? (16'b1 << q0) : 16'b0)) failures++;
      end
      if (pop) begin
        checks++;
        if (head != q[0]) begin failures++; $display("head mismatch"); end
        void'(q.pop_front());
      end
      if (in_valid) q.push_back('{op: 7'(op), q0: 6'(q0), q1: 6'(q1)});
      @(posedge clk); #1;
      checks++;
      if (head_valid != (q.size() != 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
