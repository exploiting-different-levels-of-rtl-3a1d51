// op_combiner: operation combiner of one processor.
//
// In the cycle the timing controller issues a circuit step, every way whose
// bit is set in pop_mask hands its FIFO head here. The combiner scatters
// these operations into a per-qubit vector (valid + operation code per
// qubit); a two-qubit operation is placed on both of its qubits. Two ways
// addressing the same qubit in one step is a program error: the lower way
// wins and conflict is raised. The per-qubit form is what the emitter
// translates into analog-channel codewords. Purely combinational.
module op_combiner #(
  parameter int unsigned WAYS = 8,
  parameter int unsigned NQ   = 64
) (
  input  logic [WAYS-1:0]           pop_mask,
  input  quape_pkg::qop_t           heads [WAYS],
  output logic [NQ-1:0]             q_valid,
  output logic [quape_pkg::QOP_W-1:0] q_op [NQ],
  output logic                      conflict
);
  import quape_pkg::*;

  always_comb begin
    q_valid  = '0;
    conflict = 1'b0;
    for (int q = 0; q < NQ; q++) q_op[q] = '0;
    for (int w = WAYS-1; w >= 0; w--) begin
      if (pop_mask[w]) begin
        if (32'(heads[w].q0) < NQ) begin
          if (q_valid[heads[w].q0]) conflict = 1'b1;
          q_valid[heads[w].q0] = 1'b1;
          q_op[heads[w].q0]    = heads[w].op;
        end
        if (is_two_qubit(heads[w].op) && 32'(heads[w].q1) < NQ) begin
          if (q_valid[heads[w].q1]) conflict = 1'b1;
          q_valid[heads[w].q1] = 1'b1;
          q_op[heads[w].q1]    = heads[w].op;
        end
      end
    end
  end
endmodule
