// quantum_pipeline: one way of the quantum superscalar back end.
//
// Quantum decoder plus the way's operation FIFO queue. The (op, q0, q1)
// fields of a QOP instruction dispatched to this way by the pre-decoder are
// pushed into the FIFO in the same cycle. The timing manager pops the
// head when the step the operation belongs to reaches its issue time; the
// head is visible combinationally. Dispatching a measurement raises
// meas_clr for the measured qubit so the measurement result register drops
// its stale result. The FIFO depth is this design's choice.
//
// Ports: in_valid/in_op (dispatch), full; pop, head_valid/head.
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module quantum_pipeline #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NQ    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  quape_pkg::qop_t   in_op,
  output logic              full,
  input  logic              pop,
  output logic              head_valid,
  output quape_pkg::qop_t   head,
  output logic [NQ-1:0]     meas_clr
);
  import quape_pkg::*;
  localparam int unsigned PW = $clog2(DEPTH);

  qop_t         fifo [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [PW:0]   cnt;
  qop_t          dec;

  assign dec        = in_op;
  assign full       = cnt == (PW+1)'(DEPTH);
  assign head_valid = cnt != '0;
  assign head       = fifo[rp];

  always_comb begin
    meas_clr = '0;
    if (in_valid && dec.op == QOP_MEAS && 32'(dec.q0) < NQ) meas_clr[dec.q0] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid && !full) fifo[wp] <= dec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (in_valid && !full) wp <= wp + 1'b1;
      if (pop && head_valid) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(in_valid && !full) - (PW+1)'(pop && head_valid);
    end
  end

  no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && full));
  no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) !(pop && !head_valid));
endmodule
