// mrce_unit: fast context switch for simple feedback control.
//
// An MRCE instruction (measurement-result conditional execution) names a
// result qubit, a target qubit and two operations. Instead of stalling the
// processor until the measurement returns, the unit stores this context in
// one of NCTX slot registers and the processor keeps executing. While a
// slot is live, its result and target qubits are reported in busy_mask; the
// pre-decoder stalls any later quantum instruction touching them. When the
// measurement result register shows a valid result for a live slot, the
// unit switches back to it: op1 (result 1) or op0 (result 0) is issued to
// the target qubit in the next cycle (out_valid/out_qubit/out_op) and the
// slot is freed. One slot is resolved per cycle, lowest index first.
// Storing the context and stalling on dependent qubits follow the published
// mechanism; the slot count and the one-cycle resolve are this design's
// choice (the published prototype measured three cycles per switch).
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module mrce_unit #(
  parameter int unsigned NCTX = 4,
  parameter int unsigned NQ   = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [31:0]                   in_instr,
  output logic                          ready,
  input  logic [NQ-1:0]                 mrr_valid,
  input  logic [NQ-1:0]                 mrr_value,
  output logic [NQ-1:0]                 busy_mask,
  output logic                          idle,
  output logic                          out_valid,
  output logic [quape_pkg::QADDR_W-1:0] out_qubit,
  output logic [quape_pkg::QOP_W-1:0]   out_op,
  output logic [31:0]                   switch_count
);
  import quape_pkg::*;

  typedef struct packed {
    logic               live;
    logic [QADDR_W-1:0] qr;
    logic [QADDR_W-1:0] qt;
    logic [QOP_W-1:0]   op0;
    logic [QOP_W-1:0]   op1;
  } ctx_t;

  ctx_t ctx [NCTX];
  int   free_slot, res_slot;

  always_comb begin
    free_slot = -1;
    res_slot  = -1;
    busy_mask = '0;
    for (int i = NCTX-1; i >= 0; i--) begin
      if (!ctx[i].live) free_slot = i;
      if (ctx[i].live && mrr_valid[ctx[i].qr]) res_slot = i;
      if (ctx[i].live) begin
        busy_mask[ctx[i].qr] = 1'b1;
        busy_mask[ctx[i].qt] = 1'b1;
      end
    end
  end

  assign ready = free_slot >= 0;

  always_comb begin
    idle = 1'b1;
    for (int i = 0; i < NCTX; i++) if (ctx[i].live) idle = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCTX; i++) ctx[i] <= '0;
      out_valid <= 1'b0;
      out_qubit <= '0;
      out_op    <= '0;
      switch_count <= '0;
    end else begin
      out_valid <= 1'b0;
      if (res_slot >= 0) begin
        out_valid <= 1'b1;
        out_qubit <= ctx[res_slot].qt;
        out_op    <= mrr_value[ctx[res_slot].qr] ? ctx[res_slot].op1 : ctx[res_slot].op0;
        ctx[res_slot].live <= 1'b0;
        switch_count <= switch_count + 1;
      end
      if (in_valid && free_slot >= 0) begin
        ctx[free_slot] <= '{live: 1'b1, qr: in_instr[25:20], qt: in_instr[19:14],
                            op0: in_instr[13:7], op1: in_instr[6:0]};
      end
    end
  end

  only_mrce: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_instr[31:26] == OP_MRCE);
  no_store_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && !ready));
endmodule
