// processor: one processing unit of the multiprocessor, built as a W-way
// quantum superscalar.
//
// Pipeline: instruction fetch (WAYS words per cycle from the private cache)
// -> pre-decoder (buffer, timing-label comparison, dispatch) -> one classical
// pipeline and WAYS quantum pipelines. A dispatched circuit step puts one
// operation into each used way's FIFO and one entry (label, way mask) into
// the timing queue; the timing controller releases the whole step in the
// cycle its time is reached and the operation combiner turns it into a
// per-qubit vector. Operations resolved by the fast-context-switch unit
// (MRCE) are merged into that vector; a timeline operation on the same
// qubit in the same cycle wins and the clash is counted.
//
// Block control: the scheduler pulses start with the cache bank holding the
// block; the processor runs it from PC 0 to the block length and pulses done
// once every instruction has been dispatched and every operation issued
// (buffer, FIFOs, timing queue and MRCE slots empty). The block's timeline
// restarts at its first step.
//
// Lint note: verilator's SYNCASYNCNET on rst_n comes from the "disable iff
// (!rst_n)" clause of the assertions; every flip-flop resets asynchronously.
module processor #(
  parameter int unsigned WAYS   = 8,
  parameter int unsigned NQ     = 64,
  parameter int unsigned CACHE_AW = 8,
  parameter int unsigned BUF    = 2*WAYS,
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned NCTX   = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        start_bank,
  output logic                        busy,
  output logic                        done,
  // private instruction cache read side
  output logic                        cache_sel,
  output logic [CACHE_AW:0]           cache_addr,
  input  logic [31:0]                 cache_data [WAYS],
  input  logic [CACHE_AW:0]           cache_len,
  // measurement result register
  input  logic [NQ-1:0]               mrr_valid,
  input  logic [NQ-1:0]               mrr_value,
  output logic [NQ-1:0]               meas_clr,
  // shared registers
  output logic                        sreg_req,
  output logic                        sreg_we,
  output logic [$clog2(quape_pkg::NSREGS)-1:0] sreg_idx,
  output logic [31:0]                 sreg_wdata,
  input  logic                        sreg_gnt,
  input  logic [31:0]                 sreg_rdata,
  // issued operations, one per qubit
  output logic [NQ-1:0]               op_valid,
  output logic [quape_pkg::QOP_W-1:0] op_code [NQ],
  // statistics
  output logic [31:0]                 late_count,
  output logic [31:0]                 fmr_stall_cycles,
  output logic [31:0]                 retired,
  output logic [31:0]                 mrce_switches,
  output logic [31:0]                 lookahead_count,
  output logic [31:0]                 recombine_count,
  output logic [31:0]                 dep_stall_count,
  output logic [31:0]                 steps_issued,
  output logic [31:0]                 mrce_clash_count
);
  import quape_pkg::*;
  localparam int unsigned CW = $clog2(WAYS) + 1;

  logic [CW-1:0]  f_avail, f_accept;
  logic           f_at_end;
  logic           redirect;
  logic [11:0]    redirect_target;

  logic           q_ready, q_fire;
  logic [WAYS-1:0] q_mask, q_full, head_valid, issue_mask;
  qop_t           q_op    [WAYS];
  logic [LABEL_W-1:0] q_label;
  qop_t           heads [WAYS];
  logic [NQ-1:0]  way_clr [WAYS];
  logic           tq_full, tq_empty, issue;

  logic           c_valid, c_ready, m_valid, m_ready, m_idle, pd_empty;
  logic [31:0]    c_instr, m_instr;
  logic [NQ-1:0]  busy_mask;
  logic           m_out_valid;
  logic [QADDR_W-1:0] m_out_qubit;
  logic [QOP_W-1:0]   m_out_op;
  logic [NQ-1:0]  t_valid;
  logic [QOP_W-1:0] t_op [NQ];
  logic           comb_conflict;

  // block control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cache_sel <= 1'b0;
      steps_issued <= '0; mrce_clash_count <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        cache_sel <= start_bank;
      end else if (busy && f_at_end && pd_empty && tq_empty && !(|head_valid) && m_idle
                   && !m_out_valid) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
      if (issue) steps_issued <= steps_issued + 1;
      if (m_out_valid && t_valid[m_out_qubit]) mrce_clash_count <= mrce_clash_count + 1;
    end
  end

  instr_fetch #(.WAYS(WAYS), .AW(CACHE_AW)) u_fetch (
    .clk, .rst_n, .start, .blk_len(busy ? cache_len : '0), .redirect, .redirect_target,
    .accept(f_accept), .rd_addr(cache_addr), .avail(f_avail), .at_end(f_at_end)
  );

  predecoder #(.WAYS(WAYS), .BUF(BUF), .NQ(NQ)) u_pd (
    .clk, .rst_n, .flush(start),
    .f_instr(cache_data), .f_avail, .f_at_end, .f_accept,
    .q_ready, .q_fire, .q_mask, .q_op, .q_label, .busy_mask,
    .c_valid, .c_instr, .c_ready, .redirect,
    .m_valid, .m_instr, .m_ready, .empty(pd_empty),
    .lookahead_count, .recombine_count, .dep_stall_count
  );

  assign q_ready = !tq_full && !(|q_full);

  classical_pipeline #(.NQ(NQ)) u_cp (
    .clk, .rst_n, .in_valid(c_valid), .in_instr(c_instr), .ready(c_ready),
    .redirect, .redirect_target, .mrr_valid, .mrr_value,
    .sreg_req, .sreg_we, .sreg_idx, .sreg_wdata, .sreg_gnt, .sreg_rdata,
    .fmr_stall_cycles, .retired
  );

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    quantum_pipeline #(.DEPTH(QDEPTH), .NQ(NQ)) u_qp (
      .clk, .rst_n, .in_valid(q_fire && q_mask[w]), .in_op(q_op[w]),
      .full(q_full[w]), .pop(issue_mask[w]), .head_valid(head_valid[w]),
      .head(heads[w]), .meas_clr(way_clr[w])
    );
  end

  always_comb begin
    meas_clr = '0;
    for (int w = 0; w < WAYS; w++) meas_clr |= way_clr[w];
  end

  timing_manager #(.WAYS(WAYS), .DEPTH(QDEPTH)) u_tm (
    .clk, .rst_n, .restart(start), .push(q_fire), .push_label(q_label), .push_mask(q_mask),
    .full(tq_full), .empty(tq_empty), .issue, .issue_mask, .late_count
  );

  op_combiner #(.WAYS(WAYS), .NQ(NQ)) u_comb (
    .pop_mask(issue_mask), .heads, .q_valid(t_valid), .q_op(t_op), .conflict(comb_conflict)
  );

  mrce_unit #(.NCTX(NCTX), .NQ(NQ)) u_mrce (
    .clk, .rst_n, .in_valid(m_valid && m_ready), .in_instr(m_instr), .ready(m_ready),
    .mrr_valid, .mrr_value, .busy_mask, .idle(m_idle),
    .out_valid(m_out_valid), .out_qubit(m_out_qubit), .out_op(m_out_op),
    .switch_count(mrce_switches)
  );

  always_comb begin
    op_valid = t_valid;
    for (int q = 0; q < NQ; q++) op_code[q] = t_op[q];
    if (m_out_valid && 32'(m_out_qubit) < NQ && !t_valid[m_out_qubit]) begin
      op_valid[m_out_qubit] = 1'b1;
      op_code[m_out_qubit]  = m_out_op;
    end
  end

  no_step_conflict: assert property (@(posedge clk) disable iff (!rst_n) !comb_conflict);
endmodule
