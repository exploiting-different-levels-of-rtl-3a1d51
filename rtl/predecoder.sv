// predecoder: pre-decoder of the quantum superscalar (buffer, comparison,
// dispatch) implementing parallel-until-classical scheduling.
//
// Fetched instructions enter an in-order buffer of BUF entries; fetch is
// held back when the buffer has no room. Each cycle two dispatches can
// happen independently:
//
//  * Quantum step. Starting at the buffer head, the leading QOP and the QOPs
//    directly after it whose timing label is 0 (i.e. that start at the same
//    time point) form one circuit step, up to WAYS of them. The step stops at
//    the first classical instruction, at a QOP with a non-zero label, or at a
//    QOP touching a qubit reserved by a pending MRCE. It is dispatched - one
//    instruction per quantum way, plus the step's label to the timing queue -
//    only when it is closed: WAYS long, followed by another buffered
//    instruction, or the block fully fetched. Until then the buffer waits for
//    the next fetch, so parallel instructions fetched in different cycles are
//    recombined into one step (counted in recombine_count).
//  * Classical instruction. The oldest classical instruction may be sent to
//    the classical pipeline ahead of older buffered QOPs (lookahead, counted
//    in lookahead_count), so a branch is resolved while the quantum step is
//    still waiting. FMR and MRCE read the measurement result register and must
//    not pass an older measurement, so they go only from the buffer head.
//    MRCE goes to the fast-context-switch unit instead.
//
// A taken branch drops every buffered instruction younger than itself and
// the instructions fetched in that cycle. Timing labels are read as the
// interval since the previous step (published definition); grouping a
// label-0 run with its leading instruction is how this design realises the
// published "same timing label" comparison against the first instruction.
module predecoder #(
  parameter int unsigned WAYS = 8,
  parameter int unsigned BUF  = 16,
  parameter int unsigned NQ   = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          flush,
  // fetch side
  input  logic [31:0]                   f_instr [WAYS],
  input  logic [$clog2(WAYS):0]         f_avail,
  input  logic                          f_at_end,
  output logic [$clog2(WAYS):0]         f_accept,
  // quantum dispatch
  input  logic                          q_ready,
  output logic                          q_fire,
  output logic [WAYS-1:0]               q_mask,
  output quape_pkg::qop_t               q_op    [WAYS],
  output logic [quape_pkg::LABEL_W-1:0] q_label,
  input  logic [NQ-1:0]                 busy_mask,
  // classical dispatch
  output logic                          c_valid,
  output logic [31:0]                   c_instr,
  input  logic                          c_ready,
  input  logic                          redirect,
  // MRCE dispatch
  output logic                          m_valid,
  output logic [31:0]                   m_instr,
  input  logic                          m_ready,
  output logic                          empty,
  output logic [31:0]                   lookahead_count,
  output logic [31:0]                   recombine_count,
  output logic [31:0]                   dep_stall_count
);
  import quape_pkg::*;
  localparam int unsigned CW = $clog2(WAYS) + 1;
  localparam int unsigned BW = $clog2(BUF) + 1;

  qop_instr_t    buff  [BUF];     // any instruction, viewed as QOP fields
  logic [3:0]    epoch [BUF];
  logic [BW-1:0] n;
  logic [3:0]    cur_epoch;

  qop_instr_t    nbuff  [BUF];
  logic [3:0]    nepoch [BUF];
  int            fc, g, nk;
  logic          closed, c_fire, m_fire, is_serial, recomb;

  function automatic logic touches_busy(input qop_t d, input logic [NQ-1:0] bm);
    return (32'(d.q0) < NQ && bm[d.q0]) ||
           (is_two_qubit(d.op) && 32'(d.q1) < NQ && bm[d.q1]);
  endfunction

  // First classical (non-QOP) entry and the leading quantum step.
  always_comb begin
    fc = int'(n);
    for (int i = BUF-1; i >= 0; i--)
      if (i < int'(n) && !is_qop(buff[i].opc)) fc = i;
    g = 0;
    if (n != 0 && is_qop(buff[0].opc) && !touches_busy(buff[0].q, busy_mask)) begin
      g = 1;
      for (int i = 1; i < WAYS && i < BUF; i++)
        if (g == i && i < fc && buff[i].label == '0 && !touches_busy(buff[i].q, busy_mask))
          g = i + 1;
    end
    closed = (g == WAYS) || (g < int'(n)) || f_at_end;
    q_fire = g > 0 && closed && q_ready;
    q_label = buff[0].label;
    recomb  = 1'b0;
    for (int i = 0; i < WAYS; i++) begin
      q_mask[i]  = i < g;
      q_op[i]    = (i < g && i < BUF) ? buff[i].q : '0;
      if (i < g && i < BUF && epoch[i] != epoch[0]) recomb = 1'b1;
    end
  end

  always_comb begin
    c_instr   = (fc < int'(n)) ? buff[fc] : '0;
    is_serial = is_mrce(c_instr[31:26]) || c_instr[31:26] == OP_FMR;
    c_valid   = fc < int'(n) && !is_mrce(c_instr[31:26]) && (!is_serial || fc == 0);
    m_valid   = fc < int'(n) &&  is_mrce(c_instr[31:26]) && fc == 0;
    m_instr   = c_instr;
    c_fire    = c_valid && c_ready;
    m_fire    = m_valid && m_ready;
    f_accept  = '0;
    if (!redirect && !flush)
      f_accept = (int'(f_avail) > int'(BUF) - int'(n)) ? CW'(int'(BUF) - int'(n)) : f_avail;
  end

  assign empty = n == '0;

  // Next buffer contents: survivors move to the front in order, then the
  // instructions accepted from fetch are appended.
  always_comb begin
    nk = 0;
    for (int i = 0; i < BUF; i++) begin
      nbuff[i]  = buff[i];
      nepoch[i] = epoch[i];
    end
    for (int i = 0; i < BUF; i++) begin
      if (i < int'(n) && !(q_fire && i < g) && !((c_fire || m_fire) && i == fc)
          && !(redirect && i > fc)) begin
        nbuff[nk]  = buff[i];
        nepoch[nk] = epoch[i];
        nk++;
      end
    end
    for (int j = 0; j < WAYS; j++) begin
      if (j < int'(f_accept) && nk < BUF) begin
        nbuff[nk]  = f_instr[j];
        nepoch[nk] = cur_epoch;
        nk++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n <= '0;
      cur_epoch <= '0;
      lookahead_count <= '0;
      recombine_count <= '0;
      dep_stall_count <= '0;
      for (int i = 0; i < BUF; i++) begin
        buff[i]  <= '0;
        epoch[i] <= '0;
      end
    end else if (flush) begin
      n <= '0;
    end else begin
      buff  <= nbuff;
      epoch <= nepoch;
      n     <= BW'(nk);
      if (f_accept != '0) cur_epoch <= cur_epoch + 1'b1;
      if (c_fire && fc > 0 && is_qop(buff[0].opc)) lookahead_count <= lookahead_count + 1;
      if (q_fire && recomb) recombine_count <= recombine_count + 1;
      if (n != 0 && is_qop(buff[0].opc) && touches_busy(buff[0].q, busy_mask))
        dep_stall_count <= dep_stall_count + 1;
    end
  end
endmodule
