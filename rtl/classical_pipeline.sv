// classical_pipeline: classical decoder, execution unit and register file of
// one processor.
//
// Executes one classical instruction per cycle, in program order. The
// instruction offered by the pre-decoder is decoded and executed in the
// cycle it is accepted (fire = in_valid && ready); results are written to
// the register file or the comparison flags at the end of that cycle and a
// taken branch raises redirect with its block-relative target in the same
// cycle, so the pre-decoder can drop younger instructions and refetch.
// ready is low while the instruction cannot complete: FMR (fetch
// measurement result) waits until the result register holds a valid result
// for its qubit (the classic feedback-control stall, counted in
// fmr_stall_cycles), and LDS/STS wait for a grant from the shared
// registers. The instruction set (quape_pkg) is this design's own; the
// published design gives the unit's role, one classical pipeline per
// processor, general purpose registers and comparison flags.
module classical_pipeline #(
  parameter int unsigned NQ = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [31:0]   in_instr,
  output logic          ready,
  output logic          redirect,
  output logic [11:0]   redirect_target,
  input  logic [NQ-1:0] mrr_valid,
  input  logic [NQ-1:0] mrr_value,
  output logic          sreg_req,
  output logic          sreg_we,
  output logic [$clog2(quape_pkg::NSREGS)-1:0] sreg_idx,
  output logic [31:0]   sreg_wdata,
  input  logic          sreg_gnt,
  input  logic [31:0]   sreg_rdata,
  output logic [31:0]   fmr_stall_cycles,
  output logic [31:0]   retired
);
  import quape_pkg::*;

  opcode_e     opc;
  logic [3:0]  rd, rs, rt;
  logic [31:0] a, b, imm14, imm22;
  logic        fire, wen;
  logic [31:0] wdata;
  logic        flag_eq, flag_lt;
  logic [5:0]  fq;

  assign opc   = opcode_e'(in_instr[31:26]);
  assign rd    = in_instr[25:22];
  assign rs    = in_instr[21:18];
  assign rt    = in_instr[17:14];
  assign imm14 = {{18{in_instr[13]}}, in_instr[13:0]};
  assign imm22 = {{10{in_instr[21]}}, in_instr[21:0]};
  assign fq    = in_instr[5:0];

  register_file #(.NREGS(NREGS), .DATA_W(DATA_W)) u_rf (
    .clk, .rst_n, .ra(rs), .rb(rt), .rdata_a(a), .rdata_b(b),
    .we(wen), .wa(rd), .wdata(wdata)
  );

  assign sreg_req   = in_valid && (opc == OP_LDS || opc == OP_STS);
  assign sreg_we    = opc == OP_STS;
  assign sreg_idx   = in_instr[$clog2(NSREGS)-1:0];
  assign sreg_wdata = a;

  always_comb begin
    ready = 1'b1;
    if (opc == OP_FMR) ready = 32'(fq) < NQ && mrr_valid[fq];
    if (opc == OP_LDS || opc == OP_STS) ready = sreg_gnt;
  end
  assign fire = in_valid && ready;

  always_comb begin
    wen   = 1'b0;
    wdata = '0;
    unique case (opc)
      OP_ADD:  begin wen = fire; wdata = a + b; end
      OP_SUB:  begin wen = fire; wdata = a - b; end
      OP_AND:  begin wen = fire; wdata = a & b; end
      OP_OR:   begin wen = fire; wdata = a | b; end
      OP_XOR:  begin wen = fire; wdata = a ^ b; end
      OP_ADDI: begin wen = fire; wdata = a + imm14; end
      OP_LDI:  begin wen = fire; wdata = imm22; end
      OP_FMR:  begin wen = fire; wdata = {31'd0, mrr_value[fq]}; end
      OP_LDS:  begin wen = fire; wdata = sreg_rdata; end
      default: ;
    endcase
  end

  always_comb begin
    logic take;
    unique case (brcond_e'(in_instr[25:22]))
      BR_ALWAYS: take = 1'b1;
      BR_EQ:     take = flag_eq;
      BR_NE:     take = !flag_eq;
      BR_LT:     take = flag_lt;
      BR_GE:     take = !flag_lt;
      default:   take = 1'b0;
    endcase
    redirect        = fire && opc == OP_BR && take;
    redirect_target = in_instr[11:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flag_eq <= 1'b0;
      flag_lt <= 1'b0;
      fmr_stall_cycles <= '0;
      retired <= '0;
    end else begin
      if (fire && opc == OP_CMP) begin
        flag_eq <= a == b;
        flag_lt <= $signed(a) < $signed(b);
      end
      if (in_valid && opc == OP_FMR && !ready) fmr_stall_cycles <= fmr_stall_cycles + 1;
      if (fire) retired <= retired + 1;
    end
  end
endmodule
