// quape_enc_pkg: instruction builders for the testbenches. Each function
// packs the fields of one instruction format of quape_pkg into a 32-bit
// word; arguments are plain integers and are cut to the field widths.
package quape_enc_pkg;
  import quape_pkg::*;

  function automatic logic [31:0] enc_qop(input int label, input int op, input int q0, input int q1);
    return {OP_QOP, 7'(label), 7'(op), 6'(q0), 6'(q1)};
  endfunction
  function automatic logic [31:0] enc_mrce(input int qr, input int qt, input int op0, input int op1);
    return {OP_MRCE, 6'(qr), 6'(qt), 7'(op0), 7'(op1)};
  endfunction
  function automatic logic [31:0] enc_alu(input opcode_e op, input int rd, input int rs, input int rt, input int imm);
    return {op, 4'(rd), 4'(rs), 4'(rt), 14'(imm)};
  endfunction
  function automatic logic [31:0] enc_ldi(input int rd, input int imm);
    return {OP_LDI, 4'(rd), 22'(imm)};
  endfunction
  function automatic logic [31:0] enc_br(input brcond_e c, input int target);
    return {OP_BR, c, 10'd0, 12'(target)};
  endfunction
  function automatic logic [31:0] enc_fmr(input int rd, input int q);
    return {OP_FMR, 4'(rd), 16'd0, 6'(q)};
  endfunction
  function automatic logic [31:0] enc_sreg(input opcode_e op, input int rd, input int rs, input int sidx);
    return {op, 4'(rd), 4'(rs), 18'(sidx)};
  endfunction

endpackage
