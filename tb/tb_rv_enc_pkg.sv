// tb_rv_enc_pkg: RISC-V instruction encoders used by the testbenches to build
// real RV32I / RV32D instruction words (add, sub, mul, shifts, logic ops, addi, andi, lw, sw, beq, lui, csrrw,
// fld, fsd, fmul.d, fadd.d, fsub.d, fcvt.d.wu, fcvt.w.d, fmv.x.w, flt.d, fmadd.d).
// Encodings follow the RISC-V unprivileged specification.
package tb_rv_enc_pkg;

  function automatic logic [31:0] r_type(input logic [6:0] f7, input logic [4:0] rs2,
                                         input logic [4:0] rs1, input logic [2:0] f3,
                                         input logic [4:0] rd, input logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] i_type(input logic [11:0] imm, input logic [4:0] rs1,
                                         input logic [2:0] f3, input logic [4:0] rd,
                                         input logic [6:0] opc);
    return {imm, rs1, f3, rd, opc};
  endfunction

  function automatic logic [31:0] s_type(input logic [11:0] imm, input logic [4:0] rs2,
                                         input logic [4:0] rs1, input logic [2:0] f3,
                                         input logic [6:0] opc);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], opc};
  endfunction

  // integer
  function automatic logic [31:0] enc_add(input logic [4:0] rd, rs1, rs2);
    return r_type(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] enc_addi(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] enc_lw(input logic [4:0] rd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] enc_sw(input logic [4:0] rs2, rs1, input logic [11:0] imm);
    return s_type(imm, rs2, rs1, 3'b010, 7'b0100011);
  endfunction
  function automatic logic [31:0] enc_beq(input logic [4:0] rs1, rs2);
    return s_type(12'h0, rs2, rs1, 3'b000, 7'b1100011);
  endfunction
  function automatic logic [31:0] enc_lui(input logic [4:0] rd, input logic [19:0] imm);
    return {imm, rd, 7'b0110111};
  endfunction
  function automatic logic [31:0] enc_csrrw(input logic [4:0] rd, rs1, input logic [11:0] csr);
    return i_type(csr, rs1, 3'b001, rd, 7'b1110011);
  endfunction
  function automatic logic [31:0] enc_csrrwi(input logic [4:0] rd, uimm, input logic [11:0] csr);
    return i_type(csr, uimm, 3'b101, rd, 7'b1110011);
  endfunction

  function automatic logic [31:0] enc_op(input logic [6:0] f7, input logic [2:0] f3,
                                         input logic [4:0] rd, rs1, rs2);
    return r_type(f7, rs2, rs1, f3, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] enc_opimm(input logic [2:0] f3, input logic [4:0] rd, rs1,
                                            input logic [11:0] imm);
    return i_type(imm, rs1, f3, rd, 7'b0010011);
  endfunction

  // FP (double precision, fmt = 01)
  function automatic logic [31:0] enc_fld(input logic [4:0] frd, rs1, input logic [11:0] imm);
    return i_type(imm, rs1, 3'b011, frd, 7'b0000111);
  endfunction
  function automatic logic [31:0] enc_fsd(input logic [4:0] frs2, rs1, input logic [11:0] imm);
    return s_type(imm, frs2, rs1, 3'b011, 7'b0100111);
  endfunction
  function automatic logic [31:0] enc_fadd_d(input logic [4:0] frd, frs1, frs2);
    return r_type(7'b0000001, frs2, frs1, 3'b111, frd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_fsub_d(input logic [4:0] frd, frs1, frs2);
    return r_type(7'b0000101, frs2, frs1, 3'b111, frd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_fmul_d(input logic [4:0] frd, frs1, frs2);
    return r_type(7'b0001001, frs2, frs1, 3'b111, frd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_fmadd_d(input logic [4:0] frd, frs1, frs2, frs3);
    return {frs3, 2'b01, frs2, frs1, 3'b111, frd, 7'b1000011};
  endfunction
  function automatic logic [31:0] enc_fcvt_d_wu(input logic [4:0] frd, rs1);
    return r_type(7'b1101001, 5'd1, rs1, 3'b111, frd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_fcvt_w_d(input logic [4:0] rd, frs1);
    return r_type(7'b1100001, 5'd0, frs1, 3'b001, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_fmv_x_w(input logic [4:0] rd, frs1);
    return r_type(7'b1110000, 5'd0, frs1, 3'b000, rd, 7'b1010011);
  endfunction
  function automatic logic [31:0] enc_flt_d(input logic [4:0] rd, frs1, frs2);
    return r_type(7'b1010001, frs2, frs1, 3'b001, rd, 7'b1010011);
  endfunction

endpackage
