// spatz_instr_pkg: RVV 1.0 instruction encoders used by the testbenches.
//
// Each function returns the 32-bit encoding of one vector instruction, so that a testbench
// can act as the scalar core and hand instructions to Spatz over its X-interface. Register
// fields holding scalar registers (rs1, rs2) are filled with nonzero numbers; the values
// themselves travel on the interface's rs1/rs2 operand lines.
package spatz_instr_pkg;

  localparam logic [6:0] OPV = 7'b1010111;

  // vtype encoding: vsew in bits 5:3 (0: e8, 1: e16, 2: e32), vlmul in bits 2:0
  function automatic logic [31:0] vsetvli(logic [4:0] rd, logic [4:0] rs1, int sew, int lmul);
    logic [10:0] vt;
    vt = {5'b0, 3'(sew), 3'(lmul)};
    return {1'b0, vt, rs1, 3'b111, rd, OPV};
  endfunction

  function automatic logic [31:0] vsetvl(logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'b1000000, rs2, rs1, 3'b111, rd, OPV};
  endfunction

  function automatic logic [2:0] width(int sew);
    return (sew == 0) ? 3'b000 : (sew == 1) ? 3'b101 : 3'b110;
  endfunction

  function automatic logic [31:0] vle(int sew, logic [4:0] vd);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(sew), vd, 7'b0000111};
  endfunction
  function automatic logic [31:0] vlse(int sew, logic [4:0] vd);
    return {3'b000, 1'b0, 2'b10, 1'b1, 5'd11, 5'd10, width(sew), vd, 7'b0000111};
  endfunction
  function automatic logic [31:0] vse(int sew, logic [4:0] vs3);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, width(sew), vs3, 7'b0100111};
  endfunction
  function automatic logic [31:0] vsse(int sew, logic [4:0] vs3);
    return {3'b000, 1'b0, 2'b10, 1'b1, 5'd11, 5'd10, width(sew), vs3, 7'b0100111};
  endfunction

  // arithmetic: f3 = 000 OPIVV, 100 OPIVX, 011 OPIVI, 010 OPMVV, 110 OPMVX
  function automatic logic [31:0] varith(logic [5:0] f6, logic [2:0] f3, logic [4:0] vd,
                                         logic [4:0] vs2, logic [4:0] vs1_rs1_imm,
                                         logic vm = 1'b1);
    return {f6, vm, vs2, vs1_rs1_imm, f3, vd, OPV};
  endfunction

  localparam logic [5:0] F_ADD = 6'b000000, F_SUB = 6'b000010, F_RSUB = 6'b000011,
                         F_MINU = 6'b000100, F_MIN = 6'b000101, F_MAXU = 6'b000110,
                         F_MAX = 6'b000111, F_AND = 6'b001001, F_OR = 6'b001010,
                         F_XOR = 6'b001011, F_SLIDEUP = 6'b001110, F_SLIDEDOWN = 6'b001111,
                         F_MV = 6'b010111, F_SLL = 6'b100101, F_SRL = 6'b101000,
                         F_SRA = 6'b101001;
  localparam logic [5:0] F_MUL = 6'b100101, F_MULH = 6'b100111, F_MULHU = 6'b100100,
                         F_MULHSU = 6'b100110, F_MACC = 6'b101101, F_NMSAC = 6'b101111,
                         F_MADD = 6'b101001, F_NMSUB = 6'b101011;
  localparam logic [2:0] IVV = 3'b000, IVX = 3'b100, IVI = 3'b011, MVV = 3'b010, MVX = 3'b110;

endpackage
