// tb_spatz_decoder: directed and random test of the RVV instruction decoder.
//
// Instructions are built with the encoders of spatz_instr_pkg and applied with random
// register numbers and operand values. For each one the testbench states, from the RVV 1.0
// encoding tables, whether it is legal, which unit executes it, the operation, whether the
// second operand is a scalar and its value (rs1, sign-extended immediate, or zero-extended
// immediate for shifts and slides), and checks the decoder's outputs. Also checked: vsetvli,
// vsetivli and vsetvl fields, the AVL=VLMAX and keep-vl cases, unit-stride and strided
// loads/stores with their element width and EMUL, and the rejection of masked instructions,
// misaligned register groups, 64-bit elements and anything decoded while vill is set.
module tb_spatz_decoder;
  import spatz_pkg::*;
  import spatz_instr_pkg::*;

  logic [31:0] instr, rs1, rs2;
  ew_e         ew;
  logic [2:0]  vlmul;
  logic        vill;
  vlen_t       vl;
  logic        legal, is_cfg, avl_max, keep_vl;
  logic [31:0] cfg_vtype, cfg_avl;
  logic [4:0]  rd;
  fu_e         fu;
  vreq_t       req;
  int checks = 0, failures = 0;

  spatz_decoder dut (
    .instr_i(instr), .rs1_i(rs1), .rs2_i(rs2), .ew_i(ew), .vlmul_i(vlmul), .vill_i(vill),
    .vl_i(vl), .legal_o(legal), .is_cfg_o(is_cfg), .cfg_vtype_o(cfg_vtype), .cfg_avl_o(cfg_avl),
    .cfg_avl_max_o(avl_max), .cfg_keep_vl_o(keep_vl), .rd_o(rd), .fu_o(fu), .req_o(req)
  );

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (instr %h)", what, instr);
    end
  endtask

  task automatic arith(input logic [5:0] f6, input logic [2:0] f3, input op_e op, input fu_e f,
                       input logic leg);
    logic [4:0] vd, vs2, v1;
    logic [31:0] exp_scalar;
    vd  = 5'($urandom) & ~5'((1 << vlmul) - 1);
    vs2 = 5'($urandom) & ~5'((1 << vlmul) - 1);
    v1  = 5'($urandom) & ~5'((1 << vlmul) - 1);
    if (f6 == F_MV) vs2 = '0;
    if (f6 == F_SLIDEUP && vd == vs2) vd = vs2 ^ 5'd8;
    instr = varith(f6, f3, vd, vs2, v1);
    rs1   = $urandom;
    #1;
    chk("legal", legal === leg);
    if (!leg) return;
    chk("unit", fu === f);
    chk($sformatf("op %s got %s", op.name(), req.op.name()), req.op === op);
    chk("vd", req.vd === vd);
    chk("ew/vl taken from CSRs", req.ew === ew && req.vl === vl && req.vlmul === vlmul);
    if (f3 == IVV || f3 == MVV) begin
      if (f6 == F_MV && f3 == IVV) chk("vmv.v.v source", req.vs2 === v1 && req.scalar == 0);
      else chk("vector operands", !req.use_scalar && req.vs1 === v1 && req.vs2 === vs2);
    end else begin
      if (f3 == IVI)
        exp_scalar = (f6 inside {F_SLL, F_SRL, F_SRA, F_SLIDEUP, F_SLIDEDOWN}) ?
                     32'(v1) : {{27{v1[4]}}, v1};
      else exp_scalar = rs1;
      chk("scalar operand", req.use_scalar && req.scalar === exp_scalar);
    end
  endtask

  initial begin : main
    rs2 = '0;
    ew = EW32; vlmul = 3'd0; vill = 1'b0; vl = 10'd16;
    for (int it = 0; it < 50; it++) begin
      ew    = ew_e'($urandom_range(0, 2));
      vlmul = 3'($urandom_range(0, 3));
      vl    = vlen_t'($urandom_range(0, 512));
      arith(F_ADD, IVV, OP_ADD, FU_VAU, 1);
      arith(F_ADD, IVX, OP_ADD, FU_VAU, 1);
      arith(F_ADD, IVI, OP_ADD, FU_VAU, 1);
      arith(F_SUB, IVV, OP_SUB, FU_VAU, 1);
      arith(F_SUB, IVI, OP_SUB, FU_VAU, 0);
      arith(F_RSUB, IVX, OP_RSUB, FU_VAU, 1);
      arith(F_RSUB, IVV, OP_RSUB, FU_VAU, 0);
      arith(F_MINU, IVV, OP_MINU, FU_VAU, 1);
      arith(F_MIN, IVX, OP_MIN, FU_VAU, 1);
      arith(F_MAXU, IVX, OP_MAXU, FU_VAU, 1);
      arith(F_MAX, IVV, OP_MAX, FU_VAU, 1);
      arith(F_AND, IVI, OP_AND, FU_VAU, 1);
      arith(F_OR, IVX, OP_OR, FU_VAU, 1);
      arith(F_XOR, IVV, OP_XOR, FU_VAU, 1);
      arith(F_SLL, IVI, OP_SLL, FU_VAU, 1);
      arith(F_SRL, IVX, OP_SRL, FU_VAU, 1);
      arith(F_SRA, IVI, OP_SRA, FU_VAU, 1);
      arith(F_MV, IVI, OP_MV, FU_VAU, 1);
      arith(F_MV, IVX, OP_MV, FU_VAU, 1);
      arith(F_MV, IVV, OP_SLIDEDOWN, FU_VSLDU, 1);
      arith(F_SLIDEUP, IVI, OP_SLIDEUP, FU_VSLDU, 1);
      arith(F_SLIDEDOWN, IVX, OP_SLIDEDOWN, FU_VSLDU, 1);
      arith(F_SLIDEDOWN, IVV, OP_SLIDEDOWN, FU_VSLDU, 0);
      arith(F_MUL, MVV, OP_MUL, FU_VAU, 1);
      arith(F_MULH, MVX, OP_MULH, FU_VAU, 1);
      arith(F_MULHU, MVV, OP_MULHU, FU_VAU, 1);
      arith(F_MULHSU, MVX, OP_MULHSU, FU_VAU, 1);
      arith(F_MACC, MVX, OP_MACC, FU_VAU, 1);
      arith(F_NMSAC, MVV, OP_NMSAC, FU_VAU, 1);
      arith(F_MADD, MVV, OP_MADD, FU_VAU, 1);
      arith(F_NMSUB, MVX, OP_NMSUB, FU_VAU, 1);
      arith(6'b111111, IVV, OP_ADD, FU_VAU, 0);           // unassigned funct6
    end
    ew = EW32; vlmul = 3'd1; vl = 10'd20;
    // masked
    instr = varith(F_ADD, IVV, 5'd2, 5'd4, 5'd6, 1'b0); #1; chk("masked rejected", !legal);
    // misaligned group under LMUL=2
    instr = varith(F_ADD, IVV, 5'd3, 5'd4, 5'd6); #1; chk("misaligned vd rejected", !legal);
    instr = varith(F_ADD, IVV, 5'd2, 5'd4, 5'd6); #1; chk("aligned accepted", legal);
    // vill
    vill = 1'b1;
    instr = varith(F_ADD, IVV, 5'd2, 5'd4, 5'd6); #1; chk("rejected while vill", !legal);
    instr = vsetvli(5'd1, 5'd2, 1, 2); rs1 = 32'd77; #1;
    chk("vsetvli legal while vill", legal && is_cfg);
    vill = 1'b0;
    chk("vsetvli vtype", cfg_vtype === {21'b0, 11'b000_0000_1010});
    chk("vsetvli avl", cfg_avl === 32'd77 && !avl_max && !keep_vl && rd == 5'd1);
    instr = vsetvli(5'd1, 5'd0, 2, 0); #1; chk("avl = vlmax", avl_max && !keep_vl);
    instr = vsetvli(5'd0, 5'd0, 2, 0); #1; chk("keep vl", keep_vl && !avl_max);
    instr = {2'b11, 10'b00_0001_0001, 5'd9, 3'b111, 5'd3, 7'b1010111}; #1;
    chk("vsetivli", legal && is_cfg && cfg_avl == 32'd9 && cfg_vtype == 32'h11);
    instr = vsetvl(5'd3, 5'd4, 5'd5); rs1 = 32'd5; rs2 = 32'h12; #1;
    chk("vsetvl", legal && is_cfg && cfg_avl == 32'd5 && cfg_vtype == 32'h12);
    // memory
    vlmul = 3'd0;
    for (int s = 0; s < 3; s++) begin
      rs1 = $urandom; rs2 = $urandom;
      ew = ew_e'(s);
      instr = vle(s, 5'd7); #1;
      chk("vle", legal && fu == FU_VLSU && req.op == OP_LOAD && !req.strided && req.ew == ew_e'(s) &&
          req.scalar == rs1 && req.vd == 5'd7);
      instr = vlse(s, 5'd7); #1;
      chk("vlse", legal && fu == FU_VLSU && req.op == OP_LOAD && req.strided && req.stride == rs2);
      instr = vse(s, 5'd9); #1;
      chk("vse", legal && fu == FU_VLSU && req.op == OP_STORE && req.vd == 5'd9);
      instr = vsse(s, 5'd9); #1;
      chk("vsse", legal && req.op == OP_STORE && req.strided);
    end
    // EMUL = EEW/SEW*LMUL: 8-bit elements under SEW=32, LMUL=1 need EMUL=1/4 (not built);
    // 32-bit elements under SEW=8, LMUL=4 need EMUL=16 (illegal)
    ew = EW32; vlmul = 3'd0;
    instr = vle(0, 5'd8); #1; chk("fractional EMUL rejected", !legal);
    ew = EW8; vlmul = 3'd2;
    instr = vle(2, 5'd8); #1; chk("EMUL > 8 rejected", !legal);
    ew = EW8; vlmul = 3'd1;
    instr = vle(2, 5'd8); #1; chk("EMUL 8 accepted", legal && req.vlmul == 3'd3 && req.ew == EW32);
    instr = vle(0, 5'd7) | (32'd1 << 12) | (32'd1 << 13) | (32'd1 << 14); #1; chk("64-bit load rejected", !legal);
    instr = vle(0, 5'd7) & ~(32'd1 << 25); #1; chk("masked load rejected", !legal);
    instr = 32'h0000_0013; #1; chk("non-vector rejected", !legal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
