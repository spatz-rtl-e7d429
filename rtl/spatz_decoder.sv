// spatz_decoder: decodes the RVV 1.0 instructions Spatz executes (a Zve32x subset).
//
// The scalar core only pre-decodes vector instructions and hands the 32-bit instruction word
// plus its rs1/rs2 values to Spatz; this combinational block turns them into a vreq_t for one
// functional unit, using the current vtype/vl, or recognises a vsetvl* configuration
// instruction. Supported (with vm=1, i.e. unmasked; masking is not built):
//   vsetvli, vsetivli, vsetvl
//   vle8/16/32, vse8/16/32 (unit stride), vlse8/16/32, vsse8/16/32 (constant stride) -> VLSU
//   OPIVV/OPIVX/OPIVI: vadd vsub vrsub vand vor vxor vsll vsrl vsra vmin(u) vmax(u)  -> VAU
//                      vmv.v.x vmv.v.i                                                -> VAU
//                      vmv.v.v (a slide by zero)                                      -> VSLDU
//                      vslideup/vslidedown .vx/.vi                                    -> VSLDU
//   OPMVV/OPMVX:       vmul vmulh vmulhu vmulhsu vmacc vnmsac vmadd vnmsub            -> VAU
// Anything else, or a register number not aligned to LMUL, or vill set, is reported as not
// accepted so that the scalar core can raise an illegal-instruction exception. As in the
// paper, reductions and indexed (scatter/gather) accesses are not supported; which other
// Zve32x instructions are left out is this design's choice.
module spatz_decoder
  import spatz_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  // current CSR state
  input  ew_e         ew_i,
  input  logic [2:0]  vlmul_i,
  input  logic        vill_i,
  input  vlen_t       vl_i,
  // decode result
  output logic        legal_o,
  output logic        is_cfg_o,     // vsetvl*: handled by the controller
  output logic [31:0] cfg_vtype_o,  // requested vtype
  output logic [31:0] cfg_avl_o,    // application vector length (when not keep/max)
  output logic        cfg_avl_max_o,  // rs1 = x0, rd != x0: AVL = VLMAX
  output logic        cfg_keep_vl_o,  // rs1 = x0, rd = x0: keep vl
  output logic [4:0]  rd_o,
  output fu_e         fu_o,
  output vreq_t       req_o
);

  localparam logic [6:0] OPC_V  = 7'b1010111;
  localparam logic [6:0] OPC_LD = 7'b0000111;
  localparam logic [6:0] OPC_ST = 7'b0100111;

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [5:0] funct6;
  logic       vm;
  logic [4:0] vd, vs1, vs2;
  logic [31:0] simm, uimm;

  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign funct6 = instr_i[31:26];
  assign vm     = instr_i[25];
  assign vd     = instr_i[11:7];
  assign vs1    = instr_i[19:15];
  assign vs2    = instr_i[24:20];
  assign simm   = {{27{instr_i[19]}}, instr_i[19:15]};
  assign uimm   = {27'b0, instr_i[19:15]};
  assign rd_o   = vd;

  // register group alignment check for LMUL > 1
  function automatic logic aligned(logic [4:0] r, logic [2:0] lmul);
    return (r & 5'((1 << lmul) - 1)) == 5'd0;
  endfunction

  always_comb begin
    logic uses_vs1, uses_vs2;
    legal_o       = 1'b0;
    is_cfg_o      = 1'b0;
    cfg_vtype_o   = '0;
    cfg_avl_o     = rs1_i;
    cfg_avl_max_o = 1'b0;
    cfg_keep_vl_o = 1'b0;
    fu_o          = FU_NONE;
    uses_vs1      = 1'b0;
    uses_vs2      = 1'b0;
    req_o         = '0;
    req_o.vd      = vd;
    req_o.vs1     = vs1;
    req_o.vs2     = vs2;
    req_o.ew      = ew_i;
    req_o.vlmul   = vlmul_i;
    req_o.vl      = vl_i;
    req_o.op      = OP_ADD;

    unique case (opcode)
      OPC_V: begin
        if (funct3 == 3'b111) begin
          // configuration
          is_cfg_o = 1'b1;
          legal_o  = 1'b1;
          if (!instr_i[31]) begin                       // vsetvli
            cfg_vtype_o   = {21'b0, instr_i[30:20]};
            cfg_avl_max_o = (vs1 == 5'd0) && (vd != 5'd0);
            cfg_keep_vl_o = (vs1 == 5'd0) && (vd == 5'd0);
          end else if (instr_i[30]) begin               // vsetivli
            cfg_vtype_o = {22'b0, instr_i[29:20]};
            cfg_avl_o   = uimm;
          end else if (instr_i[29:25] == 5'b0) begin    // vsetvl
            cfg_vtype_o   = rs2_i;
            cfg_avl_max_o = (vs1 == 5'd0) && (vd != 5'd0);
            cfg_keep_vl_o = (vs1 == 5'd0) && (vd == 5'd0);
          end else begin
            is_cfg_o = 1'b0;
            legal_o  = 1'b0;
          end
        end else if (vm) begin
          fu_o    = FU_VAU;
          legal_o = 1'b1;
          uses_vs2 = 1'b1;
          // operand 1: vector (VV), scalar (VX) or immediate (VI)
          unique case (funct3)
            3'b000, 3'b010: begin uses_vs1 = 1'b1; end
            3'b100, 3'b110: begin req_o.use_scalar = 1'b1; req_o.scalar = rs1_i; end
            3'b011:         begin req_o.use_scalar = 1'b1; req_o.scalar = simm; end
            default:        legal_o = 1'b0;
          endcase
          if (funct3 inside {3'b000, 3'b100, 3'b011}) begin   // OPIVV / OPIVX / OPIVI
            unique case (funct6)
              6'b000000: req_o.op = OP_ADD;
              6'b000010: begin req_o.op = OP_SUB;  legal_o &= funct3 != 3'b011; end
              6'b000011: begin req_o.op = OP_RSUB; legal_o &= funct3 != 3'b000; end
              6'b000100: begin req_o.op = OP_MINU; legal_o &= funct3 != 3'b011; end
              6'b000101: begin req_o.op = OP_MIN;  legal_o &= funct3 != 3'b011; end
              6'b000110: begin req_o.op = OP_MAXU; legal_o &= funct3 != 3'b011; end
              6'b000111: begin req_o.op = OP_MAX;  legal_o &= funct3 != 3'b011; end
              6'b001001: req_o.op = OP_AND;
              6'b001010: req_o.op = OP_OR;
              6'b001011: req_o.op = OP_XOR;
              6'b100101: begin req_o.op = OP_SLL; if (funct3 == 3'b011) req_o.scalar = uimm; end
              6'b101000: begin req_o.op = OP_SRL; if (funct3 == 3'b011) req_o.scalar = uimm; end
              6'b101001: begin req_o.op = OP_SRA; if (funct3 == 3'b011) req_o.scalar = uimm; end
              6'b001110, 6'b001111: begin                       // vslideup / vslidedown
                req_o.op = (funct6 == 6'b001110) ? OP_SLIDEUP : OP_SLIDEDOWN;
                fu_o     = FU_VSLDU;
                if (funct3 == 3'b011) req_o.scalar = uimm;
                legal_o &= funct3 != 3'b000;
                // slide up: destination may not overlap the source group
                if (funct6 == 6'b001110 && vd == vs2) legal_o = 1'b0;
              end
              6'b010111: begin                                  // vmv.v.*
                legal_o &= vs2 == 5'd0;
                uses_vs2 = 1'b0;
                if (funct3 == 3'b000) begin                     // vmv.v.v: slide by 0
                  fu_o     = FU_VSLDU;
                  req_o.op = OP_SLIDEDOWN;
                  req_o.vs2 = vs1;
                  req_o.use_scalar = 1'b0;
                  req_o.scalar = '0;
                  uses_vs1 = 1'b0;
                  uses_vs2 = 1'b1;
                end else begin
                  req_o.op = OP_MV;
                end
              end
              default: legal_o = 1'b0;
            endcase
          end else begin                                        // OPMVV / OPMVX
            unique case (funct6)
              6'b100101: req_o.op = OP_MUL;
              6'b100111: req_o.op = OP_MULH;
              6'b100100: req_o.op = OP_MULHU;
              6'b100110: req_o.op = OP_MULHSU;
              6'b101101: req_o.op = OP_MACC;
              6'b101111: req_o.op = OP_NMSAC;
              6'b101001: req_o.op = OP_MADD;
              6'b101011: req_o.op = OP_NMSUB;
              default:   legal_o = 1'b0;
            endcase
          end
        end
      end
      OPC_LD, OPC_ST: begin
        // nf = 0, mew = 0, unmasked, unit stride (lumop 0) or constant stride
        fu_o     = FU_VLSU;
        legal_o  = (instr_i[31:28] == 4'b0) && vm &&
                   ((instr_i[27:26] == 2'b00 && vs2 == 5'd0) || instr_i[27:26] == 2'b10);
        req_o.op      = (opcode == OPC_ST) ? OP_STORE : OP_LOAD;
        req_o.scalar  = rs1_i;
        req_o.stride  = rs2_i;
        req_o.strided = instr_i[27:26] == 2'b10;
        unique case (funct3)
          3'b000:  req_o.ew = EW8;
          3'b101:  req_o.ew = EW16;
          3'b110:  req_o.ew = EW32;
          default: legal_o = 1'b0;
        endcase
        // the effective EMUL = LMUL * EEW/SEW must lie in 1..8 (fractional EMUL not built)
        begin
          int signed emul;
          emul = int'(vlmul_i) + int'(req_o.ew) - int'(ew_i);
          if (emul < 0 || emul > 3) legal_o = 1'b0;
          req_o.vlmul = 3'(emul);
        end
      end
      default: ;
    endcase

    // register group alignment, and a valid vtype for anything but vsetvl*
    if (!is_cfg_o && legal_o) begin
      if (vill_i) legal_o = 1'b0;
      if (!aligned(vd, req_o.vlmul)) legal_o = 1'b0;
      if (uses_vs1 && !aligned(vs1, req_o.vlmul)) legal_o = 1'b0;
      if (uses_vs2 && !aligned(req_o.vs2, req_o.vlmul)) legal_o = 1'b0;
    end
  end

endmodule
