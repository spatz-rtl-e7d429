// spatz_simd_dp: one datapath of a MACU, W bits wide (32, 16 or 8).
//
// A MACU holds four of these (32b, 16b, 8b, 8b). Each computes one element of up to W bits
// per cycle: multiplier, adder, comparator and shifter, as the paper lists for every
// datapath. Narrower elements reuse wider datapaths, so the element width ew may be smaller
// than W. The operands arrive already extended to W+1 bits (sign- or zero-extended by the
// MACU according to the operation), which lets one signed (W+1)x(W+1) multiplier and one
// signed comparator serve the signed and unsigned variants. Purely combinational; the
// result is valid in its low ew bits.
//
// Operand roles follow RVV: a = vs2, b = vs1 or scalar, c = vd (old destination value).
module spatz_simd_dp
  import spatz_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  op_e        op_i,
  input  ew_e        ew_i,
  input  logic [W:0] a_i,
  input  logic [W:0] b_i,
  input  logic [W:0] c_i,
  output logic [W-1:0] res_o
);

  localparam int unsigned PW = 2 * W + 2;

  logic signed [W:0]    a_s, b_s, c_s;
  logic signed [PW-1:0] mul_ab, mul_bc, prod_hi_src;
  logic [4:0]           shamt;
  logic [5:0]           ew_bits;

  assign a_s = a_i;
  assign b_s = b_i;
  assign c_s = c_i;

  assign ew_bits = 6'd8 << ew_i;
  // Shift amount: log2(SEW) low bits of the shift operand
  assign shamt = b_i[4:0] & 5'(ew_bits - 6'd1);

  assign mul_ab = PW'(a_s) * PW'(b_s);
  assign mul_bc = PW'(b_s) * PW'(c_s);
  assign prod_hi_src = mul_ab >>> ew_bits;

  always_comb begin
    logic signed [W:0] r;
    r = '0;
    unique case (op_i)
      OP_ADD:    r = a_s + b_s;
      OP_SUB:    r = a_s - b_s;
      OP_RSUB:   r = b_s - a_s;
      OP_AND:    r = a_s & b_s;
      OP_OR:     r = a_s | b_s;
      OP_XOR:    r = a_s ^ b_s;
      OP_SLL:    r = a_s << shamt;
      OP_SRL,
      OP_SRA:    r = a_s >>> shamt;  // a is zero-extended for SRL, sign-extended for SRA
      OP_MIN,
      OP_MINU:   r = (a_s < b_s) ? a_s : b_s;
      OP_MAX,
      OP_MAXU:   r = (a_s > b_s) ? a_s : b_s;
      OP_MUL:    r = mul_ab[W:0];
      OP_MULH,
      OP_MULHU,
      OP_MULHSU: r = prod_hi_src[W:0];
      OP_MACC:   r = mul_ab[W:0] + c_s;
      OP_NMSAC:  r = c_s - mul_ab[W:0];
      OP_MADD:   r = mul_bc[W:0] + a_s;
      OP_NMSUB:  r = a_s - mul_bc[W:0];
      OP_MV:     r = b_s;
      default:   r = '0;
    endcase
    res_o = r[W-1:0];
  end

endmodule
