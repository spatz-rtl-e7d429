// spatz_macu: one 32-bit multiply-accumulate unit of the vector arithmetic unit.
//
// Takes three 32-bit operand words (vs2, vs1-or-scalar, vd), returns one 32-bit result word
// per cycle whatever the element width: one 32-bit element, two 16-bit or four 8-bit
// elements, packed-SIMD style. Following the paper, the MACU has four datapaths, 32b, 16b,
// 8b and 8b wide, and narrow operations reuse the wide ones:
//   EW32: element 0 -> 32b datapath
//   EW16: element 0 -> 32b, element 1 -> 16b
//   EW8 : element 0 -> 32b, element 1 -> 16b, elements 2, 3 -> the two 8b datapaths
// Which element goes to which datapath is this design's choice. An input crossbar extracts
// each element and sign- or zero-extends it as the operation needs; an output crossbar
// packs the results. Purely combinational (the VAU registers the result).
module spatz_macu
  import spatz_pkg::*;
(
  input  op_e         op_i,
  input  ew_e         ew_i,
  input  logic [31:0] a_i,   // vs2
  input  logic [31:0] b_i,   // vs1 or scalar
  input  logic [31:0] c_i,   // vd
  output logic [31:0] res_o
);

  logic a_signed, b_signed;
  always_comb begin
    a_signed = 1'b1;
    b_signed = 1'b1;
    unique case (op_i)
      OP_SRL, OP_MINU, OP_MAXU, OP_MULHU: begin a_signed = 1'b0; b_signed = 1'b0; end
      OP_MULHSU:                           begin a_signed = 1'b1; b_signed = 1'b0; end
      default: ;
    endcase
  end

  // Extract element at bit offset off (width per ew_i) and extend it to 33 bits.
  function automatic logic [32:0] elem(logic [31:0] x, int unsigned off, ew_e ew, logic sgn);
    logic [31:0] v;
    v = x >> off;
    unique case (ew)
      EW8:     return {{25{sgn & v[7]}},  v[7:0]};
      EW16:    return {{17{sgn & v[15]}}, v[15:0]};
      default: return {sgn & v[31], v};
    endcase
  endfunction

  // Bit offset of the element each datapath works on
  int unsigned off16, off8a, off8b;
  assign off16 = (ew_i == EW8) ? 8 : 16;
  assign off8a = 16;
  assign off8b = 24;

  logic [32:0] a32, b32, c32;
  logic [16:0] a16, b16, c16;
  logic [8:0]  a8a, b8a, c8a, a8b, b8b, c8b;
  logic [31:0] r32;
  logic [15:0] r16;
  logic [7:0]  r8a, r8b;

  always_comb begin
    logic [32:0] t;
    a32 = elem(a_i, 0, ew_i, a_signed);
    b32 = elem(b_i, 0, ew_i, b_signed);
    c32 = elem(c_i, 0, ew_i, 1'b1);
    t = elem(a_i, off16, ew_i, a_signed); a16 = t[16:0];
    t = elem(b_i, off16, ew_i, b_signed); b16 = t[16:0];
    t = elem(c_i, off16, ew_i, 1'b1);     c16 = t[16:0];
    t = elem(a_i, off8a, EW8, a_signed);  a8a = t[8:0];
    t = elem(b_i, off8a, EW8, b_signed);  b8a = t[8:0];
    t = elem(c_i, off8a, EW8, 1'b1);      c8a = t[8:0];
    t = elem(a_i, off8b, EW8, a_signed);  a8b = t[8:0];
    t = elem(b_i, off8b, EW8, b_signed);  b8b = t[8:0];
    t = elem(c_i, off8b, EW8, 1'b1);      c8b = t[8:0];
  end

  spatz_simd_dp #(.W(32)) i_dp32 (.op_i, .ew_i, .a_i(a32), .b_i(b32), .c_i(c32), .res_o(r32));
  spatz_simd_dp #(.W(16)) i_dp16 (.op_i, .ew_i, .a_i(a16), .b_i(b16), .c_i(c16), .res_o(r16));
  spatz_simd_dp #(.W(8))  i_dp8a (.op_i, .ew_i(EW8), .a_i(a8a), .b_i(b8a), .c_i(c8a), .res_o(r8a));
  spatz_simd_dp #(.W(8))  i_dp8b (.op_i, .ew_i(EW8), .a_i(a8b), .b_i(b8b), .c_i(c8b), .res_o(r8b));

  always_comb begin
    unique case (ew_i)
      EW8:     res_o = {r8b, r8a, r16[7:0], r32[7:0]};
      EW16:    res_o = {r16, r32[15:0]};
      default: res_o = r32;
    endcase
  end

endmodule
