// spatz_ref_pkg: reference arithmetic for the Spatz testbenches.
//
// The functions compute the RVV integer operations element by element with plain 64-bit
// integer arithmetic, written directly from the RVV definitions and independently of the
// datapath's W+1-bit structure, so that the testbenches can compare against them.
//   op_elem: one element of width 8/16/32 (a = vs2, b = vs1 or scalar, c = old vd)
//   op_word: a 32-bit lane holding 1, 2 or 4 elements
package spatz_ref_pkg;
  import spatz_pkg::*;

  function automatic logic [31:0] op_elem(op_e op, int w, logic [31:0] a, logic [31:0] b,
                                          logic [31:0] c);
    longint sa, sb, sc, ua, ub, r;
    longint mask;
    int sh;
    mask = (64'd1 << w) - 1;
    ua = a & mask;
    ub = b & mask;
    sa = (ua >= (64'd1 << (w - 1))) ? ua - (64'd1 << w) : ua;
    sb = (ub >= (64'd1 << (w - 1))) ? ub - (64'd1 << w) : ub;
    sc = ((c & mask) >= (64'd1 << (w - 1))) ? (c & mask) - (64'd1 << w) : (c & mask);
    sh = int'(ub % w);
    case (op)
      OP_ADD:    r = sa + sb;
      OP_SUB:    r = sa - sb;
      OP_RSUB:   r = sb - sa;
      OP_AND:    r = ua & ub;
      OP_OR:     r = ua | ub;
      OP_XOR:    r = ua ^ ub;
      OP_SLL:    r = ua << sh;
      OP_SRL:    r = ua >> sh;
      OP_SRA:    r = sa >>> sh;
      OP_MIN:    r = (sa < sb) ? sa : sb;
      OP_MINU:   r = (ua < ub) ? ua : ub;
      OP_MAX:    r = (sa > sb) ? sa : sb;
      OP_MAXU:   r = (ua > ub) ? ua : ub;
      OP_MUL:    r = sa * sb;
      OP_MULH:   r = (sa * sb) >>> w;
      OP_MULHU:  r = (ua * ub) >> w;
      OP_MULHSU: r = (sa * ub) >>> w;
      OP_MACC:   r = sc + sa * sb;
      OP_NMSAC:  r = sc - sa * sb;
      OP_MADD:   r = sa + sb * sc;
      OP_NMSUB:  r = sa - sb * sc;
      OP_MV:     r = sb;
      default:   r = 0;
    endcase
    return 32'(r & mask);
  endfunction

  function automatic logic [31:0] op_word(op_e op, ew_e ew, logic [31:0] a, logic [31:0] b,
                                          logic [31:0] c);
    logic [31:0] r;
    int w;
    w = 8 << ew;
    r = '0;
    for (int i = 0; i < 32 / w; i++) begin
      logic [31:0] e;
      e = op_elem(op, w, a >> (i * w), b >> (i * w), c >> (i * w));
      for (int k = 0; k < w; k++) r[i * w + k] = e[k];
    end
    return r;
  endfunction

endpackage
