// spatz_pkg: types and constants shared by the Spatz vector unit and its cluster.
//
// The default configuration is Spatz4: four 32-bit multiply-accumulate units (MACUs) and a
// vector length of 512 bits, so the vector register file holds 32 x 512 bit = 2 KiB.
// The register file is organised in "words" of 32*NR_MACU bits (128 bits by default): one
// word is what every functional unit reads or writes per cycle, and a vector register is
// VLEN/(32*NR_MACU) = 4 such words, one in each of the four banks. A word address is
// {register number, word index}; its two low bits select the bank.
//
// Memory ports (the VLSU ports and the scalar core's port) use a simple request/grant bus:
// a request is held until granted; reads return exactly one response, in order per port;
// writes return nothing. This bus protocol is this design's own choice.
package spatz_pkg;

  // ---------------------------------------------------------------------------------------
  // Configuration (Spatz4)
  // ---------------------------------------------------------------------------------------
  parameter int unsigned NR_MACU   = 4;                 // MACUs per Spatz
  parameter int unsigned VLEN      = 512;               // bits per vector register
  parameter int unsigned NR_VREG   = 32;                // architectural vector registers
  parameter int unsigned NR_BANKS  = 4;                 // VRF banks, 3R1W each
  parameter int unsigned WORD_W    = 32 * NR_MACU;      // VRF port width (bits)
  parameter int unsigned WORD_B    = WORD_W / 8;        // VRF port width (bytes)
  parameter int unsigned WPR       = VLEN / WORD_W;     // words per register (= NR_BANKS)
  parameter int unsigned NR_WORDS  = NR_VREG * WPR;     // words in the VRF
  parameter int unsigned WADDR_W   = $clog2(NR_WORDS);  // VRF word address width
  parameter int unsigned VLMAX_MAX = VLEN;              // SEW=8, LMUL=8: VLEN/8*8 elements
  parameter int unsigned VL_W      = $clog2(VLMAX_MAX + 1);
  parameter int unsigned ID_W      = 4;                 // X-interface instruction id width

  typedef logic [WADDR_W-1:0] vaddr_t;
  typedef logic [WORD_W-1:0]  vword_t;
  typedef logic [WORD_B-1:0]  vbe_t;
  typedef logic [VL_W-1:0]    vlen_t;
  typedef logic [ID_W-1:0]    id_t;

  // Element width (vsew encoding of RVV 1.0, only 8/16/32 bit for Zve32x)
  typedef enum logic [1:0] {EW8 = 2'd0, EW16 = 2'd1, EW32 = 2'd2} ew_e;

  // Functional units
  typedef enum logic [1:0] {FU_NONE = 2'd0, FU_VAU = 2'd1, FU_VLSU = 2'd2, FU_VSLDU = 2'd3} fu_e;

  // Operations
  typedef enum logic [4:0] {
    OP_ADD, OP_SUB, OP_RSUB, OP_AND, OP_OR, OP_XOR,
    OP_SLL, OP_SRL, OP_SRA,
    OP_MIN, OP_MINU, OP_MAX, OP_MAXU,
    OP_MUL, OP_MULH, OP_MULHU, OP_MULHSU,
    OP_MACC, OP_NMSAC, OP_MADD, OP_NMSUB,
    OP_MV,
    OP_LOAD, OP_STORE,
    OP_SLIDEUP, OP_SLIDEDOWN
  } op_e;

  // A decoded vector instruction, as handed from the controller to a functional unit.
  typedef struct packed {
    op_e          op;
    id_t          id;
    logic [4:0]   vd;         // destination (or store source vs3)
    logic [4:0]   vs1;
    logic [4:0]   vs2;
    logic         use_scalar; // operand 1 is the scalar (rs1 or immediate)
    logic [31:0]  scalar;     // rs1 value / immediate / slide amount / base address
    logic [31:0]  stride;     // rs2 value for strided memory operations
    logic         strided;
    ew_e          ew;
    logic [2:0]   vlmul;      // log2(LMUL), 0..3
    vlen_t        vl;
  } vreq_t;

  // A range [lo, hi) of VRF word addresses touched by an instruction operand
  typedef struct packed {
    logic             valid;
    logic [WADDR_W:0] lo;
    logic [WADDR_W:0] hi;
  } vrange_t;

  // Operand ranges of one instruction: one written group and up to three read groups
  typedef struct packed {
    vrange_t       wr;
    vrange_t [2:0] rd;
  } vranges_t;

  // 32-bit memory port (one of the N VLSU ports, or the scalar core's port)
  typedef struct packed {
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  // ---------------------------------------------------------------------------------------
  // Helpers
  // ---------------------------------------------------------------------------------------
  // Number of VRF words touched by vl elements of the given width.
  function automatic logic [WADDR_W:0] nr_words(vlen_t vl, ew_e ew);
    logic [VL_W+2:0] nbytes;
    nbytes = (VL_W+3)'(vl) << ew;
    return (WADDR_W+1)'((nbytes + (VL_W+3)'(WORD_B - 1)) / (VL_W+3)'(WORD_B));
  endfunction

  // Word address of word w of register group r, one bit wider than a VRF address so that
  // the end of the last register (NR_WORDS) can be represented.
  function automatic logic [WADDR_W:0] word_addr(logic [4:0] r, logic [WADDR_W:0] w);
    return ((WADDR_W+1)'(r) << $clog2(WPR)) + w;
  endfunction

  // Byte enable of word w for a vector of vl elements of width ew (tail bytes disabled).
  function automatic vbe_t word_be(vlen_t vl, ew_e ew, logic [WADDR_W:0] w);
    logic [VL_W+2:0] nbytes;
    logic [VL_W+2:0] first;
    vbe_t be;
    nbytes = (VL_W+3)'(vl) << ew;
    first  = (VL_W+3)'(w) * (VL_W+3)'(WORD_B);
    for (int b = 0; b < int'(WORD_B); b++) be[b] = (first + (VL_W+3)'(b)) < nbytes;
    return be;
  endfunction

endpackage
