// spatz_scoreboard: hazard tracking between Spatz' three functional units.
//
// Each unit executes one instruction at a time and writes its destination register group
// word by word, in increasing address order. The scoreboard uses that to allow chaining at
// VRF-word granularity (one word is 32*NR_MACU bits, the width at which the VLSU's reorder
// buffer and the slide unit commit, as in the paper):
//  * read-after-write: a read port of unit U asking for word address a is held back (its
//    request is not passed to the VRF: operand back-pressure) while another busy unit V is
//    writing a group that contains a and has not yet committed a (a >= V's write pointer).
//    As soon as V commits the word, U may read it, so e.g. a vmacc can start on the first
//    words of a vector still being loaded.
//  * write-after-read and write-after-write: a new instruction is not issued while a busy
//    unit (other than its own, which is idle at issue) still reads or writes a group the new
//    instruction writes. (A new instruction reading a group being written is the chained
//    RAW case above.) Holding issue until the older instruction ends is this design's
//    simplification;
//    the paper only states that hazards are handled by operand back-pressure and that
//    chaining is computed per element.
// Purely combinational. Unit indices: 0 = VAU, 1 = VLSU, 2 = VSLDU.
module spatz_scoreboard
  import spatz_pkg::*;
#(
  parameter int unsigned NR_RD = 5,
  // unit owning each VRF read port (default: VAU x3, VLSU, VSLDU)
  parameter int unsigned RD_UNIT [NR_RD] = '{0, 0, 0, 1, 2}
) (
  input  logic     [2:0]             busy_i,
  input  vranges_t [2:0]             ranges_i,   // operands of the instruction in each unit
  input  logic     [2:0][WADDR_W:0]  wr_ptr_i,   // next word each unit will commit
  // instruction about to issue
  input  logic                       new_valid_i,
  input  logic     [1:0]             new_unit_i,
  input  vranges_t                   new_ranges_i,
  output logic                       issue_hazard_o,
  // VRF read ports
  input  logic     [NR_RD-1:0]       rd_req_i,
  input  vaddr_t   [NR_RD-1:0]       rd_addr_i,
  output logic     [NR_RD-1:0]       rd_ok_o
);

  function automatic logic overlap(vrange_t a, vrange_t b);
    return a.valid && b.valid && (a.lo < b.hi) && (b.lo < a.hi);
  endfunction

  // WAR / WAW at issue
  always_comb begin
    issue_hazard_o = 1'b0;
    for (int u = 0; u < 3; u++) begin
      if (new_valid_i && busy_i[u] && (u != int'(new_unit_i))) begin
        if (overlap(new_ranges_i.wr, ranges_i[u].wr)) issue_hazard_o = 1'b1;
        for (int r = 0; r < 3; r++)
          if (overlap(new_ranges_i.wr, ranges_i[u].rd[r])) issue_hazard_o = 1'b1;
      end
    end
  end

  // RAW chaining per word
  always_comb begin
    for (int p = 0; p < int'(NR_RD); p++) begin
      logic [WADDR_W:0] a;
      a = (WADDR_W+1)'(rd_addr_i[p]);
      rd_ok_o[p] = 1'b1;
      for (int u = 0; u < 3; u++) begin
        if (busy_i[u] && (u != int'(RD_UNIT[p])) && ranges_i[u].wr.valid &&
            a >= ranges_i[u].wr.lo && a < ranges_i[u].wr.hi && a >= wr_ptr_i[u])
          rd_ok_o[p] = 1'b0;
      end
      if (!rd_req_i[p]) rd_ok_o[p] = 1'b0;
    end
  end

endmodule
