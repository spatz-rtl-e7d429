// spatz_vrf: the vector register file of Spatz.
//
// 32 vector registers of VLEN bits, split into four banks of VLEN/4 bits per row. Register r
// occupies row r in all four banks, so word w (0..3) of register r is in bank w at row r; a
// word address is {r, w} and its two low bits pick the bank. Each bank has three read ports
// and one write port (3R1W), enough for vmacc, which reads vs2, vs1 and vd (all in the same
// bank for a given word index) and writes vd. This organisation is the paper's.
//
// Around the banks sit two crossbars: the read ports of the functional units (NR_RD of them)
// are routed to the banks, and the write ports (NR_WR) likewise. Read port 0 has the highest
// priority; a bank grants at most three reads and one write per cycle, in port order. This
// priority scheme is this design's choice (the paper does not describe the arbitration).
// Reads are combinational: data is returned in the cycle the port is granted. Writes take
// effect at the next clock edge, byte by byte under the write byte enable.
//
// The paper's banks are latch-based standard-cell memories; here each bank is a register
// array, which has the same behaviour at the clock-cycle level. Contents are not reset,
// as a latch array would not be.
module spatz_vrf
  import spatz_pkg::*;
#(
  parameter int unsigned NR_RD = 5,
  parameter int unsigned NR_WR = 3
) (
  input  logic                 clk_i,
  // read ports
  input  logic   [NR_RD-1:0]   rd_req_i,
  input  vaddr_t [NR_RD-1:0]   rd_addr_i,
  output logic   [NR_RD-1:0]   rd_gnt_o,
  output vword_t [NR_RD-1:0]   rd_data_o,
  // write ports
  input  logic   [NR_WR-1:0]   wr_req_i,
  input  vaddr_t [NR_WR-1:0]   wr_addr_i,
  input  vword_t [NR_WR-1:0]   wr_data_i,
  input  vbe_t   [NR_WR-1:0]   wr_be_i,
  output logic   [NR_WR-1:0]   wr_gnt_o
);

  localparam int unsigned ROW_W = $clog2(NR_VREG);
  localparam int unsigned BSEL_W = $clog2(NR_BANKS);
  localparam int unsigned RD_PER_BANK = 3;

  vword_t mem_q [NR_BANKS][NR_VREG];

  // Read arbitration: a port is granted if fewer than three higher-priority ports use its bank
  always_comb begin
    logic [1:0] used [NR_BANKS];
    for (int b = 0; b < int'(NR_BANKS); b++) used[b] = '0;
    rd_gnt_o = '0;
    for (int p = 0; p < int'(NR_RD); p++) begin
      for (int b = 0; b < int'(NR_BANKS); b++) begin
        if (rd_req_i[p] && rd_addr_i[p][BSEL_W-1:0] == BSEL_W'(b) && used[b] < 2'(RD_PER_BANK)) begin
          rd_gnt_o[p] = 1'b1;
          used[b]     = used[b] + 2'd1;
        end
      end
      rd_data_o[p] = mem_q[rd_addr_i[p][BSEL_W-1:0]][rd_addr_i[p][WADDR_W-1:BSEL_W]];
    end
  end

  // Write arbitration: one write per bank, lowest port index first
  logic [NR_BANKS-1:0]           bank_wr;
  logic [NR_BANKS-1:0][ROW_W-1:0] bank_row;
  vword_t [NR_BANKS-1:0]         bank_data;
  vbe_t   [NR_BANKS-1:0]         bank_be;

  always_comb begin
    bank_wr   = '0;
    bank_row  = '0;
    bank_data = '0;
    bank_be   = '0;
    wr_gnt_o  = '0;
    for (int p = 0; p < int'(NR_WR); p++) begin
      for (int b = 0; b < int'(NR_BANKS); b++) begin
        if (wr_req_i[p] && wr_addr_i[p][BSEL_W-1:0] == BSEL_W'(b) && !bank_wr[b]) begin
          wr_gnt_o[p]  = 1'b1;
          bank_wr[b]   = 1'b1;
          bank_row[b]  = wr_addr_i[p][WADDR_W-1:BSEL_W];
          bank_data[b] = wr_data_i[p];
          bank_be[b]   = wr_be_i[p];
        end
      end
    end
  end

  always_ff @(posedge clk_i) begin
    for (int b = 0; b < int'(NR_BANKS); b++) begin
      if (bank_wr[b]) begin
        for (int y = 0; y < int'(WORD_B); y++) begin
          if (bank_be[b][y]) mem_q[b][bank_row[b]][8*y +: 8] <= bank_data[b][8*y +: 8];
        end
      end
    end
  end

endmodule
