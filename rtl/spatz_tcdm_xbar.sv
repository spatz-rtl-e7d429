// spatz_tcdm_xbar: fully-connected crossbar between the cluster's memory ports and the L1
// SRAM banks (the "logarithmic crossbar" of the paper's cluster).
//
// NR_M 32-bit master ports (each core complex brings the scalar core's port and the N ports
// of its Spatz VLSU) reach NR_B banks. Banks are word-interleaved: bank = addr[2 +: log2 NR_B],
// row = the bits above. Each bank serves one request per cycle; when several masters want
// the same bank, a round-robin arbiter per bank picks one and the others stay stalled
// (ready low) until granted. A read's data comes back one cycle after the grant, on the
// master's response port. As a master is granted at most one request per cycle and every
// bank answers after exactly one cycle, responses reach each master in request order.
// Round-robin arbitration and the interleaving are this design's choices; the paper only
// names a fully-connected logarithmic crossbar.
module spatz_tcdm_xbar
  import spatz_pkg::*;
#(
  parameter int unsigned NR_M  = 5,
  parameter int unsigned NR_B  = 16,
  parameter int unsigned ROW_W = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // masters
  input  logic     [NR_M-1:0]       m_req_valid_i,
  input  mem_req_t [NR_M-1:0]       m_req_i,
  output logic     [NR_M-1:0]       m_req_ready_o,
  output logic     [NR_M-1:0]       m_rsp_valid_o,
  output logic     [NR_M-1:0][31:0] m_rsp_data_o,
  // banks
  output logic     [NR_B-1:0]             b_req_o,
  output logic     [NR_B-1:0]             b_we_o,
  output logic     [NR_B-1:0][ROW_W-1:0]  b_addr_o,
  output logic     [NR_B-1:0][31:0]       b_wdata_o,
  output logic     [NR_B-1:0][3:0]        b_be_o,
  input  logic     [NR_B-1:0]             b_rvalid_i,
  input  logic     [NR_B-1:0][31:0]       b_rdata_i
);

  localparam int unsigned BSEL_W = $clog2(NR_B);
  localparam int unsigned MSEL_W = (NR_M > 1) ? $clog2(NR_M) : 1;

  logic [NR_B-1:0][MSEL_W-1:0] rr_q;     // round-robin pointer per bank
  logic [NR_B-1:0][MSEL_W-1:0] sel;      // granted master per bank
  logic [NR_B-1:0][MSEL_W-1:0] rsp_m_q;  // master of the last read per bank

  always_comb begin
    m_req_ready_o = '0;
    b_req_o   = '0;
    b_we_o    = '0;
    b_addr_o  = '0;
    b_wdata_o = '0;
    b_be_o    = '0;
    sel       = '0;
    for (int b = 0; b < int'(NR_B); b++) begin
      logic found;
      found = 1'b0;
      for (int i = 0; i < int'(NR_M); i++) begin
        int unsigned m;
        m = (int'(rr_q[b]) + i) % NR_M;
        if (!found && m_req_valid_i[m] && (int'(m_req_i[m].addr[2 +: BSEL_W]) == b)) begin
          found = 1'b1;
          sel[b] = MSEL_W'(m);
        end
      end
      if (found) begin
        b_req_o[b]   = 1'b1;
        b_we_o[b]    = m_req_i[sel[b]].we;
        b_addr_o[b]  = m_req_i[sel[b]].addr[2 + BSEL_W +: ROW_W];
        b_wdata_o[b] = m_req_i[sel[b]].wdata;
        b_be_o[b]    = m_req_i[sel[b]].be;
        m_req_ready_o[sel[b]] = 1'b1;
      end
    end
  end

  always_comb begin
    m_rsp_valid_o = '0;
    m_rsp_data_o  = '0;
    for (int b = 0; b < int'(NR_B); b++) begin
      if (b_rvalid_i[b]) begin
        m_rsp_valid_o[rsp_m_q[b]] = 1'b1;
        m_rsp_data_o[rsp_m_q[b]]  = b_rdata_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q    <= '0;
      rsp_m_q <= '0;
    end else begin
      for (int b = 0; b < int'(NR_B); b++) begin
        if (b_req_o[b]) begin
          rsp_m_q[b] <= sel[b];
          rr_q[b]    <= MSEL_W'((int'(sel[b]) + 1) % NR_M);
        end
      end
    end
  end

endmodule
