// spatz_addr_demux: routes every memory request of a core complex either to the L1
// crossbar or to the cluster's external (AXI-side) port, by address.
//
// Addresses in [TCDM_BASE, TCDM_BASE + TCDM_SIZE) go to the L1 crossbar, all others to the
// single external port, which the NR_M master ports share through a round-robin arbiter.
// Responses come back in order per master: a master may switch target only once all its
// reads to the previous target have been answered, and the external port is assumed to
// answer its reads in order (a small FIFO remembers which master each belongs to).
// The demultiplexer and its place are the paper's; the address map, the ordering rule and
// the external arbitration are this design's choices.
module spatz_addr_demux
  import spatz_pkg::*;
#(
  parameter int unsigned NR_M      = 5,
  parameter logic [31:0] TCDM_BASE = 32'h0000_0000,
  parameter logic [31:0] TCDM_SIZE = 32'h0000_4000,
  parameter int unsigned EXT_OUTST = 4,
  parameter int unsigned M_OUTST   = 15
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // from the core complexes
  input  logic     [NR_M-1:0]       m_req_valid_i,
  input  mem_req_t [NR_M-1:0]       m_req_i,
  output logic     [NR_M-1:0]       m_req_ready_o,
  output logic     [NR_M-1:0]       m_rsp_valid_o,
  output logic     [NR_M-1:0][31:0] m_rsp_data_o,
  // to the L1 crossbar
  output logic     [NR_M-1:0]       t_req_valid_o,
  output mem_req_t [NR_M-1:0]       t_req_o,
  input  logic     [NR_M-1:0]       t_req_ready_i,
  input  logic     [NR_M-1:0]       t_rsp_valid_i,
  input  logic     [NR_M-1:0][31:0] t_rsp_data_i,
  // external port
  output logic                      e_req_valid_o,
  output mem_req_t                  e_req_o,
  input  logic                      e_req_ready_i,
  input  logic                      e_rsp_valid_i,
  input  logic     [31:0]           e_rsp_data_i
);

  localparam int unsigned MSEL_W = (NR_M > 1) ? $clog2(NR_M) : 1;
  localparam int unsigned EQ_W   = $clog2(EXT_OUTST);
  localparam int unsigned CNT_W  = $clog2(M_OUTST + 1);

  logic [NR_M-1:0]             is_tcdm, tgt_q, block;   // tgt: 1 = L1, 0 = external
  logic [NR_M-1:0][CNT_W-1:0]  outst_q;

  // external-port arbitration and response bookkeeping
  logic [MSEL_W-1:0]                 rr_q, esel;
  logic                              efound;
  logic [EXT_OUTST-1:0][MSEL_W-1:0]  eq_q;
  logic [EQ_W-1:0]                   eq_wp_q, eq_rp_q;
  logic [EQ_W:0]                     eq_cnt_q;
  logic                              eq_full;

  assign eq_full = eq_cnt_q == (EQ_W+1)'(EXT_OUTST);

  always_comb begin
    for (int m = 0; m < int'(NR_M); m++) begin
      is_tcdm[m] = (m_req_i[m].addr - TCDM_BASE) < TCDM_SIZE;
      // stall a switch of target while reads to the old target are outstanding, and a new
      // read when the per-master counter would overflow
      block[m]   = ((is_tcdm[m] != tgt_q[m]) && (outst_q[m] != '0)) ||
                   (outst_q[m] == CNT_W'(M_OUTST));
    end
    efound = 1'b0;
    esel   = '0;
    for (int i = 0; i < int'(NR_M); i++) begin
      int unsigned m;
      m = (int'(rr_q) + i) % NR_M;
      if (!efound && m_req_valid_i[m] && !is_tcdm[m] && !block[m]) begin
        efound = 1'b1;
        esel   = MSEL_W'(m);
      end
    end
    e_req_valid_o = efound && !(eq_full && !m_req_i[esel].we);
    e_req_o       = m_req_i[esel];
    for (int m = 0; m < int'(NR_M); m++) begin
      t_req_valid_o[m] = m_req_valid_i[m] && is_tcdm[m] && !block[m];
      t_req_o[m]       = m_req_i[m];
    end
  end

  always_comb begin
    for (int m = 0; m < int'(NR_M); m++) begin
      m_req_ready_o[m] = (t_req_valid_o[m] && t_req_ready_i[m]) ||
                         (e_req_valid_o && e_req_ready_i && esel == MSEL_W'(m));
      m_rsp_valid_o[m] = t_rsp_valid_i[m];
      m_rsp_data_o[m]  = t_rsp_data_i[m];
    end
    if (e_rsp_valid_i) begin
      m_rsp_valid_o[eq_q[eq_rp_q]] = 1'b1;
      m_rsp_data_o[eq_q[eq_rp_q]]  = e_rsp_data_i;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tgt_q    <= '1;
      outst_q  <= '0;
      rr_q     <= '0;
      eq_q     <= '0;
      eq_wp_q  <= '0;
      eq_rp_q  <= '0;
      eq_cnt_q <= '0;
    end else begin
      logic epush, epop;
      epush = e_req_valid_o && e_req_ready_i && !m_req_i[esel].we;
      epop  = e_rsp_valid_i;
      for (int m = 0; m < int'(NR_M); m++) begin
        logic rd_issue;
        rd_issue = m_req_valid_i[m] && m_req_ready_o[m] && !m_req_i[m].we;
        if (m_req_valid_i[m] && m_req_ready_o[m]) tgt_q[m] <= is_tcdm[m];
        outst_q[m] <= outst_q[m] + CNT_W'(rd_issue) - CNT_W'(m_rsp_valid_o[m]);
      end
      if (e_req_valid_o && e_req_ready_i) rr_q <= MSEL_W'((int'(esel) + 1) % NR_M);
      if (epush) begin
        eq_q[eq_wp_q] <= esel;
        eq_wp_q <= eq_wp_q + 1;
      end
      if (epop) eq_rp_q <= eq_rp_q + 1;
      eq_cnt_q <= eq_cnt_q + (EQ_W+1)'(epush) - (EQ_W+1)'(epop);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) e_rsp_valid_i |-> eq_cnt_q != '0);

endmodule
