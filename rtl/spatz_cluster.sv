// spatz_cluster: the small shared-L1 cluster built around Spatz (the design's top level).
//
// NR_CC core complexes (CC) share a 16 KiB L1 scratchpad of 16 single-ported 1 KiB SRAM
// banks. A CC pairs a scalar core with a Spatz vector unit; the scalar core is not part of
// this RTL, so its X-interface (vector instruction issue and results) and its 32-bit data
// port are ports of the cluster, one set per CC. Every CC therefore brings 1 + NR_MACU
// memory ports: the scalar core's and the NR_MACU ports of Spatz' VLSU. An address
// demultiplexer sends each request either to the fully-connected crossbar in front of the
// banks (addresses TCDM_BASE .. TCDM_BASE+16 KiB) or to the single external port, the
// cluster's way out to its AXI interface. Master port order: CC c has port c*(1+NR_MACU)
// for its scalar core, then its VLSU ports.
//
// Default: one CC with Spatz4 (4 MACUs in the cluster), the configuration the paper
// evaluates in most detail; the paper's other 4-MACU cluster uses two Spatz2 CCs, which
// needs NR_MACU = 2 and VLEN = 256 in spatz_pkg and NR_CC = 2 here. The instruction caches
// and the scalar core are not included.
module spatz_cluster
  import spatz_pkg::*;
#(
  parameter int unsigned NR_CC      = 1,
  parameter int unsigned NR_BANKS_L1 = 16,
  parameter int unsigned BANK_WORDS = 256,
  parameter logic [31:0] TCDM_BASE  = 32'h0000_0000
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // X-interface, one per core complex
  input  logic     [NR_CC-1:0]          x_issue_valid_i,
  output logic     [NR_CC-1:0]          x_issue_ready_o,
  input  logic     [NR_CC-1:0][31:0]    x_issue_instr_i,
  input  logic     [NR_CC-1:0][31:0]    x_issue_rs1_i,
  input  logic     [NR_CC-1:0][31:0]    x_issue_rs2_i,
  input  id_t      [NR_CC-1:0]          x_issue_id_i,
  output logic     [NR_CC-1:0]          x_issue_accept_o,
  output logic     [NR_CC-1:0]          x_result_valid_o,
  input  logic     [NR_CC-1:0]          x_result_ready_i,
  output id_t      [NR_CC-1:0]          x_result_id_o,
  output logic     [NR_CC-1:0]          x_result_we_o,
  output logic     [NR_CC-1:0][4:0]     x_result_rd_o,
  output logic     [NR_CC-1:0][31:0]    x_result_data_o,
  output logic     [NR_CC-1:0]          x_mem_busy_o,
  input  logic     [NR_CC-1:0]          core_lsu_busy_i,
  // scalar-core data port, one per core complex
  input  logic     [NR_CC-1:0]          core_req_valid_i,
  input  mem_req_t [NR_CC-1:0]          core_req_i,
  output logic     [NR_CC-1:0]          core_req_ready_o,
  output logic     [NR_CC-1:0]          core_rsp_valid_o,
  output logic     [NR_CC-1:0][31:0]    core_rsp_data_o,
  // external (AXI-side) port
  output logic                          ext_req_valid_o,
  output mem_req_t                      ext_req_o,
  input  logic                          ext_req_ready_i,
  input  logic                          ext_rsp_valid_i,
  input  logic     [31:0]               ext_rsp_data_i
);

  localparam int unsigned PPC   = 1 + NR_MACU;   // memory ports per core complex
  localparam int unsigned NR_M  = NR_CC * PPC;
  localparam int unsigned ROW_W = $clog2(BANK_WORDS);

  logic     [NR_M-1:0]       m_valid, m_ready, m_rsp_valid;
  mem_req_t [NR_M-1:0]       m_req;
  logic     [NR_M-1:0][31:0] m_rsp_data;

  for (genvar c = 0; c < NR_CC; c++) begin : gen_cc
    logic     [NR_MACU-1:0]       v_valid, v_ready, v_rsp_valid;
    mem_req_t [NR_MACU-1:0]       v_req;
    logic     [NR_MACU-1:0][31:0] v_rsp_data;

    spatz i_spatz (
      .clk_i, .rst_ni,
      .x_issue_valid_i (x_issue_valid_i[c]),
      .x_issue_ready_o (x_issue_ready_o[c]),
      .x_issue_instr_i (x_issue_instr_i[c]),
      .x_issue_rs1_i   (x_issue_rs1_i[c]),
      .x_issue_rs2_i   (x_issue_rs2_i[c]),
      .x_issue_id_i    (x_issue_id_i[c]),
      .x_issue_accept_o(x_issue_accept_o[c]),
      .x_result_valid_o(x_result_valid_o[c]),
      .x_result_ready_i(x_result_ready_i[c]),
      .x_result_id_o   (x_result_id_o[c]),
      .x_result_we_o   (x_result_we_o[c]),
      .x_result_rd_o   (x_result_rd_o[c]),
      .x_result_data_o (x_result_data_o[c]),
      .x_mem_busy_o    (x_mem_busy_o[c]),
      .core_lsu_busy_i (core_lsu_busy_i[c]),
      .mem_req_valid_o (v_valid),
      .mem_req_o       (v_req),
      .mem_req_ready_i (v_ready),
      .mem_rsp_valid_i (v_rsp_valid),
      .mem_rsp_data_i  (v_rsp_data)
    );

    assign m_valid[c*PPC]     = core_req_valid_i[c];
    assign m_req[c*PPC]       = core_req_i[c];
    assign core_req_ready_o[c] = m_ready[c*PPC];
    assign core_rsp_valid_o[c] = m_rsp_valid[c*PPC];
    assign core_rsp_data_o[c]  = m_rsp_data[c*PPC];
    for (genvar p = 0; p < NR_MACU; p++) begin : gen_port
      assign m_valid[c*PPC+1+p] = v_valid[p];
      assign m_req[c*PPC+1+p]   = v_req[p];
      assign v_ready[p]         = m_ready[c*PPC+1+p];
      assign v_rsp_valid[p]     = m_rsp_valid[c*PPC+1+p];
      assign v_rsp_data[p]      = m_rsp_data[c*PPC+1+p];
    end
  end

  logic     [NR_M-1:0]       t_valid, t_ready, t_rsp_valid;
  mem_req_t [NR_M-1:0]       t_req;
  logic     [NR_M-1:0][31:0] t_rsp_data;

  spatz_addr_demux #(
    .NR_M     (NR_M),
    .TCDM_BASE(TCDM_BASE),
    .TCDM_SIZE(32'(NR_BANKS_L1 * BANK_WORDS * 4))
  ) i_demux (
    .clk_i, .rst_ni,
    .m_req_valid_i(m_valid),
    .m_req_i      (m_req),
    .m_req_ready_o(m_ready),
    .m_rsp_valid_o(m_rsp_valid),
    .m_rsp_data_o (m_rsp_data),
    .t_req_valid_o(t_valid),
    .t_req_o      (t_req),
    .t_req_ready_i(t_ready),
    .t_rsp_valid_i(t_rsp_valid),
    .t_rsp_data_i (t_rsp_data),
    .e_req_valid_o(ext_req_valid_o),
    .e_req_o      (ext_req_o),
    .e_req_ready_i(ext_req_ready_i),
    .e_rsp_valid_i(ext_rsp_valid_i),
    .e_rsp_data_i (ext_rsp_data_i)
  );

  logic [NR_BANKS_L1-1:0]            b_req, b_we, b_rvalid;
  logic [NR_BANKS_L1-1:0][ROW_W-1:0] b_addr;
  logic [NR_BANKS_L1-1:0][31:0]      b_wdata, b_rdata;
  logic [NR_BANKS_L1-1:0][3:0]       b_be;

  spatz_tcdm_xbar #(
    .NR_M (NR_M),
    .NR_B (NR_BANKS_L1),
    .ROW_W(ROW_W)
  ) i_xbar (
    .clk_i, .rst_ni,
    .m_req_valid_i(t_valid),
    .m_req_i      (t_req),
    .m_req_ready_o(t_ready),
    .m_rsp_valid_o(t_rsp_valid),
    .m_rsp_data_o (t_rsp_data),
    .b_req_o      (b_req),
    .b_we_o       (b_we),
    .b_addr_o     (b_addr),
    .b_wdata_o    (b_wdata),
    .b_be_o       (b_be),
    .b_rvalid_i   (b_rvalid),
    .b_rdata_i    (b_rdata)
  );

  for (genvar b = 0; b < NR_BANKS_L1; b++) begin : gen_bank
    spatz_sram_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .rst_ni,
      .req_i   (b_req[b]),
      .we_i    (b_we[b]),
      .addr_i  (b_addr[b]),
      .wdata_i (b_wdata[b]),
      .be_i    (b_be[b]),
      .rvalid_o(b_rvalid[b]),
      .rdata_o (b_rdata[b])
    );
  end

endmodule
