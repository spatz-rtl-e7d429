// spatz: the Spatz vector processing unit (Spatz4 by default: 4 MACUs, VLEN = 512 bit).
//
// A controller receives vector instructions from a scalar core over an X-interface, keeps
// the vl/vtype CSRs, and dispatches each instruction to one of three functional units that
// run in parallel: the VAU (arithmetic, NR_MACU MACUs), the VLSU (loads/stores over NR_MACU
// 32-bit memory ports) and the VSLDU (slides). All three share one centralised vector
// register file of four 3R1W banks. VRF read ports: 0..2 VAU (vs2, vs1, vd), 3 VLSU (store
// data), 4 VSLDU (source). Write ports: 0 VAU, 1 VLSU, 2 VSLDU (this order is also the
// write priority). Each read request passes the scoreboard first, which holds it back until
// the word has been produced by an older instruction in another unit (chaining).
// Structure as in the paper; port priorities and the handshake details are this design's.
module spatz
  import spatz_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // X-interface to the scalar core
  input  logic                 x_issue_valid_i,
  output logic                 x_issue_ready_o,
  input  logic [31:0]          x_issue_instr_i,
  input  logic [31:0]          x_issue_rs1_i,
  input  logic [31:0]          x_issue_rs2_i,
  input  id_t                  x_issue_id_i,
  output logic                 x_issue_accept_o,
  output logic                 x_result_valid_o,
  input  logic                 x_result_ready_i,
  output id_t                  x_result_id_o,
  output logic                 x_result_we_o,
  output logic [4:0]           x_result_rd_o,
  output logic [31:0]          x_result_data_o,
  output logic                 x_mem_busy_o,
  input  logic                 core_lsu_busy_i,
  // memory ports
  output logic     [NR_MACU-1:0]       mem_req_valid_o,
  output mem_req_t [NR_MACU-1:0]       mem_req_o,
  input  logic     [NR_MACU-1:0]       mem_req_ready_i,
  input  logic     [NR_MACU-1:0]       mem_rsp_valid_i,
  input  logic     [NR_MACU-1:0][31:0] mem_rsp_data_i
);

  localparam int unsigned NR_RD = 5;
  localparam int unsigned NR_WR = 3;

  logic   [NR_RD-1:0] rd_req, rd_ok, rd_gnt;
  vaddr_t [NR_RD-1:0] rd_addr;
  vword_t [NR_RD-1:0] rd_data;
  logic   [NR_WR-1:0] wr_req, wr_gnt;
  vaddr_t [NR_WR-1:0] wr_addr;
  vword_t [NR_WR-1:0] wr_data;
  vbe_t   [NR_WR-1:0] wr_be;

  logic [2:0]              unit_valid, unit_ready, unit_done;
  logic [2:0][WADDR_W:0]   unit_wr_ptr;
  vreq_t                   unit_req;
  logic                    vlsu_busy;
  vlen_t                   vl;
  logic [31:0]             vtype;

  spatz_controller #(.NR_RD(NR_RD)) i_controller (
    .clk_i, .rst_ni,
    .x_issue_valid_i, .x_issue_ready_o, .x_issue_instr_i, .x_issue_rs1_i, .x_issue_rs2_i,
    .x_issue_id_i, .x_issue_accept_o,
    .x_result_valid_o, .x_result_ready_i, .x_result_id_o, .x_result_we_o, .x_result_rd_o,
    .x_result_data_o, .x_mem_busy_o, .core_lsu_busy_i,
    .vl_o         (vl),
    .vtype_o      (vtype),
    .unit_valid_o (unit_valid),
    .unit_req_o   (unit_req),
    .unit_ready_i (unit_ready),
    .unit_done_i  (unit_done),
    .unit_wr_ptr_i(unit_wr_ptr),
    .rd_req_i     (rd_req),
    .rd_addr_i    (rd_addr),
    .rd_ok_o      (rd_ok)
  );

  spatz_vrf #(.NR_RD(NR_RD), .NR_WR(NR_WR)) i_vrf (
    .clk_i,
    .rd_req_i (rd_ok),
    .rd_addr_i(rd_addr),
    .rd_gnt_o (rd_gnt),
    .rd_data_o(rd_data),
    .wr_req_i (wr_req),
    .wr_addr_i(wr_addr),
    .wr_data_i(wr_data),
    .wr_be_i  (wr_be),
    .wr_gnt_o (wr_gnt)
  );

  spatz_vau i_vau (
    .clk_i, .rst_ni,
    .req_valid_i(unit_valid[0]),
    .req_ready_o(unit_ready[0]),
    .req_i      (unit_req),
    .done_o     (unit_done[0]),
    .wr_ptr_o   (unit_wr_ptr[0]),
    .rd_req_o   (rd_req[2:0]),
    .rd_addr_o  (rd_addr[2:0]),
    .rd_gnt_i   (rd_gnt[2:0]),
    .rd_data_i  (rd_data[2:0]),
    .wr_req_o   (wr_req[0]),
    .wr_addr_o  (wr_addr[0]),
    .wr_data_o  (wr_data[0]),
    .wr_be_o    (wr_be[0]),
    .wr_gnt_i   (wr_gnt[0])
  );

  spatz_vlsu i_vlsu (
    .clk_i, .rst_ni,
    .req_valid_i(unit_valid[1]),
    .req_ready_o(unit_ready[1]),
    .req_i      (unit_req),
    .done_o     (unit_done[1]),
    .busy_o     (vlsu_busy),
    .wr_ptr_o   (unit_wr_ptr[1]),
    .rd_req_o   (rd_req[3]),
    .rd_addr_o  (rd_addr[3]),
    .rd_gnt_i   (rd_gnt[3]),
    .rd_data_i  (rd_data[3]),
    .wr_req_o   (wr_req[1]),
    .wr_addr_o  (wr_addr[1]),
    .wr_data_o  (wr_data[1]),
    .wr_be_o    (wr_be[1]),
    .wr_gnt_i   (wr_gnt[1]),
    .mem_req_valid_o, .mem_req_o, .mem_req_ready_i, .mem_rsp_valid_i, .mem_rsp_data_i
  );

  spatz_vsldu i_vsldu (
    .clk_i, .rst_ni,
    .req_valid_i(unit_valid[2]),
    .req_ready_o(unit_ready[2]),
    .req_i      (unit_req),
    .done_o     (unit_done[2]),
    .wr_ptr_o   (unit_wr_ptr[2]),
    .rd_req_o   (rd_req[4]),
    .rd_addr_o  (rd_addr[4]),
    .rd_gnt_i   (rd_gnt[4]),
    .rd_data_i  (rd_data[4]),
    .wr_req_o   (wr_req[2]),
    .wr_addr_o  (wr_addr[2]),
    .wr_data_o  (wr_data[2]),
    .wr_be_o    (wr_be[2]),
    .wr_gnt_i   (wr_gnt[2])
  );

  // The VLSU is busy exactly while the controller has a memory instruction in it
  assert property (@(posedge clk_i) disable iff (!rst_ni) vlsu_busy |-> x_mem_busy_o);

  logic unused;
  assign unused = ^{vl, vtype};

endmodule
