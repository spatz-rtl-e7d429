// spatz_controller: Spatz' controller (decoder, CSRs, scoreboard, dispatch, completion).
//
// Scalar-core side, a reduced CORE-V X-interface:
//  * issue: x_issue_valid_i/x_issue_ready_o with the instruction word, rs1/rs2 values and an
//    id. In the handshake cycle x_issue_accept_o tells whether Spatz took the instruction
//    (0: not a supported vector instruction, the core raises an exception).
//  * result: x_result_valid_o/x_result_ready_i with the id, and for vsetvl* the new vl to
//    write to rd. Every accepted instruction produces exactly one result, when it has
//    finished (vsetvl*: the cycle after issue), which is how Spatz acknowledges completion.
//  * x_mem_busy_o is high while the VLSU executes; the core stalls its own load/store unit
//    meanwhile, and core_lsu_busy_i holds back vector memory instructions while the core
//    has scalar accesses in flight. This mutual stalling keeps scalar and vector memory
//    accesses ordered, as the paper describes.
// The CSRs vl and vtype (vsew, vlmul, vill) are kept here; vstart is always zero. vtype
// settings Spatz cannot run (SEW > 32, fractional LMUL, reserved bits) set vill and vl = 0.
// An instruction is dispatched to its unit when the unit is idle, its previous completion
// has been reported, and the scoreboard sees no write-after-read/write hazard; each unit
// copies the instruction with the vl/vtype valid at dispatch, so vsetvl* never waits.
// The scoreboard also gates the units' VRF read requests for chaining (see
// spatz_scoreboard). The X-interface subset and the id/result format are this design's
// choices. Unit order in all arrays: 0 = VAU, 1 = VLSU, 2 = VSLDU.
module spatz_controller
  import spatz_pkg::*;
#(
  parameter int unsigned NR_RD = 5
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // X-interface
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
  // CSR state, for observation
  output vlen_t                vl_o,
  output logic [31:0]          vtype_o,
  // functional units
  output logic     [2:0]       unit_valid_o,
  output vreq_t                unit_req_o,
  input  logic     [2:0]       unit_ready_i,
  input  logic     [2:0]       unit_done_i,
  input  logic     [2:0][WADDR_W:0] unit_wr_ptr_i,
  // VRF read-port gating (chaining)
  input  logic     [NR_RD-1:0] rd_req_i,
  input  vaddr_t   [NR_RD-1:0] rd_addr_i,
  output logic     [NR_RD-1:0] rd_ok_o
);

  // ---------------------------------------------------------------------------------------
  // CSRs
  // ---------------------------------------------------------------------------------------
  vlen_t      vl_q;
  ew_e        ew_q;
  logic [2:0] vlmul_q;
  logic       vill_q;

  assign vl_o    = vl_q;
  assign vtype_o = {vill_q, 23'b0, 2'b0, 1'b0, ew_q, vlmul_q};

  // ---------------------------------------------------------------------------------------
  // Decode
  // ---------------------------------------------------------------------------------------
  logic        legal, is_cfg, avl_max, keep_vl;
  logic [31:0] cfg_vtype, cfg_avl;
  logic [4:0]  rd;
  fu_e         fu;
  vreq_t       dec_req;

  spatz_decoder i_decoder (
    .instr_i      (x_issue_instr_i),
    .rs1_i        (x_issue_rs1_i),
    .rs2_i        (x_issue_rs2_i),
    .ew_i         (ew_q),
    .vlmul_i      (vlmul_q),
    .vill_i       (vill_q),
    .vl_i         (vl_q),
    .legal_o      (legal),
    .is_cfg_o     (is_cfg),
    .cfg_vtype_o  (cfg_vtype),
    .cfg_avl_o    (cfg_avl),
    .cfg_avl_max_o(avl_max),
    .cfg_keep_vl_o(keep_vl),
    .rd_o         (rd),
    .fu_o         (fu),
    .req_o        (dec_req)
  );

  // New vl/vtype of a vsetvl*
  logic       new_vill;
  vlen_t      new_vl;
  always_comb begin
    int unsigned vlmax;
    new_vill = (cfg_vtype[31:8] != '0) || (cfg_vtype[5:3] > 3'd2) || cfg_vtype[2];
    vlmax    = (VLEN >> (3 + cfg_vtype[5:3])) << cfg_vtype[1:0];
    if (new_vill)              new_vl = '0;
    else if (keep_vl)          new_vl = vl_q;
    else if (avl_max)          new_vl = vlen_t'(vlmax);
    else if (cfg_avl >= vlmax) new_vl = vlen_t'(vlmax);
    else                       new_vl = vlen_t'(cfg_avl);
  end

  // ---------------------------------------------------------------------------------------
  // Operand ranges and scoreboard
  // ---------------------------------------------------------------------------------------
  function automatic vrange_t group(logic v, logic [4:0] r, logic [2:0] lmul);
    vrange_t g;
    g.valid = v;
    g.lo    = word_addr(r, '0);
    g.hi    = g.lo + ((WADDR_W+1)'(WPR) << lmul);
    return g;
  endfunction

  vranges_t new_ranges;
  always_comb begin
    new_ranges = '0;
    unique case (fu)
      FU_VAU: begin
        new_ranges.wr    = group(1'b1, dec_req.vd, dec_req.vlmul);
        new_ranges.rd[0] = group(dec_req.op != OP_MV, dec_req.vs2, dec_req.vlmul);
        new_ranges.rd[1] = group(!dec_req.use_scalar, dec_req.vs1, dec_req.vlmul);
        new_ranges.rd[2] = group(dec_req.op inside {OP_MACC, OP_NMSAC, OP_MADD, OP_NMSUB},
                                 dec_req.vd, dec_req.vlmul);
      end
      FU_VLSU: begin
        new_ranges.wr    = group(dec_req.op == OP_LOAD, dec_req.vd, dec_req.vlmul);
        new_ranges.rd[0] = group(dec_req.op == OP_STORE, dec_req.vd, dec_req.vlmul);
      end
      FU_VSLDU: begin
        new_ranges.wr    = group(1'b1, dec_req.vd, dec_req.vlmul);
        new_ranges.rd[0] = group(1'b1, dec_req.vs2, dec_req.vlmul);
      end
      default: ;
    endcase
  end

  logic     [2:0] active_q, pend_q;
  vranges_t [2:0] ranges_q;
  id_t      [2:0] id_q;
  logic           hazard;
  logic     [1:0] unit;

  assign unit = 2'(fu) - 2'd1;

  spatz_scoreboard #(.NR_RD(NR_RD)) i_scoreboard (
    .busy_i        (active_q),
    .ranges_i      (ranges_q),
    .wr_ptr_i      (unit_wr_ptr_i),
    .new_valid_i   (x_issue_valid_i && legal && !is_cfg),
    .new_unit_i    (unit),
    .new_ranges_i  (new_ranges),
    .issue_hazard_o(hazard),
    .rd_req_i      (rd_req_i),
    .rd_addr_i     (rd_addr_i),
    .rd_ok_o       (rd_ok_o)
  );

  // ---------------------------------------------------------------------------------------
  // Issue
  // ---------------------------------------------------------------------------------------
  logic cfg_pend_q;
  id_t  cfg_id_q;
  logic [4:0]  cfg_rd_q;
  logic [31:0] cfg_data_q;
  logic unit_can_take;

  assign unit_can_take = (fu != FU_NONE) && unit_ready_i[unit] && !active_q[unit] &&
                         !pend_q[unit] && !hazard && !(fu == FU_VLSU && core_lsu_busy_i);

  always_comb begin
    x_issue_ready_o  = 1'b0;
    x_issue_accept_o = 1'b0;
    unit_valid_o     = '0;
    if (x_issue_valid_i) begin
      if (!legal) begin
        x_issue_ready_o = 1'b1;
      end else if (is_cfg) begin
        x_issue_ready_o  = !cfg_pend_q;
        x_issue_accept_o = !cfg_pend_q;
      end else begin
        x_issue_ready_o    = unit_can_take;
        x_issue_accept_o   = unit_can_take;
        unit_valid_o[unit] = unit_can_take;
      end
    end
  end

  always_comb begin
    unit_req_o    = dec_req;
    unit_req_o.id = x_issue_id_i;
  end

  assign x_mem_busy_o = active_q[1];

  // ---------------------------------------------------------------------------------------
  // Results: vsetvl* first, then units in order
  // ---------------------------------------------------------------------------------------
  logic [1:0] res_sel;
  always_comb begin
    x_result_valid_o = cfg_pend_q || (pend_q != '0);
    x_result_id_o    = cfg_id_q;
    x_result_we_o    = cfg_pend_q;
    x_result_rd_o    = cfg_rd_q;
    x_result_data_o  = cfg_data_q;
    res_sel          = 2'd3;
    if (!cfg_pend_q) begin
      x_result_we_o   = 1'b0;
      x_result_rd_o   = '0;
      x_result_data_o = '0;
      for (int u = 2; u >= 0; u--) if (pend_q[u]) res_sel = 2'(u);
      if (res_sel != 2'd3) x_result_id_o = id_q[res_sel];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q       <= '0;
      ew_q       <= EW8;
      vlmul_q    <= '0;
      vill_q     <= 1'b1;
      active_q   <= '0;
      pend_q     <= '0;
      ranges_q   <= '0;
      id_q       <= '0;
      cfg_pend_q <= 1'b0;
      cfg_id_q   <= '0;
      cfg_rd_q   <= '0;
      cfg_data_q <= '0;
    end else begin
      // completion
      for (int u = 0; u < 3; u++) begin
        if (unit_done_i[u]) begin
          active_q[u] <= 1'b0;
          pend_q[u]   <= 1'b1;
        end
      end
      if (x_result_valid_o && x_result_ready_i) begin
        if (cfg_pend_q) cfg_pend_q <= 1'b0;
        else            pend_q[res_sel] <= 1'b0;
      end
      // issue
      if (x_issue_valid_i && x_issue_ready_o && x_issue_accept_o) begin
        if (is_cfg) begin
          vl_q       <= new_vl;
          vill_q     <= new_vill;
          ew_q       <= new_vill ? EW8 : ew_e'(cfg_vtype[4:3]);
          vlmul_q    <= new_vill ? 3'd0 : cfg_vtype[2:0];
          cfg_pend_q <= 1'b1;
          cfg_id_q   <= x_issue_id_i;
          cfg_rd_q   <= rd;
          cfg_data_q <= 32'(new_vl);
        end else begin
          active_q[unit] <= 1'b1;
          ranges_q[unit] <= new_ranges;
          id_q[unit]     <= x_issue_id_i;
        end
      end
    end
  end

  // A unit reports completion only for an instruction it was given
  for (genvar u = 0; u < 3; u++) begin : gen_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni) unit_done_i[u] |-> active_q[u]);
  end

endmodule
