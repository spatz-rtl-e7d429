// spatz_vau: vector arithmetic unit, NR_MACU MACUs working on one VRF word per cycle.
//
// The VAU runs one vector instruction at a time. For word w (0 .. ceil(vl*SEW/WORD_W)-1) it
// requests, on its three VRF read ports, word w of vs2, of vs1 (unless the second operand is
// the scalar, which is then replicated across the word) and of vd (only for the multiply-
// accumulate family, which needs the old destination value). When all needed ports are
// granted in the same cycle, the MACUs compute the word combinationally and the result is
// captured in a result register; the next cycle it is written to the VRF. This matches the
// paper's critical path, which runs from the VRF read interface through the VAU to a
// register at the VRF write port. Reading the next word overlaps with writing the previous
// one, so the unit sustains one word (NR_MACU x 32 bit) per cycle.
//
// Tail bytes of the last word (beyond vl) are not written (tail-undisturbed); masking
// (vm=0) is not supported, the decoder rejects it. Interface: req_valid_i/req_ready_o
// hands over an instruction when the unit is idle; done_o pulses one cycle after its last
// word is written. wr_ptr_o is the address of the next word to be written, used by the
// scoreboard for chaining.
module spatz_vau
  import spatz_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  vreq_t             req_i,
  output logic              done_o,
  output logic [WADDR_W:0]  wr_ptr_o,
  // VRF read ports: 0 = vs2, 1 = vs1, 2 = vd
  output logic   [2:0]      rd_req_o,
  output vaddr_t [2:0]      rd_addr_o,
  input  logic   [2:0]      rd_gnt_i,
  input  vword_t [2:0]      rd_data_i,
  // VRF write port
  output logic              wr_req_o,
  output vaddr_t            wr_addr_o,
  output vword_t            wr_data_o,
  output vbe_t              wr_be_o,
  input  logic              wr_gnt_i
);

  logic             active_q;
  vreq_t            req_q;
  logic [WADDR_W:0] rd_w_q, wr_w_q, nwords;
  logic             res_v_q;
  vword_t           res_q;
  vbe_t             res_be_q;
  vaddr_t           res_addr_q;

  assign req_ready_o = !active_q;
  assign nwords      = nr_words(req_q.vl, req_q.ew);

  logic need_vs2, need_vs1, need_vd;
  assign need_vs2 = req_q.op != OP_MV;
  assign need_vs1 = !req_q.use_scalar;
  assign need_vd  = req_q.op inside {OP_MACC, OP_NMSAC, OP_MADD, OP_NMSUB};

  function automatic vaddr_t waddr(logic [4:0] r, logic [WADDR_W:0] w);
    return vaddr_t'(word_addr(r, w));
  endfunction

  logic wr_fire, can_read, all_gnt, rd_fire;
  assign wr_req_o  = res_v_q;
  assign wr_addr_o = res_addr_q;
  assign wr_data_o = res_q;
  assign wr_be_o   = res_be_q;
  assign wr_fire   = res_v_q && wr_gnt_i;

  assign can_read = active_q && (rd_w_q < nwords) && (!res_v_q || wr_fire);
  assign rd_req_o  = {can_read && need_vd, can_read && need_vs1, can_read && need_vs2};
  assign rd_addr_o = {waddr(req_q.vd, rd_w_q), waddr(req_q.vs1, rd_w_q), waddr(req_q.vs2, rd_w_q)};
  assign all_gnt   = (!need_vs2 || rd_gnt_i[0]) && (!need_vs1 || rd_gnt_i[1]) &&
                     (!need_vd || rd_gnt_i[2]);
  assign rd_fire   = can_read && all_gnt;

  // Scalar operand replicated over the word
  logic [31:0] scalar_rep;
  always_comb begin
    unique case (req_q.ew)
      EW8:     scalar_rep = {4{req_q.scalar[7:0]}};
      EW16:    scalar_rep = {2{req_q.scalar[15:0]}};
      default: scalar_rep = req_q.scalar;
    endcase
  end

  vword_t result;
  for (genvar m = 0; m < NR_MACU; m++) begin : gen_macu
    spatz_macu i_macu (
      .op_i  (req_q.op),
      .ew_i  (req_q.ew),
      .a_i   (rd_data_i[0][32*m +: 32]),
      .b_i   (req_q.use_scalar ? scalar_rep : rd_data_i[1][32*m +: 32]),
      .c_i   (rd_data_i[2][32*m +: 32]),
      .res_o (result[32*m +: 32])
    );
  end

  assign wr_ptr_o = word_addr(req_q.vd, wr_w_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q   <= 1'b0;
      req_q      <= '0;
      rd_w_q     <= '0;
      wr_w_q     <= '0;
      res_v_q    <= 1'b0;
      res_q      <= '0;
      res_be_q   <= '0;
      res_addr_q <= '0;
      done_o     <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (wr_fire) begin
        res_v_q <= 1'b0;
        wr_w_q  <= wr_w_q + 1;
      end
      if (rd_fire) begin
        res_v_q    <= 1'b1;
        res_q      <= result;
        res_be_q   <= word_be(req_q.vl, req_q.ew, rd_w_q);
        res_addr_q <= waddr(req_q.vd, rd_w_q);
        rd_w_q     <= rd_w_q + 1;
      end
      if (active_q && !res_v_q && wr_w_q == nwords) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
      if (req_valid_i && req_ready_o) begin
        active_q <= 1'b1;
        req_q    <= req_i;
        rd_w_q   <= '0;
        wr_w_q   <= '0;
      end
    end
  end

  // The result register is only loaded when it is free or being drained
  assert property (@(posedge clk_i) disable iff (!rst_ni) rd_fire |-> (!res_v_q || wr_fire));

endmodule
