// spatz_vlsu: vector load/store unit with NR_MACU independent 32-bit memory ports.
//
// Supports unit-strided and constant-strided loads and stores of 8, 16 and 32-bit elements.
// The VRF word (WORD_B bytes) being transferred is split over the ports:
//  * packed mode (unit stride, or a stride equal to the element size, with a 4-byte aligned
//    base): port p moves bytes 4p..4p+3 of every word with one 32-bit access per word, so
//    the unit moves a whole word, 4*NR_MACU bytes, per cycle; this is the paper's peak
//    bandwidth of 0.5 op/byte.
//  * element mode (any other stride or alignment): port p moves elements p, p+N, p+2N, ...
//    of every word, one element per access.
// Each port walks the words on its own and may run ahead of the others, so load responses
// come back in no particular order across ports (in order within a port). A reorder buffer
// (ROB) of ROB_DEPTH words collects the bytes; a word is written to the VRF, as one whole
// word and in order, once all its bytes inside vl have arrived. This is the paper's ROB
// between memory interfaces and VRF; its depth, and the per-port queue of OUTST
// outstanding reads, are this design's choices. For stores the same buffer holds words read
// from the VRF until every port has sent its part. Stores complete on grant (the memory bus
// returns no write response).
//
// busy_o is high while a memory instruction executes; the controller uses it, and the scalar
// core's own load/store activity, to keep scalar and vector memory accesses in order, as the
// paper does by stalling one side while the other is busy. Handshake as for spatz_vau;
// wr_ptr_o is the address of the next VRF word to be committed by a load.
module spatz_vlsu
  import spatz_pkg::*;
#(
  parameter int unsigned ROB_DEPTH = 4,
  parameter int unsigned OUTST     = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 req_valid_i,
  output logic                 req_ready_o,
  input  vreq_t                req_i,
  output logic                 done_o,
  output logic                 busy_o,
  output logic [WADDR_W:0]     wr_ptr_o,
  // VRF read port (store data)
  output logic                 rd_req_o,
  output vaddr_t               rd_addr_o,
  input  logic                 rd_gnt_i,
  input  vword_t               rd_data_i,
  // VRF write port (load data)
  output logic                 wr_req_o,
  output vaddr_t               wr_addr_o,
  output vword_t               wr_data_o,
  output vbe_t                 wr_be_o,
  input  logic                 wr_gnt_i,
  // memory ports
  output logic     [NR_MACU-1:0] mem_req_valid_o,
  output mem_req_t [NR_MACU-1:0] mem_req_o,
  input  logic     [NR_MACU-1:0] mem_req_ready_i,
  input  logic     [NR_MACU-1:0] mem_rsp_valid_i,
  input  logic     [NR_MACU-1:0][31:0] mem_rsp_data_i
);

  localparam int unsigned N      = NR_MACU;
  localparam int unsigned SLOT_W = $clog2(ROB_DEPTH);
  localparam int unsigned RB_W   = $clog2(WORD_B);
  localparam int unsigned OQ_W   = $clog2(OUTST);
  localparam int unsigned SUB_W  = $clog2(WORD_B / N) + 1;

  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    logic [RB_W-1:0]   dst;   // first byte in the VRF word
    logic [1:0]        lane;  // first byte in the 32-bit memory word
    logic [3:0]        mask;  // bytes to take
  } meta_t;

  logic             active_q, store_q, packed_q;
  vreq_t            req_q;
  logic [WADDR_W:0] nwords, commit_q, fill_q, drain;
  logic [SUB_W-1:0] spp;  // accesses per port per word
  logic [2:0]       ewb;  // element bytes

  logic [N-1:0][WADDR_W:0] pw_q;
  logic [N-1:0][SUB_W-1:0] pj_q;

  vword_t [ROB_DEPTH-1:0] rob_q;
  vbe_t   [ROB_DEPTH-1:0] robv_q;

  meta_t [N-1:0][OUTST-1:0] mq_q;
  logic  [N-1:0][OQ_W-1:0]  mq_wp_q, mq_rp_q;
  logic  [N-1:0][OQ_W:0]    mq_cnt_q;

  assign req_ready_o = !active_q;
  assign busy_o      = active_q;
  assign nwords      = nr_words(req_q.vl, req_q.ew);
  assign ewb         = 3'd1 << req_q.ew;
  assign spp         = packed_q ? SUB_W'(1) : SUB_W'((WORD_B >> req_q.ew) / N);

  function automatic vaddr_t waddr(logic [4:0] r, logic [WADDR_W:0] w);
    return vaddr_t'(word_addr(r, w));
  endfunction

  // slowest port: words every port is done with
  always_comb begin
    drain = pw_q[0];
    for (int p = 1; p < int'(N); p++) if (pw_q[p] < drain) drain = pw_q[p];
  end

  // ---------------------------------------------------------------------------------------
  // Per-port request generation
  // ---------------------------------------------------------------------------------------
  logic  [N-1:0] port_fire, port_skip, port_go;
  meta_t [N-1:0] port_meta;

  always_comb begin
    for (int p = 0; p < int'(N); p++) begin
      logic [WADDR_W:0]  w;
      logic [RB_W:0]     k;
      logic [31:0]       e, addr;
      logic [SLOT_W-1:0] slot;
      vbe_t              wbe;
      logic [3:0]        be;
      logic [1:0]        lane;
      logic              valid, room;
      w    = pw_q[p];
      slot = SLOT_W'(w);
      wbe  = word_be(req_q.vl, req_q.ew, w);
      k    = packed_q ? (RB_W+1)'(p) : (RB_W+1)'(p + N * pj_q[p]);
      e    = 32'(w) * 32'(WORD_B >> req_q.ew) + 32'(k);
      if (packed_q) begin
        addr  = req_q.scalar + 32'(w) * WORD_B + 32'(4 * p);
        be    = wbe[4*p +: 4];
        lane  = 2'd0;
        valid = be != '0;
      end else begin
        addr  = req_q.scalar + e * (req_q.strided ? req_q.stride : 32'(ewb));
        lane  = addr[1:0];
        be    = 4'((5'(1) << ewb) - 5'd1) << lane;
        valid = e < 32'(req_q.vl);
      end
      port_meta[p].slot = slot;
      port_meta[p].dst  = packed_q ? RB_W'(4 * p) : RB_W'(k * ewb);
      port_meta[p].lane = lane;
      port_meta[p].mask = packed_q ? be : 4'((5'(1) << ewb) - 5'd1);
      room = store_q ? (w < fill_q)
                     : ((w < commit_q + (WADDR_W+1)'(ROB_DEPTH)) && (mq_cnt_q[p] < (OQ_W+1)'(OUTST)));
      port_go[p]   = active_q && (w < nwords) && room;
      port_skip[p] = port_go[p] && !valid;
      mem_req_valid_o[p]     = port_go[p] && valid;
      mem_req_o[p].addr      = {addr[31:2], 2'b00};
      mem_req_o[p].we        = store_q;
      mem_req_o[p].be        = be;
      mem_req_o[p].wdata     = packed_q ? rob_q[slot][32*p +: 32]
                                        : 32'((rob_q[slot] >> (8 * port_meta[p].dst)) << (8 * lane));
    end
  end

  assign port_fire = port_skip | (mem_req_valid_o & mem_req_ready_i);

  // ---------------------------------------------------------------------------------------
  // Load commit and store fill
  // ---------------------------------------------------------------------------------------
  logic [SLOT_W-1:0] cslot, fslot;
  vbe_t              cexp;
  assign cslot     = SLOT_W'(commit_q);
  assign fslot     = SLOT_W'(fill_q);
  assign cexp      = word_be(req_q.vl, req_q.ew, commit_q);
  assign wr_req_o  = active_q && !store_q && (commit_q < nwords) && ((robv_q[cslot] & cexp) == cexp);
  assign wr_addr_o = waddr(req_q.vd, commit_q);
  assign wr_data_o = rob_q[cslot];
  assign wr_be_o   = cexp;
  assign wr_ptr_o  = word_addr(req_q.vd, commit_q);

  assign rd_req_o  = active_q && store_q && (fill_q < nwords) && (fill_q < drain + (WADDR_W+1)'(ROB_DEPTH));
  assign rd_addr_o = waddr(req_q.vd, fill_q);

  logic finished;
  assign finished = store_q ? (drain == nwords) : (commit_q == nwords);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      store_q  <= 1'b0;
      packed_q <= 1'b0;
      req_q    <= '0;
      commit_q <= '0;
      fill_q   <= '0;
      pw_q     <= '0;
      pj_q     <= '0;
      rob_q    <= '0;
      robv_q   <= '0;
      mq_q     <= '0;
      mq_wp_q  <= '0;
      mq_rp_q  <= '0;
      mq_cnt_q <= '0;
      done_o   <= 1'b0;
    end else begin
      done_o <= 1'b0;
      // port progress and read metadata
      for (int p = 0; p < int'(N); p++) begin
        logic push, pop;
        push = mem_req_valid_o[p] && mem_req_ready_i[p] && !store_q;
        pop  = mem_rsp_valid_i[p];
        if (port_fire[p]) begin
          if (pj_q[p] == spp - 1) begin
            pj_q[p] <= '0;
            pw_q[p] <= pw_q[p] + 1;
          end else begin
            pj_q[p] <= pj_q[p] + 1;
          end
        end
        if (push) begin
          mq_q[p][mq_wp_q[p]] <= port_meta[p];
          mq_wp_q[p] <= mq_wp_q[p] + 1;
        end
        if (pop) begin
          meta_t m;
          m = mq_q[p][mq_rp_q[p]];
          mq_rp_q[p] <= mq_rp_q[p] + 1;
          for (int b = 0; b < 4; b++) begin
            if (m.mask[b]) begin
              rob_q[m.slot][8*(int'(m.dst)+b) +: 8] <= mem_rsp_data_i[p][8*(int'(m.lane)+b) +: 8];
              robv_q[m.slot][int'(m.dst)+b]        <= 1'b1;
            end
          end
        end
        mq_cnt_q[p] <= mq_cnt_q[p] + (OQ_W+1)'(push) - (OQ_W+1)'(pop);
      end
      // load commit
      if (wr_req_o && wr_gnt_i) begin
        robv_q[cslot] <= '0;
        commit_q      <= commit_q + 1;
      end
      // store fill
      if (rd_req_o && rd_gnt_i) begin
        rob_q[fslot] <= rd_data_i;
        fill_q       <= fill_q + 1;
      end
      if (active_q && finished) begin
        active_q <= 1'b0;
        done_o   <= 1'b1;
      end
      if (req_valid_i && req_ready_o) begin
        logic [2:0] nb;
        nb = 3'd1 << req_i.ew;
        active_q <= 1'b1;
        req_q    <= req_i;
        store_q  <= req_i.op == OP_STORE;
        packed_q <= (!req_i.strided || req_i.stride == 32'(nb)) && (req_i.scalar[1:0] == 2'b00);
        commit_q <= '0;
        fill_q   <= '0;
        pw_q     <= '0;
        pj_q     <= '0;
        robv_q   <= '0;
      end
    end
  end

  for (genvar p = 0; p < N; p++) begin : gen_assert
    // a read response needs an outstanding read
    assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rsp_valid_i[p] |-> mq_cnt_q[p] != '0);
  end

endmodule
