// spatz_vsldu: vector slide unit (vslideup, vslidedown, and vmv.v.v as a slide by zero).
//
// Because the register file is centralised, a slide is a byte shift across a whole register
// group: element i of vd takes element i-OFF (slide up) or i+OFF (slide down) of vs2. The
// unit streams the source group word by word through two private WORD_W-bit registers (the
// paper's two register banks) and a barrel shifter between them. With the slide expressed
// in bytes, s = OFF*SEW/8 = q*WORD_B + r, output word w is
//   slide down: bytes r .. r+WORD_B-1 of {src[w+q+1], src[w+q]}
//   slide up  : bytes WORD_B-r .. 2*WORD_B-r-1 of {src[w-q], src[w-q-1]}
// where source words outside the register group read as zero. The two registers form a
// two-entry queue; one source word is fetched and one result word written per cycle in the
// steady state, i.e. 32*NR_MACU bits per cycle as in the paper. Results are always committed
// as whole VRF words, in order, which keeps the scoreboard's chaining per word.
//
// RVV semantics kept: for slide up, elements below OFF keep their old value (those bytes are
// not written); for slide down, elements whose source index is >= VLMAX become zero; tail
// elements beyond vl are left undisturbed. The paper's general all-to-all permutation
// network is reduced here to the shifter that slides need; only slides and moves are built.
// Interface and handshake as for spatz_vau.
module spatz_vsldu
  import spatz_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  vreq_t             req_i,
  output logic              done_o,
  output logic [WADDR_W:0]  wr_ptr_o,
  output logic              rd_req_o,
  output vaddr_t            rd_addr_o,
  input  logic              rd_gnt_i,
  input  vword_t            rd_data_i,
  output logic              wr_req_o,
  output vaddr_t            wr_addr_o,
  output vword_t            wr_data_o,
  output vbe_t              wr_be_o,
  input  logic              wr_gnt_i
);

  localparam int unsigned IDX_W = WADDR_W + 3;   // signed source word index
  localparam int unsigned RB_W  = $clog2(WORD_B);

  logic                    active_q, up_q;
  vreq_t                   req_q;
  logic [WADDR_W:0]        w_q, nwords, fetched_q;
  logic signed [IDX_W-1:0] fidx_q;
  logic [RB_W-1:0]         r_q;
  logic [VL_W+2:0]         sbytes_q;
  logic [WADDR_W:0]        vlmax_words_q;
  vword_t [1:0]            buf_q;
  logic [1:0]              cnt_q;

  assign req_ready_o = !active_q;
  assign nwords      = nr_words(req_q.vl, req_q.ew);

  function automatic vaddr_t waddr(logic [4:0] r, logic [WADDR_W:0] w);
    return vaddr_t'(word_addr(r, w));
  endfunction

  // Output word and its byte enable
  vword_t out_word;
  vbe_t   out_be;
  always_comb begin
    logic [2*WORD_W-1:0] win;
    win = {buf_q[1], buf_q[0]};
    if (up_q) win = win << (8 * r_q);
    else      win = win >> (8 * r_q);
    out_word = up_q ? win[2*WORD_W-1:WORD_W] : win[WORD_W-1:0];
    out_be   = word_be(req_q.vl, req_q.ew, w_q);
    if (up_q) begin
      for (int b = 0; b < int'(WORD_B); b++)
        if ((VL_W+3)'(w_q) * (VL_W+3)'(WORD_B) + (VL_W+3)'(b) < sbytes_q) out_be[b] = 1'b0;
    end
  end

  logic out_ok, pop, need_fetch, fetch_zero, can_fetch, push;
  assign out_ok   = active_q && (w_q < nwords) && (cnt_q == 2'd2);
  assign wr_req_o = out_ok && (out_be != '0);
  assign wr_addr_o = waddr(req_q.vd, w_q);
  assign wr_data_o = out_word;
  assign wr_be_o   = out_be;
  assign pop       = out_ok && ((out_be == '0) || wr_gnt_i);

  assign need_fetch = active_q && (fetched_q < nwords + 1);
  assign fetch_zero = (fidx_q < 0) || (fidx_q >= $signed(IDX_W'(vlmax_words_q)));
  assign can_fetch  = need_fetch && ((cnt_q < 2'd2) || pop);
  assign rd_req_o   = can_fetch && !fetch_zero;
  assign rd_addr_o  = waddr(req_q.vs2, fidx_q[WADDR_W:0]);
  assign push       = can_fetch && (fetch_zero || rd_gnt_i);

  assign wr_ptr_o = word_addr(req_q.vd, w_q);

  // Slide amount in bytes, clamped to the register group size
  logic [VL_W+2:0] new_sbytes;
  logic [WADDR_W:0] new_vlmax_words;
  always_comb begin
    logic [VL_W+2:0] vlmax_bytes;
    new_vlmax_words = (WADDR_W+1)'(WPR) << req_i.vlmul;
    vlmax_bytes     = (VL_W+3)'(new_vlmax_words) * (VL_W+3)'(WORD_B);
    if (req_i.op == OP_SLIDEUP || req_i.op == OP_SLIDEDOWN) begin
      if ({2'b0, req_i.scalar} << req_i.ew >= 34'(vlmax_bytes)) new_sbytes = vlmax_bytes;
      else new_sbytes = (VL_W+3)'(req_i.scalar << req_i.ew);
    end else begin
      new_sbytes = '0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q      <= 1'b0;
      up_q          <= 1'b0;
      req_q         <= '0;
      w_q           <= '0;
      fetched_q     <= '0;
      fidx_q        <= '0;
      r_q           <= '0;
      sbytes_q      <= '0;
      vlmax_words_q <= '0;
      buf_q         <= '0;
      cnt_q         <= '0;
      done_o        <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (active_q) begin
        if (pop) w_q <= w_q + 1;
        if (push) begin
          fidx_q    <= fidx_q + 1;
          fetched_q <= fetched_q + 1;
        end
        unique case ({pop, push})
          2'b11: begin buf_q[0] <= buf_q[1]; buf_q[1] <= fetch_zero ? '0 : rd_data_i; end
          2'b10: begin buf_q[0] <= buf_q[1]; cnt_q <= cnt_q - 1; end
          2'b01: begin buf_q[cnt_q[0]] <= fetch_zero ? '0 : rd_data_i; cnt_q <= cnt_q + 1; end
          default: ;
        endcase
        if (w_q == nwords) begin
          active_q <= 1'b0;
          done_o   <= 1'b1;
        end
      end
      if (req_valid_i && req_ready_o) begin
        logic [WADDR_W:0] q;
        q = (WADDR_W+1)'(new_sbytes / (VL_W+3)'(WORD_B));
        active_q      <= 1'b1;
        req_q         <= req_i;
        up_q          <= req_i.op == OP_SLIDEUP;
        w_q           <= '0;
        fetched_q     <= '0;
        cnt_q         <= '0;
        r_q           <= RB_W'(new_sbytes % (VL_W+3)'(WORD_B));
        sbytes_q      <= new_sbytes;
        vlmax_words_q <= new_vlmax_words;
        fidx_q        <= (req_i.op == OP_SLIDEUP) ? -$signed(IDX_W'(q)) - 1 : $signed(IDX_W'(q));
      end
    end
  end

endmodule
