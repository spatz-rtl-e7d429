// tb_spatz_vlsu: random test of the vector load/store unit.
//
// A behavioural register file (random grants on one read and one write port) and a 4 KiB
// byte memory behind the NR_MACU 32-bit ports. Each memory port accepts a request at
// random (back-pressure) and answers reads a random 1 to 4 cycles later, in order within the
// port, so responses of different ports come back out of order. Each test performs a random
// vector load or store: element width 8/16/32, LMUL 1 or 2, random vl, and either unit
// stride or a random stride (positive or negative; any byte stride for 8-bit elements,
// multiples of the element size otherwise, as every element must be naturally aligned),
// with a base aligned to the element size, aligned to 4 bytes or not. The whole register
// file and the whole memory are then compared with a reference computed element by element.
// A full-rate unit-stride load per width checks one VRF word per cycle plus a small
// constant latency of five cycles
// (request, response, reorder buffer, VRF write, done). The test also checks that packed
// and element mode were both used.
module tb_spatz_vlsu;
  import spatz_pkg::*;

  localparam int unsigned N = NR_MACU;
  localparam int unsigned MEM_B = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid = 1'b0, req_ready, done, busy;
  vreq_t             req = '0;
  logic [WADDR_W:0]  wr_ptr;
  logic              rd_req, rd_gnt, wr_req, wr_gnt;
  vaddr_t            rd_addr, wr_addr;
  vword_t            rd_data, wr_data;
  vbe_t              wr_be;
  logic     [N-1:0]       m_valid, m_ready, r_valid;
  mem_req_t [N-1:0]       m_req;
  logic     [N-1:0][31:0] r_data;
  int checks = 0, failures = 0, n_packed = 0, n_elem = 0, stalls = 0;
  logic full_rate = 1'b0;

  spatz_vlsu dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .done_o(done), .busy_o(busy), .wr_ptr_o(wr_ptr),
    .rd_req_o(rd_req), .rd_addr_o(rd_addr), .rd_gnt_i(rd_gnt), .rd_data_i(rd_data),
    .wr_req_o(wr_req), .wr_addr_o(wr_addr), .wr_data_o(wr_data), .wr_be_o(wr_be), .wr_gnt_i(wr_gnt),
    .mem_req_valid_o(m_valid), .mem_req_o(m_req), .mem_req_ready_i(m_ready),
    .mem_rsp_valid_i(r_valid), .mem_rsp_data_i(r_data)
  );

  vword_t     vrf [NR_WORDS], expv [NR_WORDS];
  logic [7:0] mem [MEM_B], expm [MEM_B];

  // behavioural VRF
  always @(negedge clk) begin
    rd_gnt = full_rate || ($urandom_range(0, 3) != 0);
    wr_gnt = full_rate || ($urandom_range(0, 3) != 0);
    for (int p = 0; p < int'(N); p++) m_ready[p] = full_rate || ($urandom_range(0, 3) != 0);
  end
  assign rd_data = vrf[rd_addr];
  always @(posedge clk) begin
    if (wr_req && wr_gnt)
      for (int y = 0; y < int'(WORD_B); y++) if (wr_be[y]) vrf[wr_addr][8*y +: 8] <= wr_data[8*y +: 8];
    if ((rd_req && !rd_gnt) || (wr_req && !wr_gnt) || ((m_valid & ~m_ready) != '0)) stalls++;
  end

  // memory ports: in-order responses per port after 1..4 cycles (fixed 1 at full rate)
  typedef struct { int due; logic [31:0] data; } rsp_t;
  rsp_t rq [N][$];
  int   cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int p = 0; p < int'(N); p++) begin
      if (m_valid[p] && m_ready[p]) begin
        logic [31:0] a;
        a = m_req[p].addr;
        if (m_req[p].we) begin
          for (int b = 0; b < 4; b++)
            if (m_req[p].be[b]) mem[(a + b) % MEM_B] <= m_req[p].wdata[8*b +: 8];
        end else begin
          rsp_t r;
          int last;
          last = (rq[p].size() > 0) ? rq[p][rq[p].size() - 1].due : 0;
          r.due = cyc + (full_rate ? 1 : $urandom_range(1, 4));
          if (r.due < last) r.due = last;
          for (int b = 0; b < 4; b++) r.data[8*b +: 8] = mem[(a + b) % MEM_B];
          rq[p].push_back(r);
        end
      end
    end
  end
  always @(negedge clk) begin
    for (int p = 0; p < int'(N); p++) begin
      r_valid[p] = 1'b0;
      r_data[p]  = '0;
      if (rq[p].size() > 0 && rq[p][0].due <= cyc) begin
        // only one response per port per cycle
        r_valid[p] = 1'b1;
        r_data[p]  = rq[p][0].data;
      end
    end
  end
  always @(posedge clk) for (int p = 0; p < int'(N); p++) if (r_valid[p]) void'(rq[p].pop_front());

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(input logic fast, input ew_e ew_sel);
    int lmul, vlmax, eb, nw, t0, t1;
    logic st;
    lmul  = $urandom_range(0, 1);
    vlmax = (VLEN >> (3 + ew_sel)) << lmul;
    eb    = 1 << ew_sel;
    st    = fast ? 1'b0 : $urandom_range(0, 1);
    req = '0;
    req.op      = st ? OP_STORE : OP_LOAD;
    req.ew      = ew_sel;
    req.vlmul   = 3'(lmul);
    req.vl      = fast ? vlen_t'(vlmax) : vlen_t'($urandom_range(1, vlmax));
    req.vd      = 5'($urandom_range(0, 15) << lmul);
    req.strided = fast ? 1'b0 : ($urandom_range(0, 1) == 1);
    case ($urandom_range(0, 3))
      0: req.stride = 32'(eb);
      1: req.stride = 32'(eb * $urandom_range(2, 6));
      2: req.stride = -32'(eb * $urandom_range(1, 3));
      default: req.stride = 32'(eb * $urandom_range(1, 7) + ((eb == 1) ? $urandom_range(0, 3) : 0));
    endcase
    req.scalar = 32'(1536 + (fast ? 0 : eb * $urandom_range(0, 64)));
    req.id = 4'($urandom);
    for (int i = 0; i < int'(NR_WORDS); i++) expv[i] = vrf[i];
    for (int i = 0; i < int'(MEM_B); i++) expm[i] = mem[i];
    for (int i = 0; i < int'(req.vl); i++) begin
      for (int k = 0; k < eb; k++) begin
        int db, a;
        db = i * eb + k;
        a  = (int'(req.scalar) + (req.strided ? i * int'(signed'(req.stride)) : i * eb) + k) % int'(MEM_B);
        if (st) expm[a] = vrf[4 * req.vd + db / int'(WORD_B)][8 * (db % int'(WORD_B)) +: 8];
        else    expv[4 * req.vd + db / int'(WORD_B)][8 * (db % int'(WORD_B)) +: 8] = mem[a];
      end
    end
    nw = int'(nr_words(req.vl, ew_sel));
    full_rate = fast;
    @(negedge clk);
    req_valid = 1'b1;
    #1;
    chk("ready when idle", req_ready);
    @(posedge clk);
    t0 = $time;
    #1;
    req_valid = 1'b0;
    if (dut.packed_q) n_packed++; else n_elem++;
    chk("busy while executing", busy);
    while (!done) @(posedge clk);
    t1 = $time;
    #1;
    for (int i = 0; i < int'(NR_WORDS); i++)
      chk($sformatf("%s ew=%0d vl=%0d stride=%0d base=%0d word %0d: got %h expected %h",
                    st ? "store" : "load", 8 << ew_sel, req.vl, signed'(req.stride), req.scalar,
                    i, vrf[i], expv[i]), vrf[i] === expv[i]);
    for (int i = 0; i < int'(MEM_B); i++)
      chk($sformatf("%s ew=%0d vl=%0d stride=%0d base=%0d byte %0d: got %h expected %h",
                    st ? "store" : "load", 8 << ew_sel, req.vl, signed'(req.stride), req.scalar,
                    i, mem[i], expm[i]), mem[i] === expm[i]);
    if (fast) chk($sformatf("full-rate load takes %0d cycles for %0d words", (t1 - t0) / 10, nw),
                  (t1 - t0) / 10 <= nw + 5);
    full_rate = 1'b0;
  endtask

  initial begin : main
    for (int i = 0; i < int'(NR_WORDS); i++) vrf[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < int'(MEM_B); i++) mem[i] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 3; e++) run_one(1'b1, ew_e'(e));
    for (int t = 0; t < 200; t++) run_one(1'b0, ew_e'($urandom_range(0, 2)));
    chk("packed mode used", n_packed > 0);
    chk("element mode used", n_elem > 0);
    chk("stalls happened", stalls > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
