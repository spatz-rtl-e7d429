// tb_spatz_vau: random test of the vector arithmetic unit.
//
// A behavioural register file sits on the VAU's three read ports and one write port. Reads
// are answered in the same cycle; grants are random, so the unit sees operand
// back-pressure and write stalls. Each test picks a random operation, element width, LMUL
// (1 or 2), vl, registers and vector/scalar operand, runs it to done_o, and compares the
// whole register file with a reference computed word by word with spatz_ref_pkg (tail bytes
// beyond vl must keep their old value). One run per width is made with every grant
// given, and its cycle count is checked: one word per cycle plus three cycles (operand read,
// result register, done pulse).
module tb_spatz_vau;
  import spatz_pkg::*;
  import spatz_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid = 1'b0, req_ready, done;
  vreq_t             req = '0;
  logic [WADDR_W:0]  wr_ptr;
  logic   [2:0]      rd_req, rd_gnt;
  vaddr_t [2:0]      rd_addr;
  vword_t [2:0]      rd_data;
  logic              wr_req, wr_gnt;
  vaddr_t            wr_addr;
  vword_t            wr_data;
  vbe_t              wr_be;
  int checks = 0, failures = 0, stalls = 0;
  logic full_rate = 1'b0;

  spatz_vau dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .done_o(done), .wr_ptr_o(wr_ptr), .rd_req_o(rd_req), .rd_addr_o(rd_addr),
    .rd_gnt_i(rd_gnt), .rd_data_i(rd_data), .wr_req_o(wr_req), .wr_addr_o(wr_addr),
    .wr_data_o(wr_data), .wr_be_o(wr_be), .wr_gnt_i(wr_gnt)
  );

  vword_t vrf [NR_WORDS];
  vword_t expv [NR_WORDS];

  // behavioural VRF: random grants, combinational reads, writes at the clock edge
  always @(negedge clk) begin
    rd_gnt = full_rate ? '1 : 3'($urandom);
    wr_gnt = full_rate ? 1'b1 : ($urandom_range(0, 3) != 0);
  end
  always_comb for (int p = 0; p < 3; p++) rd_data[p] = vrf[rd_addr[p]];
  always @(posedge clk) begin
    if (wr_req && wr_gnt)
      for (int y = 0; y < int'(WORD_B); y++) if (wr_be[y]) vrf[wr_addr][8*y +: 8] <= wr_data[8*y +: 8];
    if ((rd_req & ~rd_gnt) != '0 || (wr_req && !wr_gnt)) stalls++;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(input logic fast, input ew_e ew_sel);
    int lmul, vlmax, nw, t0, t1;
    op_e op;
    lmul = $urandom_range(0, 1);
    vlmax = (VLEN >> (3 + ew_sel)) << lmul;
    op = op_e'($urandom_range(0, int'(OP_MV)));
    req = '0;
    req.op  = op;
    req.ew  = ew_sel;
    req.vlmul = 3'(lmul);
    req.vl  = fast ? vlen_t'(vlmax) : vlen_t'($urandom_range(1, vlmax));
    req.vd  = 5'($urandom_range(0, 15) << lmul);
    req.vs1 = 5'($urandom_range(0, 15) << lmul);
    req.vs2 = 5'($urandom_range(0, 15) << lmul);
    req.use_scalar = $urandom_range(0, 1);
    req.scalar = $urandom;
    req.id = 4'($urandom);
    // reference
    for (int i = 0; i < int'(NR_WORDS); i++) expv[i] = vrf[i];
    nw = int'(nr_words(req.vl, ew_sel));
    for (int w = 0; w < nw; w++) begin
      vbe_t be;
      vword_t r;
      be = word_be(req.vl, ew_sel, (WADDR_W+1)'(w));
      for (int m = 0; m < int'(NR_MACU); m++) begin
        logic [31:0] b32, scal;
        case (ew_sel)
          EW8:     scal = {4{req.scalar[7:0]}};
          EW16:    scal = {2{req.scalar[15:0]}};
          default: scal = req.scalar;
        endcase
        b32 = req.use_scalar ? scal : vrf[4 * req.vs1 + w][32*m +: 32];
        r[32*m +: 32] = op_word(op, ew_sel, vrf[4 * req.vs2 + w][32*m +: 32], b32,
                                vrf[4 * req.vd + w][32*m +: 32]);
      end
      for (int y = 0; y < int'(WORD_B); y++) if (be[y]) expv[4 * req.vd + w][8*y +: 8] = r[8*y +: 8];
    end
    full_rate = fast;
    @(negedge clk);
    req_valid = 1'b1;
    #1;
    chk("ready when idle", req_ready);
    @(posedge clk);
    t0 = $time;
    #1;
    req_valid = 1'b0;
    while (!done) @(posedge clk);
    t1 = $time;
    #1;
    for (int i = 0; i < int'(NR_WORDS); i++)
      chk($sformatf("%s ew=%0d vl=%0d word %0d: got %h expected %h", op.name(), 8 << ew_sel,
                    req.vl, i, vrf[i], expv[i]), vrf[i] === expv[i]);
    if (fast) chk($sformatf("full-rate run takes %0d cycles for %0d words", (t1 - t0) / 10, nw),
                  (t1 - t0) / 10 == nw + 3);
    full_rate = 1'b0;
  endtask

  initial begin : main
    for (int i = 0; i < int'(NR_WORDS); i++) vrf[i] = {$urandom, $urandom, $urandom, $urandom};
    rd_gnt = '0;
    wr_gnt = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 3; e++) run_one(1'b1, ew_e'(e));
    for (int t = 0; t < 300; t++) run_one(1'b0, ew_e'($urandom_range(0, 2)));
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
