// tb_spatz_vsldu: random test of the vector slide unit.
//
// A behavioural register file with random grants sits on the unit's read and write port.
// Each test picks vslideup or vslidedown (offset 0 is vmv.v.v), a random element width,
// LMUL (1 or 2), vl, offset and non-overlapping source and destination groups, runs it to
// done_o and compares the whole register file with a reference built element by element
// from the RVV rules: slide up leaves elements below the offset unchanged, slide down reads
// zero beyond VLMAX, and elements at or beyond vl are untouched. One full-rate run per width
// checks the cycle count against one word per cycle.
module tb_spatz_vsldu;
  import spatz_pkg::*;
  import spatz_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid = 1'b0, req_ready, done;
  vreq_t             req = '0;
  logic [WADDR_W:0]  wr_ptr;
  logic              rd_req, rd_gnt;
  vaddr_t            rd_addr;
  vword_t            rd_data;
  logic              wr_req, wr_gnt;
  vaddr_t            wr_addr;
  vword_t            wr_data;
  vbe_t              wr_be;
  int checks = 0, failures = 0, stalls = 0;
  logic full_rate = 1'b0;

  spatz_vsldu dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .done_o(done), .wr_ptr_o(wr_ptr), .rd_req_o(rd_req), .rd_addr_o(rd_addr),
    .rd_gnt_i(rd_gnt), .rd_data_i(rd_data), .wr_req_o(wr_req), .wr_addr_o(wr_addr),
    .wr_data_o(wr_data), .wr_be_o(wr_be), .wr_gnt_i(wr_gnt)
  );

  vword_t vrf [NR_WORDS];
  vword_t expv [NR_WORDS];

  // behavioural VRF: random grants, combinational reads, writes at the clock edge
  always @(negedge clk) begin
    rd_gnt = full_rate ? 1'b1 : ($urandom_range(0, 3) != 0);
    wr_gnt = full_rate ? 1'b1 : ($urandom_range(0, 3) != 0);
  end
  assign rd_data = vrf[rd_addr];
  always @(posedge clk) begin
    if (wr_req && wr_gnt)
      for (int y = 0; y < int'(WORD_B); y++) if (wr_be[y]) vrf[wr_addr][8*y +: 8] <= wr_data[8*y +: 8];
    if ((rd_req && !rd_gnt) || (wr_req && !wr_gnt)) stalls++;
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
    op = $urandom_range(0, 1) ? OP_SLIDEUP : OP_SLIDEDOWN;
    req = '0;
    req.op  = op;
    req.ew  = ew_sel;
    req.vlmul = 3'(lmul);
    req.vl  = fast ? vlen_t'(vlmax) : vlen_t'($urandom_range(1, vlmax));
    req.vs2 = 5'($urandom_range(0, 7) << lmul);
    req.vd  = 5'(($urandom_range(0, 7) << lmul) + 16);
    req.use_scalar = 1'b1;
    req.scalar = fast ? 32'd0 : (($urandom_range(0, 3) == 0) ? $urandom_range(0, 1000) : $urandom_range(0, vlmax));
    req.id = 4'($urandom);
    nw = (vlmax * (8 << ew_sel)) / int'(WORD_W);
    for (int i = 0; i < int'(NR_WORDS); i++) expv[i] = vrf[i];
    begin
      int eb;
      eb = 1 << ew_sel;
      for (int i = 0; i < int'(req.vl); i++) begin
        for (int k = 0; k < eb; k++) begin
          int db;
          logic [7:0] v;
          db = i * eb + k;
          if (op == OP_SLIDEUP) begin
            if (i >= int'(req.scalar)) begin
              int sb;
              sb = (i - int'(req.scalar)) * eb + k;
              expv[4 * req.vd + db / int'(WORD_B)][8 * (db % int'(WORD_B)) +: 8] =
                vrf[4 * req.vs2 + sb / int'(WORD_B)][8 * (sb % int'(WORD_B)) +: 8];
            end
          end else begin
            longint si;
            si = longint'(i) + longint'(req.scalar);
            v = 8'h00;
            if (si < vlmax) begin
              int sb;
              sb = int'(si) * eb + k;
              v = vrf[4 * req.vs2 + sb / int'(WORD_B)][8 * (sb % int'(WORD_B)) +: 8];
            end
            expv[4 * req.vd + db / int'(WORD_B)][8 * (db % int'(WORD_B)) +: 8] = v;
          end
        end
      end
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
      chk($sformatf("%s off=%0d ew=%0d vl=%0d word %0d: got %h expected %h", op.name(), req.scalar, 8 << ew_sel,
                    req.vl, i, vrf[i], expv[i]), vrf[i] === expv[i]);
    if (fast) chk($sformatf("full-rate run takes %0d cycles for %0d words", (t1 - t0) / 10, nw),
                  (t1 - t0) / 10 <= nw + 4);
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
