// tb_spatz_cluster: end-to-end test of the Spatz cluster at its default parameters.
//
// The testbench plays the scalar core: it preloads the L1 through the core's data port,
// issues RVV instructions over the X-interface and reads the results back through the same
// port, comparing them with values it computes itself. It also models a slow external
// memory behind the cluster's external port. Programs run:
//   1. a 4 x 16 by 16 x 16 32-bit matrix multiplication (vle32 + vmacc.vx + vse32), with
//      two alternating load buffers so that loads chain into multiply-accumulates;
//   2. e16, LMUL=2: strided load (element mode), vadd.vi, vslideup.vi, vse16;
//   3. e8: vle8 from external memory, vslidedown.vx, vmul.vv, vse8 to an unaligned address;
//   4. rejected instructions (a masked op; anything while vtype is illegal).
// It counts how often each mechanism happened (chaining, operand back-pressure, issue
// hazard stall, L1 bank conflict, VRF write conflict, memory-ordering stall, external
// access, element-mode access, rejection) and fails if one never did. Cycle counts of the
// matmul loop are checked against the VAU's rate of one 128-bit word per cycle.
module tb_spatz_cluster;
  import spatz_pkg::*;
  import spatz_instr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // DUT signals (one core complex)
  logic        x_issue_valid = 1'b0, x_issue_ready, x_issue_accept;
  logic [31:0] x_issue_instr = '0, x_issue_rs1 = '0, x_issue_rs2 = '0;
  id_t         x_issue_id = '0;
  logic        x_result_valid, x_result_we, x_mem_busy;
  id_t         x_result_id;
  logic [4:0]  x_result_rd;
  logic [31:0] x_result_data;
  logic        core_lsu_busy = 1'b0;
  logic        core_req_valid = 1'b0, core_req_ready, core_rsp_valid;
  mem_req_t    core_req = '0;
  logic [31:0] core_rsp_data;
  logic        ext_req_valid, ext_rsp_valid;
  mem_req_t    ext_req;
  logic [31:0] ext_rsp_data;

  spatz_cluster dut (
    .clk_i           (clk),
    .rst_ni          (rst_n),
    .x_issue_valid_i (x_issue_valid),
    .x_issue_ready_o (x_issue_ready),
    .x_issue_instr_i (x_issue_instr),
    .x_issue_rs1_i   (x_issue_rs1),
    .x_issue_rs2_i   (x_issue_rs2),
    .x_issue_id_i    (x_issue_id),
    .x_issue_accept_o(x_issue_accept),
    .x_result_valid_o(x_result_valid),
    .x_result_ready_i(1'b1),
    .x_result_id_o   (x_result_id),
    .x_result_we_o   (x_result_we),
    .x_result_rd_o   (x_result_rd),
    .x_result_data_o (x_result_data),
    .x_mem_busy_o    (x_mem_busy),
    .core_lsu_busy_i (core_lsu_busy),
    .core_req_valid_i(core_req_valid),
    .core_req_i      (core_req),
    .core_req_ready_o(core_req_ready),
    .core_rsp_valid_o(core_rsp_valid),
    .core_rsp_data_o (core_rsp_data),
    .ext_req_valid_o (ext_req_valid),
    .ext_req_o       (ext_req),
    .ext_req_ready_i (1'b1),
    .ext_rsp_valid_i (ext_rsp_valid),
    .ext_rsp_data_i  (ext_rsp_data)
  );

  // ------------------------------------------------------------------------------------
  // External memory model: 1 KiB at 0x8000_0000, reads answered 3 cycles later, in order
  // ------------------------------------------------------------------------------------
  localparam logic [31:0] EXT_BASE = 32'h8000_0000;
  logic [7:0]  ext_mem [1024];
  logic [2:0]  ext_pipe_v = '0;
  logic [31:0] ext_pipe_d [3];
  always_ff @(posedge clk) begin
    logic [31:0] rd;
    for (int b = 0; b < 4; b++) rd[8*b +: 8] = ext_mem[(ext_req.addr - EXT_BASE + b) % 1024];
    ext_pipe_v    <= {ext_pipe_v[1:0], ext_req_valid && !ext_req.we};
    ext_pipe_d[0] <= rd;
    ext_pipe_d[1] <= ext_pipe_d[0];
    ext_pipe_d[2] <= ext_pipe_d[1];
    if (ext_req_valid && ext_req.we)
      for (int b = 0; b < 4; b++)
        if (ext_req.be[b]) ext_mem[(ext_req.addr - EXT_BASE + b) % 1024] <= ext_req.wdata[8*b +: 8];
  end
  assign ext_rsp_valid = ext_pipe_v[2];
  assign ext_rsp_data  = ext_pipe_d[2];

  // ------------------------------------------------------------------------------------
  // Scalar-core side tasks
  // ------------------------------------------------------------------------------------
  int accepted = 0, rejected = 0, results = 0;
  logic [31:0] last_vl;

  // All observation happens late in the cycle (after the negedge inputs have settled), so
  // it sees exactly the values the next clock edge will act on.
  always @(negedge clk) begin
    #2;
    if (rst_n && x_result_valid) begin
      results++;
      if (x_result_we) last_vl = x_result_data;
    end
  end

  task automatic issue(input logic [31:0] ins, input logic [31:0] rs1 = 0,
                       input logic [31:0] rs2 = 0, input logic expect_accept = 1'b1);
    @(negedge clk);
    x_issue_valid = 1'b1;
    x_issue_instr = ins;
    x_issue_rs1   = rs1;
    x_issue_rs2   = rs2;
    #1;
    while (!x_issue_ready) begin
      @(negedge clk);
      #1;
    end
    checks++;
    if (x_issue_accept !== expect_accept) begin
      failures++;
      $display("FAIL: instruction %h accept=%0d, expected %0d", ins, x_issue_accept, expect_accept);
    end
    if (x_issue_accept) accepted++; else rejected++;
    @(posedge clk);
    #1;
    x_issue_valid = 1'b0;
    x_issue_id    = x_issue_id + 1;
  endtask

  // wait until every accepted instruction has reported completion
  task automatic drain();
    while (results != accepted) @(posedge clk);
    @(posedge clk);
  endtask

  task automatic core_access(input logic [31:0] addr, input logic we, input logic [31:0] wdata,
                             output logic [31:0] rdata);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req.addr  = addr;
    core_req.we    = we;
    core_req.be    = 4'hf;
    core_req.wdata = wdata;
    #1;
    while (!core_req_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    core_req_valid = 1'b0;
    rdata = '0;
    if (!we) begin
      while (!core_rsp_valid) begin
        @(negedge clk);
      end
      rdata = core_rsp_data;
    end
  endtask

  task automatic wr32(input logic [31:0] addr, input logic [31:0] d);
    logic [31:0] unused;
    core_access(addr, 1'b1, d, unused);
  endtask

  task automatic rd32(input logic [31:0] addr, output logic [31:0] d);
    core_access(addr, 1'b0, '0, d);
  endtask

  task automatic check32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL: %s got %h expected %h", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------------------------------
  // Mechanism counters (observed inside the design)
  // ------------------------------------------------------------------------------------
  int n_chain = 0, n_backpressure = 0, n_hazard = 0, n_bank_conflict = 0, n_vrf_wr_conflict = 0;
  int n_order_stall = 0, n_ext = 0, n_elem_mode = 0, n_packed = 0;

  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      // VAU reads a word while the VLSU is still loading the same register (chaining)
      if (dut.gen_cc[0].i_spatz.i_vau.rd_fire && dut.gen_cc[0].i_spatz.i_vlsu.active_q &&
          !dut.gen_cc[0].i_spatz.i_vlsu.store_q &&
          dut.gen_cc[0].i_spatz.i_vau.req_q.vs2 == dut.gen_cc[0].i_spatz.i_vlsu.req_q.vd)
        n_chain++;
      if ((dut.gen_cc[0].i_spatz.rd_req & ~dut.gen_cc[0].i_spatz.rd_ok) != '0) n_backpressure++;
      if (dut.gen_cc[0].i_spatz.i_controller.hazard && x_issue_valid) n_hazard++;
      if ((dut.t_valid & ~dut.t_ready) != '0) n_bank_conflict++;
      if ((dut.gen_cc[0].i_spatz.wr_req & ~dut.gen_cc[0].i_spatz.wr_gnt) != '0) n_vrf_wr_conflict++;
      if (x_issue_valid && core_lsu_busy && !x_issue_ready) n_order_stall++;
      if (ext_req_valid) n_ext++;
      if (dut.gen_cc[0].i_spatz.i_vlsu.active_q) begin
        if (dut.gen_cc[0].i_spatz.i_vlsu.packed_q) n_packed++;
        else n_elem_mode++;
      end
    end
  end

  // ------------------------------------------------------------------------------------
  // Test program
  // ------------------------------------------------------------------------------------
  localparam logic [31:0] A_NONE = 32'h0;
  localparam logic [31:0] B_ADDR = 32'h0000_0000;   // 16 x 16 words
  localparam logic [31:0] C_ADDR = 32'h0000_0400;   // 4 x 16 words
  localparam logic [31:0] S_ADDR = 32'h0000_0800;   // e16 strided source
  localparam logic [31:0] D16    = 32'h0000_0a00;
  localparam logic [31:0] D8     = 32'h0000_0b01;   // unaligned e8 destination

  logic [31:0] A [4][16];
  logic [31:0] B [16][16];
  logic [15:0] S [40];
  logic [7:0]  E [64];
  int          t_start, t_end;
  int          cycle = 0;
  always @(posedge clk) cycle++;

  initial begin : main
    logic [31:0] d, exp;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- data ------------------------------------------------------------------------
    for (int i = 0; i < 4; i++) for (int k = 0; k < 16; k++) A[i][k] = $urandom;
    for (int k = 0; k < 16; k++) for (int j = 0; j < 16; j++) begin
      B[k][j] = $urandom;
      wr32(B_ADDR + 4 * (16 * k + j), B[k][j]);
    end
    for (int e = 0; e < 40; e++) S[e] = 16'($urandom);
    // S[e] sits at S_ADDR + 6e: write the covering words
    for (int w = 0; w < 64; w++) begin
      logic [31:0] word;
      for (int b = 0; b < 4; b++) begin
        int byte_addr;
        byte_addr = 4 * w + b;
        word[8*b +: 8] = 8'h00;
        if (byte_addr % 6 < 2 && byte_addr / 6 < 40)
          word[8*b +: 8] = (byte_addr % 6 == 0) ? S[byte_addr / 6][7:0] : S[byte_addr / 6][15:8];
      end
      wr32(S_ADDR + 4 * w, word);
    end
    for (int e = 0; e < 64; e++) begin
      E[e] = (e < 50) ? 8'($urandom) : 8'h00;
      ext_mem[e] = E[e];
    end

    // ---- 1. matmul ------------------------------------------------------------------
    issue(vsetvli(5'd5, 5'd10, 2, 0), 32'd16);
    drain();
    check32("vsetvli e32 vl", last_vl, 32'd16);
    for (int i = 0; i < 4; i++) issue(varith(F_MV, IVI, 5'(8 + i), 5'd0, 5'd0));
    t_start = cycle;
    for (int k = 0; k < 16; k++) begin
      logic [4:0] vb;
      vb = (k % 2 == 0) ? 5'd0 : 5'd1;
      issue(vle(2, vb), B_ADDR + 64 * k);
      for (int i = 0; i < 4; i++) issue(varith(F_MACC, MVX, 5'(8 + i), vb, 5'd10), A[i][k]);
    end
    drain();
    t_end = cycle;
    for (int i = 0; i < 4; i++) issue(vse(2, 5'(8 + i)), C_ADDR + 64 * i);
    drain();
    for (int i = 0; i < 4; i++) for (int j = 0; j < 16; j++) begin
      exp = '0;
      for (int k = 0; k < 16; k++) exp += A[i][k] * B[k][j];
      rd32(C_ADDR + 4 * (16 * i + j), d);
      check32($sformatf("C[%0d][%0d]", i, j), d, exp);
    end
    // 64 vmacc of 4 words each need at least 256 VAU cycles; a chained, overlapped pipeline
    // should stay well below twice that, the paper reports 96 % utilisation for larger sizes
    checks++;
    if (t_end - t_start < 256 || t_end - t_start > 900) begin
      failures++;
      $display("FAIL: matmul loop took %0d cycles", t_end - t_start);
    end
    $display("matmul 4x16x16: %0d cycles for %0d MACs (%0.2f MAC/cycle)", t_end - t_start,
             4 * 16 * 16, real'(4 * 16 * 16) / real'(t_end - t_start));

    // ---- 2. e16, LMUL=2: strided load, add, slide up ---------------------------------
    issue(vsetvli(5'd5, 5'd10, 1, 1), 32'd40);
    drain();
    check32("vsetvli e16m2 vl", last_vl, 32'd40);
    issue(varith(F_MV, IVI, 5'd6, 5'd0, 5'h1f));                // v6 = -1
    // memory ordering: the core still has a load in flight, the vector load must wait
    core_lsu_busy = 1'b1;
    fork
      begin repeat (5) @(posedge clk); @(negedge clk); core_lsu_busy = 1'b0; end
      issue(vlse(1, 5'd2), S_ADDR, 32'd6);
    join
    issue(varith(F_ADD, IVI, 5'd4, 5'd2, 5'd7));
    issue(varith(F_SLIDEUP, IVI, 5'd6, 5'd4, 5'd3));
    issue(vse(1, 5'd6), D16);
    drain();
    for (int w = 0; w < 20; w++) begin
      logic [15:0] lo, hi;
      lo = (2 * w < 3) ? 16'hffff : 16'(S[2 * w - 3] + 16'd7);
      hi = (2 * w + 1 < 3) ? 16'hffff : 16'(S[2 * w + 1 - 3] + 16'd7);
      rd32(D16 + 4 * w, d);
      check32($sformatf("D16 word %0d", w), d, {hi, lo});
    end

    // ---- 3. e8 from external memory, slide down, multiply, unaligned store ------------
    issue(vsetvli(5'd5, 5'd10, 0, 0), 32'd64);
    issue(varith(F_MV, IVI, 5'd10, 5'd0, 5'd0));
    issue(vsetvli(5'd5, 5'd10, 0, 0), 32'd50);
    drain();
    check32("vsetvli e8 vl", last_vl, 32'd50);
    issue(vle(0, 5'd10), EXT_BASE);
    issue(varith(F_SLIDEDOWN, IVX, 5'd11, 5'd10, 5'd10), 32'd5);
    issue(varith(F_MUL, MVV, 5'd12, 5'd11, 5'd10));
    issue(vse(0, 5'd12), D8);
    drain();
    for (int w = 0; w < 14; w++) begin
      logic [31:0] e32;
      d = '0;
      rd32((D8 & ~32'h3) + 4 * w, d);
      for (int b = 0; b < 4; b++) begin
        int i;
        i = 4 * w + b - 1;
        if (i >= 0 && i < 50) begin
          checks++;
          if (d[8*b +: 8] !== 8'(E[i + 5] * E[i])) begin
            failures++;
            if (failures < 20) $display("FAIL: D8[%0d] got %h expected %h", i, d[8*b +: 8], 8'(E[i + 5] * E[i]));
          end
        end
      end
      e32 = d;
    end

    // ---- 4. three units writing the VRF at once (e32, LMUL=8, 128 elements each) --------
    issue(vsetvli(5'd5, 5'd10, 2, 3), 32'd128);
    issue(vle(2, 5'd16), B_ADDR);
    issue(varith(F_ADD, IVI, 5'd24, 5'd16, 5'd1));
    issue(varith(F_SLIDEDOWN, IVI, 5'd8, 5'd0, 5'd0));
    drain();
    // write-after-read: the vadd overwriting v24 must wait until the store has read it
    issue(vse(2, 5'd24), 32'h0000_1000);
    issue(varith(F_ADD, IVI, 5'd24, 5'd16, 5'd2));
    drain();
    for (int e = 0; e < 128; e++) begin
      rd32(32'h0000_1000 + 4 * e, d);
      check32($sformatf("vadd after vle, element %0d", e), d, B[e / 16][e % 16] + 32'd1);
    end

    // ---- 5. rejected instructions -----------------------------------------------------
    issue(varith(F_ADD, IVV, 5'd1, 5'd2, 5'd3, 1'b0), 0, 0, 1'b0);   // masked: not built
    issue(vsetvli(5'd5, 5'd10, 3, 0), 32'd8);                        // e64: vill
    drain();
    check32("vsetvli e64 gives vl=0", last_vl, 32'd0);
    issue(varith(F_ADD, IVV, 5'd1, 5'd2, 5'd3), 0, 0, 1'b0);          // vill set
    check32("results match accepted instructions", 32'(results), 32'(accepted));

    // ---- mechanism coverage ------------------------------------------------------------
    $display("chain=%0d backpressure=%0d hazard=%0d bank_conflict=%0d vrf_wr_conflict=%0d order_stall=%0d ext=%0d elem=%0d packed=%0d rejected=%0d",
             n_chain, n_backpressure, n_hazard, n_bank_conflict, n_vrf_wr_conflict,
             n_order_stall, n_ext, n_elem_mode, n_packed, rejected);
    check32("chaining happened",         32'(n_chain > 0), 1);
    check32("operand back-pressure",     32'(n_backpressure > 0), 1);
    check32("issue hazard stall",        32'(n_hazard > 0), 1);
    check32("L1 bank conflict",          32'(n_bank_conflict > 0), 1);
    check32("VRF write-port conflict",   32'(n_vrf_wr_conflict > 0), 1);
    check32("memory-ordering stall",     32'(n_order_stall > 0), 1);
    check32("external access",           32'(n_ext > 0), 1);
    check32("element-mode access",       32'(n_elem_mode > 0), 1);
    check32("packed access",             32'(n_packed > 0), 1);
    check32("rejected instructions",     32'(rejected), 2);

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
