// tb_spatz_controller: test of the controller with behavioural functional units.
//
// The three units are modelled in the testbench: each takes an instruction when offered,
// stays busy for a random 1..12 cycles and pulses done. The testbench issues a random
// stream of vsetvli (random AVL, SEW including the unsupported 64 bit, LMUL including
// fractional values) and vector instructions for all three units over the X-interface, and
// checks:
//  * vsetvli returns vl = min(AVL, VLMAX), or 0 with vill for unsupported vtypes, and the
//    vl/vtype CSRs follow; vector instructions are rejected while vill is set;
//  * each instruction goes to the right unit, carrying the vl and SEW in force at issue;
//  * a unit is never offered an instruction while it is busy;
//  * no instruction is dispatched while another busy unit reads or writes its destination
//    register group (write-after-read/write), checked against a model of the units' groups;
//  * every accepted instruction returns exactly one result, with its id.
module tb_spatz_controller;
  import spatz_pkg::*;
  import spatz_instr_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        x_valid = 1'b0, x_ready, x_accept, r_valid, r_we, mem_busy;
  logic [31:0] x_instr = '0, x_rs1 = '0, x_rs2 = '0, r_data, vtype;
  id_t         x_id = '0, r_id;
  logic [4:0]  r_rd;
  vlen_t       vl;
  logic [2:0]  u_valid, u_ready, u_done;
  vreq_t       u_req;
  logic [2:0][WADDR_W:0] u_wr_ptr;
  logic [4:0]  rd_req = '0, rd_ok;
  vaddr_t [4:0] rd_addr = '0;
  int checks = 0, failures = 0, n_hazard_stalls = 0;

  spatz_controller dut (
    .clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(x_valid), .x_issue_ready_o(x_ready), .x_issue_instr_i(x_instr),
    .x_issue_rs1_i(x_rs1), .x_issue_rs2_i(x_rs2), .x_issue_id_i(x_id), .x_issue_accept_o(x_accept),
    .x_result_valid_o(r_valid), .x_result_ready_i(1'b1), .x_result_id_o(r_id),
    .x_result_we_o(r_we), .x_result_rd_o(r_rd), .x_result_data_o(r_data),
    .x_mem_busy_o(mem_busy), .core_lsu_busy_i(1'b0), .vl_o(vl), .vtype_o(vtype),
    .unit_valid_o(u_valid), .unit_req_o(u_req), .unit_ready_i(u_ready), .unit_done_i(u_done),
    .unit_wr_ptr_i(u_wr_ptr), .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_ok_o(rd_ok)
  );

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // behavioural units; they report their write pointer at the start of the group, so the
  // scoreboard treats the whole group as not yet written
  int    busy_cnt [3];
  logic [4:0] u_lo [3], u_hi [3];  // register group touched (reads and writes), [lo, hi)
  logic [4:0] u_wlo [3], u_whi [3];
  assign u_ready = {busy_cnt[2] == 0, busy_cnt[1] == 0, busy_cnt[0] == 0};
  always_comb for (int u = 0; u < 3; u++) u_wr_ptr[u] = '0;

  // expected results, by id
  int   pend_res [16];
  logic [31:0] exp_vl [16];
  logic exp_we [16];
  int   cur_ew = 0, cur_vl = 0;
  logic cur_vill = 1'b1;
  int   issued_ops [3];

  always @(posedge clk) begin
    u_done <= '0;
    for (int u = 0; u < 3; u++) begin
      if (busy_cnt[u] > 0) begin
        busy_cnt[u]--;
        if (busy_cnt[u] == 0) u_done[u] <= 1'b1;
      end
    end
    if (rst_n && u_valid != '0) begin
      int u;
      u = (u_valid == 3'b001) ? 0 : (u_valid == 3'b010) ? 1 : 2;
      busy_cnt[u] = $urandom_range(1, 12);
    end
  end

  initial begin : main
    for (int u = 0; u < 3; u++) begin busy_cnt[u] = 0; issued_ops[u] = 0; end
    for (int i = 0; i < 16; i++) pend_res[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      logic [31:0] ins, rs1;
      int kind, unit, sew, lmul, d, s;
      logic exp_acc, is_cfg, acc;
      kind = $urandom_range(0, 5);
      rs1 = $urandom_range(0, 600);
      is_cfg = kind == 0;
      unit = 0;
      if (is_cfg) begin
        sew = $urandom_range(0, 3);
        lmul = ($urandom_range(0, 4) == 0) ? $urandom_range(4, 7) : $urandom_range(0, 3);
        ins = vsetvli(5'd1, 5'd10, sew, lmul);
        exp_acc = 1'b1;
      end else begin
        d = $urandom_range(0, 3) * 8;
        s = $urandom_range(0, 3) * 8;
        case (kind)
          1, 2: begin unit = 0; ins = varith(F_ADD, IVV, 5'(d), 5'(s), 5'(s)); end
          3:    begin unit = 1; ins = vle(cur_ew, 5'(d)); end
          4:    begin unit = 1; ins = vse(cur_ew, 5'(d)); end
          default: begin unit = 2; if (d == s) d = s ^ 8; ins = varith(F_SLIDEUP, IVX, 5'(d), 5'(s), 5'd10); end
        endcase
        exp_acc = !cur_vill;
      end
      // issue, checking the dispatch each cycle it waits
      @(negedge clk);
      x_valid = 1'b1; x_instr = ins; x_rs1 = rs1;
      #1;
      while (!x_ready) begin
        if (!is_cfg && exp_acc) n_hazard_stalls++;
        @(negedge clk);
        #1;
      end
      chk($sformatf("accept of %h: %b expected %b", ins, x_accept, exp_acc), x_accept === exp_acc);
      acc = x_accept;
      if (acc) begin
        chk("result id free", pend_res[x_id] == 0);
        pend_res[x_id]++;
        if (is_cfg) begin
          int vlmax;
          logic ill;
          ill = sew > 2 || lmul > 3;
          vlmax = ill ? 0 : ((VLEN >> (3 + sew)) << lmul);
          exp_vl[x_id] = ill ? 0 : ((int'(rs1) < vlmax) ? rs1 : vlmax);
          exp_we[x_id] = 1'b1;
          cur_vill = ill;
          cur_ew = ill ? 0 : sew;
          cur_vl = int'(exp_vl[x_id]);
        end else begin
          logic [4:0] lo, hi;
          exp_we[x_id] = 1'b0;
          chk("dispatched to the right unit", u_valid == (3'b001 << unit));
          chk("instruction carries vl and SEW", u_req.vl == vlen_t'(cur_vl) && u_req.ew == ew_e'(cur_ew));
          chk("unit was idle", busy_cnt[unit] == 0);
          // hazard check against the other units' groups (LMUL = 1 here: one register)
          for (int u = 0; u < 3; u++) begin
            if (u != unit && busy_cnt[u] > 0 && kind != 4) begin
              chk($sformatf("no WAR/WAW hazard with unit %0d on v%0d", u, d),
                  !(d >= int'(u_lo[u]) && d < int'(u_hi[u])) && !(d >= int'(u_wlo[u]) && d < int'(u_whi[u])));
            end
          end
          u_lo[unit] = 5'(s);
          u_hi[unit] = 5'(s + 1);
          u_wlo[unit] = (kind == 4) ? 5'd0 : 5'(d);
          u_whi[unit] = (kind == 4) ? 5'd0 : 5'(d + 1);
          if (kind == 3 || kind == 4) begin u_lo[unit] = 5'(d); u_hi[unit] = 5'(d + 1); end
          if (kind == 3) begin u_lo[unit] = 5'd0; u_hi[unit] = 5'd0; end
          issued_ops[unit]++;
        end
      end
      @(posedge clk);
      #1;
      x_valid = 1'b0;
      if (acc) x_id = x_id + 1;
    end
    repeat (40) @(posedge clk);
    for (int i = 0; i < 16; i++) chk("every result returned", pend_res[i] == 0);
    chk("all units used", issued_ops[0] > 0 && issued_ops[1] > 0 && issued_ops[2] > 0);
    chk("hazard stalls happened", n_hazard_stalls > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // results
  always @(negedge clk) begin
    #2;
    if (rst_n && r_valid) begin
      chk($sformatf("result id %0d expected", r_id), pend_res[r_id] == 1);
      chk("result write-back flag", r_we === exp_we[r_id]);
      if (r_we) chk($sformatf("vl %0d expected %0d", r_data, exp_vl[r_id]), r_data === exp_vl[r_id]);
      pend_res[r_id]--;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
