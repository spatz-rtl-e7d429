// tb_spatz: random-program test of the Spatz vector unit on its own.
//
// The testbench acts as the scalar core on the X-interface and as a 4 KiB memory on the
// four VLSU ports (random back-pressure, one-cycle reads). It keeps an architectural model
// of the 32 vector registers and of memory. Each round sets a random SEW and LMUL with
// vsetvli (checking the returned vl), loads three random register groups, runs a random
// sequence of arithmetic operations (vector-vector, vector-scalar, immediate), slides and
// moves on them, with operands chosen so that instructions chain on one another and
// contend for the units, and stores every group back. The memory is then compared with the
// model. Instructions are issued back to back, so the checks cover chaining, read-after-
// write through the scoreboard and issue stalls on write-after-read hazards.
module tb_spatz;
  import spatz_pkg::*;
  import spatz_instr_pkg::*;
  import spatz_ref_pkg::*;

  localparam int unsigned MEM_B = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        x_valid = 1'b0, x_ready, x_accept, r_valid, r_we, mem_busy;
  logic [31:0] x_instr = '0, x_rs1 = '0, x_rs2 = '0, r_data;
  id_t         x_id = '0, r_id;
  logic [4:0]  r_rd;
  logic     [NR_MACU-1:0]       m_valid, m_ready, m_rvalid;
  mem_req_t [NR_MACU-1:0]       m_req;
  logic     [NR_MACU-1:0][31:0] m_rdata;
  int checks = 0, failures = 0;

  spatz dut (
    .clk_i(clk), .rst_ni(rst_n),
    .x_issue_valid_i(x_valid), .x_issue_ready_o(x_ready), .x_issue_instr_i(x_instr),
    .x_issue_rs1_i(x_rs1), .x_issue_rs2_i(x_rs2), .x_issue_id_i(x_id), .x_issue_accept_o(x_accept),
    .x_result_valid_o(r_valid), .x_result_ready_i(1'b1), .x_result_id_o(r_id),
    .x_result_we_o(r_we), .x_result_rd_o(r_rd), .x_result_data_o(r_data),
    .x_mem_busy_o(mem_busy), .core_lsu_busy_i(1'b0),
    .mem_req_valid_o(m_valid), .mem_req_o(m_req), .mem_req_ready_i(m_ready),
    .mem_rsp_valid_i(m_rvalid), .mem_rsp_data_i(m_rdata)
  );

  // memory: random ready, one-cycle reads
  logic [7:0] mem [MEM_B];
  always @(negedge clk) for (int p = 0; p < int'(NR_MACU); p++) m_ready[p] = $urandom_range(0, 3) != 0;
  always @(posedge clk) begin
    for (int p = 0; p < int'(NR_MACU); p++) begin
      m_rvalid[p] <= m_valid[p] && m_ready[p] && !m_req[p].we;
      for (int b = 0; b < 4; b++) m_rdata[p][8*b +: 8] <= mem[(m_req[p].addr + b) % MEM_B];
      if (m_valid[p] && m_ready[p] && m_req[p].we)
        for (int b = 0; b < 4; b++) if (m_req[p].be[b]) mem[(m_req[p].addr + b) % MEM_B] <= m_req[p].wdata[8*b +: 8];
    end
  end

  // architectural model
  logic [7:0] vreg [32][VLEN / 8];
  logic [7:0] mmod [MEM_B];
  int accepted = 0, results = 0;
  logic [31:0] last_vl;
  always @(negedge clk) begin
    #2;
    if (rst_n && r_valid) begin
      results++;
      if (r_we) last_vl = r_data;
    end
  end

  task automatic issue(input logic [31:0] ins, input logic [31:0] rs1 = 0, input logic [31:0] rs2 = 0);
    @(negedge clk);
    x_valid = 1'b1; x_instr = ins; x_rs1 = rs1; x_rs2 = rs2;
    #1;
    while (!x_ready) begin
      @(negedge clk);
      #1;
    end
    checks++;
    if (!x_accept) begin
      failures++;
      $display("FAIL: instruction %h rejected", ins);
    end
    accepted++;
    @(posedge clk);
    #1;
    x_valid = 1'b0;
    x_id = x_id + 1;
  endtask

  task automatic drain();
    while (results != accepted) @(posedge clk);
    @(posedge clk);
  endtask

  // element access in the model (group base g, element i, width eb bytes)
  function automatic logic [31:0] get_e(int g, int i, int eb);
    logic [31:0] v;
    v = '0;
    for (int k = 0; k < eb; k++) v[8*k +: 8] = vreg[g + (i * eb + k) / (VLEN / 8)][(i * eb + k) % (VLEN / 8)];
    return v;
  endfunction
  task automatic set_e(int g, int i, int eb, logic [31:0] v);
    for (int k = 0; k < eb; k++) vreg[g + (i * eb + k) / (VLEN / 8)][(i * eb + k) % (VLEN / 8)] = v[8*k +: 8];
  endtask

  initial begin : main
    for (int i = 0; i < int'(MEM_B); i++) begin mem[i] = 8'($urandom); mmod[i] = mem[i]; end
    for (int r = 0; r < 32; r++) for (int b = 0; b < int'(VLEN / 8); b++) vreg[r][b] = '0;
    // the hardware registers start random: clear them all first (e8, LMUL=8, vmv.v.i 0)
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    issue(vsetvli(5'd1, 5'd0, 0, 3));
    for (int g = 0; g < 32; g += 8) issue(varith(F_MV, IVI, 5'(g), 5'd0, 5'd0));
    drain();
    for (int round = 0; round < 40; round++) begin
      int sew, lmul, eb, vlmax, vl, n;
      int grp [3];
      sew = $urandom_range(0, 2);
      lmul = $urandom_range(0, 2);
      eb = 1 << sew;
      vlmax = (VLEN / 8 / eb) << lmul;
      vl = $urandom_range(1, vlmax);
      issue(vsetvli(5'd1, 5'd10, sew, lmul), 32'(vl));
      drain();
      checks++;
      if (last_vl != 32'(vl)) begin failures++; $display("FAIL: vl %0d expected %0d", last_vl, vl); end
      // three groups: loads from random aligned addresses
      for (int k = 0; k < 3; k++) begin
        int base;
        grp[k] = ($urandom_range(0, (32 >> lmul) - 1)) << lmul;
        base = eb * $urandom_range(0, 256);
        issue(vle(sew, 5'(grp[k])), 32'(base));
        for (int i = 0; i < vl; i++) begin
          logic [31:0] v;
          for (int b = 0; b < eb; b++) v[8*b +: 8] = mmod[(base + i * eb + b) % MEM_B];
          set_e(grp[k], i, eb, v);
        end
      end
      // random operations
      n = $urandom_range(2, 6);
      for (int o = 0; o < n; o++) begin
        int d, a, b, kind, imm;
        logic [31:0] x;
        op_e op;
        logic [5:0] f6;
        logic [2:0] f3;
        d = grp[$urandom_range(0, 2)];
        a = grp[$urandom_range(0, 2)];
        b = grp[$urandom_range(0, 2)];
        x = $urandom;
        imm = $urandom_range(0, 31);
        kind = $urandom_range(0, 9);
        if (kind < 7) begin
          case ($urandom_range(0, 7))
            0: begin op = OP_ADD;  f6 = F_ADD;  f3 = IVV; end
            1: begin op = OP_SUB;  f6 = F_SUB;  f3 = IVX; end
            2: begin op = OP_XOR;  f6 = F_XOR;  f3 = IVI; end
            3: begin op = OP_MAX;  f6 = F_MAX;  f3 = IVV; end
            4: begin op = OP_SRA;  f6 = F_SRA;  f3 = IVI; end
            5: begin op = OP_MUL;  f6 = F_MUL;  f3 = MVV; end
            6: begin op = OP_MACC; f6 = F_MACC; f3 = MVX; end
            default: begin op = OP_MULHU; f6 = F_MULHU; f3 = MVV; end
          endcase
          if (f3 == IVV || f3 == MVV) issue(varith(f6, f3, 5'(d), 5'(a), 5'(b)));
          else if (f3 == IVI)         issue(varith(f6, f3, 5'(d), 5'(a), 5'(imm)));
          else                        issue(varith(f6, f3, 5'(d), 5'(a), 5'd10), x);
          for (int i = 0; i < vl; i++) begin
            logic [31:0] bv;
            if (f3 == IVV || f3 == MVV) bv = get_e(b, i, eb);
            else if (f3 == IVI) bv = (op == OP_SRA) ? 32'(imm) : {{27{imm[4]}}, imm[4:0]};
            else bv = x;
            set_e(d, i, eb, op_elem(op, 8 << sew, get_e(a, i, eb), bv, get_e(d, i, eb)));
          end
        end else begin
          // slides need a destination distinct from the source
          logic [7:0] old [32][VLEN / 8];
          int off;
          if (d == a) continue;
          old = vreg;
          off = (kind == 9) ? 0 : $urandom_range(0, vlmax);
          if (kind == 7) begin
            issue(varith(F_SLIDEUP, IVX, 5'(d), 5'(a), 5'd10), 32'(off));
            for (int i = off; i < vl; i++) begin
              logic [31:0] v;
              v = '0;
              for (int k = 0; k < eb; k++) v[8*k +: 8] = old[a + ((i - off) * eb + k) / (VLEN / 8)][((i - off) * eb + k) % (VLEN / 8)];
              set_e(d, i, eb, v);
            end
          end else begin
            if (kind == 9) issue(varith(F_MV, IVV, 5'(d), 5'd0, 5'(a)));
            else           issue(varith(F_SLIDEDOWN, IVX, 5'(d), 5'(a), 5'd10), 32'(off));
            for (int i = 0; i < vl; i++) begin
              logic [31:0] v;
              v = '0;
              if (i + off < vlmax)
                for (int k = 0; k < eb; k++) v[8*k +: 8] = old[a + ((i + off) * eb + k) / (VLEN / 8)][((i + off) * eb + k) % (VLEN / 8)];
              set_e(d, i, eb, v);
            end
          end
        end
      end
      // store all three groups to a fresh area
      for (int k = 0; k < 3; k++) begin
        int base;
        base = 2048 + eb * $urandom_range(0, 256);
        issue(vse(sew, 5'(grp[k])), 32'(base));
        for (int i = 0; i < vl; i++) begin
          logic [31:0] v;
          v = get_e(grp[k], i, eb);
          for (int b = 0; b < eb; b++) mmod[(base + i * eb + b) % MEM_B] = v[8*b +: 8];
        end
      end
      drain();
      for (int i = 0; i < int'(MEM_B); i++) begin
        checks++;
        if (mem[i] !== mmod[i]) begin
          failures++;
          if (failures < 10) $display("FAIL: round %0d sew %0d lmul %0d vl %0d: byte %0d got %h expected %h",
                                      round, 8 << sew, 1 << lmul, vl, i, mem[i], mmod[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
