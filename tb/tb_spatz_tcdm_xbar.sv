// tb_spatz_tcdm_xbar: random test of the L1 (TCDM) crossbar.
//
// Five masters issue random reads and byte-masked writes, concentrated on a few banks so
// that they collide often; each holds its request until it is granted. Behind the crossbar
// sit 16 behavioural banks with one cycle of read latency. The testbench keeps a reference
// memory, updated when a request is granted, and checks that:
//  * each bank serves at most one master per cycle, and the request arrives at the bank the
//    word-interleaved address selects (bank = address bits [5:2]);
//  * each read response comes back exactly one cycle after the grant, to the right master,
//    with the reference data;
//  * no request waits longer than NR_M cycles (round-robin fairness).
module tb_spatz_tcdm_xbar;
  import spatz_pkg::*;

  localparam int unsigned NR_M = 5, NR_B = 16, ROW_W = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [NR_M-1:0]            m_valid = '0, m_ready, r_valid;
  mem_req_t [NR_M-1:0]            m_req = '0;
  logic     [NR_M-1:0][31:0]      r_data;
  logic     [NR_B-1:0]            b_req, b_we, b_rvalid;
  logic     [NR_B-1:0][ROW_W-1:0] b_addr;
  logic     [NR_B-1:0][31:0]      b_wdata, b_rdata;
  logic     [NR_B-1:0][3:0]       b_be;
  int checks = 0, failures = 0, conflicts = 0;

  spatz_tcdm_xbar #(.NR_M(NR_M), .NR_B(NR_B), .ROW_W(ROW_W)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .m_req_valid_i(m_valid), .m_req_i(m_req), .m_req_ready_o(m_ready),
    .m_rsp_valid_o(r_valid), .m_rsp_data_o(r_data),
    .b_req_o(b_req), .b_we_o(b_we), .b_addr_o(b_addr), .b_wdata_o(b_wdata), .b_be_o(b_be),
    .b_rvalid_i(b_rvalid), .b_rdata_i(b_rdata)
  );

  // behavioural banks
  logic [31:0] bank_mem [NR_B][1 << ROW_W];
  initial for (int b = 0; b < int'(NR_B); b++) for (int r = 0; r < (1 << ROW_W); r++) bank_mem[b][r] = '0;
  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(NR_B); b++) begin
      b_rvalid[b] <= b_req[b] && !b_we[b];
      b_rdata[b]  <= bank_mem[b][b_addr[b]];
      if (b_req[b] && b_we[b])
        for (int y = 0; y < 4; y++) if (b_be[b][y]) bank_mem[b][b_addr[b]][8*y +: 8] <= b_wdata[b][8*y +: 8];
    end
  end

  logic [31:0] ref_mem [1 << 14];
  logic [31:0] expq [NR_M][$];
  int          wait_cnt [NR_M];
  logic [NR_M-1:0] granted;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : main
    for (int i = 0; i < (1 << 14); i++) ref_mem[i] = '0;
    for (int m = 0; m < int'(NR_M); m++) wait_cnt[m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      for (int m = 0; m < int'(NR_M); m++) begin
        if (!m_valid[m] && $urandom_range(0, 2) != 0) begin
          m_valid[m]       = 1'b1;
          // rows 0..3, banks 0..3
          m_req[m].addr    = {18'b0, 6'($urandom_range(0, 3)), 2'($urandom_range(0, 3)), 4'b0, 2'b00} |
                             32'({$urandom_range(0, 3), 2'b00});
          m_req[m].we      = $urandom_range(0, 1);
          m_req[m].be      = 4'($urandom);
          m_req[m].wdata   = $urandom;
        end
      end
      #1;
      // responses to last cycle's grants
      for (int m = 0; m < int'(NR_M); m++) begin
        if (r_valid[m]) begin
          chk($sformatf("response to master %0d expected", m), expq[m].size() > 0);
          if (expq[m].size() > 0) chk($sformatf("read data master %0d", m), r_data[m] === expq[m].pop_front());
        end
        chk($sformatf("no missing response master %0d", m), expq[m].size() == 0);
      end
      // grants this cycle
      granted = m_valid & m_ready;
      begin
        int owner [NR_B];
        for (int b = 0; b < int'(NR_B); b++) owner[b] = -1;
        for (int m = 0; m < int'(NR_M); m++) begin
          int w;
          w = int'(m_req[m].addr[15:2]);
          if (m_valid[m] && !m_ready[m]) conflicts++;
          if (m_valid[m] && m_ready[m]) begin
            int b;
            b = int'(m_req[m].addr[5:2]);
            chk($sformatf("bank %0d granted once", b), owner[b] == -1);
            owner[b] = m;
            chk("request reaches its bank", b_req[b] && b_addr[b] == m_req[m].addr[13:6] &&
                b_we[b] == m_req[m].we);
            if (m_req[m].we) begin
              for (int y = 0; y < 4; y++) if (m_req[m].be[y]) ref_mem[w][8*y +: 8] = m_req[m].wdata[8*y +: 8];
            end else begin
              expq[m].push_back(ref_mem[w]);
            end
          end
        end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < int'(NR_M); m++) begin
        if (granted[m]) begin
          m_valid[m] = 1'b0;
          wait_cnt[m] = 0;
        end else if (m_valid[m]) begin
          wait_cnt[m]++;
          chk($sformatf("master %0d waits at most %0d cycles", m, NR_M), wait_cnt[m] < int'(NR_M));
        end
      end
    end
    chk("bank conflicts happened", conflicts > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
