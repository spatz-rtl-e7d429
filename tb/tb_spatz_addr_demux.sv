// tb_spatz_addr_demux: random test of the cluster's address demultiplexer.
//
// Five masters issue random reads and writes, half to the L1 range and half to the external
// range. The L1 side is modelled as one port per master with random back-pressure and one
// cycle of read latency; the external side as a single port with random back-pressure and
// three cycles of read latency. Both models read a shared reference memory when a request
// is accepted. For every master the testbench queues the expected read data in issue order
// and checks that the responses come back in that order with that data, which only holds
// if the demultiplexer keeps a master from switching target while reads are outstanding
// and routes external responses back to the right master. It also checks that every
// request reaches the right side and that the external port carries at most one request.
module tb_spatz_addr_demux;
  import spatz_pkg::*;

  localparam int unsigned NR_M = 5;
  localparam logic [31:0] EXT_BASE = 32'h8000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [NR_M-1:0]       m_valid = '0, m_ready, r_valid;
  mem_req_t [NR_M-1:0]       m_req = '0;
  logic     [NR_M-1:0][31:0] r_data;
  logic     [NR_M-1:0]       t_valid, t_ready = '0, t_rvalid = '0;
  mem_req_t [NR_M-1:0]       t_req;
  logic     [NR_M-1:0][31:0] t_rdata = '0;
  logic                      e_valid, e_ready = 1'b0, e_rvalid;
  mem_req_t                  e_req;
  logic     [31:0]           e_rdata;
  int checks = 0, failures = 0, switch_stalls = 0, ext_reads = 0;

  spatz_addr_demux #(.NR_M(NR_M)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .m_req_valid_i(m_valid), .m_req_i(m_req), .m_req_ready_o(m_ready),
    .m_rsp_valid_o(r_valid), .m_rsp_data_o(r_data),
    .t_req_valid_o(t_valid), .t_req_o(t_req), .t_req_ready_i(t_ready),
    .t_rsp_valid_i(t_rvalid), .t_rsp_data_i(t_rdata),
    .e_req_valid_o(e_valid), .e_req_o(e_req), .e_req_ready_i(e_ready),
    .e_rsp_valid_i(e_rvalid), .e_rsp_data_i(e_rdata)
  );

  // word-addressed reference memory: 64 L1 words and 64 external words
  logic [31:0] mem [128];
  function automatic int idx(logic [31:0] a);
    return (a >= EXT_BASE) ? 64 + int'(a[7:2]) : int'(a[7:2]);
  endfunction

  logic [31:0] expq [NR_M][$];
  logic [2:0]  e_pipe_v = '0;
  logic [31:0] e_pipe_d [3];
  assign e_rvalid = e_pipe_v[2];
  assign e_rdata  = e_pipe_d[2];

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : main
    logic [NR_M-1:0] granted;
    logic            t_rv_n [NR_M];
    logic [31:0]     t_rd_n [NR_M];
    logic            e_rd_n;
    logic [31:0]     e_d_n;
    for (int i = 0; i < 128; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 5020; it++) begin
      @(negedge clk);
      for (int m = 0; m < int'(NR_M); m++) begin
        if (!m_valid[m] && it < 5000 && $urandom_range(0, 2) != 0) begin
          m_valid[m]     = 1'b1;
          m_req[m].addr  = ($urandom_range(0, 1) ? EXT_BASE : 32'h0) | 32'({$urandom_range(0, 63), 2'b00});
          m_req[m].we    = $urandom_range(0, 3) == 0;
          m_req[m].be    = 4'hf;
          m_req[m].wdata = $urandom;
        end
        t_ready[m] = $urandom_range(0, 3) != 0;
      end
      e_ready = $urandom_range(0, 3) != 0;
      #1;
      // responses visible in this cycle
      for (int m = 0; m < int'(NR_M); m++) begin
        if (r_valid[m]) begin
          chk($sformatf("response for master %0d expected", m), expq[m].size() > 0);
          if (expq[m].size() > 0) begin
            logic [31:0] e;
            e = expq[m].pop_front();
            chk($sformatf("master %0d response data %h, expected %h", m, r_data[m], e), r_data[m] === e);
          end
        end
      end
      // requests accepted in this cycle
      granted = m_valid & m_ready;
      for (int m = 0; m < int'(NR_M); m++) begin
        t_rv_n[m] = 1'b0;
        t_rd_n[m] = '0;
        if (m_valid[m] && !m_ready[m] && !t_valid[m] && !(e_valid && e_req == m_req[m]))
          switch_stalls++;
        if (t_valid[m]) chk("L1 request is in the L1 range", t_req[m] == m_req[m] && m_req[m].addr < 32'h4000);
      end
      e_rd_n = 1'b0;
      e_d_n  = '0;
      if (e_valid) chk("external request is in the external range", e_req.addr >= EXT_BASE);
      chk("at most one grant via the external port",
          $countones(granted & ~(t_valid & t_ready)) <= 1);
      for (int m = 0; m < int'(NR_M); m++) begin
        if (granted[m]) begin
          int i;
          i = idx(m_req[m].addr);
          if (m_req[m].we) mem[i] = m_req[m].wdata;
          else begin
            expq[m].push_back(mem[i]);
            if (m_req[m].addr >= EXT_BASE) begin
              e_rd_n = 1'b1; e_d_n = mem[i]; ext_reads++;
            end else begin
              t_rv_n[m] = 1'b1; t_rd_n[m] = mem[i];
            end
          end
        end
      end
      @(posedge clk);
      #1;
      for (int m = 0; m < int'(NR_M); m++) begin
        if (granted[m]) m_valid[m] = 1'b0;
        t_rvalid[m] = t_rv_n[m];
        t_rdata[m]  = t_rd_n[m];
      end
      e_pipe_v    = {e_pipe_v[1:0], e_rd_n};
      e_pipe_d[2] = e_pipe_d[1];
      e_pipe_d[1] = e_pipe_d[0];
      e_pipe_d[0] = e_d_n;
    end
    for (int m = 0; m < int'(NR_M); m++) chk("all responses received", expq[m].size() == 0);
    chk("target-switch stalls happened", switch_stalls > 0);
    chk("external reads happened", ext_reads > 0);
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
