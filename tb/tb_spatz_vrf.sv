// tb_spatz_vrf: random test of the vector register file.
//
// Every cycle, random read and write requests go to the five read and three write ports.
// The testbench keeps a reference copy of the 128 words and checks:
//  * a read port is granted iff it requests and fewer than three lower-numbered ports that
//    are granted use the same bank (3 read ports per bank, fixed priority);
//  * a write port is granted iff no lower-numbered granted write uses the same bank;
//  * granted reads return the reference word in the same cycle (combinational read);
//  * granted writes update the word under the byte enables at the clock edge.
module tb_spatz_vrf;
  import spatz_pkg::*;

  localparam int unsigned NR_RD = 5, NR_WR = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic   [NR_RD-1:0] rd_req, rd_gnt;
  vaddr_t [NR_RD-1:0] rd_addr;
  vword_t [NR_RD-1:0] rd_data;
  logic   [NR_WR-1:0] wr_req, wr_gnt;
  vaddr_t [NR_WR-1:0] wr_addr;
  vword_t [NR_WR-1:0] wr_data;
  vbe_t   [NR_WR-1:0] wr_be;
  int checks = 0, failures = 0;
  int conflicts = 0;

  spatz_vrf #(.NR_RD(NR_RD), .NR_WR(NR_WR)) dut (
    .clk_i(clk), .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt),
    .rd_data_o(rd_data), .wr_req_i(wr_req), .wr_addr_i(wr_addr), .wr_data_i(wr_data),
    .wr_be_i(wr_be), .wr_gnt_o(wr_gnt)
  );

  vword_t ref_mem [NR_WORDS];

  function automatic vword_t rnd_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin : main
    // fill every word through write port 0
    rd_req = '0;
    rd_addr = '0;
    for (int i = 0; i < int'(NR_WORDS); i++) begin
      @(negedge clk);
      wr_req = 3'b001;
      wr_addr[0] = vaddr_t'(i);
      wr_data[0] = rnd_word();
      wr_be[0] = '1;
      ref_mem[i] = wr_data[0];
    end
    for (int it = 0; it < 5000; it++) begin
      int used [NR_BANKS];
      logic [NR_BANKS-1:0] wused;
      @(negedge clk);
      for (int p = 0; p < int'(NR_RD); p++) begin
        rd_req[p]  = $urandom_range(0, 1);
        // few banks in use so that conflicts happen often
        rd_addr[p] = vaddr_t'({$urandom_range(0, 31), 2'($urandom_range(0, 1))});
      end
      for (int p = 0; p < int'(NR_WR); p++) begin
        wr_req[p]  = $urandom_range(0, 1);
        wr_addr[p] = vaddr_t'({$urandom_range(0, 31), 2'($urandom_range(0, 1))});
        wr_data[p] = rnd_word();
        wr_be[p]   = vbe_t'({$urandom, $urandom});
      end
      #1;
      for (int b = 0; b < int'(NR_BANKS); b++) used[b] = 0;
      for (int p = 0; p < int'(NR_RD); p++) begin
        int b;
        logic exp;
        b = int'(rd_addr[p][1:0]);
        exp = rd_req[p] && used[b] < 3;
        if (rd_req[p] && !exp) conflicts++;
        if (exp) used[b]++;
        chk($sformatf("read grant port %0d", p), rd_gnt[p] === exp);
        if (exp) chk($sformatf("read data port %0d addr %0d", p, rd_addr[p]),
                     rd_data[p] === ref_mem[rd_addr[p]]);
      end
      wused = '0;
      for (int p = 0; p < int'(NR_WR); p++) begin
        int b;
        logic exp;
        b = int'(wr_addr[p][1:0]);
        exp = wr_req[p] && !wused[b];
        if (exp) begin
          wused[b] = 1'b1;
          for (int y = 0; y < int'(WORD_B); y++)
            if (wr_be[p][y]) ref_mem[wr_addr[p]][8*y +: 8] = wr_data[p][8*y +: 8];
        end
        chk($sformatf("write grant port %0d", p), wr_gnt[p] === exp);
      end
    end
    chk("read conflicts happened", conflicts > 0);
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
