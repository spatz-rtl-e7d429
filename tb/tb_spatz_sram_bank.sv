// tb_spatz_sram_bank: random test of one L1 SRAM bank.
//
// Issues random reads and byte-masked writes, one per cycle or with idle cycles, and checks
// that each read returns, exactly one cycle later (rvalid), the contents of a reference
// array updated with the same writes. Writes must return no response.
module tb_spatz_sram_bank;
  localparam int unsigned WORDS = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req = 1'b0, we = 1'b0;
  logic [7:0]  addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  be = '0;
  logic        rvalid;
  int checks = 0, failures = 0;

  spatz_sram_bank #(.WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .be_i(be), .rvalid_o(rvalid), .rdata_o(rdata)
  );

  logic [31:0] ref_mem [WORDS];

  initial begin : main
    logic        exp_v;
    logic [31:0] exp_d;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // initialise every word
    for (int i = 0; i < int'(WORDS); i++) begin
      @(negedge clk);
      req = 1'b1; we = 1'b1; addr = 8'(i); be = 4'hf; wdata = $urandom; ref_mem[i] = wdata;
    end
    exp_v = 1'b0;
    exp_d = '0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      // the response to last cycle's request is visible now
      checks++;
      if (rvalid !== exp_v || (exp_v && rdata !== exp_d)) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d rvalid=%b rdata=%h expected %b %h", i, rvalid, rdata, exp_v, exp_d);
      end
      req   = $urandom_range(0, 3) != 0;
      we    = $urandom_range(0, 1);
      addr  = 8'($urandom);
      be    = 4'($urandom);
      wdata = $urandom;
      exp_v = req && !we;
      exp_d = ref_mem[addr];
      if (req && we)
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
    end
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
