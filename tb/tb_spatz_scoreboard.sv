// tb_spatz_scoreboard: random test of the hazard scoreboard.
//
// Random unit states are applied: which of the three units are busy, the register groups
// each reads and writes, how far each has written (write pointer), the groups of a new
// instruction, and the five VRF read requests. The expected outputs are derived word by
// word from the rules:
//  * a read of word a by a port of unit U is allowed unless some other busy unit is going
//    to write word a and has not written it yet (a in its write group and a >= its pointer);
//  * a new instruction for unit U must wait if another busy unit reads or writes a word the
//    new instruction writes.
// Register groups are drawn from a few registers so that overlaps are common.
module tb_spatz_scoreboard;
  import spatz_pkg::*;

  localparam int unsigned NR_RD = 5;
  localparam int RD_UNIT [NR_RD] = '{0, 0, 0, 1, 2};

  logic     [2:0]            busy;
  vranges_t [2:0]            ranges;
  logic     [2:0][WADDR_W:0] wr_ptr;
  logic                      new_valid;
  logic     [1:0]            new_unit;
  vranges_t                  new_ranges;
  logic                      hazard;
  logic     [NR_RD-1:0]      rd_req, rd_ok;
  vaddr_t   [NR_RD-1:0]      rd_addr;
  int checks = 0, failures = 0, n_blocked = 0, n_hazard = 0;

  spatz_scoreboard #(.NR_RD(NR_RD)) dut (
    .busy_i(busy), .ranges_i(ranges), .wr_ptr_i(wr_ptr), .new_valid_i(new_valid),
    .new_unit_i(new_unit), .new_ranges_i(new_ranges), .issue_hazard_o(hazard),
    .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_ok_o(rd_ok)
  );

  function automatic vrange_t rnd_group();
    vrange_t g;
    int r, l;
    l = $urandom_range(0, 2);
    r = $urandom_range(0, 3) << l;
    g.valid = $urandom_range(0, 3) != 0;
    g.lo = (WADDR_W+1)'(4 * r);
    g.hi = (WADDR_W+1)'(4 * r + (4 << l));
    return g;
  endfunction

  function automatic logic in_group(vrange_t g, int a);
    return g.valid && a >= int'(g.lo) && a < int'(g.hi);
  endfunction

  initial begin : main
    for (int it = 0; it < 100000; it++) begin
      logic exp_h;
      busy = 3'($urandom);
      for (int u = 0; u < 3; u++) begin
        ranges[u].wr = rnd_group();
        for (int r = 0; r < 3; r++) ranges[u].rd[r] = rnd_group();
        wr_ptr[u] = ranges[u].wr.lo + (WADDR_W+1)'($urandom_range(0, 16));
      end
      new_valid = $urandom_range(0, 3) != 0;
      new_unit  = 2'($urandom_range(0, 2));
      new_ranges.wr = rnd_group();
      for (int r = 0; r < 3; r++) new_ranges.rd[r] = rnd_group();
      for (int p = 0; p < int'(NR_RD); p++) begin
        rd_req[p]  = $urandom_range(0, 1);
        rd_addr[p] = vaddr_t'($urandom_range(0, 63));
      end
      #1;
      // reads
      for (int p = 0; p < int'(NR_RD); p++) begin
        logic exp;
        exp = rd_req[p];
        for (int u = 0; u < 3; u++)
          if (busy[u] && u != RD_UNIT[p] && in_group(ranges[u].wr, int'(rd_addr[p])) &&
              int'(rd_addr[p]) >= int'(wr_ptr[u]))
            exp = 1'b0;
        if (rd_req[p] && !exp) n_blocked++;
        checks++;
        if (rd_ok[p] !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL: port %0d addr %0d ok=%b expected %b", p, rd_addr[p], rd_ok[p], exp);
        end
      end
      // issue hazards, word by word
      exp_h = 1'b0;
      if (new_valid)
        for (int a = 0; a < 64; a++)
          if (in_group(new_ranges.wr, a))
            for (int u = 0; u < 3; u++)
              if (busy[u] && u != int'(new_unit))
                if (in_group(ranges[u].wr, a) || in_group(ranges[u].rd[0], a) ||
                    in_group(ranges[u].rd[1], a) || in_group(ranges[u].rd[2], a))
                  exp_h = 1'b1;
      if (exp_h) n_hazard++;
      checks++;
      if (hazard !== exp_h) begin
        failures++;
        if (failures < 10) $display("FAIL: hazard=%b expected %b", hazard, exp_h);
      end
    end
    checks++;
    if (n_blocked == 0 || n_hazard == 0) failures++;
    $display("blocked reads %0d, hazards %0d", n_blocked, n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
