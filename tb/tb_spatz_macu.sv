// tb_spatz_macu: random test of one multiply-accumulate unit (MACU).
//
// Drives random operations, element widths and operands into the combinational MACU and
// compares every result with the reference arithmetic of spatz_ref_pkg, which computes each
// RVV operation per element in 64-bit integers. Covers all operations and the three element
// widths (one 32-bit, two 16-bit or four 8-bit elements per lane), with random and
// corner-case operands (0, -1, most negative).
module tb_spatz_macu;
  import spatz_pkg::*;
  import spatz_ref_pkg::*;

  op_e         op;
  ew_e         ew;
  logic [31:0] a, b, c, res;
  int checks = 0, failures = 0;

  spatz_macu dut (.op_i(op), .ew_i(ew), .a_i(a), .b_i(b), .c_i(c), .res_o(res));

  function automatic logic [31:0] pick();
    case ($urandom_range(0, 5))
      0: return 32'h0;
      1: return 32'hffff_ffff;
      2: return 32'h8080_8080;
      3: return 32'h7f7f_7fff;
      default: return $urandom;
    endcase
  endfunction

  initial begin : main
    for (int i = 0; i < 20000; i++) begin
      op = op_e'($urandom_range(0, int'(OP_MV)));
      ew = ew_e'($urandom_range(0, 2));
      a  = pick();
      b  = pick();
      c  = pick();
      #1;
      checks++;
      if (res !== op_word(op, ew, a, b, c)) begin
        failures++;
        if (failures < 10)
          $display("FAIL: %s ew=%0d a=%h b=%h c=%h got %h expected %h", op.name(), 8 << ew,
                   a, b, c, res, op_word(op, ew, a, b, c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
