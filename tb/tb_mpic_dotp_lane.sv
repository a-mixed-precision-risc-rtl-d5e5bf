// tb_mpic_dotp_lane: checks one DOTP-W unit at each of the four widths.
//
// Random operands, all signedness combinations, with and without the
// accumulator, plus corner values (all ones, most negative lanes). Expected
// values come from the integer reference model. The unit is combinational;
// the watchdog ends the run if it ever hangs.
module tb_mpic_dotp_lane;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] a, b, c;
  logic        as, bs, acc;
  logic [31:0] r16, r8, r4, r2;

  mpic_dotp_lane #(.W(16)) u16 (.a_i(a), .b_i(b), .a_signed_i(as), .b_signed_i(bs), .c_i(c), .acc_en_i(acc), .result_o(r16));
  mpic_dotp_lane #(.W(8))  u8  (.a_i(a), .b_i(b), .a_signed_i(as), .b_signed_i(bs), .c_i(c), .acc_en_i(acc), .result_o(r8));
  mpic_dotp_lane #(.W(4))  u4  (.a_i(a), .b_i(b), .a_signed_i(as), .b_signed_i(bs), .c_i(c), .acc_en_i(acc), .result_o(r4));
  mpic_dotp_lane #(.W(2))  u2  (.a_i(a), .b_i(b), .a_signed_i(as), .b_signed_i(bs), .c_i(c), .acc_en_i(acc), .result_o(r2));

  // expected dot product at uniform width w; sign code as in the reference
  function automatic logic [31:0] expect_w(int w);
    int f;
    f = (w == 16) ? 1 : (w == 8) ? 2 : (w == 4) ? 4 : 5;
    return dotp(f, a, b, c, 0, (as && bs) ? 2 : (bs ? 1 : 0), acc);
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%h b=%h c=%h as=%0b bs=%0b acc=%0b got=%h exp=%h",
               what, a, b, c, as, bs, acc, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      a = $urandom; b = $urandom; c = $urandom;
      if (t % 50 == 0) a = 32'hFFFF_FFFF;
      if (t % 70 == 0) b = 32'h8888_8888;
      if (t % 90 == 0) begin a = 32'hAAAA_AAAA; b = 32'hAAAA_AAAA; end
      // signedness combinations used by the instructions: uu, us, ss
      case (t % 3)
        0: begin as = 0; bs = 0; end
        1: begin as = 0; bs = 1; end
        default: begin as = 1; bs = 1; end
      endcase
      acc = t[2];
      #1;
      check(r16, expect_w(16), "dotp16");
      check(r8,  expect_w(8),  "dotp8");
      check(r4,  expect_w(4),  "dotp4");
      check(r2,  expect_w(2),  "dotp2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
