// tb_mpic_simd_alu: checks every SIMD ALU operation at every lane width.
//
// Random operands plus lanes at the signed/unsigned extremes, compared with
// the lane-by-lane integer reference model. Combinational unit.
module tb_mpic_simd_alu;
  import mpic_pkg::*;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] a, b, r;
  alu_op_e     op;
  lane_sz_e    sz;

  mpic_simd_alu dut (.op_a_i(a), .op_b_i(b), .op_i(op), .size_i(sz), .result_o(r));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e ops[12] = '{ALU_ADD, ALU_SUB, ALU_AVG, ALU_AVGU, ALU_MAX, ALU_MAXU,
                         ALU_MIN, ALU_MINU, ALU_SRL, ALU_SRA, ALU_SLL, ALU_ABS};
    int widths[4] = '{16, 8, 4, 2};
    for (int t = 0; t < 300; t++) begin
      for (int o = 0; o < 12; o++) begin
        for (int s = 0; s < 4; s++) begin
          logic [31:0] exp;
          a = $urandom; b = $urandom;
          if (t % 10 == 1) a = 32'h8080_8080;
          if (t % 10 == 2) b = 32'h7F7F_7F7F;
          if (t % 10 == 3) begin a = 32'hFFFF_FFFF; b = 32'h5555_5555; end
          op = ops[o]; sz = lane_sz_e'(s);
          #1;
          exp = alu(o, widths[s], a, b);
          checks++;
          if (r !== exp) begin
            failures++;
            $display("FAIL op=%0d w=%0d a=%h b=%h got=%h exp=%h", o, widths[s], a, b, r, exp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
