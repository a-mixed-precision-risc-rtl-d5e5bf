// tb_mpic_decoder: checks decoding of the virtual SIMD and CSR instructions.
//
// Every operation in every operand-B mode (vector, .sc, .sci) with random
// registers and immediates, with the half/byte bit set at random (it must not
// matter), every CSR form, and words that must be rejected: other opcodes,
// undefined operations, instr[25] set outside the immediate form, funct3
// 01x, pv.abs with a scalar operand.
module tb_mpic_decoder;
  import mpic_pkg::*;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] instr;
  dec_t        d;
  logic        ill;

  mpic_decoder dut (.instr_i(instr), .dec_o(d), .illegal_o(ill));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s instr=%h got=%0d exp=%0d", what, instr, got, exp);
    end
  endtask

  initial begin
    alu_op_e ops[12] = '{ALU_ADD, ALU_SUB, ALU_AVG, ALU_AVGU, ALU_MAX, ALU_MAXU,
                         ALU_MIN, ALU_MINU, ALU_SRL, ALU_SRA, ALU_SLL, ALU_ABS};
    dot_sign_e sg[3] = '{DOT_UU, DOT_US, DOT_SS};
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < 18; k++) begin
        for (int mode = 0; mode < 3; mode++) begin
          int rd, rs1, rs2, imm;
          if (k == 11 && mode != 0) continue;
          rd = $urandom_range(0, 31); rs1 = $urandom_range(0, 31);
          rs2 = $urandom_range(0, 31); imm = $urandom_range(0, 63);
          instr = enc_pv(f6_of(k), mode, rd, rs1, mode == 2 ? imm : rs2);
          #1;
          chk(ill, 0, "legal");
          chk(d.alu_en, k < 12, "alu_en");
          chk(d.dotp_en, k >= 12, "dotp_en");
          if (k < 12) chk(d.alu_op, ops[k], "alu_op");
          else begin
            chk(d.dotp_sign, sg[(k - 12) % 3], "dotp_sign");
            chk(d.dotp_acc, k >= 15, "dotp_acc");
            chk(d.rs3_used, k >= 15, "rs3_used");
          end
          chk(d.opb_mode, mode, "opb_mode");
          chk(d.rs1, rs1, "rs1");
          chk(d.rd, rd, "rd");
          chk(d.rd_we, rd != 0, "rd_we");
          if (mode == 2) chk(d.imm, longint'(unsigned'(32'(signed'(6'(imm))))), "sci immediate");
          else if (k != 11) chk(d.rs2, rs2, "rs2");
        end
      end
      // CSR forms
      for (int op = 1; op <= 3; op++) begin
        for (int im = 0; im < 2; im++) begin
          int rd, src;
          logic [11:0] a;
          rd = $urandom_range(0, 31); src = $urandom_range(0, 31); a = 12'($urandom);
          instr = enc_csr(op, im, rd, src, a);
          #1;
          chk(ill, 0, "csr legal");
          chk(d.csr_en, 1, "csr_en");
          chk(d.csr_op, op - 1, "csr_op");
          chk(d.csr_use_imm, im, "csr imm form");
          chk(d.csr_addr, a, "csr addr");
          if (im) chk(d.imm, src, "zimm"); else chk(d.rs1, src, "csr rs1");
          chk(d.alu_en || d.dotp_en, 0, "csr is not SIMD");
        end
      end
      // illegal words
      instr = $urandom; instr[6:0] = 7'b0110011;                  // OP
      #1 chk(ill, 1, "other opcode");
      instr = enc_pv(f6_of(0), 0, 1, 2, 3); instr[25] = 1;         // bit 25 outside .sci
      #1 chk(ill, 1, "bit 25");
      instr = enc_pv(f6_of(0), 0, 1, 2, 3); instr[26] = 1;         // odd funct6
      #1 chk(ill, 1, "funct6[0]");
      instr = enc_pv(f6_of(0), 0, 1, 2, 3); instr[14:13] = 2'b01;  // funct3 01x
      #1 chk(ill, 1, "funct3 01x");
      instr = enc_pv(6'b111110, 0, 1, 2, 3);                       // undefined op
      #1 chk(ill, 1, "undefined op");
      instr = enc_pv(f6_of(11), 1, 1, 2, 3);                       // abs.sc
      #1 chk(ill, 1, "abs.sc");
      instr = enc_csr(1, 0, 1, 2, 12'h800); instr[13:12] = 2'b00;  // ecall-like
      #1 chk(ill, 1, "SYSTEM funct3 000");
      chk(d.rd_we || d.alu_en || d.dotp_en || d.csr_en, 0, "illegal does nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
