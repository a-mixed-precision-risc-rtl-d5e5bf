// mpic_ref_pkg: reference model used by the testbenches.
//
// Written independently of the RTL: the format table is re-entered from the
// published encodings as plain widths, and every operation is computed with
// integer arithmetic, element by element, without the RTL's lane arrays,
// slicer or adder trees.
package mpic_ref_pkg;

  // Width of operand A and of operand B for a SIMD_FMT encoding; 0 if the
  // encoding is not defined.
  function automatic int wa_of(int f);
    case (f)
      1: return 16;  2: return 8;  4: return 4;  5: return 2;
      6: return 16;  7: return 16; 8: return 16;
      9: return 8;  10: return 8; 11: return 4;
      default: return 0;
    endcase
  endfunction

  function automatic int wb_of(int f);
    case (f)
      1: return 16;  2: return 8;  4: return 4;  5: return 2;
      6: return 8;   7: return 4;  8: return 2;
      9: return 4;  10: return 2; 11: return 2;
      default: return 0;
    endcase
  endfunction

  // Element k of width w of word v, as signed or unsigned integer.
  function automatic longint elem(logic [31:0] v, int w, int k, bit sgn);
    longint u;
    u = 0;
    for (int j = 0; j < w; j++) if (v[k*w + j]) u += (longint'(1) << j);
    if (sgn && v[k*w + w - 1]) u -= (longint'(1) << w);
    return u;
  endfunction

  // Dot product as the instruction defines it. sign: 0 uu, 1 us, 2 ss.
  function automatic logic [31:0] dotp(int f, logic [31:0] a, logic [31:0] b,
                                       logic [31:0] c, int cnt, int sign, bit acc);
    int wa, wb, n, groups, g;
    longint s;
    wa = wa_of(f); wb = wb_of(f);
    if (wa == 0) begin wa = 8; wb = 8; end
    n = 32 / wa;
    groups = wa / wb;
    g = cnt % groups;
    s = acc ? longint'(c) : 0;
    for (int i = 0; i < n; i++)
      s += elem(a, wa, i, sign == 2) * elem(b, wb, g*n + i, sign != 0);
    return s[31:0];
  endfunction

  // SIMD ALU. op numbering: 0 add 1 sub 2 avg 3 avgu 4 max 5 maxu 6 min
  // 7 minu 8 srl 9 sra 10 sll 11 abs.
  function automatic logic [31:0] alu(int op, int w, logic [31:0] a, logic [31:0] b);
    logic [31:0] r;
    longint x, y, xs, ys, z, m;
    int sh;
    m = (longint'(1) << w);
    r = '0;
    for (int i = 0; i < 32 / w; i++) begin
      x  = elem(a, w, i, 0); y  = elem(b, w, i, 0);
      xs = elem(a, w, i, 1); ys = elem(b, w, i, 1);
      sh = int'(y % w);
      case (op)
        0: z = x + y;
        1: z = x - y;
        2: z = (xs + ys) >>> 1;
        3: z = (x + y) >> 1;
        4: z = (xs > ys) ? xs : ys;
        5: z = (x > y) ? x : y;
        6: z = (xs < ys) ? xs : ys;
        7: z = (x < y) ? x : y;
        8: z = x >> sh;
        9: z = xs >>> sh;
        10: z = x << sh;
        default: z = (xs < 0) ? -xs : xs;
      endcase
      z = ((z % m) + m) % m;
      for (int j = 0; j < w; j++) r[i*w + j] = z[j];
    end
    return r;
  endfunction

  // Instruction encoders (packed-SIMD opcode 1010111, SYSTEM 1110011).
  // mode: 0 vector, 1 scalar (.sc), 2 immediate (.sci).
  function automatic logic [31:0] enc_pv(logic [5:0] f6, int mode, int rd, int rs1,
                                         int rs2_or_imm);
    logic [2:0] f3;
    logic [31:0] w;
    logic [5:0] imm;
    f3 = (mode == 0) ? 3'b000 : (mode == 1) ? 3'b100 : 3'b110;
    f3[0] = $urandom_range(0, 1); // half/byte bit: ignored by the virtual decoder
    if (mode == 2) begin
      imm = 6'(rs2_or_imm);
      w = {f6[5:1], 1'b0, imm[0], imm[5:1], 5'(rs1), f3, 5'(rd), 7'b1010111};
    end else begin
      w = {f6, 1'b0, 5'(rs2_or_imm), 5'(rs1), f3, 5'(rd), 7'b1010111};
    end
    return w;
  endfunction

  // funct6 of the operations, indexed as in alu() for 0..11, then dotup,
  // dotusp, dotsp, sdotup, sdotusp, sdotsp as 12..17.
  function automatic logic [5:0] f6_of(int k);
    case (k)
      0: return 6'b000000;  1: return 6'b000010;  2: return 6'b000100;
      3: return 6'b000110;  4: return 6'b001100;  5: return 6'b001110;
      6: return 6'b001000;  7: return 6'b001010;  8: return 6'b010000;
      9: return 6'b010010; 10: return 6'b010100; 11: return 6'b011100;
      12: return 6'b100000; 13: return 6'b100010; 14: return 6'b100110;
      15: return 6'b101000; 16: return 6'b101010; default: return 6'b101110;
    endcase
  endfunction

  // CSR instruction: op 1 rw, 2 rs, 3 rc; imm selects the zimm form.
  function automatic logic [31:0] enc_csr(int op, bit imm, int rd, int rs1_or_zimm,
                                          logic [11:0] addr);
    return {addr, 5'(rs1_or_zimm), imm, 2'(op), 5'(rd), 7'b1110011};
  endfunction

endpackage
