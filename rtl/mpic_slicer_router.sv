// mpic_slicer_router: the "slicer and router" in front of the DOTP units.
//
// In a mixed-precision format operand B holds Wa/Wb times more elements than
// operand A can use in one instruction. The slicer picks sub-group k = MPC_CNT
// of B, i.e. the 32/Wa elements of Wb bits starting at bit k*(32/Wa)*Wb
// (group 0 is the least significant one, as in the step-by-step example of
// the paper), and widens each element to Wa bits: sign extension for a signed
// B, zero extension for an unsigned B (pv.dotup, pv.sdotup; zero extension is
// this design's choice). The result is routed to the DOTP unit of size Wa,
// which is the unit the selection is tied to. In a uniform format B passes
// through unchanged. The index is used modulo the number of groups.
//
// Inputs are the four per-unit operand-B registers (only the one of the
// active unit holds fresh data); outputs feed DOTP-16, -8, -4 and -2. No
// format has operand A narrower than 4 bits with a narrower B, so the 2-bit
// path is always a plain pass-through.
// Combinational.
module mpic_slicer_router
  import mpic_pkg::*;
(
  input  logic [31:0] b16_i,
  input  logic [31:0] b8_i,
  input  logic [31:0] b4_i,
  input  logic [31:0] b2_i,
  input  logic [3:0]  fmt_i,
  input  logic [2:0]  mpc_cnt_i,
  input  logic        b_signed_i,
  output logic [31:0] b16_o,
  output logic [31:0] b8_o,
  output logic [31:0] b4_o,
  output logic [31:0] b2_o
);

  // Widen the selected group of Wb-bit elements of b to lanes of Wa bits.
  function automatic logic [31:0] slice(logic [31:0] b, int unsigned wa,
                                        int unsigned wb, logic [2:0] k,
                                        logic sgn);
    logic [31:0] r;
    int unsigned lanes, base;
    lanes = 32 / wa;
    base  = int'(k) * lanes * wb;
    r = '0;
    for (int unsigned i = 0; i < 16; i++) begin
      if (i < lanes) begin
        for (int unsigned j = 0; j < 16; j++) begin
          if (j < wa) begin
            if (j < wb) r[i*wa + j] = b[(base + i*wb + j) % 32];
            else        r[i*wa + j] = sgn & b[(base + i*wb + wb - 1) % 32];
          end
        end
      end
    end
    return r;
  endfunction

  lane_sz_e   sa, sb;
  logic [2:0] k;

  always_comb begin
    sa = fmt_size_a(fmt_i);
    sb = fmt_size_b(fmt_i);
    // keep the index inside the number of groups
    unique case (fmt_groups_log2(fmt_i))
      2'd0:    k = 3'd0;
      2'd1:    k = {2'b00, mpc_cnt_i[0]};
      2'd2:    k = {1'b0, mpc_cnt_i[1:0]};
      default: k = mpc_cnt_i;
    endcase

    b16_o = b16_i;
    b8_o  = b8_i;
    b4_o  = b4_i;
    b2_o  = b2_i;
    if (sa != sb) begin
      unique case (sa)
        SZ16: unique case (sb)
                SZ8:     b16_o = slice(b16_i, 16, 8, k, b_signed_i);
                SZ4:     b16_o = slice(b16_i, 16, 4, k, b_signed_i);
                default: b16_o = slice(b16_i, 16, 2, k, b_signed_i);
              endcase
        SZ8:  if (sb == SZ4) b8_o = slice(b8_i, 8, 4, k, b_signed_i);
              else           b8_o = slice(b8_i, 8, 2, k, b_signed_i);
        default: b4_o = slice(b4_i, 4, 2, k, b_signed_i);
      endcase
    end
  end

endmodule
