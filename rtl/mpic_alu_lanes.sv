// mpic_alu_lanes: the SIMD ALU operations on 32/W lanes of W bits.
//
// Helper of mpic_simd_alu; one instance per lane width (16, 8, 4, 2). Each
// lane computes, independently of the others:
//   add/sub          a +/- b, modulo 2^W
//   avg / avgu       (a + b) >> 1 on a W+1-bit sum, arithmetic / logical
//   max(u) / min(u)  signed / unsigned comparison
//   srl / sra / sll  shift a by the low log2(W) bits of the b lane
//   abs              a < 0 ? -a : a
// Combinational.
module mpic_alu_lanes
  import mpic_pkg::*;
#(
  parameter int unsigned W = 8
) (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  alu_op_e     op_i,
  output logic [31:0] result_o
);
  localparam int unsigned N  = 32 / W;
  localparam int unsigned SW = $clog2(W);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [W-1:0] a, b, r;
      logic [W:0]   ss, su;
      logic [SW-1:0] sh;
      a  = a_i[i*W +: W];
      b  = b_i[i*W +: W];
      sh = b[SW-1:0];
      ss = {a[W-1], a} + {b[W-1], b};
      su = {1'b0, a} + {1'b0, b};
      unique case (op_i)
        ALU_ADD:  r = a + b;
        ALU_SUB:  r = a - b;
        ALU_AVG:  r = ss[W:1];
        ALU_AVGU: r = su[W:1];
        ALU_MAX:  r = ($signed(a) > $signed(b)) ? a : b;
        ALU_MAXU: r = (a > b) ? a : b;
        ALU_MIN:  r = ($signed(a) < $signed(b)) ? a : b;
        ALU_MINU: r = (a < b) ? a : b;
        ALU_SRL:  r = a >> sh;
        ALU_SRA:  r = W'($signed(a) >>> sh);
        ALU_SLL:  r = a << sh;
        ALU_ABS:  r = a[W-1] ? W'(-a) : a;
        default:  r = '0;
      endcase
      result_o[i*W +: W] = r;
    end
  end

endmodule
