// mpic_simd_alu: SIMD part of the ALU for 16-, 8-, 4- and 2-bit lanes.
//
// Executes the ALU-type virtual SIMD instructions (pv.add, pv.sub, pv.avg(u),
// pv.max(u), pv.min(u), pv.srl, pv.sra, pv.sll, pv.abs). The instruction does
// not say how wide the lanes are: size_i is derived from the SIMD_FMT status
// register. The base core had 16- and 8-bit lanes; 4- and 2-bit lanes are
// added. The four lane arrays are separate here (one per width) and an
// output multiplexer selects by size; sharing one segmented adder between
// widths would be an area optimisation not modelled. Operand B arrives already
// replicated for the .sc/.sci variants. Combinational, used in EX.
module mpic_simd_alu
  import mpic_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  alu_op_e     op_i,
  input  lane_sz_e    size_i,
  output logic [31:0] result_o
);
  logic [31:0] r16, r8, r4, r2;

  mpic_alu_lanes #(.W(16)) u_l16 (.a_i(op_a_i), .b_i(op_b_i), .op_i(op_i), .result_o(r16));
  mpic_alu_lanes #(.W(8))  u_l8  (.a_i(op_a_i), .b_i(op_b_i), .op_i(op_i), .result_o(r8));
  mpic_alu_lanes #(.W(4))  u_l4  (.a_i(op_a_i), .b_i(op_b_i), .op_i(op_i), .result_o(r4));
  mpic_alu_lanes #(.W(2))  u_l2  (.a_i(op_a_i), .b_i(op_b_i), .op_i(op_i), .result_o(r2));

  always_comb begin
    unique case (size_i)
      SZ16:    result_o = r16;
      SZ8:     result_o = r8;
      SZ4:     result_o = r4;
      default: result_o = r2;
    endcase
  end

endmodule
