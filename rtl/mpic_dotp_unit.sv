// mpic_dotp_unit: the extended dot-product unit (DOTP-16/8/4/2).
//
// Four dot-product units, one per lane width, each with its own operand-A and
// operand-B input register, share one operand-C (accumulator) register. When
// a dot-product instruction leaves the decode stage (en_i), only the input
// registers of the unit matching the size of operand A are loaded; the others
// keep their value, so their multipliers and adder trees do not toggle. The
// paper applies clock gating to these registers; here each register group has
// an enable (gate_en_o), which a synthesis flow maps onto an integrated
// clock-gating cell. These registers are at the same time the ID/EX pipeline
// registers of the dot-product operands (operand isolation).
//
// In EX, the slicer and router takes the registered operand B, selects the
// sub-group given by the registered MPC_CNT for a mixed format and widens it
// to the size of A. The output multiplexer picks the result of the unit that
// was loaded. Timing: operands presented with en_i in cycle t give result_o
// in cycle t+1 (combinational from the registers); result_o holds until the
// next en_i. Throughput one instruction per cycle.
module mpic_dotp_unit
  import mpic_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [3:0]  fmt_i,
  input  logic [2:0]  mpc_cnt_i,
  input  dot_sign_e   sign_i,
  input  logic        acc_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic [3:0]  gate_en_o,   // {DOTP-2, DOTP-4, DOTP-8, DOTP-16}
  output logic [31:0] result_o
);

  // Registered control of the instruction in EX.
  logic [3:0]  fmt_q;
  logic [2:0]  cnt_q;
  dot_sign_e   sign_q;
  logic        acc_q;
  logic [31:0] c_q;
  logic [31:0] a_q [4];
  logic [31:0] b_q [4];

  lane_sz_e sa_id;
  assign sa_id = fmt_size_a(fmt_i);

  always_comb begin
    gate_en_o = '0;
    gate_en_o[sa_id] = en_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fmt_q  <= FMT_INT8;
      cnt_q  <= '0;
      sign_q <= DOT_SS;
      acc_q  <= 1'b0;
      c_q    <= '0;
    end else if (en_i) begin
      fmt_q  <= fmt_i;
      cnt_q  <= mpc_cnt_i;
      sign_q <= sign_i;
      acc_q  <= acc_i;
      c_q    <= op_c_i;
    end
  end

  for (genvar u = 0; u < 4; u++) begin : g_in_regs
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        a_q[u] <= '0;
        b_q[u] <= '0;
      end else if (gate_en_o[u]) begin
        a_q[u] <= op_a_i;
        b_q[u] <= op_b_i;
      end
    end
  end

  logic a_sgn, b_sgn;
  assign a_sgn = (sign_q == DOT_SS);
  assign b_sgn = (sign_q != DOT_UU);

  logic [31:0] b16, b8, b4, b2;
  mpic_slicer_router u_slicer (
    .b16_i(b_q[SZ16]), .b8_i(b_q[SZ8]), .b4_i(b_q[SZ4]), .b2_i(b_q[SZ2]),
    .fmt_i(fmt_q), .mpc_cnt_i(cnt_q), .b_signed_i(b_sgn),
    .b16_o(b16), .b8_o(b8), .b4_o(b4), .b2_o(b2)
  );

  logic [31:0] r16, r8, r4, r2;
  mpic_dotp_lane #(.W(16)) u_dotp16 (.a_i(a_q[SZ16]), .b_i(b16), .a_signed_i(a_sgn),
    .b_signed_i(b_sgn), .c_i(c_q), .acc_en_i(acc_q), .result_o(r16));
  mpic_dotp_lane #(.W(8))  u_dotp8  (.a_i(a_q[SZ8]),  .b_i(b8),  .a_signed_i(a_sgn),
    .b_signed_i(b_sgn), .c_i(c_q), .acc_en_i(acc_q), .result_o(r8));
  mpic_dotp_lane #(.W(4))  u_dotp4  (.a_i(a_q[SZ4]),  .b_i(b4),  .a_signed_i(a_sgn),
    .b_signed_i(b_sgn), .c_i(c_q), .acc_en_i(acc_q), .result_o(r4));
  mpic_dotp_lane #(.W(2))  u_dotp2  (.a_i(a_q[SZ2]),  .b_i(b2),  .a_signed_i(a_sgn),
    .b_signed_i(b_sgn), .c_i(c_q), .acc_en_i(acc_q), .result_o(r2));

  // Output multiplexer.
  always_comb begin
    unique case (fmt_size_a(fmt_q))
      SZ16:    result_o = r16;
      SZ8:     result_o = r8;
      SZ4:     result_o = r4;
      default: result_o = r2;
    endcase
  end

endmodule
