// mpic_decoder: decoder of the virtual SIMD instructions and CSR accesses.
//
// A virtual SIMD instruction names an operation (add, max, sdotsp, ...) and
// how operand B is formed, but no precision: the same word executes as 16-,
// 8-, 4-, 2-bit or mixed-precision depending on SIMD_FMT. The decoder
// therefore emits no format signals at all; it only fills the dec_t struct.
//
// Encoding (that of the base core's packed-SIMD extension; the paper does not
// list bit fields): opcode 1010111, instr[31:26] selects the operation,
// instr[14:13] the operand-B mode (00 vector, 10 scalar replicated from rs2,
// 11 6-bit sign-extended immediate {instr[24:20], instr[25]}), instr[12] is
// the old half/byte bit and is ignored. instr[25] must be 0 unless the mode
// is immediate. The sdot* forms read rD as third operand (accumulator). pv.abs
// reads only rs1. CSR instructions use the standard SYSTEM encoding. Any
// other word raises illegal_o: it belongs to the base core. Combinational.
module mpic_decoder
  import mpic_pkg::*;
(
  input  logic [31:0] instr_i,
  output dec_t        dec_o,
  output logic        illegal_o
);
  logic [5:0] f6;
  logic [2:0] f3;
  logic       legal;

  assign f6 = instr_i[31:26];
  assign f3 = instr_i[14:12];

  always_comb begin
    dec_o          = '0;
    dec_o.rs1      = instr_i[19:15];
    dec_o.rs2      = instr_i[24:20];
    dec_o.rd       = instr_i[11:7];
    dec_o.alu_op   = ALU_ADD;
    dec_o.dotp_sign = DOT_SS;
    dec_o.opb_mode = OPB_VV;
    dec_o.csr_op   = CSR_RW;
    legal          = 1'b0;

    if (instr_i[6:0] == OPC_VECOP) begin
      legal = 1'b1;
      unique case (f3[2:1])
        2'b00:   dec_o.opb_mode = OPB_VV;
        2'b10:   dec_o.opb_mode = OPB_SC;
        2'b11:   dec_o.opb_mode = OPB_SCI;
        default: legal = 1'b0;
      endcase
      dec_o.imm = {{26{instr_i[24]}}, instr_i[24:20], instr_i[25]};
      if (dec_o.opb_mode != OPB_SCI && instr_i[25]) legal = 1'b0;
      dec_o.alu_en = 1'b1;
      unique case (f6[5:1])
        5'b00000: dec_o.alu_op = ALU_ADD;
        5'b00001: dec_o.alu_op = ALU_SUB;
        5'b00010: dec_o.alu_op = ALU_AVG;
        5'b00011: dec_o.alu_op = ALU_AVGU;
        5'b00100: dec_o.alu_op = ALU_MIN;
        5'b00101: dec_o.alu_op = ALU_MINU;
        5'b00110: dec_o.alu_op = ALU_MAX;
        5'b00111: dec_o.alu_op = ALU_MAXU;
        5'b01000: dec_o.alu_op = ALU_SRL;
        5'b01001: dec_o.alu_op = ALU_SRA;
        5'b01010: dec_o.alu_op = ALU_SLL;
        5'b01110: begin
          dec_o.alu_op = ALU_ABS;
          if (dec_o.opb_mode != OPB_VV) legal = 1'b0;
        end
        5'b10000: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_UU; end
        5'b10001: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_US; end
        5'b10011: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_SS; end
        5'b10100: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_UU;
                        dec_o.dotp_acc = 1'b1; end
        5'b10101: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_US;
                        dec_o.dotp_acc = 1'b1; end
        5'b10111: begin dec_o.alu_en = 1'b0; dec_o.dotp_en = 1'b1; dec_o.dotp_sign = DOT_SS;
                        dec_o.dotp_acc = 1'b1; end
        default:  legal = 1'b0;
      endcase
      if (f6[0]) legal = 1'b0;
      dec_o.rs2_used = (dec_o.opb_mode != OPB_SCI) && !(dec_o.alu_en && dec_o.alu_op == ALU_ABS);
      dec_o.rs3_used = dec_o.dotp_acc;
      dec_o.rd_we    = 1'b1;
    end else if (instr_i[6:0] == OPC_SYSTEM && f3[1:0] != 2'b00) begin
      legal             = 1'b1;
      dec_o.csr_en      = 1'b1;
      dec_o.csr_use_imm = f3[2];
      dec_o.imm         = {27'd0, instr_i[19:15]};
      dec_o.csr_addr    = instr_i[31:20];
      dec_o.rd_we       = 1'b1;
      unique case (f3[1:0])
        2'b01:   dec_o.csr_op = CSR_RW;
        2'b10:   dec_o.csr_op = CSR_RS;
        default: dec_o.csr_op = CSR_RC;
      endcase
    end

    if (!legal) begin
      dec_o.alu_en  = 1'b0;
      dec_o.dotp_en = 1'b0;
      dec_o.csr_en  = 1'b0;
      dec_o.rd_we   = 1'b0;
    end
    if (dec_o.rd == 5'd0) dec_o.rd_we = 1'b0;
  end

  assign illegal_o = !legal;

endmodule
