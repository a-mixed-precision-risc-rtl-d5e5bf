// mpic_pkg: types and constants shared by the status-based SIMD datapath.
//
// The central idea of the design is that SIMD instructions carry no
// precision: the precision of both operands is held in a status register,
// SIMD_FMT, whose 4-bit encodings are the ones listed below (they follow the
// published format table). A format names the size of operand A and of
// operand B; in a mixed format B is always the smaller one. The package also
// holds the operation codes the decoder hands to the execution units, the
// decoded-instruction struct and the addresses of the three status registers
// (the addresses are this design's choice, in the custom user CSR range).
package mpic_pkg;

  // SIMD_FMT encodings.
  typedef enum logic [3:0] {
    FMT_INT16 = 4'b0001,
    FMT_INT8  = 4'b0010,
    FMT_INT4  = 4'b0100,
    FMT_INT2  = 4'b0101,
    FMT_M16X8 = 4'b0110,
    FMT_M16X4 = 4'b0111,
    FMT_M16X2 = 4'b1000,
    FMT_M8X4  = 4'b1001,
    FMT_M8X2  = 4'b1010,
    FMT_M4X2  = 4'b1011
  } simd_fmt_e;

  // Lane size of one operand.
  typedef enum logic [1:0] {
    SZ16 = 2'd0,
    SZ8  = 2'd1,
    SZ4  = 2'd2,
    SZ2  = 2'd3
  } lane_sz_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AVG, ALU_AVGU, ALU_MAX, ALU_MAXU, ALU_MIN, ALU_MINU,
    ALU_SRL, ALU_SRA, ALU_SLL, ALU_ABS
  } alu_op_e;

  // Signedness of a dot product: unsigned x unsigned, unsigned A x signed B,
  // signed x signed.
  typedef enum logic [1:0] {
    DOT_UU = 2'd0,
    DOT_US = 2'd1,
    DOT_SS = 2'd2
  } dot_sign_e;

  // Source of operand B: register (vector), replicated scalar register, or
  // replicated immediate.
  typedef enum logic [1:0] {
    OPB_VV  = 2'd0,
    OPB_SC  = 2'd1,
    OPB_SCI = 2'd2
  } opb_mode_e;

  typedef enum logic [1:0] {
    CSR_RW = 2'd0,
    CSR_RS = 2'd1,
    CSR_RC = 2'd2
  } csr_op_e;

  localparam logic [11:0] CSR_SIMD_FMT = 12'h800;
  localparam logic [11:0] CSR_MPC_CNT  = 12'h801;
  localparam logic [11:0] CSR_MPC_MACS = 12'h802;

  localparam logic [6:0] OPC_VECOP  = 7'b1010111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;

  typedef struct packed {
    logic        alu_en;     // SIMD ALU instruction
    alu_op_e     alu_op;
    logic        dotp_en;    // dot-product (MAC) instruction
    dot_sign_e   dotp_sign;
    logic        dotp_acc;   // sdot*: add rD
    opb_mode_e   opb_mode;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic        rs2_used;
    logic        rs3_used;   // rD read as accumulator
    logic [31:0] imm;        // .sci immediate or CSR zimm
    logic        csr_en;
    csr_op_e     csr_op;
    logic        csr_use_imm;
    logic [11:0] csr_addr;
    logic        rd_we;
  } dec_t;

  function automatic logic fmt_legal(logic [3:0] f);
    case (f)
      FMT_INT16, FMT_INT8, FMT_INT4, FMT_INT2, FMT_M16X8, FMT_M16X4,
      FMT_M16X2, FMT_M8X4, FMT_M8X2, FMT_M4X2: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  // Size of operand A (the larger operand).
  function automatic lane_sz_e fmt_size_a(logic [3:0] f);
    case (f)
      FMT_INT16, FMT_M16X8, FMT_M16X4, FMT_M16X2: return SZ16;
      FMT_INT4, FMT_M4X2:                         return SZ4;
      FMT_INT2:                                   return SZ2;
      default:                                    return SZ8;
    endcase
  endfunction

  // Size of operand B (the smaller operand in a mixed format).
  function automatic lane_sz_e fmt_size_b(logic [3:0] f);
    case (f)
      FMT_INT16:                                  return SZ16;
      FMT_INT4, FMT_M16X4, FMT_M8X4:              return SZ4;
      FMT_INT2, FMT_M16X2, FMT_M8X2, FMT_M4X2:    return SZ2;
      default:                                    return SZ8;
    endcase
  endfunction

  function automatic logic fmt_mixed(logic [3:0] f);
    return fmt_legal(f) && (fmt_size_a(f) != fmt_size_b(f));
  endfunction

  // log2 of the number of B sub-groups (size_a / size_b): 0, 1, 2 or 3.
  function automatic logic [1:0] fmt_groups_log2(logic [3:0] f);
    return 2'(fmt_size_b(f) - fmt_size_a(f));
  endfunction

endpackage
