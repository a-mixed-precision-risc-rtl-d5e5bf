// mpic_csr: status registers of the mixed-precision extension.
//
// Holds SIMD_FMT, the register that replaces the precision bits the virtual
// SIMD instructions do not have (its value goes to the ALU, the dot-product
// unit and the mixed-precision controller), and MPC_MACS, the number of MACs
// per operand-B sub-group. The third register, MPC_CNT (the current
// sub-group), physically lives in mpic_mpc; it is read through mpc_cnt_i and
// written through mpc_we_o/mpc_wdata_o, so software can select a group by
// hand. Access follows the RISC-V csrrw/csrrs/csrrc rules: csr_rdata_o is the
// old value, the new one is written at the clock edge; csrrs/csrrc with a zero
// mask do not write.
//
// This design's choices: the addresses (0x800, 0x801, 0x802), the reset values
// (SIMD_FMT = INT8, MPC_MACS = 1), SIMD_FMT ignoring writes of encodings
// that are not defined, and a write of SIMD_FMT or MPC_MACS clearing the
// controller's counters (mpc_clr_o). Addresses outside this set read 0 with
// csr_hit_o low; they belong to the base core.
module mpic_csr
  import mpic_pkg::*;
#(
  parameter int unsigned MACW = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            csr_en_i,
  input  csr_op_e         csr_op_i,
  input  logic [11:0]     csr_addr_i,
  input  logic [31:0]     csr_wdata_i,
  output logic [31:0]     csr_rdata_o,
  output logic            csr_hit_o,
  output logic [3:0]      fmt_o,
  output logic [MACW-1:0] macs_o,
  input  logic [2:0]      mpc_cnt_i,
  output logic            mpc_we_o,
  output logic [2:0]      mpc_wdata_o,
  output logic            mpc_clr_o
);
  logic [3:0]      fmt_q;
  logic [MACW-1:0] macs_q;
  logic [31:0]     old_val, new_val;
  logic            wr;

  always_comb begin
    csr_hit_o = 1'b1;
    unique case (csr_addr_i)
      CSR_SIMD_FMT: old_val = {28'd0, fmt_q};
      CSR_MPC_CNT:  old_val = {29'd0, mpc_cnt_i};
      CSR_MPC_MACS: old_val = 32'(macs_q);
      default: begin
        old_val   = '0;
        csr_hit_o = 1'b0;
      end
    endcase
    unique case (csr_op_i)
      CSR_RS:  new_val = old_val | csr_wdata_i;
      CSR_RC:  new_val = old_val & ~csr_wdata_i;
      default: new_val = csr_wdata_i;
    endcase
    wr = csr_en_i && csr_hit_o && ((csr_op_i == CSR_RW) || (csr_wdata_i != '0));
  end

  assign csr_rdata_o = csr_en_i ? old_val : '0;
  assign mpc_we_o    = wr && (csr_addr_i == CSR_MPC_CNT);
  assign mpc_wdata_o = new_val[2:0];
  assign mpc_clr_o   = wr && ((csr_addr_i == CSR_SIMD_FMT) || (csr_addr_i == CSR_MPC_MACS));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      fmt_q  <= FMT_INT8;
      macs_q <= MACW'(1);
    end else if (wr) begin
      if (csr_addr_i == CSR_SIMD_FMT && fmt_legal(new_val[3:0]) && new_val[31:4] == '0)
        fmt_q <= new_val[3:0];
      if (csr_addr_i == CSR_MPC_MACS)
        macs_q <= new_val[MACW-1:0];
    end
  end

  assign fmt_o  = fmt_q;
  assign macs_o = macs_q;

endmodule
