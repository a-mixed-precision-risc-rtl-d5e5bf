// mpic_top: decode and execute stages of the mixed-precision SIMD datapath.
//
// The design runs the virtual SIMD instructions and the accesses to the
// precision status registers, one instruction per cycle, in two stages:
//
//   ID  The decoder turns the instruction word into control signals that say
//       nothing about precision. The register file is read on three ports
//       (rs1, rs2, and rD as accumulator); each operand goes through a
//       forwarding multiplexer choosing the register file (RF), the result
//       being written by EX in this cycle (EX), the load data being written
//       by the load-store unit in this cycle (WB) or the immediate (IM). For
//       .sc/.sci forms the low element of operand B is replicated at the lane
//       width given by SIMD_FMT. The mixed-precision controller (MPC) sees the
//       dot product being issued and advances its sub-group counter.
//   EX  SIMD ALU, extended dot-product unit and CSR access; the result goes to
//       write port A of the register file at the end of the cycle.
//
// The ID/EX registers of the ALU and of the dot-product unit are loaded only
// for an instruction of that unit (operand isolation); the dot-product unit
// keeps one gated register set per lane width.
//
// Interface: instr_valid_i/instr_ready_o is the handshake with the fetch side
// (the word must stay stable while valid and not ready; an assertion checks
// this outside reset, and because it samples rst_ni on the clock, Verilator
// reports rst_ni as used both synchronously and asynchronously, which is
// harmless here). stall_i is the stall
// request of the surrounding pipeline controller. lsu_* is the load data write
// port. wb_* shows the write of the EX result. illegal_o flags a word in ID
// that this datapath does not execute (it is consumed as a bubble; in a full
// core it belongs to the base decoder).
//
// Stalls: the ID stage holds its instruction while stall_i is high, and for
// one cycle after a CSR instruction was issued (while it is in EX), so that no
// dot product is decoded with a SIMD_FMT or sub-group about to change. The
// latter rule, the forwarding paths and the port split to the surrounding
// core are this design's choices; the stages, units and register files follow
// the paper's pipeline diagram.
module mpic_top
  import mpic_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        instr_valid_i,
  input  logic [31:0] instr_i,
  output logic        instr_ready_o,
  input  logic        stall_i,
  input  logic        lsu_we_i,
  input  logic [4:0]  lsu_waddr_i,
  input  logic [31:0] lsu_wdata_i,
  output logic        wb_we_o,
  output logic [4:0]  wb_waddr_o,
  output logic [31:0] wb_wdata_o,
  output logic        illegal_o,
  output logic [3:0]  simd_fmt_o,
  output logic [2:0]  mpc_cnt_o,
  output logic [3:0]  dotp_gate_en_o
);
  localparam int unsigned MACW = 8;

  // ---------------------------------------------------------------- ID stage
  dec_t dec;
  logic illegal;
  mpic_decoder u_decoder (.instr_i(instr_i), .dec_o(dec), .illegal_o(illegal));

  logic        ex_valid_q, ex_csr_q, ex_dotp_q, ex_we_q;
  logic [4:0]  ex_rd_q;
  logic [31:0] ex_result;

  logic csr_hazard, issue;
  assign csr_hazard    = ex_valid_q && ex_csr_q;
  assign instr_ready_o = !stall_i && !csr_hazard;
  assign issue         = instr_valid_i && instr_ready_o && !illegal;
  assign illegal_o     = instr_valid_i && illegal;

  logic [31:0] rf_a, rf_b, rf_c;
  mpic_gpr #(.NREGS(32)) u_gpr (
    .clk_i, .rst_ni,
    .raddr_a_i(dec.rs1), .raddr_b_i(dec.rs2), .raddr_c_i(dec.rd),
    .rdata_a_o(rf_a), .rdata_b_o(rf_b), .rdata_c_o(rf_c),
    .we_a_i(wb_we_o), .waddr_a_i(wb_waddr_o), .wdata_a_i(wb_wdata_o),
    .we_b_i(lsu_we_i), .waddr_b_i(lsu_waddr_i), .wdata_b_i(lsu_wdata_i)
  );

  // Forwarding multiplexer: EX result first (younger), then load data.
  function automatic logic [31:0] fwd(logic [4:0] addr, logic [31:0] rf,
                                      logic ex_we, logic [4:0] ex_rd, logic [31:0] ex_d,
                                      logic l_we, logic [4:0] l_rd, logic [31:0] l_d);
    if (addr == 5'd0)                return 32'd0;
    else if (ex_we && ex_rd == addr) return ex_d;
    else if (l_we && l_rd == addr)   return l_d;
    else                             return rf;
  endfunction

  // Replicate the lowest element of width sz over 32 bits.
  function automatic logic [31:0] replicate(logic [31:0] v, lane_sz_e sz);
    unique case (sz)
      SZ16:    return {2{v[15:0]}};
      SZ8:     return {4{v[7:0]}};
      SZ4:     return {8{v[3:0]}};
      default: return {16{v[1:0]}};
    endcase
  endfunction

  logic [3:0]      fmt;
  logic [MACW-1:0] macs;
  logic [2:0]      mpc_cnt;
  lane_sz_e        size_a, size_b, rep_size;
  logic [31:0]     op_a, op_b_reg, op_b, op_c;

  always_comb begin
    size_a   = fmt_size_a(fmt);
    size_b   = fmt_size_b(fmt);
    rep_size = dec.dotp_en ? size_b : size_a;
    op_a     = fwd(dec.rs1, rf_a, wb_we_o, wb_waddr_o, wb_wdata_o, lsu_we_i, lsu_waddr_i, lsu_wdata_i);
    op_b_reg = fwd(dec.rs2, rf_b, wb_we_o, wb_waddr_o, wb_wdata_o, lsu_we_i, lsu_waddr_i, lsu_wdata_i);
    op_c     = fwd(dec.rd,  rf_c, wb_we_o, wb_waddr_o, wb_wdata_o, lsu_we_i, lsu_waddr_i, lsu_wdata_i);
    unique case (dec.opb_mode)
      OPB_SC:  op_b = replicate(op_b_reg, rep_size);
      OPB_SCI: op_b = replicate(dec.imm, rep_size);
      default: op_b = op_b_reg;
    endcase
  end

  // Mixed-precision controller and status registers.
  logic        csr_en;
  logic [31:0] csr_rdata;
  logic        csr_hit, mpc_we, mpc_clr;
  logic [2:0]  mpc_wdata;

  mpic_mpc #(.MACW(MACW)) u_mpc (
    .clk_i, .rst_ni,
    .id_decoding_i(issue), .is_mac_i(dec.dotp_en), .fmt_i(fmt), .macs_i(macs),
    .cnt_we_i(mpc_we), .cnt_wdata_i(mpc_wdata), .clr_i(mpc_clr),
    .cnt_o(mpc_cnt), .mac_cnt_o()
  );

  // ------------------------------------------------------------ ID/EX regs
  (* fsm_encoding = "none" *) alu_op_e  alu_op_q;
  (* fsm_encoding = "none" *) lane_sz_e alu_size_q;
  logic [31:0] alu_a_q, alu_b_q;
  csr_op_e     csr_op_q;
  logic [11:0] csr_addr_q;
  logic [31:0] csr_wdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_valid_q <= 1'b0;
      ex_csr_q   <= 1'b0;
      ex_dotp_q  <= 1'b0;
      ex_we_q    <= 1'b0;
      ex_rd_q    <= '0;
    end else begin
      ex_valid_q <= issue;
      if (issue) begin
        ex_csr_q  <= dec.csr_en;
        ex_dotp_q <= dec.dotp_en;
        ex_we_q   <= dec.rd_we;
        ex_rd_q   <= dec.rd;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      alu_op_q   <= ALU_ADD;
      alu_size_q <= SZ8;
      alu_a_q    <= '0;
      alu_b_q    <= '0;
    end else if (issue && dec.alu_en) begin
      alu_op_q   <= dec.alu_op;
      alu_size_q <= size_a;
      alu_a_q    <= op_a;
      alu_b_q    <= op_b;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      csr_op_q    <= CSR_RW;
      csr_addr_q  <= '0;
      csr_wdata_q <= '0;
    end else if (issue && dec.csr_en) begin
      csr_op_q    <= dec.csr_op;
      csr_addr_q  <= dec.csr_addr;
      csr_wdata_q <= dec.csr_use_imm ? dec.imm : op_a;
    end
  end

  // ---------------------------------------------------------------- EX stage
  logic [31:0] alu_res, dotp_res;

  mpic_simd_alu u_alu (
    .op_a_i(alu_a_q), .op_b_i(alu_b_q), .op_i(alu_op_q), .size_i(alu_size_q),
    .result_o(alu_res)
  );

  mpic_dotp_unit u_dotp (
    .clk_i, .rst_ni,
    .en_i(issue && dec.dotp_en), .fmt_i(fmt), .mpc_cnt_i(mpc_cnt),
    .sign_i(dec.dotp_sign), .acc_i(dec.dotp_acc),
    .op_a_i(op_a), .op_b_i(op_b), .op_c_i(op_c),
    .gate_en_o(dotp_gate_en_o), .result_o(dotp_res)
  );

  assign csr_en = ex_valid_q && ex_csr_q;
  mpic_csr #(.MACW(MACW)) u_csr (
    .clk_i, .rst_ni,
    .csr_en_i(csr_en), .csr_op_i(csr_op_q), .csr_addr_i(csr_addr_q),
    .csr_wdata_i(csr_wdata_q), .csr_rdata_o(csr_rdata), .csr_hit_o(csr_hit),
    .fmt_o(fmt), .macs_o(macs), .mpc_cnt_i(mpc_cnt),
    .mpc_we_o(mpc_we), .mpc_wdata_o(mpc_wdata), .mpc_clr_o(mpc_clr)
  );

  // Result multiplexer towards write port A.
  always_comb begin
    if (ex_csr_q)       ex_result = csr_rdata;
    else if (ex_dotp_q) ex_result = dotp_res;
    else                ex_result = alu_res;
  end

  // A CSR address outside this extension is left to the base core: no write.
  assign wb_we_o    = ex_valid_q && ex_we_q && !(ex_csr_q && !csr_hit);
  assign wb_waddr_o = ex_rd_q;
  assign wb_wdata_o = ex_result;
  assign simd_fmt_o = fmt;
  assign mpc_cnt_o  = mpc_cnt;

  // Fetch handshake: a word offered and not taken stays unchanged.
  a_instr_stable: assert property (@(posedge clk_i)
    (rst_ni && instr_valid_i && !instr_ready_o) |=> (instr_valid_i && $stable(instr_i)));

endmodule
