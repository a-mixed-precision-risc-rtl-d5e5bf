// tb_mpic_csr: checks the status registers of the extension.
//
// Random csrrw/csrrs/csrrc accesses to SIMD_FMT, MPC_CNT, MPC_MACS and to
// foreign addresses, against a model: read data is the old value, SIMD_FMT
// keeps its value on undefined encodings, writes of SIMD_FMT/MPC_MACS raise
// the controller clear, writes of MPC_CNT drive the controller's load port,
// csrrs/csrrc with a zero mask write nothing. MPC_CNT is modelled here by a
// small register driven from the load port, as the controller would do.
module tb_mpic_csr;
  import mpic_pkg::*;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en, hit, mwe, mclr;
  csr_op_e op;
  logic [11:0] addr;
  logic [31:0] wdata, rdata;
  logic [3:0] fmt;
  logic [7:0] macs;
  logic [2:0] mcnt, mwdata;
  int cycles = 0;

  mpic_csr dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_en_i(en), .csr_op_i(op), .csr_addr_i(addr),
    .csr_wdata_i(wdata), .csr_rdata_o(rdata), .csr_hit_o(hit), .fmt_o(fmt),
    .macs_o(macs), .mpc_cnt_i(mcnt), .mpc_we_o(mwe), .mpc_wdata_o(mwdata), .mpc_clr_o(mclr)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) mcnt <= '0; else if (mwe) mcnt <= mwdata;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h (addr=%h op=%0d wdata=%h)", what, got, exp, addr, op, wdata);
    end
  endtask

  initial begin
    logic [31:0] m_fmt = 2, m_macs = 1, m_cnt = 0, old, nv;
    logic [11:0] addrs[4] = '{12'h800, 12'h801, 12'h802, 12'h300};
    bit w;
    en = 0; op = CSR_RW; addr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(fmt, 2, "reset SIMD_FMT is INT8");
    chk(macs, 1, "reset MPC_MACS");
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      en = $urandom_range(0, 4) != 0;
      op = csr_op_e'($urandom_range(0, 2));
      addr = addrs[$urandom_range(0, 3)];
      case ($urandom_range(0, 3))
        0: wdata = 0;
        1: wdata = $urandom_range(0, 15);
        2: wdata = $urandom_range(0, 7);
        default: wdata = $urandom;
      endcase
      #1;
      case (addr)
        12'h800: old = m_fmt;
        12'h801: old = m_cnt;
        12'h802: old = m_macs;
        default: old = 0;
      endcase
      nv = (op == CSR_RS) ? (old | wdata) : (op == CSR_RC) ? (old & ~wdata) : wdata;
      w  = en && addr != 12'h300 && (op == CSR_RW || wdata != 0);
      chk(rdata, en ? old : 0, "read data");
      chk(hit, addr != 12'h300, "hit");
      chk(mclr, w && (addr == 12'h800 || addr == 12'h802), "controller clear");
      chk(mwe, w && addr == 12'h801, "sub-group write");
      if (w && addr == 12'h801) chk(mwdata, nv[2:0], "sub-group data");
      if (w && addr == 12'h800 && nv < 16 && wa_of(int'(nv)) != 0) m_fmt = nv;
      if (w && addr == 12'h802) m_macs = nv & 32'hFF;
      if (w && addr == 12'h801) m_cnt = nv & 7;
      @(posedge clk); #1;
      chk(fmt, m_fmt, "SIMD_FMT");
      chk(macs, m_macs, "MPC_MACS");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
