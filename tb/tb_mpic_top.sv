// tb_mpic_top: end-to-end test of the mixed-precision SIMD datapath.
//
// Drives instruction words through the fetch handshake, load data through
// the load-store write port and random stall requests, and compares every
// register write-back with an architectural model (register file, SIMD_FMT,
// sub-group and MAC counters) built on the integer reference functions.
//
// Phase 1 (directed) is the 8x2 inner loop of a matrix multiplication: four
// 8-bit activation words and one word of sixteen 2-bit weights, four
// pv.sdotsp using sub-groups 0..3, repeated; it also checks the issue rate
// (one instruction per cycle, i.e. 4 MACs per cycle at 8x2 and 16 per cycle
// in 2-bit mode) and the latency (write-back one cycle after issue).
// Phase 2 is a long random mix of all instructions, formats and operand
// modes, CSR accesses, illegal words, stalls and loads. Each mechanism of the
// design is counted, and one that never happened counts as a failure.
module tb_mpic_top;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic        instr_valid, instr_ready, stall, lsu_we, wb_we, illegal;
  logic [31:0] instr, lsu_wdata, wb_wdata;
  logic [4:0]  lsu_waddr, wb_waddr;
  logic [3:0]  simd_fmt, gate_en;
  logic [2:0]  mpc_cnt;
  int cycles = 0;

  mpic_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_i(instr), .instr_ready_o(instr_ready),
    .stall_i(stall),
    .lsu_we_i(lsu_we), .lsu_waddr_i(lsu_waddr), .lsu_wdata_i(lsu_wdata),
    .wb_we_o(wb_we), .wb_waddr_o(wb_waddr), .wb_wdata_o(wb_wdata),
    .illegal_o(illegal), .simd_fmt_o(simd_fmt), .mpc_cnt_o(mpc_cnt),
    .dotp_gate_en_o(gate_en)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ model
  logic [31:0] R [32];
  int m_fmt = 2, m_macs = 1, m_grp = 0, m_mac = 0;

  // instruction description, kept next to its encoding
  typedef struct {
    int kind;       // 0 SIMD (op 0..17), 1 CSR, 2 illegal
    int op;         // SIMD op index, or CSR op 1..3
    int mode;       // 0 vv, 1 sc, 2 sci ; CSR: 1 = zimm form
    int rd, rs1, rs2;
    int imm;
    int csr;
  } ins_t;

  // mechanism counters
  int n_stall, n_csr_hazard, n_fwd_ex, n_fwd_wb, n_port_a_wins, n_illegal;
  int n_grp_adv, n_grp_wrap, n_reuse, n_sw_grp, n_sc, n_sci, n_stalled_mac;
  int n_fmt[16];
  int n_aluop[12];
  int n_gate[4];

  function automatic logic [31:0] rep(logic [31:0] v, int w);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[i % w];
    return r;
  endfunction

  // Execute one instruction on the model; returns write flag and value.
  function automatic void execute(ins_t s, output bit we, output logic [31:0] val);
    int wa, wb, w;
    logic [31:0] a, b, c;
    we = 0; val = 0;
    wa = wa_of(m_fmt); wb = wb_of(m_fmt);
    if (s.kind == 0) begin
      a = R[s.rs1];
      c = R[s.rd];
      w = (s.op >= 12) ? wb : wa;
      b = (s.mode == 0) ? R[s.rs2] : (s.mode == 1) ? rep(R[s.rs2], w)
                                                   : rep(32'(signed'(6'(s.imm))), w);
      if (s.op == 11) b = 0;
      if (s.op < 12) val = alu(s.op, wa, a, b);
      else begin
        val = dotp(m_fmt, a, b, c, m_grp, (s.op - 12) % 3, s.op >= 15);
        if (wa != wb) begin
          if (m_mac + 1 >= ((m_macs == 0) ? 1 : m_macs)) begin
            m_mac = 0;
            if ((m_grp % (wa / wb)) + 1 == wa / wb) begin m_grp = 0; n_grp_wrap++; end
            else m_grp = (m_grp % (wa / wb)) + 1;
            n_grp_adv++;
          end else begin
            m_mac++;
            n_reuse++;
          end
        end
        n_fmt[m_fmt]++;
      end
      we = (s.rd != 0);
    end else if (s.kind == 1) begin
      logic [31:0] old, src, nv;
      bit wr;
      src = s.mode ? 32'(s.imm) : R[s.rs1];
      case (s.csr)
        'h800: old = m_fmt;
        'h801: old = m_grp;
        'h802: old = m_macs;
        default: old = 0;
      endcase
      nv = (s.op == 2) ? (old | src) : (s.op == 3) ? (old & ~src) : src;
      wr = (s.csr inside {'h800, 'h801, 'h802}) && (s.op == 1 || src != 0);
      if (wr) begin
        if (s.csr == 'h800) begin
          if (nv < 16 && wa_of(int'(nv)) != 0) m_fmt = int'(nv);
          m_grp = 0; m_mac = 0;
        end
        if (s.csr == 'h801) begin m_grp = int'(nv & 7); m_mac = 0; n_sw_grp++; end
        if (s.csr == 'h802) begin m_macs = int'(nv & 255); m_grp = 0; m_mac = 0; end
      end
      val = old;
      we = (s.rd != 0) && (s.csr inside {'h800, 'h801, 'h802});
    end
  endfunction

  function automatic logic [31:0] encode(ins_t s);
    logic [31:0] w;
    if (s.kind == 0) return enc_pv(f6_of(s.op), s.mode, s.rd, s.rs1, s.mode == 2 ? s.imm : s.rs2);
    if (s.kind == 1) return enc_csr(s.op, s.mode, s.rd, s.mode ? s.imm : s.rs1, 12'(s.csr));
    w = $urandom; w[6:0] = 7'b0110011;   // a base-ISA word (OP)
    return w;
  endfunction

  // ------------------------------------------------------------ driver/check
  bit          pend = 0;       // instruction issued last cycle
  bit          pend_we;
  logic [31:0] pend_val;
  int          pend_rd;
  int          last_rd = -1;   // destination written by EX this cycle

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL cycle %0d %s got=%h exp=%h", cycles, what, got, exp);
    end
  endtask

  // One clock cycle: offer s (if valid) with the given stall / load, check
  // the EX write-back of the previous issue, update the model.
  // Returns 1 if s was issued.
  int used_grp = -1;            // sub-group used by the last issued MAC
  bit accepted;                 // handshake of the last cycle completed

  task automatic cycle(bit valid, ins_t s, bit st, bit lwe, int lrd, logic [31:0] ld,
                       output bit taken, input logic [31:0] word = 0, input bit have_word = 0);
    bit we; logic [31:0] val;
    @(negedge clk);
    instr_valid = valid; instr = have_word ? word : encode(s); stall = st;
    lsu_we = lwe; lsu_waddr = 5'(lrd); lsu_wdata = ld;
    #1;
    // write-back of the instruction issued in the previous cycle
    chk(wb_we, pend && pend_we, "wb_we");
    if (pend && pend_we) begin
      chk(wb_waddr, pend_rd, "wb_waddr");
      chk(wb_wdata, pend_val, "wb_wdata");
    end
    // the model: load data, then the EX result (port A wins), then issue
    if (lwe && lrd != 0) R[lrd] = ld;
    if (pend && pend_we) begin
      if (lwe && lrd == pend_rd) n_port_a_wins++;
      R[pend_rd] = pend_val;
    end
    last_rd = (pend && pend_we) ? pend_rd : -1;
    taken = valid && instr_ready && (s.kind != 2);
    accepted = valid && instr_ready;
    chk(illegal, valid && s.kind == 2, "illegal flag");
    if (valid && s.kind == 2) n_illegal++;
    if (valid && st) begin
      n_stall++;
      if (s.kind == 0 && s.op >= 12) n_stalled_mac++;
    end
    if (valid && !st && !instr_ready) n_csr_hazard++;
    chk(instr_ready, !st && !(pend && s.kind >= 0 && pend_csr), "ready");
    for (int u = 0; u < 4; u++) if (gate_en[u]) n_gate[u]++;
    if (taken) begin
      if (s.kind == 0) begin
        bit uses2, uses3;
        uses2 = (s.mode != 2) && s.op != 11;
        uses3 = s.op >= 15;
        if (last_rd > 0 && (s.rs1 == last_rd || (uses2 && s.rs2 == last_rd) || (uses3 && s.rd == last_rd))) n_fwd_ex++;
        if (lwe && lrd != 0 && lrd != last_rd && (s.rs1 == lrd || (uses2 && s.rs2 == lrd) || (uses3 && s.rd == lrd))) n_fwd_wb++;
        if (s.mode == 1) n_sc++;
        if (s.mode == 2) n_sci++;
        if (s.op < 12) n_aluop[s.op]++;
        // gate enable of the unit of operand A's size
        if (s.op >= 12) begin
          int wa, u;
          wa = wa_of(m_fmt);
          // the sub-group the slicer will use is the model's
          if (wa != wb_of(m_fmt)) begin
            chk(mpc_cnt % (wa / wb_of(m_fmt)), m_grp % (wa / wb_of(m_fmt)), "sub-group in ID");
            used_grp = m_grp % (wa / wb_of(m_fmt));
          end
          u = (wa == 16) ? 0 : (wa == 8) ? 1 : (wa == 4) ? 2 : 3;
          chk(gate_en, 4'b1 << u, "dot-product gate enable");
        end
      end
      execute(s, we, val);
      pend = 1; pend_we = we; pend_val = val; pend_rd = s.rd;
      pend_csr = (s.kind == 1);
    end else begin
      pend = 0;
      pend_csr = 0;
    end
  endtask
  bit pend_csr = 0;

  function automatic ins_t simd(int op, int mode, int rd, int rs1, int rs2, int imm = 0);
    ins_t s;
    s.kind = 0; s.op = op; s.mode = mode; s.rd = rd; s.rs1 = rs1; s.rs2 = rs2; s.imm = imm; s.csr = 0;
    return s;
  endfunction

  function automatic ins_t csrw(int addr, int zimm, int rd = 0);
    ins_t s;
    s.kind = 1; s.op = 1; s.mode = 1; s.rd = rd; s.rs1 = 0; s.rs2 = 0; s.imm = zimm; s.csr = addr;
    return s;
  endfunction

  task automatic run_until_taken(ins_t s, bit st_rand = 0);
    bit taken;
    logic [31:0] w;
    w = encode(s);
    do cycle(1, s, st_rand ? ($urandom_range(0, 4) == 0) : 0, 0, 0, 0, taken, w, 1);
    while (!taken);
  endtask

  task automatic load(int rd, logic [31:0] v);
    bit taken;
    ins_t none;
    none = simd(0, 0, 0, 0, 0);
    cycle(0, none, 0, 1, rd, v, taken);
  endtask

  initial begin
    ins_t none;
    bit taken;
    int t0, issued;
    for (int i = 0; i < 32; i++) R[i] = 0;
    instr_valid = 0; instr = 0; stall = 0; lsu_we = 0; lsu_waddr = 0; lsu_wdata = 0;
    none = simd(0, 0, 0, 0, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(simd_fmt, 2, "reset format INT8");

    // ---- phase 1: 8x2 kernel (four activation words, one weight word) ----
    run_until_taken(csrw('h800, 10));                  // SIMD_FMT = MIX 8x2
    run_until_taken(csrw('h802, 1));                   // one MAC per sub-group
    load(15, 0);
    for (int it = 0; it < 4; it++) begin
      load(5, $urandom); load(6, $urandom); load(7, $urandom); load(8, $urandom);
      load(9, $urandom);                                 // 16 x 2-bit weights
      t0 = cycles; issued = 0;
      for (int k = 0; k < 4; k++) begin
        cycle(1, simd(17, 0, 15, 5 + k, 9), 0, 0, 0, 0, taken);
        chk(used_grp, k, "8x2 sub-group follows the kernel");
        issued += taken;
      end
      cycle(0, none, 0, 0, 0, 0, taken);                 // drain: last write-back
      chk(issued, 4, "4 sdotsp issued back to back");
      chk(cycles - t0, 5, "4 MAC instructions in 4 cycles + 1 cycle latency");
    end
    // 2-bit uniform: 16 MACs per instruction, one instruction per cycle
    run_until_taken(csrw('h800, 5));
    load(20, $urandom); load(21, $urandom); load(22, 0);
    t0 = cycles;
    for (int k = 0; k < 8; k++) cycle(1, simd(17, 0, 22, 20, 21), 0, 0, 0, 0, taken);
    cycle(0, none, 0, 0, 0, 0, taken);
    chk(cycles - t0, 9, "8 INT2 sdotsp (128 MACs) in 8 cycles + latency");

    // 4x2 kernel with data reuse: 8 MACs per sub-group
    run_until_taken(csrw('h800, 11));
    run_until_taken(csrw('h802, 8));
    for (int g = 0; g < 2; g++)
      for (int k = 0; k < 8; k++) begin
        run_until_taken(simd(17, 0, 16 + k % 4, 1 + k % 3, 9));
        chk(used_grp, g, "4x2 sub-group held for 8 MACs");
      end
    // manual selection of a sub-group
    run_until_taken(csrw('h800, 8));                   // MIX 16x2: 8 groups
    run_until_taken(csrw('h801, 5));
    cycle(0, none, 0, 0, 0, 0, taken);                 // the CSR write is in EX
    cycle(0, none, 0, 0, 0, 0, taken);
    chk(mpc_cnt, 5, "software-written sub-group");

    // ---- phase 2: random ----
    for (int t = 0; t < 30000; t++) begin
      ins_t s;
      int r;
      r = $urandom_range(0, 99);
      if (r < 55) begin
        int op, mode;
        op = (r < 35) ? $urandom_range(12, 17) : $urandom_range(0, 11);
        mode = (op == 11) ? 0 : $urandom_range(0, 2);
        s = simd(op, mode, $urandom_range(0, 12), $urandom_range(0, 12), $urandom_range(0, 12),
                 $urandom_range(0, 63));
      end else if (r < 64) begin
        int fmts[10] = '{1, 2, 4, 5, 6, 7, 8, 9, 10, 11};
        s = csrw('h800, ($urandom_range(0, 9) == 0) ? $urandom_range(0, 15) : fmts[$urandom_range(0, 9)],
                 $urandom_range(0, 3));
        if ($urandom_range(0, 3) == 0) begin s.csr = 'h802; s.imm = $urandom_range(0, 4); end
        if ($urandom_range(0, 3) == 0) begin s.csr = 'h801; s.imm = $urandom_range(0, 7); end
        if ($urandom_range(0, 5) == 0) begin s.mode = 0; s.rs1 = $urandom_range(0, 3); s.op = $urandom_range(1, 3); end
        if ($urandom_range(0, 9) == 0) s.csr = 'h300;
      end else if (r < 67) begin
        s = simd(0, 0, 0, 0, 0); s.kind = 2;
      end else begin
        s = simd(0, 0, 0, 0, 0);
      end
      begin
        bit v, st, lwe;
        logic [31:0] w;
        w   = encode(s);
        v   = (r < 67);
        st  = ($urandom_range(0, 9) == 0);
        lwe = ($urandom_range(0, 2) == 0);
        do begin
          cycle(v, s, st, lwe, $urandom_range(0, 12), $urandom, taken, w, 1);
          st = ($urandom_range(0, 9) == 0);
          lwe = ($urandom_range(0, 2) == 0);
        end while (v && !accepted);
      end
    end
    cycle(0, none, 0, 0, 0, 0, taken);

    // ---- coverage of the mechanisms ----
    begin
      int cov[string];
      cov["stall request"] = n_stall;
      cov["CSR hazard stall"] = n_csr_hazard;
      cov["stalled MAC not counted"] = n_stalled_mac;
      cov["EX forwarding"] = n_fwd_ex;
      cov["load (WB) forwarding"] = n_fwd_wb;
      cov["port A wins a double write"] = n_port_a_wins;
      cov["illegal word bubble"] = n_illegal;
      cov["sub-group advance"] = n_grp_adv;
      cov["sub-group wrap"] = n_grp_wrap;
      cov["sub-group reuse (MACs per group > 1)"] = n_reuse;
      cov["software sub-group write"] = n_sw_grp;
      cov[".sc operand"] = n_sc;
      cov[".sci operand"] = n_sci;
      for (int u = 0; u < 4; u++) cov[$sformatf("DOTP unit %0d clock enable", u)] = n_gate[u];
      foreach (n_aluop[i]) cov[$sformatf("ALU op %0d", i)] = n_aluop[i];
      foreach (n_fmt[f]) if (wa_of(f) != 0) cov[$sformatf("dot product in format %0d", f)] = n_fmt[f];
      foreach (cov[k]) begin
        $display("  %-40s %0d", k, cov[k]);
        checks++;
        if (cov[k] == 0) begin failures++; $display("FAIL mechanism never exercised: %s", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
