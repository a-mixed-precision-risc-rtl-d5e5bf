// tb_mpic_qnn_layer: runs a complete quantized convolution layer.
//
// The layer: input 16x16x32, 64 filters of 3x3x32, stride 1 and zero padding
// of 1 (stride and padding are this testbench's choice), output 16x16x64 as
// 32-bit sums. The testbench does the im2col step itself: for each pair of
// horizontally adjacent output pixels it builds the two input columns of
// K = 3*3*32 = 288 elements. The datapath runs the matrix multiplication in
// 4x2 blocks (4 output channels x 2 pixels): per step it loads the packed
// words it needs and issues eight pv.sdotsp, one per accumulator. All nine
// weight/activation precisions are run: w8a8, w4a4, w2a2, w4a8, w2a8, w2a4,
// w8a4, w8a2, w4a2. The tensor with the smaller elements goes to operand B;
// in a mixed format one B word serves wa/wb steps, the controller is
// programmed for 8 MACs per sub-group and moves on by itself, so no unpacking
// code is issued. Each load takes one issue slot on the load write port
// (post-increment load; memory latency not modelled).
//
// Checked: all 16x16x64 outputs of every precision against an integer
// reference convolution, and the cycle count of every block against its
// number of slots (one per cycle, no stall). The MACs per cycle of the
// matrix multiplication are printed per precision. NBLK_MAX limits the
// number of 4x2 blocks per precision (2048 is the whole layer).
module tb_mpic_qnn_layer;
  import mpic_ref_pkg::*;

  localparam int H = 16, WD = 16, C = 32, F = 64;
  localparam int K = 3 * 3 * C;
  localparam int NBLK_MAX = 2048;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic        instr_valid, instr_ready, lsu_we, wb_we, illegal;
  logic [31:0] instr, lsu_wdata, wb_wdata;
  logic [4:0]  lsu_waddr, wb_waddr;
  logic [3:0]  simd_fmt, gate_en;
  logic [2:0]  mpc_cnt;
  int cycles = 0;

  mpic_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_i(instr), .instr_ready_o(instr_ready),
    .stall_i(1'b0),
    .lsu_we_i(lsu_we), .lsu_waddr_i(lsu_waddr), .lsu_wdata_i(lsu_wdata),
    .wb_we_o(wb_we), .wb_waddr_o(wb_waddr), .wb_wdata_o(wb_wdata),
    .illegal_o(illegal), .simd_fmt_o(simd_fmt), .mpc_cnt_o(mpc_cnt),
    .dotp_gate_en_o(gate_en)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic [31:0] last_wb [32];
  always @(posedge clk) if (wb_we) last_wb[wb_waddr] <= wb_wdata;

  initial begin
    wait (cycles == 40000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // one issue slot: an instruction, held until accepted
  task automatic issue(logic [31:0] w);
    @(negedge clk);
    instr_valid = 1; instr = w; lsu_we = 0;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk) instr_valid = 0;
  endtask

  // one load slot
  task automatic ld(int rd, logic [31:0] v);
    @(negedge clk);
    instr_valid = 0; lsu_we = 1; lsu_waddr = 5'(rd); lsu_wdata = v;
    @(posedge clk);
    @(negedge clk) lsu_we = 0;
  endtask

  // streaming version of issue/ld: called at a negedge, leaves at the next
  task automatic slot_instr(logic [31:0] w);
    instr_valid = 1; instr = w; lsu_we = 0;
    @(negedge clk);
    instr_valid = 0;
  endtask
  task automatic slot_load(int rd, logic [31:0] v);
    instr_valid = 0; lsu_we = 1; lsu_waddr = 5'(rd); lsu_wdata = v;
    @(negedge clk);
    lsu_we = 0;
  endtask

  function automatic int fmt_code(int wa, int wb);
    if (wa == wb) return (wa == 16) ? 1 : (wa == 8) ? 2 : (wa == 4) ? 4 : 5;
    if (wa == 16) return (wb == 8) ? 6 : (wb == 4) ? 7 : 8;
    if (wa == 8)  return (wb == 4) ? 9 : 10;
    return 11;
  endfunction

  // random signed element of width w, and packing
  function automatic int rnd_elem(int w);
    return $urandom_range(0, (1 << w) - 1) - (1 << (w - 1));
  endfunction
  function automatic logic [31:0] pack(int v[], int base, int w);
    logic [31:0] r;
    r = '0;
    for (int i = 0; i < 32 / w; i++) begin
      logic [31:0] e;
      e = 32'(v[base + i]);
      for (int j = 0; j < w; j++) r[i*w + j] = e[j];
    end
    return r;
  endfunction

  // one 4x2 block: acc[q][p] = sum_k act[p][k] * wgt[q][k]; returns cycles
  task automatic run_block(int act[2][K], int wgt[4][K], int wa, int wb, bit act_in_a,
                           int wbits, int abits, output int blk_cycles);
    int nA, nB, G, t0, nslots;
    longint expv [4][2];
    nA = 32 / wa; nB = 32 / wb; G = wa / wb;
    for (int q = 0; q < 4; q++)
      for (int p = 0; p < 2; p++) begin
        expv[q][p] = 0;
        for (int k = 0; k < K; k++) expv[q][p] += longint'(act[p][k]) * wgt[q][k];
      end
    // accumulators x16..x23 = 0 (not counted: a real kernel zeroes or
    // preloads the bias outside the inner loop)
    for (int r = 16; r < 24; r++) ld(r, 0);
    // A registers: x1.. ; B registers: x8..
    @(negedge clk);
    t0 = cycles; nslots = 0;
    for (int kb = 0; kb < K / nB; kb++) begin
      for (int j = 0; j < (act_in_a ? 4 : 2); j++) begin
        slot_load(8 + j, act_in_a ? pack(wgt[j], kb*nB, wb) : pack(act[j], kb*nB, wb));
        nslots++;
      end
      for (int g = 0; g < G; g++) begin
        int base;
        base = kb*nB + g*nA;
        for (int j = 0; j < (act_in_a ? 2 : 4); j++) begin
          slot_load(1 + j, act_in_a ? pack(act[j], base, wa) : pack(wgt[j], base, wa));
          nslots++;
        end
        for (int q = 0; q < 4; q++)
          for (int p = 0; p < 2; p++) begin
            int ra, rb;
            ra = act_in_a ? 1 + p : 1 + q;
            rb = act_in_a ? 8 + q : 8 + p;
            slot_instr(enc_pv(f6_of(17), 0, 16 + q*2 + p, ra, rb));
            nslots++;
          end
      end
    end
    @(negedge clk);                       // last write-back
    blk_cycles = cycles - t0 - 1;
    chk(blk_cycles, nslots, "block cycles = issue slots");
    for (int q = 0; q < 4; q++)
      for (int p = 0; p < 2; p++)
        chk(last_wb[16 + q*2 + p], longint'(expv[q][p][31:0]),
            $sformatf("w%0da%0d output", wbits, abits));
  endtask

  int X [H][WD][C];
  int Wt [F][K];

  initial begin
    int cfg_w[9] = '{8, 4, 2, 4, 2, 2, 8, 8, 4};
    int cfg_a[9] = '{8, 4, 2, 8, 8, 4, 4, 2, 2};
    instr_valid = 0; instr = 0; lsu_we = 0; lsu_waddr = 0; lsu_wdata = 0;
    for (int i = 0; i < 32; i++) last_wb[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    for (int c = 0; c < 9; c++) begin
      int wbits, abits, wa, wb, f, nblk;
      bit act_in_a;
      longint mac_cycles;
      wbits = cfg_w[c]; abits = cfg_a[c];
      // larger elements go to A; with equal sizes activations go to A
      act_in_a = (abits >= wbits);
      wa = act_in_a ? abits : wbits;
      wb = act_in_a ? wbits : abits;
      f = fmt_code(wa, wb);
      // layer data, signed as for pv.sdotsp
      foreach (X[y, x, ch]) X[y][x][ch] = rnd_elem(abits);
      foreach (Wt[o, k]) Wt[o][k] = rnd_elem(wbits);
      issue(enc_csr(1, 1, 0, f, 12'h800));      // SIMD_FMT
      issue(enc_csr(1, 1, 0, 8, 12'h802));      // 8 MACs per sub-group
      mac_cycles = 0; nblk = 0;
      for (int y = 0; y < H; y++)
        for (int x0 = 0; x0 < WD; x0 += 2) begin
          int cols [2][K];
          // im2col: k = (ky*3 + kx)*C + ch, zero outside the input
          for (int p = 0; p < 2; p++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                for (int ch = 0; ch < C; ch++) begin
                  int yy, xx;
                  yy = y + ky - 1; xx = x0 + p + kx - 1;
                  cols[p][(ky*3 + kx)*C + ch] =
                    (yy < 0 || yy >= H || xx < 0 || xx >= WD) ? 0 : X[yy][xx][ch];
                end
          for (int fg = 0; fg < F / 4; fg++) begin
            int wrows [4][K];
            int bc;
            if (nblk >= NBLK_MAX) continue;
            for (int q = 0; q < 4; q++) wrows[q] = Wt[fg*4 + q];
            run_block(cols, wrows, wa, wb, act_in_a, wbits, abits, bc);
            mac_cycles += bc;
            nblk++;
          end
        end
      $display("  w%0da%0d  format %0d  %0d blocks, %0d MACs in %0d cycles: %0d.%02d MAC/cycle",
               wbits, abits, f, nblk, nblk*8*K, mac_cycles, (nblk*8*K) / mac_cycles,
               ((longint'(nblk)*800*K) / mac_cycles) % 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
