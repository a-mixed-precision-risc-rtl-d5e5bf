// tb_mpic_slicer_router: checks sub-group selection and widening of operand B.
//
// For every defined format, every sub-group index 0..7 and both signedness
// settings, the routed operand of the unit of operand A's size must hold the
// selected group of B elements, each extended to A's width; the outputs of
// the other units (and all outputs in uniform formats) must pass their input
// through. Expected words are built element by element from the reference.
module tb_mpic_slicer_router;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] bi [4];
  logic [31:0] bo [4];
  logic [3:0]  fmt;
  logic [2:0]  cnt;
  logic        sgn;

  mpic_slicer_router dut (
    .b16_i(bi[0]), .b8_i(bi[1]), .b4_i(bi[2]), .b2_i(bi[3]),
    .fmt_i(fmt), .mpc_cnt_i(cnt), .b_signed_i(sgn),
    .b16_o(bo[0]), .b8_o(bo[1]), .b4_o(bo[2]), .b2_o(bo[3])
  );

  function automatic int unit_of(int w);
    return (w == 16) ? 0 : (w == 8) ? 1 : (w == 4) ? 2 : 3;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fmts[10] = '{1, 2, 4, 5, 6, 7, 8, 9, 10, 11};
    for (int rep = 0; rep < 40; rep++) begin
      foreach (fmts[fi]) begin
        for (int k = 0; k < 8; k++) begin
          int wa, wb, n, g, u;
          logic [31:0] exp;
          for (int q = 0; q < 4; q++) bi[q] = $urandom;
          fmt = 4'(fmts[fi]); cnt = 3'(k); sgn = rep[0];
          #1;
          wa = wa_of(fmts[fi]); wb = wb_of(fmts[fi]);
          n = 32 / wa; g = k % (wa / wb); u = unit_of(wa);
          for (int q = 0; q < 4; q++) begin
            if (q == u && wa != wb) begin
              exp = '0;
              for (int i = 0; i < n; i++) begin
                longint e;
                e = elem(bi[q], wb, g*n + i, sgn);
                for (int j = 0; j < wa; j++) exp[i*wa + j] = e[j];
              end
            end else begin
              exp = bi[q];
            end
            checks++;
            if (bo[q] !== exp) begin
              failures++;
              $display("FAIL fmt=%0d cnt=%0d sgn=%0b unit=%0d b=%h got=%h exp=%h",
                       fmt, cnt, sgn, q, bi[q], bo[q], exp);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
