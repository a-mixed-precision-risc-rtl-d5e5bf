// tb_mpic_dotp_unit: checks the extended dot-product unit cycle by cycle.
//
// Each cycle a random dot product (random format among the ten, sub-group,
// signedness, accumulate) may be presented with en_i; its result must appear
// on result_o in the next cycle and stay there through idle cycles. Also
// checked: exactly one register group is enabled, the one of operand A's
// size (clock gating of the unused units), and none without en_i.
module tb_mpic_dotp_unit;
  import mpic_pkg::*;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en;
  logic [3:0] fmt;
  logic [2:0] cnt;
  dot_sign_e  sign;
  logic acc;
  logic [31:0] a, b, c, res;
  logic [3:0]  gate;
  int cycles = 0;

  mpic_dotp_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .fmt_i(fmt), .mpc_cnt_i(cnt),
    .sign_i(sign), .acc_i(acc), .op_a_i(a), .op_b_i(b), .op_c_i(c),
    .gate_en_o(gate), .result_o(res)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h (fmt=%0d cnt=%0d)", what, got, exp, fmt, cnt);
    end
  endtask

  initial begin
    int fmts[10] = '{1, 2, 4, 5, 6, 7, 8, 9, 10, 11};
    logic [31:0] expected;
    bit have = 0;
    en = 0; fmt = 4'd2; cnt = 0; sign = DOT_SS; acc = 0; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // result of the instruction presented in the previous cycle
      if (have) chk(res, expected, "result");
      en   = ($urandom_range(0, 3) != 0);
      fmt  = 4'(fmts[$urandom_range(0, 9)]);
      cnt  = 3'($urandom_range(0, 7));
      sign = dot_sign_e'($urandom_range(0, 2));
      acc  = $urandom_range(0, 1);
      a = $urandom; b = $urandom; c = $urandom;
      if (t % 97 == 0) begin a = 32'h8000_8000; b = 32'hFFFF_FFFF; end
      #1;
      begin
        int wa, u;
        logic [3:0] eg;
        wa = wa_of(fmt);
        u  = (wa == 16) ? 0 : (wa == 8) ? 1 : (wa == 4) ? 2 : 3;
        eg = en ? (4'b1 << u) : 4'b0;
        chk({28'd0, gate}, {28'd0, eg}, "gate enables");
      end
      if (en) begin
        expected = dotp(int'(fmt), a, b, c, int'(cnt), int'(sign), acc);
        have = 1;
      end
    end
    @(negedge clk);
    if (have) chk(res, expected, "result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
