// tb_mpic_gpr: checks the three-read, two-write register file.
//
// Random writes on both ports (including same-register collisions, where
// port A must win, and writes to x0, which must stay zero) and random reads
// on the three ports, against an array model.
module tb_mpic_gpr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] ra, rb, rc, wa, wb;
  logic [31:0] da, db, dc, wda, wdb;
  logic wea, web;
  int cycles = 0;
  logic [31:0] model [32];

  mpic_gpr dut (
    .clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .raddr_b_i(rb), .raddr_c_i(rc),
    .rdata_a_o(da), .rdata_b_o(db), .rdata_c_o(dc),
    .we_a_i(wea), .waddr_a_i(wa), .wdata_a_i(wda),
    .we_b_i(web), .waddr_b_i(wb), .wdata_b_i(wdb)
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
    if (got !== exp) begin failures++; $display("FAIL %s got=%h exp=%h", what, got, exp); end
  endtask

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    wea = 0; web = 0; wa = 0; wb = 0; wda = 0; wdb = 0; ra = 0; rb = 0; rc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom); rc = 5'($urandom);
      #1;
      chk(da, model[ra], "read A");
      chk(db, model[rb], "read B");
      chk(dc, model[rc], "read C");
      wea = $urandom_range(0, 1); web = $urandom_range(0, 1);
      wa = 5'($urandom_range(0, 7)); wb = 5'($urandom_range(0, 7));
      wda = $urandom; wdb = $urandom;
      @(posedge clk);
      if (web && wb != 0) model[wb] = wdb;
      if (wea && wa != 0) model[wa] = wda;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
