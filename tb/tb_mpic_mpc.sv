// tb_mpic_mpc: checks the mixed-precision controller against a counter model.
//
// Random sequences of issued / stalled instructions, MAC and non-MAC,
// uniform and mixed formats, different MACs-per-group settings, software
// writes of the sub-group and clears. The model counts MACs per group and
// wraps the group at wa/wb. Directed part first: the 8x2 sequence of the
// kernel with one MAC per group (groups 0,1,2,3,0) and a 4x2 kernel with 8
// MACs per group.
module tb_mpic_mpc;
  import mpic_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic dec, mac, we, clr;
  logic [3:0] fmt;
  logic [7:0] macs;
  logic [2:0] wdata, cnt;
  logic [7:0] mcnt;
  int cycles = 0;

  mpic_mpc dut (
    .clk_i(clk), .rst_ni(rst_n), .id_decoding_i(dec), .is_mac_i(mac), .fmt_i(fmt),
    .macs_i(macs), .cnt_we_i(we), .cnt_wdata_i(wdata), .clr_i(clr),
    .cnt_o(cnt), .mac_cnt_o(mcnt)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  int m_grp = 0, m_mac = 0;

  task automatic model_step();
    int wa, wb, groups, per;
    wa = wa_of(fmt); wb = wb_of(fmt);
    if (clr) begin m_grp = 0; m_mac = 0; end
    else if (we) begin m_grp = int'(wdata); m_mac = 0; end
    else if (dec && mac && wa != 0 && wa != wb) begin
      groups = wa / wb;
      per = (macs == 0) ? 1 : int'(macs);
      if (m_mac + 1 >= per) begin
        m_mac = 0;
        m_grp = ((m_grp % groups) + 1) % groups;
      end else m_mac++;
    end
  endtask

  task automatic tick_and_check();
    model_step();
    @(posedge clk); #1;
    checks++;
    if (int'(cnt) != m_grp || int'(mcnt) != m_mac) begin
      failures++;
      $display("FAIL cycle %0d fmt=%0d cnt=%0d exp %0d mac=%0d exp %0d", cycles, fmt, cnt, m_grp, mcnt, m_mac);
    end
  endtask

  initial begin
    int fmts[11] = '{1, 2, 4, 5, 6, 7, 8, 9, 10, 11, 0};
    int seq[$];
    dec = 0; mac = 0; we = 0; clr = 0; fmt = 4'd10; macs = 8'd1; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // directed: 8x2, one MAC per group -> 0,1,2,3,0
    for (int i = 0; i < 5; i++) begin
      seq.push_back(int'(cnt));
      dec = 1; mac = 1;
      tick_and_check();
    end
    checks++;
    if (seq != '{0, 1, 2, 3, 0}) begin failures++; $display("FAIL 8x2 group sequence"); end
    // a stalled MAC does not count
    dec = 0; mac = 1; tick_and_check();
    // directed: 4x2 with 8 MACs per group
    dec = 0; fmt = 4'd11; macs = 8'd8; clr = 1; tick_and_check(); clr = 0;
    for (int i = 0; i < 16; i++) begin dec = 1; mac = 1; tick_and_check(); end
    checks++;
    if (cnt != 3'd0) begin failures++; $display("FAIL 4x2 wrap"); end
    // random
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      dec = $urandom_range(0, 3) != 0;
      mac = $urandom_range(0, 3) != 0;
      we  = $urandom_range(0, 60) == 0;
      clr = $urandom_range(0, 80) == 0;
      wdata = 3'($urandom);
      if ($urandom_range(0, 200) == 0) fmt = 4'(fmts[$urandom_range(0, 10)]);
      if ($urandom_range(0, 300) == 0) macs = 8'($urandom_range(0, 9));
      tick_and_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
