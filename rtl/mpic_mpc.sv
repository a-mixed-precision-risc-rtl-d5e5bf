// mpic_mpc: mixed-precision controller.
//
// In a mixed format (say 8x2) one register of operand B holds four groups of
// operands, each used by a different dot-product instruction. The controller
// keeps the index of the group to use, MPC_CNT (cnt_o), which the dot-product
// unit's slicer reads. Because a matrix-multiplication kernel reuses each
// group for several MACs (e.g. 8 MACs in a 4x2 inner loop), a second counter
// counts MACs and MPC_CNT advances only after macs_i of them; it wraps after
// the last group of the current format (2 groups for 8x4, 4 for 8x2, 8 for
// 16x2).
//
// Counting happens in a cycle where the decode stage really issues an
// instruction (id_decoding_i, so stalls do not count), the instruction is a
// dot product (is_mac_i) and SIMD_FMT is mixed. The instruction uses the value
// of cnt_o present while it is decoded; the new value is visible in the next
// cycle. These conditions follow the paper. This design's choices: macs_i = 0
// acts like 1; cnt_we_i (a software write of the sub-group CSR) loads
// cnt_wdata_i and clears the MAC counter and has priority over counting;
// clr_i (a write of SIMD_FMT or of the MAC-count register) clears both.
module mpic_mpc
  import mpic_pkg::*;
#(
  parameter int unsigned MACW = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            id_decoding_i,
  input  logic            is_mac_i,
  input  logic [3:0]      fmt_i,
  input  logic [MACW-1:0] macs_i,
  input  logic            cnt_we_i,
  input  logic [2:0]      cnt_wdata_i,
  input  logic            clr_i,
  output logic [2:0]      cnt_o,
  output logic [MACW-1:0] mac_cnt_o
);
  logic [2:0]      cnt_q;
  logic [MACW-1:0] mac_q;
  logic            inc, last_mac, last_grp;
  logic [2:0]      grp_max;

  assign inc      = id_decoding_i && is_mac_i && fmt_mixed(fmt_i);
  assign last_mac = (MACW'(mac_q + 1'b1) >= macs_i);
  assign grp_max  = 3'((4'd1 << fmt_groups_log2(fmt_i)) - 4'd1);
  assign last_grp = ((cnt_q & grp_max) == grp_max);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      mac_q <= '0;
    end else if (clr_i) begin
      cnt_q <= '0;
      mac_q <= '0;
    end else if (cnt_we_i) begin
      cnt_q <= cnt_wdata_i;
      mac_q <= '0;
    end else if (inc) begin
      if (last_mac) begin
        mac_q <= '0;
        cnt_q <= last_grp ? 3'd0 : ((cnt_q & grp_max) + 3'd1);
      end else begin
        mac_q <= mac_q + 1'b1;
      end
    end
  end

  assign cnt_o     = cnt_q;
  assign mac_cnt_o = mac_q;

endmodule
