// mpic_gpr: general-purpose register file, 32 x 32 bit.
//
// Three read ports (rA, rB, rC; the third one supplies the accumulator of the
// sdot* instructions) and two write ports: port A (DIA) takes the result of
// the execute stage, port B (DIB) the data returned by the load-store unit.
// x0 always reads zero. Reads are combinational, writes happen at the rising
// clock edge; when both ports write the same register, port A wins, since its
// instruction is the younger one (this design's choice). All registers reset
// to zero so that a simulation never reads an uninitialised value.
module mpic_gpr #(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [$clog2(NREGS)-1:0] raddr_a_i,
  input  logic [$clog2(NREGS)-1:0] raddr_b_i,
  input  logic [$clog2(NREGS)-1:0] raddr_c_i,
  output logic [31:0]              rdata_a_o,
  output logic [31:0]              rdata_b_o,
  output logic [31:0]              rdata_c_o,
  input  logic                     we_a_i,
  input  logic [$clog2(NREGS)-1:0] waddr_a_i,
  input  logic [31:0]              wdata_a_i,
  input  logic                     we_b_i,
  input  logic [$clog2(NREGS)-1:0] waddr_b_i,
  input  logic [31:0]              wdata_b_i
);
  logic [31:0] mem [1:NREGS-1];

  for (genvar i = 1; i < NREGS; i++) begin : g_reg
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)                                         mem[i] <= '0;
      else if (we_a_i && waddr_a_i == ($clog2(NREGS))'(i)) mem[i] <= wdata_a_i;
      else if (we_b_i && waddr_b_i == ($clog2(NREGS))'(i)) mem[i] <= wdata_b_i;
    end
  end

  function automatic logic [31:0] rd(logic [$clog2(NREGS)-1:0] a);
    logic [31:0] r;
    r = '0;
    for (int i = 1; i < NREGS; i++)
      if (a == ($clog2(NREGS))'(i)) r = mem[i];
    return r;
  endfunction

  assign rdata_a_o = rd(raddr_a_i);
  assign rdata_b_o = rd(raddr_b_i);
  assign rdata_c_o = rd(raddr_c_i);

endmodule
