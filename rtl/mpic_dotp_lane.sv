// mpic_dotp_lane: one DOTP-W unit of the extended dot-product block.
//
// The 32-bit operands A and B are each split into 32/W lanes of W bits
// (lane 0 in the least significant bits). Every lane pair is multiplied and
// the 32/W products are summed by an adder tree, to which the accumulator C
// is added when acc_en_i is set (sdot* instructions). One instance exists per
// supported width: 16 (2 products), 8 (4), 4 (8) and 2 (16 products per
// cycle), as in the paper. The per-lane signedness is applied by extending
// each lane to W+1 bits, so one signed (W+1)x(W+1) multiplier serves the
// unsigned, unsigned-by-signed and signed variants; that sharing, the
// balanced pairwise tree and the modulo-2^32 wrap of the result are this
// design's choices. Purely combinational: in the pipeline it sits in EX,
// behind the gated operand registers of mpic_dotp_unit.
module mpic_dotp_lane #(
  parameter int unsigned W = 8
) (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic        a_signed_i,
  input  logic        b_signed_i,
  input  logic [31:0] c_i,
  input  logic        acc_en_i,
  output logic [31:0] result_o
);
  localparam int unsigned N  = 32 / W;       // lanes
  localparam int unsigned PW = 2 * W + 2;    // product width

  logic signed [PW-1:0] prod [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [W:0] ax, bx;
      ax = {a_signed_i & a_i[i*W + W - 1], a_i[i*W +: W]};
      bx = {b_signed_i & b_i[i*W + W - 1], b_i[i*W +: W]};
      prod[i] = PW'(ax) * PW'(bx);
    end
  end

  // Adder tree: level l sums pairs of level l-1.
  localparam int unsigned LEVELS = $clog2(N);
  logic [31:0] tree [LEVELS+1][N];

  always_comb begin
    for (int i = 0; i < N; i++) tree[0][i] = 32'(prod[i]);
    for (int l = 1; l <= LEVELS; l++) begin
      for (int i = 0; i < N; i++) begin
        if (i < (N >> l)) tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
        else              tree[l][i] = '0;
      end
    end
    result_o = tree[LEVELS][0] + (acc_en_i ? c_i : 32'd0);
  end

endmodule
