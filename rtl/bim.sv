// bim: Bit-split Inner-product Module, Type A (shift after the adder tree).
//
// M = 2m multipliers, each 8 bits x 4 bits. Every multiplier has its own sign
// flag s[i] telling whether its 4-bit operand is signed; a_signed says whether
// the 8-bit operands are signed. Products 0..m-1 are summed by one m-input
// adder tree, products m..2m-1 by the other. The first tree's sum is shifted
// left by 4 in 8x8 mode (it carries the high nibbles of the 8-bit second
// operand) and by 0 in 8x4 mode, then the two tree sums are added.
//   8x4 mode: out = sum_{i<M} a[i]*w[i]              (M-term dot product)
//   8x8 mode: out = (sum_{i<m} a[i]*w[i] << 4) + sum_{i>=m} a[i]*w[i]
// The caller (format_change_in) places high nibbles in lanes 0..m-1 and the
// matching low nibbles in lanes m..2m-1 with the same activations.
// Purely combinational. The structure (multipliers with sign inputs, two
// m-adder trees, one shifter at the tree output) follows the paper's Type A
// figure; operand widths of the intermediate sums are this design's choice.
module bim #(
  parameter int unsigned M = 16,
  localparam int unsigned OW = 14 + $clog2(M) + 4 + 1
) (
  input  fq_pkg::bim_mode_e           mode,
  input  logic                        a_signed,
  input  logic [M-1:0][7:0]           a,
  input  logic [M-1:0][3:0]           w,
  input  logic [M-1:0]                s,
  output logic signed [OW-1:0]        out
);
  localparam int unsigned HM = M / 2;
  localparam int unsigned TW = 14 + $clog2(M);

  logic signed [13:0]        prod [M];
  logic signed [TW-1:0]      tree0, tree1;

  always_comb begin
    for (int i = 0; i < M; i++) begin
      logic signed [8:0] ax;
      logic signed [4:0] wx;
      ax = {a_signed & a[i][7], a[i]};
      wx = {s[i] & w[i][3], w[i]};
      prod[i] = ax * wx;
    end
    tree0 = '0;
    tree1 = '0;
    for (int i = 0; i < HM; i++) begin
      tree0 += TW'(prod[i]);
      tree1 += TW'(prod[HM + i]);
    end
    out = (mode == fq_pkg::MODE_8X8) ? (OW'(tree0) <<< 4) + OW'(tree1)
                                     : OW'(tree0) + OW'(tree1);
  end

  initial assert (M % 2 == 0 && M >= 2) else $error("bim: M must be even");
endmodule
