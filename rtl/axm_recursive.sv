// axm_recursive: unsigned 8x8 approximate recursive multiplier.
//
// Each operand is split into a high part of 8-M bits and a low part of M bits,
// W = W_H*2^M + W_L and A = A_H*2^M + A_L. The exact product is the sum of four
// sub-products; the approximate one prunes the low-part sub-product W_L*A_L:
//   AM_R(W,A) = (W_H*A_H*2^M + W_H*A_L + W_L*A_H) * 2^M,
// so its error is exactly W_L*A_L. This follows the paper. AM_R is a multiple of
// 2^M; the output p is AM_R / 2^M on 16-M bits. The three kept sub-products are
// written as plain multiplications; the paper does not fix how each smaller
// block is built.
//
// Interface: w, a - unsigned operands; p - AM_R(w,a) >> M. Purely combinational.
module axm_recursive #(
  parameter int unsigned M = 2   // width of the low parts, 1..7
) (
  input  logic [7:0]    w,
  input  logic [7:0]    a,
  output logic [15-M:0] p
);

  logic [7-M:0] w_h, a_h;
  logic [M-1:0] w_l, a_l;

  assign w_h = w[7:M];
  assign a_h = a[7:M];
  assign w_l = w[M-1:0];
  assign a_l = a[M-1:0];

  always_comb begin
    p = (((16-M)'(w_h) * (16-M)'(a_h)) << M)
      + (16-M)'(w_h) * (16-M)'(a_l)
      + (16-M)'(w_l) * (16-M)'(a_h);
  end

endmodule
