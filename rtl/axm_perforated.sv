// axm_perforated: unsigned 8x8 partial-product-perforated multiplier.
//
// The exact product W*A is the sum of the partial products W*a_i*2^i. Perforation
// with start s = 0 leaves out the M least significant partial products, so
//   AM_P(W,A) = sum_{i=M}^{7} W*a_i*2^i = W*(A - A mod 2^M),
// whose error is W*(A mod 2^M). Both the omission rule and s = 0 follow the
// paper. AM_P is a multiple of 2^M, so the output p is AM_P / 2^M on 16-M bits,
// the width the reduced MAC* adder takes. How the remaining partial products are
// reduced (the paper's figure shows a compressor tree) is left to synthesis.
//
// Interface: w, a - unsigned operands; p - AM_P(w,a) >> M. Purely combinational.
module axm_perforated #(
  parameter int unsigned M = 2   // perforated partial products, 1..7
) (
  input  logic [7:0]    w,
  input  logic [7:0]    a,
  output logic [15-M:0] p
);

  always_comb begin
    p = '0;
    for (int i = M; i < 8; i++) begin
      if (a[i]) p = p + ((16-M)'(w) << (i - M));
    end
  end

endmodule
