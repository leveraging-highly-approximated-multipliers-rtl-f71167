// axm_truncated: unsigned 8x8 truncated multiplier.
//
// The partial-product bit w_j*a_i has weight 2^(i+j). Truncation removes every
// bit in the M least significant columns (i+j < M) together with the adders
// that would sum them:
//   AM_T(W,A) = sum_{i=0}^{7} sum_{j=max(M-i,0)}^{7} w_j*a_i*2^(i+j).
// This follows the paper. No constant correction is added inside the multiplier;
// the control variate of the surrounding array compensates the error. AM_T is
// a multiple of 2^M; the output p is AM_T / 2^M on 16-M bits. The reduction of
// the kept bits is left to synthesis.
//
// Interface: w, a - unsigned operands; p - AM_T(w,a) >> M. Purely combinational.
module axm_truncated #(
  parameter int unsigned M = 7   // truncated columns, 1..7
) (
  input  logic [7:0]    w,
  input  logic [7:0]    a,
  output logic [15-M:0] p
);

  always_comb begin
    p = '0;
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < 8; j++) begin
        if (i + j >= M) begin
          if (w[j] && a[i]) p = p + ((16-M)'(1) << (i + j - M));
        end
      end
    end
  end

endmodule
