// cv_pkg: types and width formulas shared by the control-variate MAC array.
//
// The array multiplies unsigned 8-bit weights W by unsigned 8-bit activations A
// with one of three approximate multipliers, each tuned by an approximation
// level m. Every approximate product is a multiple of 2^m, so the datapath
// carries products and partial sums with their m zero LSBs dropped.
//
// Width rules (from the paper's size formulas, written as "bits needed to hold
// the largest value", i.e. $clog2(max+1)):
//   acc_width   : ceil(log2(N*(2^16-1))) - the accurate accumulator; 22 for N=64.
//   sum_width   : acc_width - m           - the reduced main adder of MAC*.
//   x_width     : m bits (perforated, recursive: x_j = A mod 2^m) or
//                 1 bit (truncated: x_j = OR of A[m-1:0]).
//   sumx_width  : bits of sum_j x_j over N columns. The paper sizes this adder
//                 as ceil(log2(N*(2^m-1))) (perforated, recursive) and
//                 ceil(log2(N)) (truncated). Those are one bit short whenever
//                 the largest sum is a power of two (truncated always, the
//                 others at m = 1), so this design uses ceil(log2(max+1)):
//                 the same 8 bits for N=64, m=2, but 7 bits, not 6, for the
//                 truncated adder at N=64.
//
// This package has no ports or timing; it is read ahead of every module.
package cv_pkg;


  // Which approximate multiplier sits in every MAC* of the array.
  typedef enum logic [1:0] {
    AXM_PERFORATED = 2'd0,  // m least partial products omitted (s = 0)
    AXM_RECURSIVE  = 2'd1,  // low-part sub-product W_L*A_L omitted
    AXM_TRUNCATED  = 2'd2   // m least significant columns pruned
  } axm_kind_e;

  function automatic int unsigned acc_width(int unsigned n);
    return $clog2(n * (2 ** 16 - 1) + 1);
  endfunction

  function automatic int unsigned sum_width(int unsigned n, int unsigned m);
    return acc_width(n) - m;
  endfunction

  function automatic int unsigned x_width(axm_kind_e kind, int unsigned m);
    return (kind == AXM_TRUNCATED) ? 1 : m;
  endfunction

  function automatic int unsigned sumx_width(axm_kind_e kind, int unsigned n, int unsigned m);
    return (kind == AXM_TRUNCATED) ? $clog2(n + 1) : $clog2(n * (2 ** m - 1) + 1);
  endfunction

endpackage
