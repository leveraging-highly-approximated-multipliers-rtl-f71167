// mac_plus: MAC+ unit, the extra (N+1)-th column of the approximate array.
//
// What it does: it turns the row's two partial sums into the corrected
// convolution result
//   V  = C * sumX_N
//   G* = {sum_N, B[M-1:0]} + V
// The concatenation shifts sum_N back up by M places and puts in the M low bias
// bits that the MAC* units left out. The exact multiplier (SUMX_W x 8 bits) and
// the ACC_W-bit output adder follow the paper; one such unit ends every row.
//
// How it works: like the MAC* units, the sumX, C and partial-sum inputs pass
// through registers and the multiply-add works on the register outputs, so the
// column adds one cycle of latency to the array, as the paper states.
//
// Choices of this design (the paper is silent): C is loaded, not streamed. While
// c_load is high the unit takes c_in and passes its held C on c_out to the unit
// below, so the column is a shift chain fed at the top, matching the drawing
// where C enters the top of the extra column. B[M-1:0] is a static input. The
// adder wraps at ACC_W bits like the accurate accumulator it replaces. Registers
// reset asynchronously to zero on rst_n low.
//
// Timing: g_out is combinational from the registers; c_out is a register output.
module mac_plus
  import cv_pkg::*;
#(
  parameter axm_kind_e   KIND   = AXM_PERFORATED,
  parameter int unsigned M      = 2,
  parameter int unsigned N      = 64,
  parameter int unsigned ACC_W  = acc_width(N),
  parameter int unsigned SUM_W  = sum_width(N, M),
  parameter int unsigned SUMX_W = sumx_width(KIND, N, M)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control-variate constant load chain (top to bottom)
  input  logic              c_load,
  input  logic [7:0]        c_in,
  output logic [7:0]        c_out,
  // from the last MAC* of the row
  input  logic [SUMX_W-1:0] x_in,
  input  logic [SUM_W-1:0]  s_in,
  // low bias bits of this row's filter
  input  logic [M-1:0]      b_lo,
  // corrected convolution result G*
  output logic [ACC_W-1:0]  g_out
);

  logic [7:0]        c_q;
  logic [SUMX_W-1:0] x_q;
  logic [SUM_W-1:0]  s_q;
  logic [ACC_W-1:0]  v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= '0;
      x_q <= '0;
      s_q <= '0;
    end else begin
      x_q <= x_in;
      s_q <= s_in;
      if (c_load) c_q <= c_in;
    end
  end

  assign v     = ACC_W'(c_q) * ACC_W'(x_q);
  assign g_out = {s_q, b_lo} + v;
  assign c_out = c_q;

endmodule
