// mac_star: MAC* processing element of the approximate systolic array.
//
// What it does: the unit in column h of a row adds its approximate product to the
// partial sum arriving from the left and, in parallel, adds the control-variate
// operand x_h to a second, narrow partial sum:
//   sum_h  = sum_{h-1}  + AM(W_h, A_h) / 2^M        (main adder, ACC_W-M bits)
//   sumX_h = sumX_{h-1} + x_h                       (small adder)
// with x_h = A_h[M-1:0] for the perforated and recursive multipliers and
// x_h = OR(A_h[M-1:0]) for the truncated one. Both formulas, the adder widths and
// the bias split (the first column receives B[7:M] as sum_0) follow the paper.
//
// How it works: like the paper's unit drawing, the activation, weight, partial
// sum and sumX inputs each pass through a register; the product, the main
// adder and the sumX adder then work on the register outputs, and their
// results leave the unit combinationally, to be registered by the next unit.
// The activation register also feeds the unit below (a_out), so the unit is one
// pipeline stage in both directions.
//
// Choices of this design (the paper is silent): the weight register is
// stationary and only loads, from w_in, while w_load is high; w_out passes the
// held weight to the right so a row of units forms a load shift chain. The
// multiplier gets the whole activation byte, as the paper's equations need; the
// drawing labels that wire A[7:M], which only equals the equations for the
// perforated multiplier. Registers reset asynchronously to zero on rst_n low.
//
// Timing: a_out, w_out are register outputs; s_out and x_out are combinational
// from registers. Throughput one product per cycle, latency one cycle per unit.
module mac_star
  import cv_pkg::*;
#(
  parameter axm_kind_e   KIND   = AXM_PERFORATED,
  parameter int unsigned M      = 2,                       // approximation level
  parameter int unsigned N      = 64,                      // array size (sizes the adders)
  parameter int unsigned SUM_W  = sum_width(N, M),
  parameter int unsigned SUMX_W = sumx_width(KIND, N, M)
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight load chain (left to right)
  input  logic              w_load,
  input  logic [7:0]        w_in,
  output logic [7:0]        w_out,
  // activations (top to bottom)
  input  logic [7:0]        a_in,
  output logic [7:0]        a_out,
  // partial sums (left to right)
  input  logic [SUM_W-1:0]  s_in,
  output logic [SUM_W-1:0]  s_out,
  input  logic [SUMX_W-1:0] x_in,
  output logic [SUMX_W-1:0] x_out
);

  localparam int unsigned XW = x_width(KIND, M);

  logic [7:0]        a_q, w_q;
  logic [SUM_W-1:0]  s_q;
  logic [SUMX_W-1:0] x_q;
  logic [15-M:0]     p;
  logic [XW-1:0]     xj;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      w_q <= '0;
      s_q <= '0;
      x_q <= '0;
    end else begin
      a_q <= a_in;
      s_q <= s_in;
      x_q <= x_in;
      if (w_load) w_q <= w_in;
    end
  end

  generate
    if (KIND == AXM_PERFORATED) begin : g_perf
      axm_perforated #(.M(M)) u_mul (.w(w_q), .a(a_q), .p(p));
      assign xj = a_q[M-1:0];
    end else if (KIND == AXM_RECURSIVE) begin : g_rec
      axm_recursive #(.M(M)) u_mul (.w(w_q), .a(a_q), .p(p));
      assign xj = a_q[M-1:0];
    end else begin : g_trunc
      axm_truncated #(.M(M)) u_mul (.w(w_q), .a(a_q), .p(p));
      assign xj = |a_q[M-1:0];
    end
  endgenerate

  assign s_out = s_q + SUM_W'(p);
  assign x_out = x_q + SUMX_W'(xj);
  assign a_out = a_q;
  assign w_out = w_q;

endmodule
