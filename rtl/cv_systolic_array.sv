// cv_systolic_array: N x (N+1) systolic MAC array with control-variate
// correction of approximate multiplications.
//
// What it does: row i holds the N weights of one filter and, every cycle, takes
// one more N-element activation vector through the array, producing
//   G*_i = B_i + sum_h AM(W_ih, A_h) + C_i * sum_h x_h
// where AM is the chosen approximate multiplier and C_i * sum x_h is the control
// variate V that cancels the mean of the multiplication error. Columns 0..N-1
// are MAC* units (rtl/mac_star.sv), column N is a MAC+ unit (rtl/mac_plus.sv).
// The arrangement (activations entering at the top and moving down, weights
// entering at the left, partial sums moving right into the extra MAC+ column,
// C entering at the top of that column) follows the paper's array drawing.
//
// Interface:
//   load        : while high, every row shifts w_in[i] one place to the right
//                 and the MAC+ column shifts c_in one place down. After N load
//                 cycles MAC*(i,h) holds the value w_in[i] had N-1-h cycles
//                 into the load, and MAC+(i) holds the c_in of cycle N-1-i.
//   bias[i]     : 8-bit bias of row i, held static. B[7:M] enters the first
//                 MAC* as sum_0; B[M-1:0] goes straight to MAC+(i).
//   act_in[h]   : activation for column h, entering the top row.
//   g_out[i]    : G*_i, ACC_W bits, wraps modulo 2^ACC_W.
//
// Timing: the array is a skewed pipeline, one vector per cycle. Let vector t be
// presented so that act_in[h] carries its element h during the cycle before
// clock edge E_t + h (input skew of h cycles). Then g_out[i] shows its G*_i
// from clock edge E_t + N + i until the next edge: N+1 register stages per row,
// one more than the accurate array, as the paper states. The host skews inputs
// and de-skews outputs; the paper does not describe those buffers.
//
// Choices of this design (the paper is silent): static bias port, weights and C
// loaded by shift chains, asynchronous active-low reset, no valid signals.
module cv_systolic_array
  import cv_pkg::*;
#(
  parameter axm_kind_e   KIND  = AXM_PERFORATED,
  parameter int unsigned M     = 2,
  parameter int unsigned N     = 64,
  parameter int unsigned ACC_W = acc_width(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [N-1:0][7:0]     w_in,
  input  logic [7:0]            c_in,
  input  logic [N-1:0][7:0]     bias,
  input  logic [N-1:0][7:0]     act_in,
  output logic [N-1:0][ACC_W-1:0] g_out
);

  localparam int unsigned SUM_W  = sum_width(N, M);
  localparam int unsigned SUMX_W = sumx_width(KIND, N, M);

  // Nets between units. Index [i][h] is the input of MAC*(i,h); column N is the
  // MAC+ column. Activations use row index N for the bottom edge.
  logic [7:0]        a_net [N+1][N];
  logic [7:0]        w_net [N][N+1];
  logic [SUM_W-1:0]  s_net [N][N+1];
  logic [SUMX_W-1:0] x_net [N][N+1];
  logic [7:0]        c_net [N+1];

  assign c_net[0] = c_in;

  for (genvar h = 0; h < N; h++) begin : g_top
    assign a_net[0][h] = act_in[h];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    assign w_net[i][0] = w_in[i];
    assign s_net[i][0] = SUM_W'(bias[i][7:M]);
    assign x_net[i][0] = '0;

    for (genvar h = 0; h < N; h++) begin : g_col
      mac_star #(
        .KIND(KIND), .M(M), .N(N), .SUM_W(SUM_W), .SUMX_W(SUMX_W)
      ) u_mac (
        .clk   (clk),
        .rst_n (rst_n),
        .w_load(load),
        .w_in  (w_net[i][h]),
        .w_out (w_net[i][h+1]),
        .a_in  (a_net[i][h]),
        .a_out (a_net[i+1][h]),
        .s_in  (s_net[i][h]),
        .s_out (s_net[i][h+1]),
        .x_in  (x_net[i][h]),
        .x_out (x_net[i][h+1])
      );
    end

    mac_plus #(
      .KIND(KIND), .M(M), .N(N), .ACC_W(ACC_W), .SUM_W(SUM_W), .SUMX_W(SUMX_W)
    ) u_plus (
      .clk   (clk),
      .rst_n (rst_n),
      .c_load(load),
      .c_in  (c_net[i]),
      .c_out (c_net[i+1]),
      .x_in  (x_net[i][N]),
      .s_in  (s_net[i][N]),
      .b_lo  (bias[i][M-1:0]),
      .g_out (g_out[i])
    );
  end

endmodule
