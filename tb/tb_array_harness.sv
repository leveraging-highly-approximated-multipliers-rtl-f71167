// tb_array_harness: stimulus and checker for the whole systolic array, shared
// by the reduced-size and the full-size end-to-end testbenches.
//
// It resets the array, then runs PHASES phases. Each phase:
//   1. draws N filters of N weights each, concentrated around a random centre
//      (spread +-SPREAD), as trained CNN filters are;
//   2. works out, as an offline tool would, the control-variate constant C of
//      every filter and, for the truncated multiplier, folds C0 into the bias;
//   3. shifts the weights in from the left and C in from the top for N cycles;
//   4. streams T activation vectors with the input skew the array expects
//      (element h one cycle later than element h-1), filling unused slots with
//      random bytes;
//   5. checks every output G*_i of every vector at exactly the edge where it is
//      due (vector t, row i: after edge t+N+i of the stream) against
//      B + sum AM(W,A) + C*sum x, computed here from the multipliers' error
//      formulas.
// It also keeps the absolute error of G* against the exact convolution, with
// and without the V term, and counts a failure if V does not reduce it.
// Mechanism counters: weight/C load cycles, outputs where V != 0, outputs where
// some x_j was zero (truncated: no error occurred), outputs with nonzero low
// bias bits, weight reloads between phases.
module tb_array_harness
  import cv_pkg::*;
#(
  parameter axm_kind_e   KIND   = AXM_PERFORATED,
  parameter int unsigned M      = 2,
  parameter int unsigned N      = 8,
  parameter int unsigned T      = 40,
  parameter int unsigned PHASES = 2,
  parameter int unsigned SPREAD = 12,
  parameter int unsigned ACC_W  = acc_width(N)
) (
  input  logic                    clk,
  output logic                    rst_n,
  output logic                    load,
  output logic [N-1:0][7:0]       w_in,
  output logic [7:0]              c_in,
  output logic [N-1:0][7:0]       bias,
  output logic [N-1:0][7:0]       act_in,
  input  logic [N-1:0][ACC_W-1:0] g_out,
  output logic                    done,
  output int                      checks,
  output int                      failures,
  output int                      n_load,
  output int                      n_v_nonzero,
  output int                      n_x_zero,
  output int                      n_blo_nonzero,
  output int                      n_reload
);

  byte unsigned wt   [N][N];     // wt[i][h]: weight of row i, column h
  byte unsigned cc   [N];        // C of row i
  byte unsigned bb   [N];        // bias of row i (C0 folded in for truncated)
  int           b_true [N];      // bias of the exact convolution
  byte unsigned vec  [T][N];     // activation vectors
  real err_with_v, err_without_v;

  function automatic longint am(int ww, int aa);
    longint e = 0;
    case (KIND)
      AXM_PERFORATED: e = ww * (aa % (1 << M));
      AXM_RECURSIVE:  e = (ww % (1 << M)) * (aa % (1 << M));
      default: for (int i = 0; i < M; i++) e += (ww % (1 << (M - i))) * ((aa >> i) & 1) * (1 << i);
    endcase
    return longint'(ww * aa) - e;
  endfunction

  function automatic int xj(int aa);
    if (KIND == AXM_TRUNCATED) return (aa % (1 << M)) != 0 ? 1 : 0;
    return aa % (1 << M);
  endfunction

  // W-hat of the truncated multiplier, times 2 to stay integer
  function automatic int what2(int ww);
    int s = 0;
    for (int i = 0; i < M; i++) s += (ww % (1 << (M - i))) * (1 << i);
    return s;
  endfunction

  task automatic make_phase();
    for (int i = 0; i < N; i++) begin
      int centre, acc, c0;
      centre = int'($urandom_range(SPREAD, 255 - SPREAD));
      for (int h = 0; h < N; h++)
        wt[i][h] = byte'(centre + int'($urandom_range(0, 2 * SPREAD)) - int'(SPREAD));
      b_true[i] = int'($urandom_range(0, 191));
      acc = 0;
      c0  = 0;
      case (KIND)
        AXM_PERFORATED: for (int h = 0; h < N; h++) acc += wt[i][h];
        AXM_RECURSIVE:  for (int h = 0; h < N; h++) acc += wt[i][h] % (1 << M);
        default:        for (int h = 0; h < N; h++) acc += what2(wt[i][h]);
      endcase
      if (KIND == AXM_TRUNCATED) begin
        // C = E[W-hat] (rounded), C0 = sum W-hat / 2^M folded into the bias
        cc[i] = byte'((acc + int'(N)) / (2 * int'(N)));
        c0    = (acc + (1 << M)) / (2 << M);
      end else begin
        cc[i] = byte'((acc + int'(N) / 2) / int'(N));
      end
      bb[i] = byte'((b_true[i] + c0 > 255) ? 255 : b_true[i] + c0);
    end
    for (int t = 0; t < T; t++)
      for (int h = 0; h < N; h++) vec[t][h] = byte'($urandom_range(0, 255));
  endtask

  function automatic longint expected_g(int i, int t);
    longint s = longint'(bb[i]);
    longint sx = 0;
    for (int h = 0; h < N; h++) begin
      s  += am(wt[i][h], vec[t][h]);
      sx += xj(vec[t][h]);
    end
    s += longint'(cc[i]) * sx;
    return s & ((64'd1 << ACC_W) - 1);
  endfunction

  function automatic longint v_of(int i, int t);
    longint sx = 0;
    for (int h = 0; h < N; h++) sx += xj(vec[t][h]);
    return longint'(cc[i]) * sx;
  endfunction

  function automatic longint exact_g(int i, int t);
    longint s = longint'(b_true[i]);
    for (int h = 0; h < N; h++) s += longint'(wt[i][h]) * longint'(vec[t][h]);
    return s;
  endfunction

  function automatic bit any_x_zero(int t);
    for (int h = 0; h < N; h++) if (xj(vec[t][h]) == 0) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    n_load = 0; n_v_nonzero = 0; n_x_zero = 0; n_blo_nonzero = 0; n_reload = 0;
    err_with_v = 0.0; err_without_v = 0.0;
    rst_n = 1'b0; load = 1'b0; w_in = '0; c_in = '0; bias = '0; act_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int ph = 0; ph < int'(PHASES); ph++) begin
      make_phase();
      if (ph > 0) n_reload++;
      // load: cycle c shifts in column N-1-c of every row and the C of row N-1-c
      for (int c = 0; c < int'(N); c++) begin
        @(negedge clk);
        load = 1'b1;
        for (int i = 0; i < N; i++) w_in[i] = wt[i][N - 1 - c];
        c_in = cc[N - 1 - c];
        n_load++;
      end
      @(negedge clk);
      load = 1'b0;
      w_in = '0;
      c_in = '0;
      for (int i = 0; i < N; i++) bias[i] = bb[i];
      // stream: before edge tau, column h carries vector tau-h; outputs of
      // vector t, row i are checked right after edge t+N+i
      for (int tau = 0; tau < int'(T + 2 * N + 1); tau++) begin
        for (int h = 0; h < N; h++) begin
          automatic int t = tau - h;
          act_in[h] = (t >= 0 && t < int'(T)) ? vec[t][h] : 8'($urandom);
        end
        @(posedge clk);
        #1;
        for (int i = 0; i < N; i++) begin
          automatic int t = tau - int'(N) - i;
          if (t >= 0 && t < int'(T)) begin
            longint exp_g, got_g, ex, v;
            exp_g = expected_g(i, t);
            got_g = longint'(g_out[i]);
            checks++;
            if (got_g != exp_g) begin
              failures++;
              if (failures < 20)
                $display("FAIL phase %0d row %0d vector %0d: G* = %0d, expected %0d",
                         ph, i, t, got_g, exp_g);
            end
            v  = v_of(i, t);
            ex = exact_g(i, t);
            if (v != 0) n_v_nonzero++;
            if (any_x_zero(t)) n_x_zero++;
            if ((bb[i] % (1 << M)) != 0) n_blo_nonzero++;
            // with V: G* itself; without V: B + sum AM, i.e. G* less V and less
            // the C0 folded into the bias
            err_with_v    += (ex > got_g) ? real'(ex - got_g) : real'(got_g - ex);
            err_without_v += real'(ex - (got_g - v - (longint'(bb[i]) - longint'(b_true[i]))));
          end
        end
        @(negedge clk);
      end
    end
    $display("%s M=%0d N=%0d: mean |error| with V %0.2f, without V %0.2f (per output)", KIND.name(), M, N,
             err_with_v / real'(checks), err_without_v / real'(checks));
    checks++;
    if (!(err_with_v < err_without_v)) begin
      failures++;
      $display("FAIL control variate did not reduce the convolution error");
    end
    done = 1'b1;
  end

endmodule
