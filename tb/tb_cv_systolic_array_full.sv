// tb_cv_systolic_array_full: end-to-end test of the array at its default size,
// a 64 x 65 array (64 x 64 MAC* units with the perforated multiplier at M=2 and
// a column of 64 MAC+ units). Two phases of weight and C loading (one reload),
// 96 activation vectors per phase streamed at one vector per cycle; every one
// of the 64 outputs of every vector is checked at the cycle it is due against
// the value worked out from the multiplier's error formula, and the control
// variate must reduce the mean absolute convolution error.
module tb_cv_systolic_array_full;
  import cv_pkg::*;

  localparam int N = 64;              // defaults of cv_systolic_array
  localparam int AW = acc_width(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 rst_n, load, done;
  logic [N-1:0][7:0]    w_in, bias, act_in;
  logic [7:0]           c_in;
  logic [N-1:0][AW-1:0] g_out;
  int checks, failures, n_load, n_v, n_x0, n_blo, n_rl;

  cv_systolic_array dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
    .bias(bias), .act_in(act_in), .g_out(g_out));

  tb_array_harness #(.KIND(AXM_PERFORATED), .M(2), .N(N), .T(96), .PHASES(2)) harness (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
    .bias(bias), .act_in(act_in), .g_out(g_out), .done(done),
    .checks(checks), .failures(failures), .n_load(n_load), .n_v_nonzero(n_v),
    .n_x_zero(n_x0), .n_blo_nonzero(n_blo), .n_reload(n_rl));

  int extra_checks = 0, extra_failures = 0;

  task automatic mechanism(string what, int count);
    extra_checks++;
    $display("%s happened %0d times", what, count);
    if (count == 0) begin
      extra_failures++;
      $display("FAIL %s never happened", what);
    end
  endtask

  initial begin
    wait (done);
    mechanism("weight/C load cycle", n_load);
    mechanism("weight reload", n_rl);
    mechanism("control variate V != 0", n_v);
    mechanism("activation with x_j = 0", n_x0);
    mechanism("nonzero low bias bits in MAC+", n_blo);
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
