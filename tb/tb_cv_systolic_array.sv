// tb_cv_systolic_array: end-to-end test of the approximate systolic array at
// reduced size (N = 8), once for each multiplier kind: perforated M=2,
// recursive M=3 and truncated M=5. Each array gets two phases of weight and C
// loading (so one reload), streams 40 activation vectors per phase at one
// vector per cycle, and every output is checked at the exact cycle it is due,
// which also checks the N+1 cycle latency of a row. Every mechanism of the
// array must have happened: weight/C loading, a reload, V != 0, an x_j = 0
// activation and a nonzero low-bias part; one that never did counts a failure.
module tb_cv_systolic_array;
  import cv_pkg::*;

  localparam int N = 8;
  localparam int AW = acc_width(N);
  localparam int MS [3] = '{2, 3, 5};
  localparam axm_kind_e KS [3] = '{AXM_PERFORATED, AXM_RECURSIVE, AXM_TRUNCATED};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0] done;
  int chk [3], fl [3], n_load [3], n_v [3], n_x0 [3], n_blo [3], n_rl [3];

  for (genvar k = 0; k < 3; k++) begin : g_cfg
    logic                 rst_n, load;
    logic [N-1:0][7:0]    w_in, bias, act_in;
    logic [7:0]           c_in;
    logic [N-1:0][AW-1:0] g_out;

    cv_systolic_array #(.KIND(KS[k]), .M(MS[k]), .N(N)) dut (
      .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
      .bias(bias), .act_in(act_in), .g_out(g_out));

    tb_array_harness #(.KIND(KS[k]), .M(MS[k]), .N(N), .T(40), .PHASES(2)) harness (
      .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
      .bias(bias), .act_in(act_in), .g_out(g_out), .done(done[k]),
      .checks(chk[k]), .failures(fl[k]), .n_load(n_load[k]), .n_v_nonzero(n_v[k]),
      .n_x_zero(n_x0[k]), .n_blo_nonzero(n_blo[k]), .n_reload(n_rl[k]));
  end

  int checks, failures;

  task automatic mechanism(string what, int k, int count);
    checks++;
    $display("config %0d: %s happened %0d times", k, what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL config %0d: %s never happened", k, what);
    end
  endtask

  initial begin
    wait (&done);
    checks = 0; failures = 0;
    for (int k = 0; k < 3; k++) begin
      checks += chk[k];
      failures += fl[k];
      mechanism("weight/C load cycle", k, n_load[k]);
      mechanism("weight reload", k, n_rl[k]);
      mechanism("control variate V != 0", k, n_v[k]);
      mechanism("activation with x_j = 0", k, n_x0[k]);
      mechanism("nonzero low bias bits in MAC+", k, n_blo[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2], fl[0] + fl[1] + fl[2] + 1);
    $finish;
  end
endmodule
