// tb_cv_configs: runs every multiplier configuration the design is evaluated
// at through a 16 x 17 array (the smallest array size evaluated): perforated
// M = 1, 2, 3; truncated M = 5, 6, 7; recursive M = 2, 3, 4. Each array loads
// filters with concentrated weights, streams 48 activation vectors, checks
// every output bit-exactly at its due cycle, and must show a smaller mean
// absolute convolution error with the control variate V than without it. The
// measured errors are printed per configuration.
module tb_cv_configs;
  import cv_pkg::*;

  localparam int N = 16;
  localparam int AW = acc_width(N);
  localparam int NCFG = 9;
  localparam axm_kind_e KS [NCFG] = '{AXM_PERFORATED, AXM_PERFORATED, AXM_PERFORATED,
                                      AXM_TRUNCATED, AXM_TRUNCATED, AXM_TRUNCATED,
                                      AXM_RECURSIVE, AXM_RECURSIVE, AXM_RECURSIVE};
  localparam int MS [NCFG] = '{1, 2, 3, 5, 6, 7, 2, 3, 4};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] done;
  int chk [NCFG], fl [NCFG], n_load [NCFG], n_v [NCFG], n_x0 [NCFG], n_blo [NCFG], n_rl [NCFG];

  for (genvar k = 0; k < NCFG; k++) begin : g_cfg
    logic                 rst_n, load;
    logic [N-1:0][7:0]    w_in, bias, act_in;
    logic [7:0]           c_in;
    logic [N-1:0][AW-1:0] g_out;

    cv_systolic_array #(.KIND(KS[k]), .M(MS[k]), .N(N)) dut (
      .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
      .bias(bias), .act_in(act_in), .g_out(g_out));

    tb_array_harness #(.KIND(KS[k]), .M(MS[k]), .N(N), .T(48), .PHASES(1)) harness (
      .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
      .bias(bias), .act_in(act_in), .g_out(g_out), .done(done[k]),
      .checks(chk[k]), .failures(fl[k]), .n_load(n_load[k]), .n_v_nonzero(n_v[k]),
      .n_x_zero(n_x0[k]), .n_blo_nonzero(n_blo[k]), .n_reload(n_rl[k]));
  end

  initial begin
    int checks, failures;
    wait (&done);
    checks = 0; failures = 0;
    for (int k = 0; k < NCFG; k++) begin
      $display("config %0d: kind %s M=%0d: %0d checks, %0d failures",
               k, KS[k].name(), MS[k], chk[k], fl[k]);
      checks += chk[k];
      failures += fl[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
