// tb_mac_plus: self-check of the MAC+ unit for two configurations: perforated
// M=2 with N=8 (20-bit result, 5-bit sumX) and truncated M=6 with N=64 (22-bit
// result, 7-bit sumX).
//
// Every cycle random sumX, partial sum and low-bias inputs are applied; one
// cycle later g_out must equal ({s, b_lo} + C*sumX) mod 2^ACC_W, worked out
// here with plain integer arithmetic. C loads only while c_load is high and is
// passed on c_out; values offered with c_load low must not disturb it.
module tb_mac_plus;
  import cv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  localparam int NS [2] = '{8, 64};
  localparam int MS [2] = '{2, 6};
  localparam axm_kind_e KS [2] = '{AXM_PERFORATED, AXM_TRUNCATED};

  logic        c_load;
  logic [7:0]  c_in;
  logic [7:0]  c_out [2];
  logic [31:0] x_in, s_in;
  logic [7:0]  b_in;
  logic [31:0] g_out [2];

  for (genvar k = 0; k < 2; k++) begin : g_dut
    localparam int AW = acc_width(NS[k]);
    localparam int SW = sum_width(NS[k], MS[k]);
    localparam int XW = sumx_width(KS[k], NS[k], MS[k]);
    logic [AW-1:0] g;
    mac_plus #(.KIND(KS[k]), .M(MS[k]), .N(NS[k])) dut (
      .clk(clk), .rst_n(rst_n), .c_load(c_load), .c_in(c_in), .c_out(c_out[k]),
      .x_in(x_in[XW-1:0]), .s_in(s_in[SW-1:0]), .b_lo(b_in[MS[k]-1:0]), .g_out(g));
    assign g_out[k] = 32'(g);
  end

  task automatic expect_eq(string what, int k, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s cfg=%0d got=%0d exp=%0d", what, k, got, exp);
    end
  endtask

  initial begin
    longint c_held;
    rst_n = 1'b0; c_load = 1'b0; c_in = '0; x_in = '0; s_in = '0; b_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int iter = 0; iter < 4000; iter++) begin
      longint xv, sv, bv;
      @(negedge clk);
      c_load = (iter % 50 == 0);
      c_in = 8'($urandom);
      if (c_load) c_held = longint'(c_in);
      x_in = $urandom; s_in = $urandom; b_in = 8'($urandom);
      if (iter % 13 == 1) begin x_in = '1; s_in = '1; end   // wrap-around corner
      xv = longint'(x_in); sv = longint'(s_in); bv = longint'(b_in);
      @(posedge clk);
      #1;
      for (int k = 0; k < 2; k++) begin
        int aw, sw, xw, m;
        longint am, s_k, x_k, b_k, exp_g;
        aw = acc_width(NS[k]); sw = sum_width(NS[k], MS[k]);
        xw = sumx_width(KS[k], NS[k], MS[k]); m = MS[k];
        am = (64'd1 << aw) - 1;
        s_k = sv & ((64'd1 << sw) - 1);
        x_k = xv & ((64'd1 << xw) - 1);
        b_k = bv & ((64'd1 << m) - 1);
        exp_g = ((s_k << m) + b_k + c_held * x_k) & am;
        expect_eq("g_out", k, longint'(g_out[k]), exp_g);
        expect_eq("c_out", k, longint'(c_out[k]), c_held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
