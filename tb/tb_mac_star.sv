// tb_mac_star: self-check of the MAC* processing element for all three
// multiplier kinds (perforated M=2, recursive M=3, truncated M=5; N=8 sizes the
// adders: 20-bit accumulator, so 18/17/15-bit partial sums).
//
// Each cycle random activation, partial-sum and sumX inputs are applied; one
// cycle later the outputs must equal
//   s_out = s_in + AM(W,A)/2^M,  x_out = x_in + x(A),  a_out = A,
// with AM and x worked out here from the error formulas of each multiplier.
// Weights load only while w_load is high: random w_in values offered with
// w_load low must not change the held weight, and every held weight must
// appear on w_out. Latency of one cycle is checked by construction (inputs of
// cycle k are compared with outputs after edge k+1).
module tb_mac_star;
  import cv_pkg::*;

  localparam int N = 8;
  localparam int ACC = acc_width(N);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic       w_load;
  logic [7:0] w_in, a_in;
  logic [7:0] w_out [3];
  logic [7:0] a_out [3];
  logic [31:0] s_in, x_in;
  logic [31:0] s_out [3];
  logic [31:0] x_out [3];

  localparam int MS [3] = '{2, 3, 5};
  localparam axm_kind_e KS [3] = '{AXM_PERFORATED, AXM_RECURSIVE, AXM_TRUNCATED};

  for (genvar k = 0; k < 3; k++) begin : g_dut
    localparam int SW = sum_width(N, MS[k]);
    localparam int XW = sumx_width(KS[k], N, MS[k]);
    logic [SW-1:0] so;
    logic [XW-1:0] xo;
    mac_star #(.KIND(KS[k]), .M(MS[k]), .N(N)) dut (
      .clk(clk), .rst_n(rst_n), .w_load(w_load), .w_in(w_in), .w_out(w_out[k]),
      .a_in(a_in), .a_out(a_out[k]), .s_in(s_in[SW-1:0]), .s_out(so),
      .x_in(x_in[XW-1:0]), .x_out(xo));
    assign s_out[k] = 32'(so);
    assign x_out[k] = 32'(xo);
  end

  function automatic int am(axm_kind_e kind, int ww, int aa, int m);
    int e = 0;
    case (kind)
      AXM_PERFORATED: e = ww * (aa % (1 << m));
      AXM_RECURSIVE:  e = (ww % (1 << m)) * (aa % (1 << m));
      default: for (int i = 0; i < m; i++) e += (ww % (1 << (m - i))) * ((aa >> i) & 1) * (1 << i);
    endcase
    return ww * aa - e;
  endfunction

  function automatic int xj(axm_kind_e kind, int aa, int m);
    if (kind == AXM_TRUNCATED) return (aa % (1 << m)) != 0 ? 1 : 0;
    return aa % (1 << m);
  endfunction

  task automatic expect_eq(string what, int k, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s kind=%0d got=%0d exp=%0d", what, k, got, exp);
    end
  endtask

  initial begin
    int w_held;
    int sw, xw;
    rst_n = 1'b0; w_load = 1'b0; w_in = '0; a_in = '0; s_in = '0; x_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int iter = 0; iter < 4000; iter++) begin
      int a_v, s_v, x_v;
      @(negedge clk);
      if (iter % 100 == 0) begin
        w_load = 1'b1; w_in = 8'($urandom); w_held = int'(w_in);
      end else begin
        w_load = 1'b0; w_in = 8'($urandom);
      end
      a_v = int'($urandom_range(0, 255));
      // corner activations now and then: 0, 255 and zero low bits
      if (iter % 7 == 3) a_v = 255;
      if (iter % 11 == 5) a_v = a_v & 8'hE0;
      s_v = int'($urandom);
      x_v = int'($urandom);
      a_in = 8'(a_v); s_in = 32'(s_v); x_in = 32'(x_v);
      @(posedge clk);
      #1;
      for (int k = 0; k < 3; k++) begin
        longint sm, xm;
        sw = sum_width(N, MS[k]);
        xw = sumx_width(KS[k], N, MS[k]);
        sm = (64'd1 << sw) - 1;
        xm = (64'd1 << xw) - 1;
        expect_eq("w_out", k, w_out[k], w_held);
        expect_eq("a_out", k, a_out[k], a_v);
        expect_eq("s_out", k, s_out[k],
                  ((longint'(s_v) & sm) + (am(KS[k], w_held, a_v, MS[k]) >> MS[k])) & sm);
        expect_eq("x_out", k, x_out[k],
                  ((longint'(x_v) & xm) + xj(KS[k], a_v, MS[k])) & xm);
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
