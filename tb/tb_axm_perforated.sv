// tb_axm_perforated: exhaustive self-check of the perforated multiplier.
//
// For M = 1, 2, 3 (the levels the design is evaluated at) every one of the
// 65536 operand pairs is applied. Each output is compared with
//   (W*A - W*(A mod 2^M)) >> M,
// computed here from the error formula rather than from partial products. The
// error W*A - AM_P over all pairs (a uniform U(0,255) distribution) must also
// give the mean and standard deviation of the published error table
// (63.7/82, 191/198, 447/425), within 3 %.
module tb_axm_perforated;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  w, a;
  logic [14:0] p1;
  logic [13:0] p2;
  logic [12:0] p3;
  int checks = 0, failures = 0;

  axm_perforated #(.M(1)) dut1 (.w(w), .a(a), .p(p1));
  axm_perforated #(.M(2)) dut2 (.w(w), .a(a), .p(p2));
  axm_perforated #(.M(3)) dut3 (.w(w), .a(a), .p(p3));

  function automatic int expected(int ww, int aa, int m);
    return (ww * aa - ww * (aa % (1 << m))) >> m;
  endfunction

  function automatic int got(int m);
    case (m)
      1: return int'(p1);
      2: return int'(p2);
      default: return int'(p3);
    endcase
  endfunction

  task automatic check_stat(string what, real val, real ref_val);
    checks++;
    if (val < ref_val * 0.97 || val > ref_val * 1.03) begin
      failures++;
      $display("FAIL %s = %f, expected about %f", what, val, ref_val);
    end
  endtask

  real ref_mu [1:3] = '{63.7, 191.0, 447.0};
  real ref_sd [1:3] = '{82.0, 198.0, 425.0};

  initial begin
    real sum_e [1:3];
    real sum_e2[1:3];
    for (int m = 1; m <= 3; m++) begin sum_e[m] = 0.0; sum_e2[m] = 0.0; end
    for (int ww = 0; ww < 256; ww++) begin
      for (int aa = 0; aa < 256; aa++) begin
        w = 8'(ww);
        a = 8'(aa);
        #1;
        for (int m = 1; m <= 3; m++) begin
          int e;
          checks++;
          if (got(m) != expected(ww, aa, m)) begin
            failures++;
            if (failures < 10)
              $display("FAIL M=%0d w=%0d a=%0d p=%0d exp=%0d", m, ww, aa, got(m), expected(ww, aa, m));
          end
          e = ww * aa - (got(m) << m);
          sum_e[m]  += real'(e);
          sum_e2[m] += real'(e) * real'(e);
        end
      end
    end
    for (int m = 1; m <= 3; m++) begin
      real mu, sd;
      mu = sum_e[m] / 65536.0;
      sd = $sqrt(sum_e2[m] / 65536.0 - mu * mu);
      $display("M=%0d error mean %f sd %f", m, mu, sd);
      check_stat($sformatf("M=%0d mean", m), mu, ref_mu[m]);
      check_stat($sformatf("M=%0d sd", m), sd, ref_sd[m]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
