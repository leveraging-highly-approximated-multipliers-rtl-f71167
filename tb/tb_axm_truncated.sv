// tb_axm_truncated: exhaustive self-check of the truncated multiplier.
//
// For M = 4..7 (the levels of the published error table) all 65536 operand
// pairs are applied and each output is compared with the value worked out here
// from the error formula, (W*A - err(W,A)) >> M with
//   err = sum_{i<M} (W mod 2^(M-i)) * a_i * 2^i.
// Over all pairs (a uniform U(0,255) distribution) the mean and standard
// deviation of W*A - AM must also match the published error table within 3 %
// (or 0.05 absolute).
module tb_axm_truncated;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int LO = 4;
  localparam int HI = 7;

  logic [7:0] w, a;
  logic [15:0] pw [LO:HI];
  int checks = 0, failures = 0;

  for (genvar m = LO; m <= HI; m++) begin : g_dut
    logic [15-m:0] p;
    axm_truncated #(.M(m)) dut (.w(w), .a(a), .p(p));
    assign pw[m] = 16'(p);
  end

  function automatic int err_model(int ww, int aa, int m);
    int s = 0; for (int i = 0; i < m; i++) s += (ww % (1 << (m - i))) * ((aa >> i) & 1) * (1 << i); return s;
  endfunction

  task automatic check_stat(string what, real val, real ref_val);
    checks++;
    if ((val < ref_val * 0.97 - 0.05) || (val > ref_val * 1.03 + 0.05)) begin
      failures++;
      $display("FAIL %s = %f, expected about %f", what, val, ref_val);
    end
  endtask

  real ref_mu [LO:HI] = '{12.0, 32.0, 80.0, 192.0};
  real ref_sd [LO:HI] = '{9.9, 23.0, 52.0, 115.0};

  initial begin
    real sum_e [LO:HI];
    real sum_e2[LO:HI];
    for (int m = LO; m <= HI; m++) begin sum_e[m] = 0.0; sum_e2[m] = 0.0; end
    for (int ww = 0; ww < 256; ww++) begin
      for (int aa = 0; aa < 256; aa++) begin
        w = 8'(ww);
        a = 8'(aa);
        #1;
        for (int m = LO; m <= HI; m++) begin
          int e, expv;
          expv = (ww * aa - err_model(ww, aa, m)) >> m;
          checks++;
          if (int'(pw[m]) != expv) begin
            failures++;
            if (failures < 10)
              $display("FAIL M=%0d w=%0d a=%0d p=%0d exp=%0d", m, ww, aa, pw[m], expv);
          end
          e = ww * aa - (int'(pw[m]) << m);
          sum_e[m]  += real'(e);
          sum_e2[m] += real'(e) * real'(e);
        end
      end
    end
    for (int m = LO; m <= HI; m++) begin
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
