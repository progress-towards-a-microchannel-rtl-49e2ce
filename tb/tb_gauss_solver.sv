// tb_gauss_solver -- builds the weighted sums of Gaussian strip events here,
// solves the 3x3 system here in double precision by Gaussian elimination with
// pivoting, and compares b = det_b/det(M), c = det_c/det(M) and the centre
// -b/(2c) with the block's determinants. Also checks that out_valid rises one clock after the accepting clock and
// that a peak gives det_c < 0.
module tb_gauss_solver;
  import csa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  moments_t in_m;
  dets_t out_d;
  int checks = 0, failures = 0;

  gauss_solver dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_rel(string what, real got, real exp, real tol);
    real d = got - exp;
    real s = (exp < 0) ? -exp : exp;
    checks++;
    if (d < 0) d = -d;
    if (d > tol * (s + 1e-30)) begin
      failures++;
      $display("%s: got %g expected %g", what, got, exp);
    end
  endtask

  task automatic run_event(real mu, real sigma, real amp, int thr);
    longint s[5], t[3];
    real M[3][4], tmp, detm, sol[3];
    int lat = 0;
    for (int k = 0; k < 5; k++) s[k] = 0;
    for (int k = 0; k < 3; k++) t[k] = 0;
    for (int i = 0; i < NSTRIPS; i++) begin
      real v = amp * $exp(-((i - mu) ** 2) / (2.0 * sigma * sigma)) + real'($urandom_range(0, 4));
      int z = (v > 4095.0) ? 4095 : int'(v);
      if (z > thr) begin
        longint w = longint'(z) * z, xc = i - NSTRIPS / 2, p = 1;
        longint l = (z < 2) ? 0 : longint'($floor(real'(w) * $ln(real'(z)) + 0.5));
        for (int k = 0; k < 5; k++) begin
          s[k] += w * p;
          if (k < 3) t[k] += l * p;
          p *= xc;
        end
      end
    end
    in_m.s0 = s[0]; in_m.s1 = s[1]; in_m.s2 = s[2]; in_m.s3 = s[3]; in_m.s4 = s[4];
    in_m.t0 = t[0]; in_m.t1 = t[1]; in_m.t2 = t[2]; in_m.n = '0;
    // reference: Gaussian elimination with partial pivoting
    for (int r = 0; r < 3; r++) begin
      for (int c = 0; c < 3; c++) M[r][c] = real'(s[r + c]);
      M[r][3] = real'(t[r]);
    end
    detm = 1.0;
    for (int c = 0; c < 3; c++) begin
      int piv = c;
      for (int r = c + 1; r < 3; r++)
        if ((M[r][c] < 0 ? -M[r][c] : M[r][c]) > (M[piv][c] < 0 ? -M[piv][c] : M[piv][c])) piv = r;
      if (piv != c) begin
        for (int k = 0; k < 4; k++) begin tmp = M[c][k]; M[c][k] = M[piv][k]; M[piv][k] = tmp; end
        detm = -detm;
      end
      detm *= M[c][c];
      for (int r = c + 1; r < 3; r++) begin
        real f = M[r][c] / M[c][c];
        for (int k = c; k < 4; k++) M[r][k] -= f * M[c][k];
      end
    end
    for (int r = 2; r >= 0; r--) begin
      real acc = M[r][3];
      for (int k = r + 1; k < 3; k++) acc -= M[r][k] * sol[k];
      sol[r] = acc / M[r][r];
    end
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != 1) begin failures++; $display("latency %0d", lat); end
    check_rel("b", real'(out_d.det_b) / detm, sol[1], 1e-6);
    check_rel("c", real'(out_d.det_c) / detm, sol[2], 1e-6);
    check_rel("centre", -real'(out_d.det_b) / (2.0 * real'(out_d.det_c)), -sol[1] / (2.0 * sol[2]), 1e-6);
    checks++;
    if (!(out_d.det_c < 0)) begin failures++; $display("det_c not negative"); end
    out_ready = 1; @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_event(20.3, 1.5, 3000.0, 20);
    run_event(45.9, 2.5, 900.0, 30);
    for (int k = 0; k < 40; k++)
      run_event(3.0 + 57.0 * real'($urandom_range(0, 1000)) / 1000.0,
                1.0 + real'($urandom_range(0, 200)) / 100.0,
                300.0 + real'($urandom_range(0, 3700)), 10 + $urandom_range(0, 30));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
