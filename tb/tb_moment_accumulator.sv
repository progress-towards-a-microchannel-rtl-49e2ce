// tb_moment_accumulator -- feeds Gaussian-shaped strip events with noise and
// compares the eight weighted sums and the strip count with sums computed here
// in 64-bit integers. The log term is recomputed independently from log10.
// Also checks the fixed latency (NSTRIPS + 1 clocks from accept to out_valid)
// and that the result is held while out_ready is low.
module tb_moment_accumulator;
  import csa_pkg::*;
  localparam int NS = NSTRIPS;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [Z_W-1:0] in_charge [NS];
  logic [Z_W-1:0] threshold;
  moments_t m;
  int checks = 0, failures = 0;

  moment_accumulator #(.NSTR(NS)) dut (.*, .out_moments(m));

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint lnz2(int z);
    if (z < 2) return 0;
    return longint'($floor(real'(z) * real'(z) * $log10(real'(z)) * 2.302585092994046 + 0.5));
  endfunction

  task automatic check(string what, longint got, longint exp, int tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_event(real mu, real sigma, real amp, int thr, int hold);
    longint e[8];
    int n = 0, lat = 0;
    for (int i = 0; i < 8; i++) e[i] = 0;
    for (int i = 0; i < NS; i++) begin
      real v = amp * $exp(-((i - mu) ** 2) / (2.0 * sigma * sigma)) + real'($urandom_range(0, 6));
      int z = (v > 4095.0) ? 4095 : int'(v);
      in_charge[i] = Z_W'(z);
      if (z > thr) begin
        longint w = longint'(z) * z;
        longint xc = i - NS / 2;
        longint l = lnz2(z);
        e[0] += w; e[1] += w * xc; e[2] += w * xc * xc; e[3] += w * xc * xc * xc;
        e[4] += w * xc * xc * xc * xc;
        e[5] += l; e[6] += l * xc; e[7] += l * xc * xc;
        n++;
      end
    end
    threshold = Z_W'(thr);
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    check("latency", lat, NS + 1, 0);
    repeat (hold) @(posedge clk);
    #1;
    check("s0", m.s0, e[0], 0); check("s1", m.s1, e[1], 0); check("s2", m.s2, e[2], 0);
    check("s3", m.s3, e[3], 0); check("s4", m.s4, e[4], 0);
    check("t0", m.t0, e[5], NS); check("t1", m.t1, e[6], NS * 32); check("t2", m.t2, e[7], NS * 1024);
    check("n", m.n, n, 0);
    out_ready = 1; @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; threshold = '0;
    for (int i = 0; i < NS; i++) in_charge[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_event(20.3, 1.5, 3000.0, 20, 0);
    run_event(40.7, 2.2, 1200.0, 30, 4);
    run_event(0.2, 1.0, 4500.0, 10, 1);   // clipped charges at the anode edge
    run_event(63.0, 1.8, 800.0, 15, 0);
    for (int k = 0; k < 20; k++)
      run_event(2.0 + 59.0 * real'($urandom_range(0, 1000)) / 1000.0,
                1.0 + real'($urandom_range(0, 200)) / 100.0,
                200.0 + real'($urandom_range(0, 3800)), 5 + $urandom_range(0, 40), k % 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
