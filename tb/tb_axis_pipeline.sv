// tb_axis_pipeline -- end-to-end test of one axis. Gaussian charge clouds with
// noise are generated here; the reference position is a weighted
// log-parabola least-squares fit computed here in double precision (Gaussian
// elimination, natural log). The raw 10-bit-fraction position must agree
// within 2/1024 strip, the corrected position must equal {strip, fraction>>5}
// with the start-up table, and the status must match. Also checks the fixed
// latency (86 clocks) and the throughput (one event per 67 clocks).
module tb_axis_pipeline;
  import csa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [Z_W-1:0] threshold;
  logic cfg_we = 0;
  logic [FRAC_W-1:0] cfg_addr = '0;
  logic [CFRAC_W-1:0] cfg_data = '0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [Z_W-1:0] in_charge [NSTRIPS];
  axis_result_t out_res;
  int checks = 0, failures = 0;

  axis_pipeline dut (.*);

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference fit: returns status, position * 1024
  function automatic fit_status_e ref_fit(int z[NSTRIPS], int thr, output real pos);
    real M[3][4], s[5], t[3], sol[3];
    int n = 0;
    pos = 0.0;
    for (int k = 0; k < 5; k++) s[k] = 0.0;
    for (int k = 0; k < 3; k++) t[k] = 0.0;
    for (int i = 0; i < NSTRIPS; i++)
      if (z[i] > thr) begin
        real w = real'(z[i]) * real'(z[i]), x = real'(i - NSTRIPS / 2), p = 1.0;
        real l = w * $ln(real'(z[i]));
        for (int k = 0; k < 5; k++) begin
          s[k] += w * p;
          if (k < 3) t[k] += l * p;
          p *= x;
        end
        n++;
      end
    if (n < 3) return ST_FEW;
    for (int r = 0; r < 3; r++) begin
      for (int c = 0; c < 3; c++) M[r][c] = s[r + c];
      M[r][3] = t[r];
    end
    for (int c = 0; c < 3; c++)
      for (int r = c + 1; r < 3; r++) begin
        real f = M[r][c] / M[c][c];
        for (int k = c; k < 4; k++) M[r][k] -= f * M[c][k];
      end
    for (int r = 2; r >= 0; r--) begin
      real acc = M[r][3];
      for (int k = r + 1; k < 3; k++) acc -= M[r][k] * sol[k];
      sol[r] = acc / M[r][r];
    end
    if (sol[2] >= 0.0) return ST_NOT_PEAK;
    pos = (-sol[1] / (2.0 * sol[2]) + real'(NSTRIPS / 2)) * 1024.0;
    if (pos < 0.0 || pos >= real'(NSTRIPS * 1024)) return ST_RANGE;
    return ST_OK;
  endfunction

  // expected results, in order
  fit_status_e q_st[$];
  real         q_pos[$];
  longint      q_t[$];

  // kind 0: Gaussian cloud, 1: valley (no maximum), 2: cloud centred off the anode
  task automatic make_event(real mu, real sigma, real amp, int thr, int kind = 0);
    int z[NSTRIPS];
    real p;
    fit_status_e st;
    for (int i = 0; i < NSTRIPS; i++) begin
      real v = (kind == 1) ? 40.0 + 1.5 * real'((i - 32) * (i - 32))
             : (kind == 2) ? amp * $exp(-((i + 1.5) ** 2) / 2.0)
             : amp * $exp(-((i - mu) ** 2) / (2.0 * sigma * sigma));
      v += real'($urandom_range(0, 8));
      z[i] = (v > 4095.0) ? 4095 : int'(v);
      in_charge[i] = Z_W'(z[i]);
    end
    threshold = Z_W'(thr);
    st = ref_fit(z, thr, p);
    q_st.push_back(st);
    q_pos.push_back(p);
  endtask

  // checker
  int n_out = 0;
  longint last_acc = -1;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    q_t.push_back(cyc);
    if (last_acc >= 0) begin
      checks++;
      if (cyc - last_acc != 67) begin failures++; $display("event spacing %0d", cyc - last_acc); end
    end
    last_acc = cyc;
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    fit_status_e es;
    real ep;
    longint t0;
    es = q_st.pop_front();
    ep = q_pos.pop_front();
    t0 = q_t.pop_front();
    n_out++;
    checks++;
    if (cyc - t0 != 87)   // out_valid rises 86 clocks after accept, taken at the next edge
      begin failures++; $display("latency %0d", cyc - t0); end
    checks++;
    if (out_res.status != es) begin
      failures++; $display("status %s expected %s", out_res.status.name(), es.name());
    end else if (es == ST_OK) begin
      real d;
      d = real'(out_res.raw_pos) - $floor(ep);
      checks++;
      if (d > 2.0 || d < -2.0) begin failures++; $display("raw %0d expected %f", out_res.raw_pos, ep); end
      checks++;
      if (out_res.pos != out_res.raw_pos[15:5]) begin failures++; $display("corrected pos %h", out_res.pos); end
    end
  end

  initial begin
    in_valid = 0; out_ready = 1; threshold = '0;
    for (int i = 0; i < NSTRIPS; i++) in_charge[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      if (k == 0) make_event(31.25, 1.6, 2500.0, 20);
      else if (k == 1) make_event(30.0, 0.3, 2000.0, 20);   // one strip only
      else make_event(2.0 + 59.0 * real'($urandom_range(0, 1000)) / 1000.0,
                      1.0 + real'($urandom_range(0, 200)) / 100.0,
                      300.0 + real'($urandom_range(0, 3700)), 12 + $urandom_range(0, 30),
                      (k % 9 == 4) ? 1 : (k % 9 == 7) ? 2 : 0);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
      repeat (60) @(posedge clk);   // next event is offered before the scan ends
    end
    while (n_out < 60) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
