// tb_flat_field_correction -- the flat-field calibration of the sub-strip
// non-linearity, run on the full processor.
//
// Charge clouds that are not Gaussian (Lorentzian profiles, with wide wings)
// are placed uniformly over strips 8..56 on both axes. The log-parabola fit
// then compresses and stretches positions periodically
// between strips. Pass 1 histograms the raw 10-bit fraction of each axis and
// builds the correction table from its cumulative distribution,
// corr[f] = floor(32 * CDF(f)), which makes the corrected fraction uniform
// under flat illumination. The tables are loaded through the configuration
// port. Pass 2, with new events, histograms the 32 corrected fraction bins and
// requires that their spread (largest relative deviation from the mean) has
// shrunk compared with the uncorrected bins of pass 1 and is below 25 %.
module tb_flat_field_correction;
  import csa_pkg::*;

  localparam int NEV = 16000;

  logic clk = 0, rst_n = 0;
  logic [Z_W-1:0] thr_x = 12'd15, thr_y = 12'd15;
  logic cfg_we = 0, cfg_axis = 0;
  logic [FRAC_W-1:0] cfg_addr = '0;
  logic [CFRAC_W-1:0] cfg_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [Z_W-1:0] charge_x [NSTRIPS];
  logic [Z_W-1:0] charge_y [NSTRIPS];
  axis_result_t res_x, res_y;
  int checks = 0, failures = 0;

  csa_centroid_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hraw [2][1024];
  int hcor [2][32];
  int pass = 1;
  int n_out = 0;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    n_out++;
    if (res_x.status == ST_OK && res_y.status == ST_OK) begin
      if (pass == 1) begin
        hraw[0][res_x.raw_pos[9:0]]++;
        hraw[1][res_y.raw_pos[9:0]]++;
      end else begin
        hcor[0][res_x.pos[4:0]]++;
        hcor[1][res_y.pos[4:0]]++;
      end
    end
  end

  function automatic real spread(int h[32]);
    real mean = 0.0, worst = 0.0;
    for (int i = 0; i < 32; i++) mean += real'(h[i]);
    mean /= 32.0;
    for (int i = 0; i < 32; i++) begin
      real d = (real'(h[i]) - mean) / mean;
      if (d < 0) d = -d;
      if (d > worst) worst = d;
    end
    return worst;
  endfunction

  task automatic cloud(real mu, real amp, real s1, output int z[NSTRIPS]);
    for (int i = 0; i < NSTRIPS; i++) begin
      real v = amp / (1.0 + ((i - mu) / s1) ** 2) + real'($urandom_range(0, 6));
      z[i] = (v > 4095.0) ? 4095 : int'(v);
    end
  endtask

  task automatic run_pass();
    int zx[NSTRIPS], zy[NSTRIPS];
    int start = n_out;
    for (int k = 0; k < NEV; k++) begin
      cloud(8.0 + 48.0 * real'($urandom_range(0, 100000)) / 100000.0,
            1500.0 + real'($urandom_range(0, 1500)), 0.9, zx);
      cloud(8.0 + 48.0 * real'($urandom_range(0, 100000)) / 100000.0,
            1500.0 + real'($urandom_range(0, 1500)), 1.2, zy);
      @(negedge clk);
      for (int i = 0; i < NSTRIPS; i++) begin
        charge_x[i] = Z_W'(zx[i]);
        charge_y[i] = Z_W'(zy[i]);
      end
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (n_out < start + NEV) @(posedge clk);
  endtask

  initial begin
    int hun [2][32];
    real sp_raw, sp_cor;
    for (int a = 0; a < 2; a++) begin
      for (int i = 0; i < 1024; i++) hraw[a][i] = 0;
      for (int i = 0; i < 32; i++) hcor[a][i] = 0;
    end
    for (int i = 0; i < NSTRIPS; i++) begin charge_x[i] = '0; charge_y[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_pass();
    // correction tables from the cumulative distribution
    for (int a = 0; a < 2; a++) begin
      longint tot, cum;
      tot = 0;
      cum = 0;
      for (int i = 0; i < 1024; i++) tot += hraw[a][i];
      for (int i = 0; i < 32; i++) hun[a][i] = 0;
      for (int i = 0; i < 1024; i++) begin
        int v;
        hun[a][i / 32] += hraw[a][i];
        v = int'((32 * (cum + hraw[a][i] / 2)) / tot);
        if (v > 31) v = 31;
        cum += hraw[a][i];
        @(negedge clk);
        cfg_we = 1; cfg_axis = a[0]; cfg_addr = FRAC_W'(i); cfg_data = CFRAC_W'(v);
      end
      @(negedge clk) cfg_we = 0;
    end
    pass = 2;
    run_pass();
    for (int a = 0; a < 2; a++) begin
      for (int i = 0; i < 32; i++) $write("%0d/%0d ", hun[a][i], hcor[a][i]); $display("");
      sp_raw = spread(hun[a]);
      sp_cor = spread(hcor[a]);
      $display("axis %0d: largest bin deviation uncorrected %.3f corrected %.3f", a, sp_raw, sp_cor);
      checks++;
      if (!(sp_cor < sp_raw)) begin failures++; $display("correction did not flatten axis %0d", a); end
      checks++;
      if (!(sp_cor < 0.25)) begin failures++; $display("corrected axis %0d not flat", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
