// tb_csa_centroid_top -- end-to-end test of the 64 x 64 strip event position
// processor at its default size.
//
// Photon events are generated here as Gaussian charge clouds on both axes with
// different widths per axis (the MCP bias angle makes the cloud elliptic),
// plus noise. Each axis result is compared with a weighted log-parabola fit
// computed here in double precision: status must match, the raw position must
// agree within 2/1024 strip, and the corrected position must equal the strip
// index joined with the entry of the correction table that this testbench
// loaded. Both correction tables are loaded with different curves at start and
// reloaded with new curves half-way.
//
// Mechanisms made to happen and counted (a failure if one never happens):
// strips below threshold ignored, too few strips, no peak (c >= 0), centre off
// the anode, output back-pressure stalling the input, a table reload, and
// events whose two axes end with different status.
module tb_csa_centroid_top;
  import csa_pkg::*;

  localparam int NEV = 400;

  logic clk = 0, rst_n = 0;
  logic [Z_W-1:0] thr_x, thr_y;
  logic cfg_we, cfg_axis;
  logic [FRAC_W-1:0] cfg_addr;
  logic [CFRAC_W-1:0] cfg_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [Z_W-1:0] charge_x [NSTRIPS];
  logic [Z_W-1:0] charge_y [NSTRIPS];
  axis_result_t res_x, res_y;
  int checks = 0, failures = 0;

  csa_centroid_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_below = 0, n_few = 0, n_notpeak = 0, n_range = 0, n_ok = 0;
  int n_stall = 0, n_reload = 0, n_mixed = 0;

  logic [CFRAC_W-1:0] tbl [2][1024];

  function automatic fit_status_e ref_fit(int z[NSTRIPS], int thr, output real pos, output int nbelow);
    real M[3][4], s[5], t[3], sol[3];
    int n = 0;
    pos = 0.0;
    nbelow = 0;
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
      end else if (z[i] > 0) nbelow++;
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

  // kind: 0 Gaussian, 1 single strip, 2 valley (no peak), 3 cloud off the edge
  task automatic gen_axis(int kind, real sigma, output int z[NSTRIPS]);
    real mu = 2.0 + 59.0 * real'($urandom_range(0, 1000)) / 1000.0;
    real amp = 300.0 + real'($urandom_range(0, 3700));
    for (int i = 0; i < NSTRIPS; i++) begin
      real v;
      case (kind)
        1:       v = (i == 17) ? 1500.0 : 0.0;
        2:       v = 40.0 + 1.5 * real'((i - 32) * (i - 32));
        3:       v = amp * $exp(-((i + 1.5) ** 2) / (2.0 * 1.2 * 1.2));
        default: v = amp * $exp(-((i - mu) ** 2) / (2.0 * sigma * sigma));
      endcase
      v += real'($urandom_range(0, 8));
      z[i] = (v > 4095.0) ? 4095 : int'(v);
    end
  endtask

  fit_status_e q_st[2][$];
  real q_pos[2][$];

  task automatic load_tables(int shift_x, int shift_y);
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < 1024; i++) begin
        int sh = (a == 0) ? shift_x : shift_y;
        int v = (i + sh) / 32;
        if (v < 0) v = 0;
        if (v > 31) v = 31;
        tbl[a][i] = CFRAC_W'(v);
        @(negedge clk);
        cfg_we = 1; cfg_axis = a[0]; cfg_addr = FRAC_W'(i); cfg_data = CFRAC_W'(v);
      end
    @(negedge clk) cfg_we = 0;
    n_reload++;
  endtask

  task automatic check_axis(int a, axis_result_t r);
    fit_status_e es;
    real ep, d;
    es = q_st[a].pop_front();
    ep = q_pos[a].pop_front();
    checks++;
    if (r.status != es) begin
      failures++;
      $display("axis %0d status %s expected %s", a, r.status.name(), es.name());
    end else if (es == ST_OK) begin
      d = real'(r.raw_pos) - $floor(ep);
      checks++;
      if (d > 2.0 || d < -2.0) begin failures++; $display("axis %0d raw %0d expected %f", a, r.raw_pos, ep); end
      checks++;
      if (r.pos != {r.raw_pos[15:10], tbl[a][r.raw_pos[9:0]]}) begin
        failures++; $display("axis %0d corrected %h", a, r.pos);
      end
    end
    case (es)
      ST_OK: n_ok++;
      ST_FEW: n_few++;
      ST_NOT_PEAK: n_notpeak++;
      default: n_range++;
    endcase
  endtask

  int n_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check_axis(0, res_x);
      check_axis(1, res_y);
      if (res_x.status != res_y.status) n_mixed++;
      n_out++;
    end
    if (in_valid && !in_ready && out_valid && !out_ready) n_stall++;
  end

  // consumer with random back-pressure
  initial begin
    out_ready = 1;
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
    end
  end

  task automatic send_events(int first, int last);
    int zx[NSTRIPS], zy[NSTRIPS], nbx, nby;
    real p;
    fit_status_e st;
    for (int k = first; k < last; k++) begin
      int kx = 0, ky = 0;
      case (k % 23)
        5:  kx = 1;
        9:  ky = 2;
        14: kx = 3;
        19: begin kx = 2; ky = 1; end
        default: ;
      endcase
      gen_axis(kx, 1.0 + real'($urandom_range(0, 150)) / 100.0, zx);
      gen_axis(ky, 1.3 + real'($urandom_range(0, 150)) / 100.0, zy);
      @(negedge clk);
      thr_x = Z_W'(10 + $urandom_range(0, 30));
      thr_y = Z_W'(10 + $urandom_range(0, 30));
      for (int i = 0; i < NSTRIPS; i++) begin
        charge_x[i] = Z_W'(zx[i]);
        charge_y[i] = Z_W'(zy[i]);
      end
      st = ref_fit(zx, int'(thr_x), p, nbx); q_st[0].push_back(st); q_pos[0].push_back(p);
      st = ref_fit(zy, int'(thr_y), p, nby); q_st[1].push_back(st); q_pos[1].push_back(p);
      if (nbx + nby > 0) n_below++;
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
  endtask

  initial begin
    in_valid = 0; cfg_we = 0; cfg_axis = 0; cfg_addr = '0; cfg_data = '0;
    thr_x = '0; thr_y = '0;
    for (int i = 0; i < NSTRIPS; i++) begin charge_x[i] = '0; charge_y[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_tables(7, -5);
    send_events(0, NEV / 2);
    while (n_out < NEV / 2) @(posedge clk);
    load_tables(-12, 15);
    send_events(NEV / 2, NEV);
    while (n_out < NEV) @(posedge clk);
    $display("ok=%0d few=%0d notpeak=%0d range=%0d below=%0d stall=%0d reload=%0d mixed=%0d",
             n_ok, n_few, n_notpeak, n_range, n_below, n_stall, n_reload, n_mixed);
    checks++;
    if (n_ok == 0 || n_few == 0 || n_notpeak == 0 || n_range == 0 || n_below == 0 ||
        n_stall == 0 || n_reload < 2 || n_mixed == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
