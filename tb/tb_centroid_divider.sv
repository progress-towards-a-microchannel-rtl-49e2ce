// tb_centroid_divider -- drives determinant pairs and compares the position
// with floor(-det_b * 1024 / (2 * det_c)) + 32*1024 computed here in 64-bit
// integers, and the status with the rejection rules. Pairs are also scaled by
// 2^100 to exercise the full operand width. Checks the 17-clock latency.
module tb_centroid_divider;
  import csa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  dets_t in_d;
  fit_status_e st;
  logic [RAWPOS_W-1:0] rp;
  int checks = 0, failures = 0;
  int n_ok = 0, n_few = 0, n_np = 0, n_rng = 0;

  centroid_divider dut (.*, .out_status(st), .out_raw_pos(rp));

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floordiv(longint a, longint b);
    longint q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q--;
    return q;
  endfunction

  task automatic run(longint db, longint dc, int n, int shift);
    fit_status_e es;
    longint ep = 0;
    int lat = 0;
    in_d.det_b = DET_W'(db) <<< shift;
    in_d.det_c = DET_W'(dc) <<< shift;
    in_d.n = CNT_W'(n);
    if (n < 3) es = ST_FEW;
    else if (dc >= 0) es = ST_NOT_PEAK;
    else begin
      ep = floordiv(-db * 1024, 2 * dc) + 32 * 1024;
      es = (ep < 0 || ep >= 64 * 1024) ? ST_RANGE : ST_OK;
    end
    in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != RAWPOS_W + 1) begin failures++; $display("latency %0d", lat); end
    checks++;
    if (st != es) begin failures++; $display("status %s expected %s (db=%0d dc=%0d)", st.name(), es.name(), db, dc); end
    if (es == ST_OK) begin
      checks++;
      if (longint'(rp) != ep) begin failures++; $display("pos %0d expected %0d (db=%0d dc=%0d)", rp, ep, db, dc); end
    end
    case (es) ST_OK: n_ok++; ST_FEW: n_few++; ST_NOT_PEAK: n_np++; default: n_rng++; endcase
    out_ready = 1; @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_d = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(0, -100, 5, 0);            // centre exactly at strip 32
    run(64, -1, 5, 0);             // +32 strips: just outside
    run(63, -1, 5, 0);             // +31.5 strips
    run(-64, -1, 5, 0);            // -32 strips: strip 0 exactly
    run(-65, -1, 5, 0);            // just below 0
    run(7, -3, 5, 0);
    run(-7, -3, 5, 0);
    run(1000, 5, 8, 0);            // not a peak
    run(1000, -5, 2, 0);           // too few strips
    run(123456, 0, 6, 0);          // det_c = 0
    for (int k = 0; k < 300; k++) begin
      longint dc, db;
      dc = -longint'($urandom_range(1, 1 << 30));
      // centre roughly uniform over -35..+35 strips, arbitrary remainder
      db = (dc * (longint'($urandom_range(0, 1400)) - 700)) / 10
           + longint'($urandom_range(0, 1 << 20)) - longint'(1 << 19);
      run(db, dc, $urandom_range(2, 20), (k % 4 == 0) ? 100 : 0);
    end
    checks++;
    if (n_ok == 0 || n_few == 0 || n_np == 0 || n_rng == 0) begin
      failures++; $display("a status never occurred");
    end
    $display("ok=%0d few=%0d notpeak=%0d range=%0d", n_ok, n_few, n_np, n_rng);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
