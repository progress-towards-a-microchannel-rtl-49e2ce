// tb_nonlin_corr_lut -- checks the start-up mapping (fraction >> 5) over all
// 1024 entries, loads a random monotone correction curve through the write
// port, checks every entry against a copy kept here, and checks the strip
// bits, the status pass-through and the one-clock latency.
module tb_nonlin_corr_lut;
  import csa_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [FRAC_W-1:0] cfg_addr;
  logic [CFRAC_W-1:0] cfg_data;
  fit_status_e in_status;
  logic [RAWPOS_W-1:0] in_raw_pos;
  axis_result_t out_res;
  int checks = 0, failures = 0;
  logic [CFRAC_W-1:0] model [1024];

  nonlin_corr_lut dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic look(logic [RAWPOS_W-1:0] rp, fit_status_e s);
    int lat = 0;
    in_raw_pos = rp; in_status = s; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != 0 || out_res.pos != {rp[15:10], model[rp[9:0]]} || out_res.status != s
        || out_res.raw_pos != rp) begin
      failures++;
      if (failures < 10) $display("rp=%h got %h expected %h lat=%0d", rp, out_res.pos, {rp[15:10], model[rp[9:0]]}, lat);
    end
    out_ready = 1; @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    int v;
    cfg_we = 0; cfg_addr = '0; cfg_data = '0; in_valid = 0; out_ready = 0;
    in_status = ST_OK; in_raw_pos = '0;
    for (int i = 0; i < 1024; i++) model[i] = CFRAC_W'(i / 32);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 1024; i++) look(RAWPOS_W'(($urandom_range(0, 63) << 10) | i), fit_status_e'(i % 4));
    // load a shifted, monotone curve
    v = 0;
    for (int i = 0; i < 1024; i++) begin
      if (i > 20 + v * 32 && v < 31) v++;
      model[i] = CFRAC_W'(v);
      cfg_we = 1; cfg_addr = FRAC_W'(i); cfg_data = CFRAC_W'(v);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int i = 0; i < 1024; i++) look(RAWPOS_W'(($urandom_range(0, 63) << 10) | i), ST_OK);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
