// tb_lnz2_lut -- checks the ln(z)*z^2 table against a value computed here from
// log base 2 (ln z = log2 z * ln 2), for every address, with a tolerance of one
// count for rounding. Also checks the one-cycle read latency and the enable.
module tb_lnz2_lut;
  localparam int Z_W = 12;
  localparam int L_W = 28;

  logic clk = 0;
  logic en;
  logic [Z_W-1:0] addr;
  logic [L_W-1:0] data;
  int checks = 0, failures = 0;

  lnz2_lut #(.Z_W(Z_W), .L_W(L_W)) dut (.clk, .en, .addr, .data);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_val(int z);
    real v;
    if (z < 2) return 0;
    v = real'(z) * real'(z) * ($log10(real'(z)) / $log10(2.0)) * 0.6931471805599453;
    return longint'($floor(v + 0.5));
  endfunction

  initial begin
    en = 1; addr = '0;
    @(negedge clk);
    for (int z = 0; z < (1 << Z_W); z++) begin
      addr = Z_W'(z);
      @(negedge clk);
      begin
        longint e, d;
        e = expect_val(z);
        d = longint'(data) - e;
        checks++;
        if (d > 1 || d < -1) begin
          failures++;
          if (failures < 10) $display("z=%0d got %0d expected %0d", z, data, e);
        end
      end
    end
    // enable low holds the last value
    addr = 12'd100; @(negedge clk);
    en = 0; addr = 12'd2000; @(negedge clk); @(negedge clk);
    checks++;
    if (longint'(data) != expect_val(100)) begin failures++; $display("enable hold failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
