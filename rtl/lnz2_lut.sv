// lnz2_lut -- look-up table for ln(z) * z^2, the weighted log term of the fit.
//
// The centroid fit needs, per strip, the product of the Guo weight z^2 and the
// log-transformed charge ln(z). Rather than a logarithm unit and a multiplier,
// the product is read from a ROM addressed by the charge itself, as the paper
// does to save FPGA area and time. Entry z holds round(z^2 * ln z); entries 0
// and 1 are 0. The table is filled at start-up by a loop over all 2^Z_W
// addresses (an FPGA tool folds this into the ROM contents).
//
// Interface: addr is the strip charge, data the table entry one clock later
// (registered read, as a block RAM would give). en gates the read register.
//
// The use of a table for ln(z)*z^2 follows the paper; the natural logarithm,
// the rounding to an integer, the width L_W and the registered read are this
// design's choices (the paper names neither the charge width nor the scaling).
module lnz2_lut #(
  parameter int Z_W = csa_pkg::Z_W,
  parameter int L_W = csa_pkg::L_W
) (
  input  logic           clk,
  input  logic           en,
  input  logic [Z_W-1:0] addr,
  output logic [L_W-1:0] data
);

  localparam int DEPTH = 1 << Z_W;

  logic [L_W-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      if (i < 2) rom[i] = '0;
      else       rom[i] = L_W'($rtoi(real'(i) * real'(i) * $ln(real'(i)) + 0.5));
    end
  end

  always_ff @(posedge clk) begin
    if (en) data <= rom[addr];
  end

endmodule
