// nonlin_corr_lut -- sub-strip non-linearity correction of one axis.
//
// The log-parabola fit compresses and stretches positions periodically
// between two strips. The correction is a 1024 x 5 bit table addressed by the
// 10-bit fraction of the raw position (0.000 .. 0.999 of a strip); it returns
// the corrected 5-bit fraction (0 .. 31, i.e. 1/32 strip). The strip index
// passes unchanged, so the output position is {strip, corrected fraction},
// 2048 pixels per axis. The status of the fit passes through.
//
// The table is a RAM with a write port, since its contents are a calibration
// derived from a flat-field exposure. At start-up it holds the uncorrected
// mapping, entry f = f >> 5.
//
// Timing: in_valid/in_ready handshake; the table is read on the accepting
// clock edge, whose registered result raises out_valid at once; it is held
// until out_ready. A
// write (cfg_we) takes effect on the next clock edge; a read of the same
// entry in that clock returns the old value.
//
// Size (1024 x 5 bit), input and output widths and one table per axis follow
// the paper. The write port, the start-up contents and the handshakes are this
// design's choices: the paper's curve is not given as numbers.
module nonlin_corr_lut
  import csa_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // table load
  input  logic                cfg_we,
  input  logic [FRAC_W-1:0]   cfg_addr,
  input  logic [CFRAC_W-1:0]  cfg_data,
  // raw position in
  input  logic                in_valid,
  output logic                in_ready,
  input  fit_status_e         in_status,
  input  logic [RAWPOS_W-1:0] in_raw_pos,
  // corrected result out
  output logic                out_valid,
  input  logic                out_ready,
  output axis_result_t        out_res
);

  localparam int DEPTH = 1 << FRAC_W;

  logic [CFRAC_W-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = CFRAC_W'(i >> (FRAC_W - CFRAC_W));
  end

  always_ff @(posedge clk) begin
    if (cfg_we) mem[cfg_addr] <= cfg_data;
  end

  logic full;
  assign in_ready  = !full;
  assign out_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= 1'b0;
      out_res <= '0;
    end else if (!full) begin
      if (in_valid) begin
        out_res.status  <= in_status;
        out_res.raw_pos <= in_raw_pos;
        out_res.pos     <= {in_raw_pos[RAWPOS_W-1:FRAC_W], mem[in_raw_pos[FRAC_W-1:0]]};
        full            <= 1'b1;
      end
    end else if (out_ready) begin
      full <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_res));

endmodule
