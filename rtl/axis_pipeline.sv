// axis_pipeline -- the complete centroiding pipeline of one anode axis.
//
// Chains the four stages of the non-iterative Gaussian centroid:
//   moment_accumulator  strips above threshold -> weighted sums (uses lnz2_lut)
//   gauss_solver        sums -> Cramer determinants det_b, det_c
//   centroid_divider    -det_b / (2 det_c) -> {strip, 10-bit fraction}
//   nonlin_corr_lut     10-bit fraction -> corrected 5-bit fraction
// Each stage holds one event and passes it on with a valid/ready handshake, so
// up to four events are in flight.
//
// Timing with out_ready held high: out_valid rises 86 clocks after the clock
// edge that accepts an event (65 scan + 1 + 1 + 1 + 17 + 1); a new event is
// accepted every 67 clocks, set by the strip scan. Both figures are fixed,
// independent of the charges, as the paper requires of the algorithm.
//
// The stage order follows the algorithm of the paper; the partition into
// stages and the handshakes are this design's choices.
module axis_pipeline
  import csa_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [Z_W-1:0]      threshold,
  // correction table load
  input  logic                cfg_we,
  input  logic [FRAC_W-1:0]   cfg_addr,
  input  logic [CFRAC_W-1:0]  cfg_data,
  // event in
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [Z_W-1:0]      in_charge [NSTRIPS],
  // result out
  output logic                out_valid,
  input  logic                out_ready,
  output axis_result_t        out_res
);

  logic        m_valid, m_ready;
  moments_t    m;
  logic        d_valid, d_ready;
  dets_t       d;
  logic        p_valid, p_ready;
  fit_status_e p_status;
  logic [RAWPOS_W-1:0] p_raw;

  moment_accumulator #(.NSTR(NSTRIPS)) u_acc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_charge, .threshold,
    .out_valid (m_valid), .out_ready (m_ready), .out_moments (m)
  );

  gauss_solver u_solve (
    .clk, .rst_n,
    .in_valid (m_valid), .in_ready (m_ready), .in_m (m),
    .out_valid (d_valid), .out_ready (d_ready), .out_d (d)
  );

  centroid_divider #(.NSTR(NSTRIPS)) u_div (
    .clk, .rst_n,
    .in_valid (d_valid), .in_ready (d_ready), .in_d (d),
    .out_valid (p_valid), .out_ready (p_ready),
    .out_status (p_status), .out_raw_pos (p_raw)
  );

  nonlin_corr_lut u_corr (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_data,
    .in_valid (p_valid), .in_ready (p_ready),
    .in_status (p_status), .in_raw_pos (p_raw),
    .out_valid, .out_ready, .out_res
  );

endmodule
