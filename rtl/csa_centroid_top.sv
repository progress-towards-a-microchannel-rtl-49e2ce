// csa_centroid_top -- event position processor for a 64 x 64 cross-strip anode.
//
// For each detected photon the front end delivers the digitised charge of all
// 64 x-strips and all 64 y-strips. The two axes are centroided independently
// and simultaneously by two identical axis_pipeline instances, each fitting a
// Gaussian to the strips above its own threshold by the non-iterative,
// noise-weighted log-parabola method, and each with its own non-linearity
// correction table. The result is an x and a y position with 1/32-strip
// resolution (11 bits each, 2048 x 2048 pixels), plus a fit status per axis.
//
// Interface: an event is taken when in_valid and in_ready are both high
// (in_ready only when both axes can take it). A result is offered when both
// axes have one, and is removed when out_ready is high. The correction tables
// are loaded through cfg_we/cfg_axis/cfg_addr/cfg_data (cfg_axis 0 = x, 1 = y).
// Thresholds are sampled with each event.
//
// Timing: 86 clocks from accept to result and one event every 67 clocks,
// fixed, when out_ready stays high.
//
// Two parallel pipelines, one per axis, and per-axis correction tables follow
// the paper; the port set and the handshakes are this design's choices.
module csa_centroid_top
  import csa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [Z_W-1:0]     thr_x,
  input  logic [Z_W-1:0]     thr_y,
  input  logic               cfg_we,
  input  logic               cfg_axis,
  input  logic [FRAC_W-1:0]  cfg_addr,
  input  logic [CFRAC_W-1:0] cfg_data,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [Z_W-1:0]     charge_x [NSTRIPS],
  input  logic [Z_W-1:0]     charge_y [NSTRIPS],
  output logic               out_valid,
  input  logic               out_ready,
  output axis_result_t       res_x,
  output axis_result_t       res_y
);

  logic rdy_x, rdy_y, vld_x, vld_y;

  assign in_ready  = rdy_x && rdy_y;
  assign out_valid = vld_x && vld_y;

  axis_pipeline u_x (
    .clk, .rst_n, .threshold (thr_x),
    .cfg_we (cfg_we && !cfg_axis), .cfg_addr, .cfg_data,
    .in_valid (in_valid && in_ready), .in_ready (rdy_x), .in_charge (charge_x),
    .out_valid (vld_x), .out_ready (out_ready && out_valid), .out_res (res_x)
  );

  axis_pipeline u_y (
    .clk, .rst_n, .threshold (thr_y),
    .cfg_we (cfg_we && cfg_axis), .cfg_addr, .cfg_data,
    .in_valid (in_valid && in_ready), .in_ready (rdy_y), .in_charge (charge_y),
    .out_valid (vld_y), .out_ready (out_ready && out_valid), .out_res (res_y)
  );

endmodule
