// moment_accumulator -- builds the weighted least-squares system of one axis.
//
// An event (the digitised charges of all NSTRIPS strips of one axis) is taken
// in one handshake and stored. The strips are then scanned one per clock. A
// strip takes part only if its charge is above the threshold; for it, with
// weight w = z^2 and centred index xc = x - NSTRIPS/2, the unit adds
//   s_k += w * xc^k   (k = 0..4)   and   t_k += w*ln(z) * xc^k   (k = 0..2),
// where w*ln(z) comes from the lnz2_lut table. These are the matrix and
// right-hand-side entries of the Guo-weighted Caruana system
//   [s0 s1 s2; s1 s2 s3; s2 s3 s4] [a b c]' = [t0 t1 t2]'.
// The number of strips used is counted as well.
//
// Timing: in_valid/in_ready handshake, then NSTRIPS scan clocks, one drain
// clock for the table latency, then out_valid is held until out_ready. A new
// event is taken only when idle, so one event occupies the unit for
// NSTRIPS + 3 clocks (67 at the default size); the run time does not depend
// on the data.
//
// The weighting, the sums and "all strips above a defined threshold" follow
// the paper. The strip-serial scan, the centred index, the strict "greater
// than" threshold compare and the handshakes are this design's choices.
module moment_accumulator
  import csa_pkg::*;
#(
  parameter int NSTR = csa_pkg::NSTRIPS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // event in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [Z_W-1:0]       in_charge [NSTR],
  input  logic [Z_W-1:0]       threshold,
  // sums out
  output logic                 out_valid,
  input  logic                 out_ready,
  output moments_t             out_moments
);

  localparam int IW = $clog2(NSTR);

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DRAIN, S_DONE} state_e;
  state_e state;

  logic [Z_W-1:0] buf_q [NSTR];
  logic [Z_W-1:0] thr_q;
  logic [IW-1:0]  idx;

  // stage 1 registers, aligned with the table read
  logic                  v1;
  logic [Z_W-1:0]        z1;
  logic signed [IW:0]    xc1;
  logic [L_W-1:0]        lnz2;

  moments_t acc;

  lnz2_lut #(.Z_W(Z_W), .L_W(L_W)) u_lut (
    .clk  (clk),
    .en   (state == S_SCAN),
    .addr (buf_q[idx]),
    .data (lnz2)
  );

  // products of stage 1
  logic signed [ACC_W-1:0] w, l, x1, x2, x3, x4;
  always_comb begin
    w  = ACC_W'(signed'({1'b0, z1}) * signed'({1'b0, z1}));
    l  = ACC_W'(signed'({1'b0, lnz2}));
    x1 = ACC_W'(xc1);
    x2 = x1 * x1;
    x3 = x2 * x1;
    x4 = x2 * x2;
  end

  assign in_ready    = (state == S_IDLE);
  assign out_valid   = (state == S_DONE);
  assign out_moments = acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      v1    <= 1'b0;
      z1    <= '0;
      xc1   <= '0;
      thr_q <= '0;
      acc   <= '0;
    end else begin
      // stage 0: issue a strip
      v1 <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          buf_q <= in_charge;
          thr_q <= threshold;
          acc   <= '0;
          idx   <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          v1    <= (buf_q[idx] > thr_q);
          z1    <= buf_q[idx];
          xc1   <= signed'({1'b0, idx}) - signed'((IW+1)'(NSTR / 2));
          idx   <= idx + 1'b1;
          if (idx == IW'(NSTR - 1)) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_DONE;
        S_DONE:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase

      // stage 1: accumulate a strip above threshold
      if (v1) begin
        acc.s0 <= acc.s0 + w;
        acc.s1 <= acc.s1 + w * x1;
        acc.s2 <= acc.s2 + w * x2;
        acc.s3 <= acc.s3 + w * x3;
        acc.s4 <= acc.s4 + w * x4;
        acc.t0 <= acc.t0 + l;
        acc.t1 <= acc.t1 + l * x1;
        acc.t2 <= acc.t2 + l * x2;
        acc.n  <= acc.n + 1'b1;
      end
    end
  end

  // the sums must not be disturbed while they are offered downstream
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_moments);
  endproperty
  assert property (p_hold);

endmodule
