// centroid_divider -- turns the two determinants into a strip position.
//
// The centre of the fitted parabola, in centred strip units, is
//   xc = -det_b / (2 * det_c).
// This unit divides with a restoring long division, one quotient bit per
// clock, and returns the position with FRAC_W (10) fraction bits: the
// magnitude |det_b| * 2^FRAC_W is divided by |2*det_c|, the quotient is rounded
// towards minus infinity, and the centre offset NSTRIPS/2 is added back. The
// result raw_pos = {strip index, 10-bit fraction} addresses the non-linearity
// correction table with its low 10 bits.
//
// An event is flagged instead of positioned when fewer than three strips were
// used (the three unknowns a, b, c are not determined), when det_c >= 0 (no
// maximum, since det(M) > 0 the sign of det_c is the sign of c), or when the
// centre lies outside 0 <= x < NSTRIPS. The division runs in every case, so
// every event takes the same time.
//
// Timing: in_valid/in_ready handshake; out_valid rises RAWPOS_W + 1 clocks
// (17) after the accepting clock edge and is held until out_ready.
//
// The formula x = -b/(2c) and the 10-bit fraction follow the paper. The
// division method, the rounding and the three rejection rules are this
// design's choices.
module centroid_divider
  import csa_pkg::*;
#(
  parameter int NSTR = csa_pkg::NSTRIPS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  dets_t               in_d,
  output logic                out_valid,
  input  logic                out_ready,
  output fit_status_e         out_status,
  output logic [RAWPOS_W-1:0] out_raw_pos
);

  localparam int QB = RAWPOS_W;                  // quotient bits
  localparam int WW = DET_W + 2 + QB + FRAC_W;   // working width
  localparam int PW = QB + 2;                    // signed position width

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_FIN, S_DONE} state_e;
  state_e state;

  logic [WW-1:0]           rem, dsh;
  logic [QB-1:0]           quo;
  logic [$clog2(QB)-1:0]   cnt;
  logic                    neg, few, notpeak, ovf;

  // operands of a new event
  logic signed [DET_W+1:0] num_s, den_s;
  logic [DET_W+1:0]        num_abs, den_abs;
  logic [WW-1:0]           num_mag, den_mag;
  always_comb begin
    num_s   = -(DET_W+2)'(in_d.det_b);
    den_s   = (DET_W+2)'(in_d.det_c) <<< 1;
    num_abs = (num_s < 0) ? -num_s : num_s;
    den_abs = (den_s < 0) ? -den_s : den_s;
    num_mag = WW'(num_abs) << FRAC_W;
    den_mag = WW'(den_abs);
  end

  // final rounding and offset
  logic signed [PW-1:0] qs, pos;
  always_comb begin
    qs  = neg ? -(PW'(quo) + PW'(rem != '0)) : PW'(quo);
    pos = qs + PW'((NSTR / 2) << FRAC_W);
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rem <= '0; dsh <= '0; quo <= '0; cnt <= '0;
      neg <= 1'b0; few <= 1'b0; notpeak <= 1'b0; ovf <= 1'b0;
      out_status  <= ST_OK;
      out_raw_pos <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          few     <= (in_d.n < CNT_W'(3));
          notpeak <= (in_d.det_c >= 0);
          neg     <= (num_s < 0) != (den_s < 0);
          ovf     <= (num_mag >= (den_mag << QB));
          rem     <= num_mag;
          dsh     <= den_mag << (QB - 1);
          quo     <= '0;
          cnt     <= '0;
          state   <= S_DIV;
        end
        S_DIV: begin
          if (rem >= dsh) begin
            rem <= rem - dsh;
            quo <= {quo[QB-2:0], 1'b1};
          end else begin
            quo <= {quo[QB-2:0], 1'b0};
          end
          dsh <= dsh >> 1;
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(QB))'(QB - 1)) state <= S_FIN;
        end
        S_FIN: begin
          out_raw_pos <= RAWPOS_W'(pos);
          if (few)                                       out_status <= ST_FEW;
          else if (notpeak)                              out_status <= ST_NOT_PEAK;
          else if (ovf || pos < 0 || pos >= PW'(NSTR << FRAC_W)) out_status <= ST_RANGE;
          else                                           out_status <= ST_OK;
          state <= S_DONE;
        end
        S_DONE:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_raw_pos) && $stable(out_status));

endmodule
