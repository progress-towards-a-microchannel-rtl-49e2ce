// gauss_solver -- solves the weighted 3x3 system of one axis for b and c.
//
// The fit ln(z) = a + b*x + c*x^2 has its centre at x = -b / (2c). With
// Cramer's rule b = det_b / det(M) and c = det_c / det(M), so the centre is
// -det_b / (2 * det_c) and det(M) never has to be formed. This unit computes
//   det_b = | s0 t0 s2 |      det_c = | s0 s1 t0 |
//           | s1 t1 s3 |              | s1 s2 t1 |
//           | s2 t2 s4 |              | s2 s3 t2 |
// in exact integer arithmetic, in two clocks: first the five distinct 2x2
// minors, then the cofactor expansions along the first column.
//
// Timing: in_valid/in_ready handshake; the accepting clock edge forms the
// minors, the next one the determinants, so out_valid rises one clock after
// the accepting edge and is
// held until out_ready; one event in flight. The strip count n passes through.
//
// Solving the weighted system for b and c and the centre formula follow the
// paper. Cramer's rule with the cancelled det(M), full-width integer products
// and the two-clock schedule are this design's choices (the paper gives no
// solution method or bit depths, and attributes image artefacts of its own
// firmware to too few bits, so no bits are dropped here).
module gauss_solver
  import csa_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  moments_t in_m,
  output logic     out_valid,
  input  logic     out_ready,
  output dets_t    out_d
);

  typedef enum logic [1:0] {S_IDLE, S_MINOR, S_DONE} state_e;
  state_e state;

  // entries of the first column and t0, kept for the second clock
  logic signed [ACC_W-1:0] s0_q, s1_q, s2_q, t0_q;
  logic        [CNT_W-1:0] n_q;
  logic signed [MIN_W-1:0] mb0, mb1, m12, mc0, mc2;

  function automatic logic signed [MIN_W-1:0] mul2(logic signed [ACC_W-1:0] a,
                                                   logic signed [ACC_W-1:0] b);
    return MIN_W'(a) * MIN_W'(b);
  endfunction

  function automatic logic signed [DET_W-1:0] mul3(logic signed [ACC_W-1:0] a,
                                                   logic signed [MIN_W-1:0] b);
    return DET_W'(a) * DET_W'(b);
  endfunction

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      s0_q  <= '0; s1_q <= '0; s2_q <= '0; t0_q <= '0; n_q <= '0;
      mb0   <= '0; mb1 <= '0; m12 <= '0; mc0 <= '0; mc2 <= '0;
      out_d <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          s0_q  <= in_m.s0; s1_q <= in_m.s1; s2_q <= in_m.s2; t0_q <= in_m.t0;
          n_q   <= in_m.n;
          mb0   <= mul2(in_m.t1, in_m.s4) - mul2(in_m.s3, in_m.t2);
          mb1   <= mul2(in_m.s1, in_m.s4) - mul2(in_m.s3, in_m.s2);
          m12   <= mul2(in_m.s1, in_m.t2) - mul2(in_m.t1, in_m.s2);
          mc0   <= mul2(in_m.s2, in_m.t2) - mul2(in_m.t1, in_m.s3);
          mc2   <= mul2(in_m.s1, in_m.s3) - mul2(in_m.s2, in_m.s2);
          state <= S_MINOR;
        end
        S_MINOR: begin
          out_d.det_b <= mul3(s0_q, mb0) - mul3(t0_q, mb1) + mul3(s2_q, m12);
          out_d.det_c <= mul3(s0_q, mc0) - mul3(s1_q, m12) + mul3(t0_q, mc2);
          out_d.n     <= n_q;
          state       <= S_DONE;
        end
        S_DONE:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_d));

endmodule
