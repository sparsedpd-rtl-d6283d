// phase_norm: phase normalisation of the delayed samples. Each delayed sample
// K_j = k_i[j] + j*k_q[j] is multiplied by the current phasor
// P = (I - jQ)/A = ia - j*qa:
//   pn_i[j] = k_i*ia + k_q*qa        pn_q[j] = k_q*ia - k_i*qa
// Inputs Q1.13 (K) and Q1.14 (ia, qa); the Q2.27 sums are rounded
// (half up) to Q1.13 and clamped to [-1, 1). The current sample itself is
// not rotated (it would give A + 0j, which the A vector already carries).
// Timing: registered outputs, PN_LAT = 1 clock; one vector per clock.
// Follows the paper: the rotation by P of the n delayed samples. The rounding
// and the clamp are this design's choice.
module phase_norm
  import sparsedpd_pkg::*;
#(
  parameter int unsigned N = MEM_DEPTH
) (
  input  logic clk,
  input  act_t k_i [N],
  input  act_t k_q [N],
  input  pn_t  ia,
  input  pn_t  qa,
  output act_t pn_i [N],
  output act_t pn_q [N]
);

  localparam int unsigned SH = PN_FRAC;   // Q2.27 -> Q1.13

  typedef logic signed [31:0] s32_t;

  function automatic act_t rnd_sat(input s32_t v);
    s32_t r;
    r = (v + (s32_t'(1) <<< (SH - 1))) >>> SH;
    return sat_act(64'(r));
  endfunction

  always_ff @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      pn_i[j] <= rnd_sat(s32_t'(k_i[j]) * s32_t'(ia) + s32_t'(k_q[j]) * s32_t'(qa));
      pn_q[j] <= rnd_sat(s32_t'(k_q[j]) * s32_t'(ia) - s32_t'(k_i[j]) * s32_t'(qa));
    end
  end

endmodule
