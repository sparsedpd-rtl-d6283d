// phase_denorm: restores the phase of the network output by multiplying
// (I_OUT + jQ_OUT) with P* = (I + jQ)/A = ia + j*qa:
//   y_i = I_OUT*ia - Q_OUT*qa        y_q = I_OUT*qa + Q_OUT*ia
// I_OUT/Q_OUT are Q1.13, ia/qa Q1.14, so each product is exactly Q2.27 and
// the result is kept at full precision in Q2.27 (29 bit), saturated only in
// the corner case |sum| >= 2.
// Timing: registered outputs, PD_LAT = 1 clock; one sample per clock.
// Follows the paper: the conjugate-phasor multiply and the Q2.27 output.
// The Q1.14 phasor width (which makes the 27 fraction bits exact) and the
// saturation are this design's choice.
module phase_denorm
  import sparsedpd_pkg::*;
(
  input  logic clk,
  input  act_t i_out,
  input  act_t q_out,
  input  pn_t  ia,
  input  pn_t  qa,
  output out_t y_i,
  output out_t y_q
);

  typedef logic signed [31:0] s32_t;

  function automatic out_t sat_out(input s32_t v);
    if (v > 32'sd268435455)       return out_t'(29'sd268435455);
    else if (v < -32'sd268435456) return out_t'(-29'sd268435456);
    else                          return out_t'(v);
  endfunction

  always_ff @(posedge clk) begin
    y_i <= sat_out(s32_t'(i_out) * s32_t'(ia) - s32_t'(q_out) * s32_t'(qa));
    y_q <= sat_out(s32_t'(i_out) * s32_t'(qa) + s32_t'(q_out) * s32_t'(ia));
  end

endmodule
