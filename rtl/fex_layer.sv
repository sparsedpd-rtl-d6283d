// fex_layer: feature extraction of the PNTDNN. For each input sample
// (I, Q in Q1.13) it produces
//   ia = I/A, qa = Q/A      (Q1.14; the phasor P = ia - j*qa of the sample)
//   amp  = A   = sqrt(I^2+Q^2)   (Q1.13, clamped to the largest Q1.13 value)
//   amp3 = A^3                   (Q1.13, clamped likewise)
// and passes I and Q on, aligned with the features.
//
// How: z = I^2 + Q^2 is a 28-bit integer. Its bit length y selects a shift
// a = max(0, ceil((y - M)/2)); z >> 2a fits the M-bit window of the inverse
// square root (a table plus two Newton-Raphson steps, see inv_sqrt). Shifting
// by an even amount keeps the root exact up to the discarded low bits, and
// the missing factor 2^-a is restored afterwards. The restore is written as a
// left shift by (SH_MAX - a) into a word with SH_MAX extra fraction bits,
// which equals the right shift by a that 1/sqrt(z) needs. The 1/sqrt(z) word
// then multiplies I and Q (giving the phasor), z (giving A) and A then z
// again (giving A^3), as in the published block diagram.
//
// Timing: one sample per clock, no stall; outputs FEX_LAT = 10 clocks after
// the input. valid_i travels with the sample. z = 0 gives ia = qa = A = 0.
// Follows the paper: the dataflow, the window/shift scheme and the use of a
// table with two Newton-Raphson iterations. This design's choices: the window
// M = 14 (the paper states the input size is halved, 28 to 14 bits), all
// internal widths, round-half-up rounding, the clamps and the pipeline cut.
module fex_layer
  import sparsedpd_pkg::*;
#(
  parameter int unsigned M = ISQ_M
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  act_t i_i,
  input  act_t q_i,
  output logic valid_o,
  output act_t i_o,
  output act_t q_o,
  output pn_t  ia_o,
  output pn_t  qa_o,
  output act_t amp_o,
  output act_t amp3_o
);

  localparam int unsigned RF    = ISQ_RF;
  localparam int unsigned XW    = RF + 1;
  localparam int unsigned SHMAX = (Z_W - M + 1) / 2;
  localparam int unsigned SW    = $clog2(SHMAX + 1);
  localparam int unsigned VW    = XW + SHMAX;          // 1/sqrt(z) word
  localparam int unsigned VF    = RF + SHMAX;          // its fraction bits
  localparam int unsigned AWF   = 17;                  // A kept as Q1.17 inside

  typedef logic signed [63:0] s64_t;

  function automatic s64_t rnd_shr(input s64_t v, input int unsigned sh);
    return (v + (s64_t'(1) <<< (sh - 1))) >>> sh;
  endfunction

  // ---- stage 1: z = I^2 + Q^2 --------------------------------------------
  logic [Z_W-1:0] z1;
  act_t           i1, q1;
  always_ff @(posedge clk) begin
    z1 <= Z_W'(s64_t'(i_i) * s64_t'(i_i) + s64_t'(q_i) * s64_t'(q_i));
    i1 <= i_i;
    q1 <= q_i;
  end

  // ---- stage 2: window shift --------------------------------------------
  logic [5:0]     ylen;
  logic [SW-1:0]  a_c;
  always_comb begin
    ylen = '0;
    for (int b = 0; b < Z_W; b++) if (z1[b]) ylen = 6'(b + 1);   // ceil(log2(z+1))
    a_c = (ylen > 6'(M)) ? SW'((ylen - 6'(M) + 6'd1) >> 1) : '0;
  end

  logic [Z_W-1:0] z2;
  logic [M-1:0]   zs2;
  logic [SW-1:0]  a2;
  act_t           i2, q2;
  always_ff @(posedge clk) begin
    z2  <= z1;
    zs2 <= M'(z1 >> (2 * a_c));
    a2  <= a_c;
    i2  <= i1;
    q2  <= q1;
  end

  // ---- stages 3-7: inverse square root of the windowed value -------------
  logic [XW-1:0] x7;
  inv_sqrt #(.M(M), .RF(RF)) u_isqrt (.clk(clk), .k(zs2), .r(x7));

  logic [Z_W-1:0] z7;
  logic [SW-1:0]  a7;
  act_t           i7, q7;
  pipe_delay #(.WIDTH(Z_W + SW + 2*DATA_W), .DEPTH(ISQ_LAT)) u_align7 (
    .clk(clk), .d({z2, a2, i2, q2}), .q({z7, a7, i7, q7}));

  // ---- stage 8: restore the shift (x << (SHMAX - a)) ---------------------
  logic [VW-1:0]  v8;
  logic [Z_W-1:0] z8;
  act_t           i8, q8;
  always_ff @(posedge clk) begin
    v8 <= VW'(x7) << (SHMAX - 32'(a7));
    z8 <= z7;
    i8 <= i7;
    q8 <= q7;
  end

  // ---- stage 9: phasor and amplitude --------------------------------------
  s64_t ia_w, qa_w, aw_w;
  always_comb begin
    ia_w = rnd_shr(s64_t'(i8) * s64_t'(v8), VF - PN_FRAC);
    qa_w = rnd_shr(s64_t'(q8) * s64_t'(v8), VF - PN_FRAC);
    aw_w = rnd_shr(s64_t'(z8) * s64_t'(v8), VF + FRAC - AWF);
  end

  function automatic pn_t sat_pn(input s64_t v);
    if (v > s64_t'(2**(PN_W-1) - 1)) return pn_t'(2**(PN_W-1) - 1);
    if (v < -s64_t'(2**(PN_W-1)))   return pn_t'(-(2**(PN_W-1)));
    return pn_t'(v);
  endfunction

  pn_t            ia9, qa9;
  logic [AWF+1:0] aw9;     // unsigned Q2.17
  logic [Z_W-1:0] z9;
  act_t           i9, q9;
  always_ff @(posedge clk) begin
    ia9 <= sat_pn(ia_w);
    qa9 <= sat_pn(qa_w);
    aw9 <= (aw_w > s64_t'(2**(AWF+2) - 1)) ? '1 : (AWF+2)'(aw_w);
    z9  <= z8;
    i9  <= i8;
    q9  <= q8;
  end

  // ---- stage 10: A and A^3 in Q1.13 ---------------------------------------
  always_ff @(posedge clk) begin
    amp_o  <= sat_act(rnd_shr(s64_t'(aw9), AWF - FRAC));
    amp3_o <= sat_act(rnd_shr(s64_t'(aw9) * s64_t'(z9), AWF + 2*FRAC - FRAC));
    ia_o   <= ia9;
    qa_o   <= qa9;
    i_o    <= i9;
    q_o    <= q9;
  end

  // ---- valid tag -------------------------------------------------------------
  logic [FEX_LAT-1:0] vsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vsr <= '0;
    else        vsr <= {vsr[FEX_LAT-2:0], valid_i};
  end
  assign valid_o = vsr[FEX_LAT-1];

endmodule
