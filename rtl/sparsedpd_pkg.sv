// sparsedpd_pkg: shared number formats, sizes, latencies and the default
// (sparse) network weights of the SparseDPD predistortion datapath.
//
// Number formats (two's complement unless stated):
//   act_t  Q1.13, 14 bit  - input I/Q samples, NN activations, weights, biases
//   pn_t   Q1.14, 15 bit  - unit phasor components I/A and Q/A
//   acc_t  Q2.13, 15 bit  - carry-save adder tree words; the extra integer bit
//                           exposes an overflow of [-1,1) that is then clamped
//   out_t  Q2.27, 29 bit  - predistorted I/Q output
// Q1.13 activations/weights, the Q2.13 adder tree and the Q2.27 output follow
// the published design; Q1.14 for the phasor is this design's choice (it makes
// the 27 fraction bits of the output exact: Q1.13 x Q1.14 = Q2.27).
//
// The default weights are an illustrative sparse set, not trained values:
// they keep 64 non-zero parameters (28 + 22 weights, 12 + 2 biases), the
// parameter count of the published model, and are scaled so that no adder
// tree word can leave the Q2.13 range. Replace them with trained Q1.13 values.
package sparsedpd_pkg;

  // ---- formats -----------------------------------------------------------
  localparam int unsigned DATA_W = 14;   // Q1.13
  localparam int unsigned FRAC   = 13;
  localparam int unsigned PN_W   = 15;   // Q1.14
  localparam int unsigned PN_FRAC = 14;
  localparam int unsigned ACC_W  = 15;   // Q2.13
  localparam int unsigned OUT_W  = 29;   // Q2.27

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [PN_W-1:0]   pn_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [OUT_W-1:0]  out_t;

  localparam act_t ACT_MAX = act_t'(2**(DATA_W-1) - 1);
  localparam act_t ACT_MIN = act_t'(-(2**(DATA_W-1)));

  // ---- network size ------------------------------------------------------
  localparam int unsigned MEM_DEPTH = 2;                  // n
  localparam int unsigned HIDDEN    = 12;                 // FC neurons
  localparam int unsigned N_FC_IN   = 4*MEM_DEPTH + 2;    // |x_FC|  = 10
  localparam int unsigned N_OUT_IN  = N_FC_IN + HIDDEN;   // |x_OUT| = 22
  localparam int unsigned N_OUT     = 2;                  // I_OUT, Q_OUT

  // ---- inverse square root -----------------------------------------------
  localparam int unsigned Z_W     = 2*DATA_W;             // I^2+Q^2, 28 bit
  localparam int unsigned ISQ_M   = 14;                   // window m (bits)
  localparam int unsigned ISQ_RF  = 24;                   // fraction bits of 1/sqrt
  localparam int unsigned ISQ_W   = ISQ_RF + 1;           // 25 bit result
  localparam int unsigned ISQ_T2W = ISQ_RF + ISQ_M;       // 38 bit LUT term 2
  localparam int unsigned SH_MAX  = (Z_W - ISQ_M + 1) / 2; // largest shift a = 7

  // ---- pipeline latencies (clock cycles) ---------------------------------
  localparam int unsigned ISQ_LAT = 5;   // LUT read, NR1, 3 stages of NR2
  localparam int unsigned FEX_LAT = 5 + ISQ_LAT;  // 10
  localparam int unsigned PN_LAT  = 1;
  localparam int unsigned FC_LAT  = 2;
  localparam int unsigned PD_LAT  = 1;
  localparam int unsigned DPD_LAT = FEX_LAT + PN_LAT + 2*FC_LAT + PD_LAT; // 16

  // ---- default weights (Q1.13 integers) ----------------------------------
  // x_FC index: 0..n-1 I_PN(t-1..t-n), n..2n-1 Q_PN, 2n..3n A(t..t-n),
  //             3n+1..4n+1 A^3(t..t-n).  x_OUT = {x_FC, ReLU(y_FC)}.
  typedef act_t w_fc_t  [HIDDEN][N_FC_IN];
  typedef act_t b_fc_t  [HIDDEN];
  typedef act_t w_out_t [N_OUT][N_OUT_IN];
  typedef act_t b_out_t [N_OUT];

  localparam w_fc_t W_FC_DEFAULT = '{
    '{0, 0, -4330, 0, 0, -3771, -2837, 0, 0, 0},
    '{0, 0, 0, -3009, 0, 0, 0, 0, 1761, 0},
    '{0, -1832, 0, 0, 0, 0, 3529, 0, -4743, 0},
    '{-1791, 0, 0, -2587, 0, 0, 0, 0, 0, 0},
    '{0, -1976, 0, 0, -2859, 0, 0, 0, -3474, 0},
    '{3868, 0, 0, 0, 0, 0, 0, 0, 0, 3667},
    '{0, 0, 0, 0, 0, 3557, 0, -2823, 0, 0},
    '{0, -2582, 3521, 4506, 0, 0, 0, 0, 0, 0},
    '{0, 3009, 0, 0, 0, 0, 0, 0, 2136, 0},
    '{4144, 0, 0, 0, 0, 0, -4791, 0, 0, 0},
    '{0, 0, 0, 0, 0, 3586, 0, 0, 0, -1864},
    '{0, 0, 0, 0, -3922, 0, 0, 1837, 0, 0}};
  localparam b_fc_t B_FC_DEFAULT =
    '{723, 2424, 1582, -1059, -561, 829, -2347, -188, -1632, -1882, -2168, 1318};
  localparam w_out_t W_OUT_DEFAULT = '{
    '{0, 0, -706, 0, 1592, -872, -904, 1570, 776, 0, 0,
      0, 1395, 0, 0, -1674, 0, 0, 0, 1370, -627, 1288},
    '{0, -990, 0, 0, -1316, 0, 1581, -1138, 0, 0, 0,
      0, 1208, 0, -728, 0, -825, 778, 1671, -1101, -1293, 0}};
  localparam b_out_t B_OUT_DEFAULT = '{286, 404};

  // Saturate a wide signed value to Q1.13.
  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'sd8191)       return ACT_MAX;
    else if (v < -64'sd8192) return ACT_MIN;
    else                     return act_t'(v);
  endfunction

endpackage
