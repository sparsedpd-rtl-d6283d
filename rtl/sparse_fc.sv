// sparse_fc: one fully connected layer with weights fixed at build time,
// y = clamp(W x + b). It serves as the hidden FC layer (10 inputs, 12 neurons)
// and as the output layer (22 inputs, 2 outputs) of the network.
//
// Unstructured sparsity: a multiplier exists only for a non-zero weight; a
// pruned weight produces no hardware and shortens that neuron's adder tree.
// Per neuron the products x_i*w_oi (Q2.26) are truncated (floor) to Q2.13,
// then the products and the bias go through a carry-save adder tree and one
// final addition, all in Q2.13 (15 bit). The extra integer bit shows when the
// sum left [-1, 1), and the output is then clamped to the nearest Q1.13 value
// (clamp_o reports it). Sums beyond [-2, 2) wrap, as Q2.13 cannot hold them:
// the weights must keep |b| + sum|w| < 2 (the defaults do; a weight set that
// does not draws an elaboration-time warning).
//
// Timing: stage 1 registers the products, stage 2 the clamped neuron outputs:
// FC_LAT = 2 clocks, one input vector per clock, no stall.
// Follows the paper: parallel multipliers for the unpruned weights, CSA tree
// plus one addition, Q1.13 data, Q2.13 intermediate, clamp to [-1, 1).
// This design's choices: truncation of the products, the pipeline cut and
// the default weight values (the paper publishes no trained weights).
module sparse_fc
  import sparsedpd_pkg::*;
#(
  parameter int unsigned NI = N_FC_IN,
  parameter int unsigned NO = HIDDEN,
  parameter act_t        W [NO][NI] = W_FC_DEFAULT,
  parameter act_t        B [NO]   = B_FC_DEFAULT
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  act_t x [NI],
  output logic valid_o,
  output act_t y [NO],
  output logic [NO-1:0] clamp_o
);

  // number of non-zero weights of neuron o before input i
  function automatic int unsigned nz_before(input int unsigned o, input int unsigned i);
    int unsigned c;
    c = 0;
    for (int unsigned k = 0; k < i; k++) if (W[o][k] != 0) c++;
    return c;
  endfunction

  // non-zero map of the weights, bit o*NI+i
  function automatic logic [NO*NI-1:0] nz_map();
    logic [NO*NI-1:0] m;
    m = '0;
    for (int unsigned o = 0; o < NO; o++)
      for (int unsigned i = 0; i < NI; i++) m[o*NI+i] = (W[o][i] != 0);
    return m;
  endfunction

  localparam logic [NO*NI-1:0] NZ = nz_map();

  // Largest possible |sum| of any neuron in Q2.13 LSB: |b| + sum(|w| + 1),
  // the +1 covering the floor of each product (inputs lie in [-1, 1)).
  function automatic int worst_sum();
    int m, t;
    m = 0;
    for (int unsigned o = 0; o < NO; o++) begin
      t = (B[o] < 0) ? -int'(B[o]) : int'(B[o]);
      for (int unsigned i = 0; i < NI; i++)
        if (W[o][i] != 0) t += ((W[o][i] < 0) ? -int'(W[o][i]) : int'(W[o][i])) + 1;
      if (t > m) m = t;
    end
    return m;
  endfunction

  // A weight set that can leave [-2, 2) would wrap in the Q2.13 tree.
  if (worst_sum() >= 2**(ACC_W-1)) begin : g_wrap_warning
    $warning("sparse_fc: weights allow adder-tree sums outside [-2, 2); they would wrap");
  end

  for (genvar o = 0; o < NO; o++) begin : g_neuron
    localparam int unsigned NNZ = nz_before(o, NI);
    localparam int unsigned NT  = NNZ + 1;           // products + bias

    logic [ACC_W-1:0] terms [NT];
    assign terms[NNZ] = ACC_W'(B[o]);                 // Q1.13 -> Q2.13

    // stage 1: products of the unpruned weights
    for (genvar i = 0; i < NI; i++) begin : g_in
      if (NZ[o*NI+i]) begin : g_mul
        localparam int unsigned P = nz_before(o, i);
        logic signed [2*DATA_W-1:0] prod;
        assign prod = (2*DATA_W)'(x[i]) * (2*DATA_W)'(W[o][i]);
        always_ff @(posedge clk) terms[P] <= ACC_W'(prod >>> FRAC);
      end
    end

    // stage 2: adder tree, final addition, clamp
    logic [ACC_W-1:0] cs_s, cs_c;
    acc_t             total;
    csa_tree #(.N(NT), .W(ACC_W)) u_tree (.in(terms), .sum(cs_s), .carry(cs_c));
    assign total = acc_t'(cs_s + cs_c);

    always_ff @(posedge clk) begin
      y[o]       <= sat_act(64'(total));
      clamp_o[o] <= (total > acc_t'(ACT_MAX)) || (total < acc_t'(ACT_MIN));
    end
  end

  logic v1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1      <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      v1      <= valid_i;
      valid_o <= v1;
    end
  end

endmodule
