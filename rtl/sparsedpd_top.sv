// sparsedpd_top: the SparseDPD predistorter, a phase-normalised time-delay
// neural network (PNTDNN) that maps each baseband input sample x = I + jQ to a
// predistorted sample y, one sample per clock.
//
// Dataflow (latencies in clocks):
//   fex_layer    (10)  z = I^2+Q^2 -> 1/sqrt(z) -> P = (I - jQ)/A, A, A^3
//   time_delay   (0)   taps: K = x(t-1..t-n), A(t..t-n), A^3(t..t-n), n = 2
//   phase_norm   (1)   K * P for the n delayed samples
//   sparse_fc    (2)   hidden layer, 10 -> 12, then ReLU
//   sparse_fc    (2)   output layer on [x_FC, ReLU(y_FC)], 22 -> 2
//   phase_denorm (1)   (I_OUT + jQ_OUT) * P*  -> Q2.27 output
// Side signals (P, x_FC) ride in delay lines beside the arithmetic, so the
// sample leaving the output layer meets its own phasor. Total DPD_LAT = 16.
//
// Interface: i_i/q_i Q1.13, valid_i marks a sample (the design accepts one
// every clock; idle cycles are allowed and do not enter the memory taps).
// y_i/y_q Q2.27 with valid_o, DPD_LAT clocks after the sample. clamp_fc_o /
// clamp_out_o flag neurons whose sum left [-1, 1) for the sample on valid_o's
// path (hidden flags are reported with the sample at the output layer input
// stage, i.e. FC_LAT + PD_LAT clocks before valid_o). Synchronous design, one
// clock, asynchronous active-low reset of the control (valid) bits and taps.
// An assertion states the stream rule: a sample in gives a sample out
// DPD_LAT clocks later.
// Structure, sizes (n = 2, 12 hidden neurons) and number formats follow the
// paper; the weights are parameters (the paper publishes no trained values).
module sparsedpd_top
  import sparsedpd_pkg::*;
#(
  parameter act_t W_FC  [HIDDEN][N_FC_IN] = W_FC_DEFAULT,
  parameter act_t B_FC  [HIDDEN]          = B_FC_DEFAULT,
  parameter act_t W_OUT [N_OUT][N_OUT_IN] = W_OUT_DEFAULT,
  parameter act_t B_OUT [N_OUT]           = B_OUT_DEFAULT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  act_t              i_i,
  input  act_t              q_i,
  output logic              valid_o,
  output out_t              y_i,
  output out_t              y_q,
  output logic [HIDDEN-1:0] clamp_fc_o,
  output logic [N_OUT-1:0]  clamp_out_o
);

  localparam int unsigned N = MEM_DEPTH;

  // ---- feature extraction ---------------------------------------------------
  logic f_valid;
  act_t f_i, f_q, f_amp, f_amp3;
  pn_t  f_ia, f_qa;

  fex_layer u_fex (
    .clk(clk), .rst_n(rst_n), .valid_i(valid_i), .i_i(i_i), .q_i(q_i),
    .valid_o(f_valid), .i_o(f_i), .q_o(f_q), .ia_o(f_ia), .qa_o(f_qa),
    .amp_o(f_amp), .amp3_o(f_amp3));

  // ---- time delay (shift register) --------------------------------------------
  act_t k_i [N], k_q [N], amp_v [N+1], amp3_v [N+1];

  time_delay #(.N(N)) u_delay (
    .clk(clk), .rst_n(rst_n), .valid_i(f_valid), .i_i(f_i), .q_i(f_q),
    .amp_i(f_amp), .amp3_i(f_amp3),
    .k_i(k_i), .k_q(k_q), .amp_v(amp_v), .amp3_v(amp3_v));

  // ---- phase normalisation ------------------------------------------------------
  act_t pn_i [N], pn_q [N];
  phase_norm #(.N(N)) u_pn (
    .clk(clk), .k_i(k_i), .k_q(k_q), .ia(f_ia), .qa(f_qa),
    .pn_i(pn_i), .pn_q(pn_q));

  // A and A^3 vectors wait one clock for the rotation
  act_t amp_d [N+1], amp3_d [N+1];
  logic pn_valid;
  always_ff @(posedge clk) begin
    amp_d  <= amp_v;
    amp3_d <= amp3_v;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pn_valid <= 1'b0;
    else        pn_valid <= f_valid;
  end

  // x_FC = [I_PN, Q_PN, A, A^3]
  act_t x_fc [N_FC_IN];
  always_comb begin
    for (int j = 0; j < N; j++) begin
      x_fc[j]     = pn_i[j];
      x_fc[N + j] = pn_q[j];
    end
    for (int j = 0; j <= N; j++) begin
      x_fc[2*N + j]     = amp_d[j];
      x_fc[3*N + 1 + j] = amp3_d[j];
    end
  end

  // ---- hidden FC layer and ReLU ---------------------------------------------------
  logic h_valid;
  act_t y_fc [HIDDEN], h_relu [HIDDEN];

  sparse_fc #(.NI(N_FC_IN), .NO(HIDDEN), .W(W_FC), .B(B_FC)) u_fc (
    .clk(clk), .rst_n(rst_n), .valid_i(pn_valid), .x(x_fc),
    .valid_o(h_valid), .y(y_fc), .clamp_o(clamp_fc_o));

  relu #(.N(HIDDEN)) u_relu (.x(y_fc), .y(h_relu));

  // x_FC waits FC_LAT clocks to be concatenated with ReLU(y_FC)
  logic [N_FC_IN*DATA_W-1:0] x_fc_flat, x_fc_late_flat;
  act_t x_fc_late [N_FC_IN];
  always_comb
    for (int j = 0; j < N_FC_IN; j++) x_fc_flat[j*DATA_W +: DATA_W] = x_fc[j];
  pipe_delay #(.WIDTH(N_FC_IN*DATA_W), .DEPTH(FC_LAT)) u_xfc_dly (
    .clk(clk), .d(x_fc_flat), .q(x_fc_late_flat));
  always_comb
    for (int j = 0; j < N_FC_IN; j++) x_fc_late[j] = act_t'(x_fc_late_flat[j*DATA_W +: DATA_W]);

  act_t x_out [N_OUT_IN];
  always_comb begin
    for (int j = 0; j < N_FC_IN; j++) x_out[j] = x_fc_late[j];
    for (int j = 0; j < HIDDEN; j++)  x_out[N_FC_IN + j] = h_relu[j];
  end

  // ---- output FC layer --------------------------------------------------------------
  logic o_valid;
  act_t y_out [N_OUT];

  sparse_fc #(.NI(N_OUT_IN), .NO(N_OUT), .W(W_OUT), .B(B_OUT)) u_out (
    .clk(clk), .rst_n(rst_n), .valid_i(h_valid), .x(x_out),
    .valid_o(o_valid), .y(y_out), .clamp_o(clamp_out_o));

  // ---- phase denormalisation ------------------------------------------------------------
  // P travels from the FEx output to the output layer output: PN_LAT + 2*FC_LAT
  pn_t p_ia, p_qa;
  pipe_delay #(.WIDTH(2*PN_W), .DEPTH(PN_LAT + 2*FC_LAT)) u_p_dly (
    .clk(clk), .d({f_ia, f_qa}), .q({p_ia, p_qa}));

  phase_denorm u_pd (
    .clk(clk), .i_out(y_out[0]), .q_out(y_out[1]), .ia(p_ia), .qa(p_qa),
    .y_i(y_i), .y_q(y_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= o_valid;
  end

  // ---- stream rules ---------------------------------------------------------------------
  // Every accepted sample leaves exactly DPD_LAT clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
                              valid_i |-> ##DPD_LAT valid_o);

endmodule
