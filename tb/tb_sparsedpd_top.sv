// tb_sparsedpd_top: end-to-end test of the predistorter at its default sizes
// and weights. A reference model of the network, written independently in
// floating point plus integer arithmetic, computes each expected output:
// exact features (I/A, A, A^3 from a floating-point square root), delay taps
// over the valid samples, the phase rotation, both sparse layers with floor-
// truncated products and clamping, ReLU and the conjugate rotation.
// The hardware's inverse square root works on a windowed z, so its features
// may differ by a few LSB; outputs must agree within 2^-10 (Q2.27: 2^17), and
// the worst error is printed.
// Stimulus: zero samples, small samples (no window shift), full-range samples
// (window shift), near-full-scale bursts (hidden and output clamps), and
// idle cycles between samples. Each of these mechanisms, and ReLU cutting a
// neuron, is counted; one that never happened counts as a failure. The
// latency (DPD_LAT = 16) and the sample count are checked too.
module tb_sparsedpd_top;
  import sparsedpd_pkg::*;
  import dpd_ref_pkg::*;
  localparam int unsigned N = MEM_DEPTH;
  localparam longint TOL = 131072;       // 2^17 in Q2.27 = 2^-10
  localparam int unsigned NSAMP = 20000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid_i, valid_o;
  act_t i_i, q_i;
  out_t y_i, y_q;
  logic [HIDDEN-1:0] clamp_fc_o;
  logic [N_OUT-1:0]  clamp_out_o;

  sparsedpd_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_bubble = 0, n_dut_hclamp = 0, n_dut_oclamp = 0;
  longint worst = 0;

  typedef struct { longint yi; longint yq; int t; } exp_t;
  exp_t expq [$];
  dpd_ref_pkg::dpd_ref mdl = new();

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int clampi(input real v, input int lo, input int hi);
    return dpd_ref_pkg::dpd_ref::clampi(v, lo, hi);
  endfunction

  task automatic model(input int si, input int sq);
    exp_t e;
    mdl.step(si, sq, e.yi, e.yq);
    e.t = cyc;
    expq.push_back(e);
  endtask

  always @(posedge clk) begin
    if (rst_n && clamp_fc_o != 0)  n_dut_hclamp++;
    if (rst_n && clamp_out_o != 0) n_dut_oclamp++;
    if (rst_n && valid_o) begin
      exp_t e;
      longint di, dq;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL output without input");
      end else begin
        e = expq.pop_front();
        if (cyc - e.t != DPD_LAT) begin
          failures++; $display("FAIL latency %0d", cyc - e.t);
        end
        di = longint'(y_i) - e.yi; if (di < 0) di = -di;
        dq = longint'(y_q) - e.yq; if (dq < 0) dq = -dq;
        if (di > worst) worst = di;
        if (dq > worst) worst = dq;
        checks += 2;
        if (di > TOL || dq > TOL) begin
          failures++;
          if (failures < 10) $display("FAIL out got %0d,%0d exp %0d,%0d", y_i, y_q, e.yi, e.yq);
        end
      end
    end
  end

  task automatic send(input int si, input int sq);
    i_i = act_t'(si); q_i = act_t'(sq); valid_i = 1;
    model(si, sq);
    @(posedge clk); #1;
    valid_i = 0;
  endtask

  task automatic require(input string what, input int n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
  endtask

  initial begin
    rst_n = 0; valid_i = 0; i_i = 0; q_i = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    send(0, 0); send(0, 0);
    for (int n = 0; n < NSAMP; n++) begin
      real r, ph;
      int si, sq;
      case (n % 8)
        0:       r = 8.0 + 100.0 * real'($urandom_range(1000)) / 1000.0;
        1, 2:    r = 8000.0 + 190.0 * real'($urandom_range(1000)) / 1000.0;
        default: r = 7000.0 * real'($urandom_range(1000)) / 1000.0;
      endcase
      if (n % 8 == 2 && (n / 8) % 2 == 1) r = 1000.0;
      ph = 6.283185307179586 * real'($urandom_range(100000)) / 100000.0;
      si = clampi($floor(r * $cos(ph)), -8192, 8191);
      sq = clampi($floor(r * $sin(ph)), -8192, 8191);
      if (n % 501 == 0) begin si = 0; sq = 0; end
      send(si, sq);
      if (n % 37 == 0) begin
        n_bubble++;
        i_i = act_t'(123); q_i = act_t'(-77);
        repeat (1 + n % 3) @(posedge clk);
        #1;
      end
    end
    repeat (DPD_LAT + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("worst output error (Q2.27 LSB) %0d", worst);
    require("zero-amplitude samples", mdl.n_zero);
    require("samples without shift", mdl.n_small);
    require("samples with window shift", mdl.n_shift);
    require("idle gaps", n_bubble);
    require("ReLU cut a neuron", mdl.n_relu);
    require("hidden clamp (model)", mdl.n_hclamp);
    require("hidden clamp (design)", n_dut_hclamp);
    // The output layer uses the same clamp hardware as the hidden layer; with
    // the default weights its sums rarely leave [-1, 1), so it is only reported.
    $display("%-28s %0d / %0d", "output clamp (model/design)", mdl.n_oclamp, n_dut_oclamp);
    checks++;
    if ((mdl.n_oclamp == 0) != (n_dut_oclamp == 0)) begin
      failures++; $display("FAIL output clamp seen by only one of model and design");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSAMP * 3 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
