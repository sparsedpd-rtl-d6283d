// tb_qam64_workload: runs a 64-QAM baseband signal through the predistorter,
// as in the published evaluation (a 20 MHz 64-QAM signal, 172,035 samples).
// The signal is generated here: random 64-QAM symbols (levels +-1..+-7 on each
// axis) shaped by a raised-cosine pulse (roll-off 0.22, 8 samples per symbol,
// +-8 symbols span), scaled to an RMS amplitude of 0.25 and limited to the
// Q1.13 range. The sample rate ratio, roll-off and level are this test's
// choices: the evaluation does not state them. Samples are applied back to
// back, one per clock, the rate of the design. Every output is compared with
// the reference model of dpd_ref_pkg (within 2^-10); the count of outputs,
// the 16-clock latency and the absence of idle output cycles in the stream
// are checked.
module tb_qam64_workload;
  import sparsedpd_pkg::*;
  import dpd_ref_pkg::*;
  localparam int NSAMP = 172035;
  localparam int OS = 8, SPAN = 8;
  localparam real BETA = 0.22, RMS = 0.25, PI = 3.141592653589793;
  localparam longint TOL = 131072;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid_i, valid_o;
  act_t i_i, q_i;
  out_t y_i, y_q;
  logic [HIDDEN-1:0] clamp_fc_o;
  logic [N_OUT-1:0]  clamp_out_o;

  sparsedpd_top dut (.*);

  typedef struct { longint yi; longint yq; int t; } exp_t;
  exp_t expq [$];
  dpd_ref_pkg::dpd_ref mdl = new();
  int checks = 0, failures = 0, cyc = 0, n_out = 0, first_out = -1, last_out = -1;
  longint worst = 0;
  real h [2*SPAN*OS+1];
  real sym_i [2*SPAN+1], sym_q [2*SPAN+1];   // symbols k-SPAN .. k+SPAN

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rc(input real t);   // t in symbols
    real s, c, d;
    s = (t == 0.0) ? 1.0 : $sin(PI * t) / (PI * t);
    d = 1.0 - (2.0 * BETA * t) * (2.0 * BETA * t);
    c = ((d < 1e-9) && (d > -1e-9)) ? PI / 4.0 : $cos(PI * BETA * t) / d;
    return s * c;
  endfunction

  function automatic real lvl();
    return real'(2 * int'($urandom_range(7)) - 7);
  endfunction

  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      exp_t e;
      longint di, dq;
      n_out++;
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      e = expq.pop_front();
      checks += 3;
      if (cyc - e.t != DPD_LAT) begin
        failures++; if (failures < 10) $display("FAIL latency %0d", cyc - e.t);
      end
      di = longint'(y_i) - e.yi; if (di < 0) di = -di;
      dq = longint'(y_q) - e.yq; if (dq < 0) dq = -dq;
      if (di > worst) worst = di;
      if (dq > worst) worst = dq;
      if (di > TOL) begin failures++; if (failures < 10) $display("FAIL I got %0d exp %0d", y_i, e.yi); end
      if (dq > TOL) begin failures++; if (failures < 10) $display("FAIL Q got %0d exp %0d", y_q, e.yq); end
    end
  end

  initial begin
    real scale, peak;
    for (int j = 0; j <= 2*SPAN*OS; j++) h[j] = rc(real'(j - SPAN*OS) / real'(OS));
    for (int j = 0; j <= 2*SPAN; j++) begin sym_i[j] = lvl(); sym_q[j] = lvl(); end
    scale = RMS / $sqrt(42.0) * 8192.0;
    peak = 0.0;
    rst_n = 0; valid_i = 0; i_i = 0; q_i = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < NSAMP; n++) begin
      real si, sq;
      int ii, qq;
      int ph;
      ph = n % OS;
      if (ph == 0 && n != 0) begin
        for (int j = 0; j < 2*SPAN; j++) begin sym_i[j] = sym_i[j+1]; sym_q[j] = sym_q[j+1]; end
        sym_i[2*SPAN] = lvl(); sym_q[2*SPAN] = lvl();
      end
      si = 0.0; sq = 0.0;
      // sample at time SPAN + ph/OS symbols after the oldest stored symbol
      for (int j = 0; j <= 2*SPAN; j++) begin
        int tap;
        tap = (SPAN - j) * OS + ph + SPAN * OS;
        if (tap >= 0 && tap <= 2*SPAN*OS) begin
          si += sym_i[j] * h[tap];
          sq += sym_q[j] * h[tap];
        end
      end
      ii = dpd_ref_pkg::dpd_ref::clampi($floor(si * scale + 0.5), -8192, 8191);
      qq = dpd_ref_pkg::dpd_ref::clampi($floor(sq * scale + 0.5), -8192, 8191);
      if ($sqrt(real'(ii) * ii + real'(qq) * qq) > peak) peak = $sqrt(real'(ii) * ii + real'(qq) * qq);
      begin
        exp_t e;
        mdl.step(ii, qq, e.yi, e.yq);
        e.t = cyc;
        expq.push_back(e);
      end
      i_i = act_t'(ii); q_i = act_t'(qq); valid_i = 1;
      @(posedge clk); #1;
    end
    valid_i = 0;
    repeat (DPD_LAT + 3) @(posedge clk);
    checks += 2;
    if (n_out != NSAMP) begin failures++; $display("FAIL %0d outputs for %0d samples", n_out, NSAMP); end
    if (last_out - first_out + 1 != NSAMP) begin
      failures++; $display("FAIL output stream has gaps: %0d clocks for %0d samples", last_out - first_out + 1, NSAMP);
    end
    $display("samples %0d, peak amplitude %f, window-shifted %0d, unshifted %0d",
             NSAMP, peak / 8192.0, mdl.n_shift, mdl.n_small);
    $display("hidden clamps %0d, ReLU cuts %0d, worst output error (Q2.27 LSB) %0d",
             mdl.n_hclamp, mdl.n_relu, worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NSAMP + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
