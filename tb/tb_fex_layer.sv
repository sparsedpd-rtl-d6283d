// tb_fex_layer: streams I/Q samples (corner cases, tiny and full-scale values,
// random values) through the feature extraction at one sample per clock and
// compares I/A, Q/A (Q1.14), A and A^3 (Q1.13, clamped) with floating-point
// values. Tolerance: 3 LSB, as dropping the low 2a bits of z before the
// inverse root may raise 1/sqrt(z) by up to 2^-13 relative. Also checks that valid_o follows valid_i after exactly FEX_LAT clocks
// and that I/Q leave aligned with their features.
module tb_fex_layer;
  import sparsedpd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid_i, valid_o;
  act_t i_i, q_i, i_o, q_o, amp_o, amp3_o;
  pn_t ia_o, qa_o;
  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int i; int q; int t; } smp_t;
  smp_t sent [$];

  fex_layer dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real clampr(input real v, input real hi);
    return (v > hi) ? hi : v;
  endfunction

  task automatic chk(input string what, input real got, input real exp, input real tol, input smp_t s);
    real e;
    e = got - exp; if (e < 0) e = -e;
    checks++;
    if (e > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s I=%0d Q=%0d got %f exp %f", what, s.i, s.q, got, exp);
    end
  endtask

  // checker
  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      smp_t s;
      real z, a, ea, ea3, eia, eqa;
      s = sent.pop_front();
      checks++;
      if (cyc - s.t != FEX_LAT) begin
        failures++; $display("FAIL latency %0d", cyc - s.t);
      end
      z = real'(s.i) * s.i + real'(s.q) * s.q;
      a = $sqrt(z);
      eia = (z == 0) ? 0.0 : clampr(real'(s.i) / a * 16384.0, 16383.0);
      eqa = (z == 0) ? 0.0 : clampr(real'(s.q) / a * 16384.0, 16383.0);
      ea  = clampr(a, 8191.0);
      ea3 = clampr(a * a * a / 67108864.0, 8191.0);
      chk("I", real'(i_o), real'(s.i), 0.0, s);
      chk("Q", real'(q_o), real'(s.q), 0.0, s);
      chk("I/A", real'(ia_o), eia, 3.0, s);
      chk("Q/A", real'(qa_o), eqa, 3.0, s);
      chk("A", real'(amp_o), ea, 2.0, s);
      chk("A3", real'(amp3_o), ea3, 3.0, s);
    end
  end

  task automatic send(input int i, input int q);
    smp_t s;
    i_i = act_t'(i); q_i = act_t'(q); valid_i = 1;
    s.i = i; s.q = q; s.t = cyc;
    sent.push_back(s);
    @(posedge clk); #1;
    valid_i = 0;
  endtask

  initial begin
    rst_n = 0; valid_i = 0; i_i = 0; q_i = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    send(0, 0); send(1, 0); send(0, -1); send(-8192, 0); send(0, 8191);
    send(-8192, -8192); send(8191, 8191); send(5000, -3000); send(3, 4);
    send(-60, 11); send(127, -128); send(2047, 1);
    @(posedge clk); #1;    // a bubble
    for (int n = 0; n < 3000; n++) begin
      int lim;
      lim = (n % 4 == 0) ? 64 : (n % 4 == 1) ? 1024 : 5800;
      send($urandom_range(2*lim) - lim, $urandom_range(2*lim) - lim);
    end
    repeat (FEX_LAT + 2) @(posedge clk);
    if (sent.size() != 0) begin failures++; $display("FAIL %0d samples lost", sent.size()); end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
