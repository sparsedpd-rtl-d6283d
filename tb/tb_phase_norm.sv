// tb_phase_norm: rotates random delayed samples by random unit phasors and
// compares with the complex product K * (ia - j*qa) in floating point,
// rounded half up to Q1.13 and clamped; exact match required. Also checks the
// one-clock latency.
module tb_phase_norm;
  import sparsedpd_pkg::*;
  localparam int unsigned N = MEM_DEPTH;
  logic clk = 0;
  always #5 clk = ~clk;
  act_t k_i [N], k_q [N], pn_i [N], pn_q [N];
  pn_t ia, qa;
  int checks = 0, failures = 0;

  phase_norm dut (.*);

  function automatic int rq13(input real v);   // v in Q2.27 units
    real r;
    r = $floor(v / 16384.0 + 0.5);
    if (r > 8191.0) r = 8191.0;
    if (r < -8192.0) r = -8192.0;
    return int'(r);
  endfunction

  initial begin
    for (int it = 0; it < 3000; it++) begin
      real ph;
      int ki [N], kq [N], pa, pb;
      ph = 6.283185307179586 * real'($urandom_range(100000)) / 100000.0;
      pa = int'($floor($cos(ph) * 16383.0));
      pb = int'($floor($sin(ph) * 16383.0));
      if (it == 0) begin pa = -16384; pb = 0; end
      ia = pn_t'(pa); qa = pn_t'(pb);
      for (int j = 0; j < N; j++) begin
        ki[j] = $urandom_range(16383) - 8192;
        kq[j] = $urandom_range(16383) - 8192;
        k_i[j] = act_t'(ki[j]); k_q[j] = act_t'(kq[j]);
      end
      @(posedge clk); #1;
      for (int j = 0; j < N; j++) begin
        int ei, eq;
        ei = rq13(real'(ki[j]) * pa + real'(kq[j]) * pb);
        eq = rq13(real'(kq[j]) * pa - real'(ki[j]) * pb);
        checks += 2;
        if (int'(pn_i[j]) != ei || int'(pn_q[j]) != eq) begin
          failures++;
          if (failures < 10) $display("FAIL got %0d,%0d exp %0d,%0d", pn_i[j], pn_q[j], ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
