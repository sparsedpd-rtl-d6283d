// tb_phase_denorm: multiplies random network outputs by random conjugate
// phasors and compares with (I_OUT + jQ_OUT)(ia + j*qa) in Q2.27, exact,
// including the saturating corner I_OUT = Q_OUT = ia = -qa = -1. Checks the
// one-clock latency.
module tb_phase_denorm;
  import sparsedpd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  act_t i_out, q_out;
  pn_t ia, qa;
  out_t y_i, y_q;
  int checks = 0, failures = 0;

  phase_denorm dut (.*);

  function automatic longint sat29(input longint v);
    if (v > 268435455)  return 268435455;
    if (v < -268435456) return -268435456;
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 3000; it++) begin
      longint a, b, c, d, ei, eq;
      a = $urandom_range(16383) - 8192;  b = $urandom_range(16383) - 8192;
      c = $urandom_range(32767) - 16384; d = $urandom_range(32767) - 16384;
      if (it == 0) begin a = -8192; b = -8192; c = -16384; d = 16383; end
      i_out = act_t'(a); q_out = act_t'(b); ia = pn_t'(c); qa = pn_t'(d);
      @(posedge clk); #1;
      ei = sat29(a * c - b * d);
      eq = sat29(a * d + b * c);
      checks += 2;
      if (longint'(y_i) != ei || longint'(y_q) != eq) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d,%0d exp %0d,%0d", y_i, y_q, ei, eq);
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
