// tb_inv_sqrt: streams one operand per clock through the inverse square root
// and compares each result, LAT = 5 clocks later, with 2^RF/sqrt(k) computed in
// floating point. Tolerance: 2 LSB plus a relative 2^-21.
module tb_inv_sqrt;
  import sparsedpd_pkg::*;
  localparam int unsigned M = ISQ_M, RF = ISQ_RF;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [M-1:0] k;
  logic [RF:0] r;
  int checks = 0, failures = 0;
  int unsigned hist [$];
  real worst = 0.0;

  inv_sqrt dut (.clk(clk), .k(k), .r(r));

  initial begin
    k = 0;
    for (int i = 0; i < 3000; i++) begin
      int unsigned kv;
      kv = (i < 6) ? i : (i % 3 == 0) ? $urandom_range(64) : $urandom_range(2**M - 1);
      if (i == 6) kv = 2**M - 1;
      k = M'(kv);
      hist.push_back(kv);
      @(posedge clk); #1;
      if (hist.size() >= ISQ_LAT) begin
        int unsigned ko;
        real e, err;
        ko = hist.pop_front();
        e = (ko == 0) ? real'(2**(RF+1) - 1) : (2.0 ** RF) / $sqrt(real'(ko));
        err = real'(r) - e; if (err < 0) err = -err;
        if (err / (e + 1.0) > worst) worst = err / (e + 1.0);
        checks++;
        if (err > 2.0 + e * (2.0 ** -21)) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d r=%0d exp=%f", ko, r, e);
        end
      end
    end
    $display("worst relative error %e", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
