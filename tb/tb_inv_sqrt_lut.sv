// tb_inv_sqrt_lut: checks the start-term table against 1.5/sqrt(k) and
// 0.5/k^1.5 computed in floating point (tolerance 1 LSB), at the ends of the
// address range and at random addresses, with the one-clock read latency.
module tb_inv_sqrt_lut;
  import sparsedpd_pkg::*;
  localparam int unsigned M = ISQ_M, RF = ISQ_RF;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [M-1:0] addr;
  logic [RF:0] t1;
  logic [RF+M-1:0] t2;
  int checks = 0, failures = 0;

  inv_sqrt_lut dut (.clk(clk), .addr(addr), .t1(t1), .t2(t2));

  task automatic check_addr(input int unsigned k);
    real e1, e2;
    addr = M'(k);
    @(posedge clk); #1;
    if (k == 0) begin
      e1 = real'(2**(RF+1) - 1); e2 = 0.0;
    end else begin
      e1 = 1.5 * (2.0 ** RF) / $sqrt(real'(k));
      e2 = 0.5 * (2.0 ** (RF + M)) / (real'(k) * $sqrt(real'(k)));
    end
    checks += 2;
    if ((real'(t1) - e1) > 1.0 || (e1 - real'(t1)) > 1.0) begin
      failures++; $display("FAIL t1 k=%0d got %0d exp %f", k, t1, e1);
    end
    if ((real'(t2) - e2) > 1.0 || (e2 - real'(t2)) > 1.0) begin
      failures++; $display("FAIL t2 k=%0d got %0d exp %f", k, t2, e2);
    end
  endtask

  initial begin
    check_addr(0); check_addr(1); check_addr(2); check_addr(3); check_addr(4);
    check_addr(2**M - 1); check_addr(2**(M-1));
    for (int i = 0; i < 400; i++) check_addr($urandom_range(2**M - 1));
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
