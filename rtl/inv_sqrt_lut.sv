// inv_sqrt_lut: read-only table of the two Newton-Raphson start terms used by
// the inverse square root. For a windowed input k (ISQ_M bits) it returns
//   t1 = round(1.5 * 2^RF / sqrt(k))      ("~3/(2x)"  with x = sqrt(k))
//   t2 = round(0.5 * 2^(RF+M) / k^1.5)    (magnitude of "~-1/(2x^3)")
// so that x1 = t1 - (t2 * k) >> M is one Newton-Raphson step from x0 = 1/sqrt(k).
// The sign of the second term is applied by the subtraction in inv_sqrt.
// k = 0 has no inverse root: t1 is then all ones and t2 zero, which makes the
// downstream result saturate; every product it feeds is then multiplied by 0.
//
// The table is filled at elaboration from integer square roots (no data file),
// and read synchronously like a block RAM: data appear one clock after addr.
// The table content (which terms are stored) follows the published design;
// the word widths, the rounding and the k = 0 entry are this design's choice.
module inv_sqrt_lut
  import sparsedpd_pkg::*;
#(
  parameter int unsigned M   = ISQ_M,
  parameter int unsigned RF  = ISQ_RF,
  parameter int unsigned T1W = RF + 1,
  parameter int unsigned T2W = RF + M
) (
  input  logic           clk,
  input  logic [M-1:0]   addr,
  output logic [T1W-1:0] t1,
  output logic [T2W-1:0] t2
);

  localparam int unsigned DEPTH = 2**M;

  // floor(sqrt(v)) for v < 2^100: a floating-point estimate, then corrected
  // by exact integer compares, so the result is exact whatever the rounding
  // of the estimate.
  function automatic logic [127:0] isqrt128(input logic [127:0] v);
    logic [127:0] root;
    root = 128'(longint'($sqrt(real'(v))));
    while (root * root > v) root = root - 128'd1;
    while ((root + 128'd1) * (root + 128'd1) <= v) root = root + 128'd1;
    return root;
  endfunction

  // round(sqrt(v)) = floor((floor(sqrt(4v)) + 1) / 2)
  function automatic logic [127:0] rsqrt128(input logic [127:0] v);
    return (isqrt128(v << 2) + 128'd1) >> 1;
  endfunction

  function automatic logic [T1W-1:0] term1(input int unsigned kk);
    logic [127:0] num;
    if (kk == 0) return '1;
    // (1.5 * 2^RF)^2 / k = 9 * 2^(2RF-2) / k
    num = (128'd9 << (2*RF - 2)) / 128'(kk);
    return T1W'(rsqrt128(num));
  endfunction

  function automatic logic [T2W-1:0] term2(input int unsigned kk);
    logic [127:0] num;
    if (kk == 0) return '0;
    // (0.5 * 2^(RF+M))^2 / k^3 = 2^(2RF+2M-2) / k^3
    num = (128'd1 << (2*(RF + M) - 2)) / (128'(kk) * 128'(kk) * 128'(kk));
    return T2W'(rsqrt128(num));
  endfunction

  logic [T1W-1:0] rom1 [DEPTH];
  logic [T2W-1:0] rom2 [DEPTH];

  initial begin
    for (int unsigned k = 0; k < DEPTH; k++) begin
      rom1[k] = term1(k);
      rom2[k] = term2(k);
    end
  end

  always_ff @(posedge clk) begin
    t1 <= rom1[addr];
    t2 <= rom2[addr];
  end

endmodule
