// inv_sqrt: pipelined inverse square root of an ISQ_M-bit unsigned integer k,
//   r ~= 2^RF / sqrt(k),  r unsigned, RF fraction bits (k = 0 saturates).
// Method: a table gives 1.5*x0 and 0.5*x0^3 for x0 = 1/sqrt(k); the first
// Newton-Raphson step x1 = 1.5*x0 - 0.5*x0^3*k then needs one multiply, and a
// second step x2 = 0.5*x1*(3 - k*x1^2) refines it:
//   stage 1  table read (synchronous ROM)
//   stage 2  x1 = t1 - (t2*k >> M)
//   stage 3  u  = k*x1
//   stage 4  d  = 3*2^RF - (u*x1 >> RF)
//   stage 5  r  = sat(x1*d >> (RF+1))     (the final ">> 1")
// Interface: one operand per clock in, result LAT = 5 clocks later; no stall.
// The table plus two iterations and the order of operations follow the
// published block diagram; the widths and the pipeline cut are this design's.
// Where the diagram forms x - 3, this design computes 3 - x as in the
// iteration formula (the sign is otherwise restored by the final product).
module inv_sqrt
  import sparsedpd_pkg::*;
#(
  parameter int unsigned M  = ISQ_M,
  parameter int unsigned RF = ISQ_RF
) (
  input  logic          clk,
  input  logic [M-1:0]  k,
  output logic [RF:0]   r
);

  localparam int unsigned XW  = RF + 1;
  localparam int unsigned T2W = RF + M;

  logic [XW-1:0]  t1;
  logic [T2W-1:0] t2;
  logic [M-1:0]   k1, k2;
  logic [XW-1:0]  x1_2, x1_3, x1_4;
  logic [M+XW-1:0] u3;
  logic signed [XW+2:0] d4;

  inv_sqrt_lut #(.M(M), .RF(RF), .T1W(XW), .T2W(T2W)) u_lut (
    .clk (clk), .addr(k), .t1(t1), .t2(t2));

  // stage 2: first Newton-Raphson step from the stored terms
  logic [T2W+M-1:0] t2k;
  logic signed [XW+1:0] x1_full;
  always_comb begin
    t2k     = (T2W+M)'(t2) * (T2W+M)'(k1);
    x1_full = $signed({2'b00, t1}) - $signed({2'b00, XW'(t2k >> M)});
  end

  // stage 5: second step, final halving and saturation to [0, 2^XW-1]
  logic signed [2*XW+3:0] x2_full;
  always_comb begin
    x2_full = $signed({1'b0, (2*XW+3)'(x1_4)}) * (2*XW+4)'(d4);
    x2_full = x2_full >>> (RF + 1);
  end

  always_ff @(posedge clk) begin
    k1 <= k;
    // stage 2
    k2   <= k1;
    if (x1_full < 0)                          x1_2 <= '0;
    else if (x1_full > $signed({2'b00, {XW{1'b1}}})) x1_2 <= '1;
    else                                      x1_2 <= XW'(x1_full);
    // stage 3
    x1_3 <= x1_2;
    u3   <= (M+XW)'(k2) * (M+XW)'(x1_2);
    // stage 4
    x1_4 <= x1_3;
    d4   <= $signed((XW+3)'(3) << RF)
          - $signed({1'b0, (XW+2)'(((2*XW+M)'(u3) * (2*XW+M)'(x1_3)) >> RF)});
    // stage 5
    if (x2_full < 0)                                   r <= '0;
    else if (x2_full > $signed({1'b0, (2*XW+3)'({XW{1'b1}})})) r <= '1;
    else                                               r <= XW'(x2_full);
  end

endmodule
