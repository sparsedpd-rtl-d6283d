// time_delay: the z^-1 shift register that gives the network its memory.
// For the sample now at the input (time t) it presents
//   k_i/k_q[j]  = I, Q of sample t-1-j        (j = 0..N-1)  -> K vector
//   amp_v[j]    = A   of sample t-j            (j = 0..N)    -> A vector
//   amp3_v[j]   = A^3 of sample t-j            (j = 0..N)    -> A^3 vector
// Entry 0 of amp_v/amp3_v is the input itself (combinational); the older taps
// are registers that shift by one position on every clock with valid_i high,
// so idle cycles between samples do not enter the memory. Reset clears the
// taps (the samples before the first one count as zero).
// Follows the paper: tap sets K (t-1..t-n), A and A^3 (t..t-n), depth n = 2.
// Shifting only on valid samples and the reset value are this design's choice.
module time_delay
  import sparsedpd_pkg::*;
#(
  parameter int unsigned N = MEM_DEPTH
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  act_t i_i,
  input  act_t q_i,
  input  act_t amp_i,
  input  act_t amp3_i,
  output act_t k_i   [N],
  output act_t k_q   [N],
  output act_t amp_v [N+1],
  output act_t amp3_v[N+1]
);

  act_t ri [N], rq [N], ra [N], ra3 [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) begin
        ri[j] <= '0; rq[j] <= '0; ra[j] <= '0; ra3[j] <= '0;
      end
    end else if (valid_i) begin
      ri[0] <= i_i; rq[0] <= q_i; ra[0] <= amp_i; ra3[0] <= amp3_i;
      for (int j = 1; j < N; j++) begin
        ri[j] <= ri[j-1]; rq[j] <= rq[j-1]; ra[j] <= ra[j-1]; ra3[j] <= ra3[j-1];
      end
    end
  end

  always_comb begin
    amp_v[0]  = amp_i;
    amp3_v[0] = amp3_i;
    for (int j = 0; j < N; j++) begin
      k_i[j]      = ri[j];
      k_q[j]      = rq[j];
      amp_v[j+1]  = ra[j];
      amp3_v[j+1] = ra3[j];
    end
  end

endmodule
