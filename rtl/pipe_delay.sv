// pipe_delay: DEPTH-stage register delay line for a WIDTH-bit word, used to
// keep side signals aligned with the pipelined arithmetic. DEPTH = 0 is a wire.
// Registers are not reset; their content is flushed by DEPTH clocks of data.
module pipe_delay #(
  parameter int unsigned WIDTH = 14,
  parameter int unsigned DEPTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      sr[0] <= d;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
    assign q = sr[DEPTH-1];
  end
endmodule
