// csa_tree: carry-save (Wallace-style) adder tree. Reduces N words of W bits
// to a sum word and a carry word whose two's-complement sum, modulo 2^W,
// equals the sum of all inputs. Each level replaces every group of three
// words by a 3:2 compressor (full adders, bitwise: s = a^b^c and
// c = maj(a,b,c) << 1); words left over pass to the next level. A single
// carry-propagate addition of the two outputs (done by the user of the tree)
// gives the total. Combinational; depth ceil(log1.5(N/2)) full-adder levels.
// The tree structure follows the paper; the level schedule is this design's.
module csa_tree #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 15
) (
  input  logic [W-1:0] in [N],
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);

  // number of words at level l
  function automatic int unsigned cnt(input int unsigned l);
    int unsigned c;
    c = N;
    for (int unsigned i = 0; i < l; i++) c = 2 * (c / 3) + (c % 3);
    return c;
  endfunction

  function automatic int unsigned nlevels();
    int unsigned l;
    l = 0;
    while (cnt(l) > 2) l++;
    return l;
  endfunction

  localparam int unsigned L = nlevels();

  for (genvar l = 0; l < L; l++) begin : g_lvl
    localparam int unsigned NI = cnt(l);
    localparam int unsigned G  = NI / 3;
    logic [W-1:0] src [N];
    logic [W-1:0] dst [N];
    if (l == 0) begin : g_first
      assign src = in;
    end else begin : g_next
      assign src = g_lvl[l-1].dst;
    end
    for (genvar j = 0; j < N; j++) begin : g_w
      if (j < 2 * G) begin : g_csa
        localparam int unsigned B = 3 * (j / 2);
        if (j % 2 == 0) begin : g_s
          assign dst[j] = src[B] ^ src[B+1] ^ src[B+2];
        end else begin : g_c
          assign dst[j] = ((src[B] & src[B+1]) | (src[B] & src[B+2])
                          | (src[B+1] & src[B+2])) << 1;
        end
      end else if (j < cnt(l + 1)) begin : g_pass
        assign dst[j] = src[3 * G + (j - 2 * G)];
      end else begin : g_unused
        assign dst[j] = '0;
      end
    end
  end

  logic [W-1:0] last [N];
  if (L == 0) begin : g_notree
    assign last = in;
  end else begin : g_tree
    assign last = g_lvl[L-1].dst;
  end

  assign sum = last[0];
  if (cnt(L) > 1) begin : g_two
    assign carry = last[1];
  end else begin : g_one
    assign carry = '0;
  end

endmodule
