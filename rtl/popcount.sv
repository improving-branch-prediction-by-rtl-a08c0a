// popcount: number of ones in an N-bit vector.
//
// The ternary inner product of the helper reduces to two population counts
// of HIST_LEN x m bits each (6400 at the default size); the paper names
// popcount as the latency-limiting step but does not give its circuit. This
// design uses a combinational binary adder tree: the input is zero-padded
// to a power-of-two number of 8-bit leaves, each leaf's ones are summed,
// and the counts are added pairwise, level by level, until one sum is left.
// Depth is log2(N/8) adder levels plus one leaf level.
module popcount #(
  parameter int unsigned N = 6400,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  in_bits,
  output logic [CW-1:0] count
);

  localparam int unsigned LEAF   = 8;
  localparam int unsigned NLEAF  = (N + LEAF - 1) / LEAF;
  localparam int unsigned LEVELS = (NLEAF > 1) ? $clog2(NLEAF) : 0;
  localparam int unsigned P2     = 1 << LEVELS;

  logic [P2*LEAF-1:0] padded;

  always_comb begin
    padded          = '0;
    padded[N-1:0]   = in_bits;
  end

  // Level 0 holds the P2 leaf counts, level l the P2 >> l partial sums.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NN = P2 >> l;
    logic [CW-1:0] s [NN];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < NN; i++) begin : g_cnt
        assign s[i] = CW'(padded[LEAF*i+0]) + CW'(padded[LEAF*i+1]) +
                      CW'(padded[LEAF*i+2]) + CW'(padded[LEAF*i+3]) +
                      CW'(padded[LEAF*i+4]) + CW'(padded[LEAF*i+5]) +
                      CW'(padded[LEAF*i+6]) + CW'(padded[LEAF*i+7]);
      end
    end else begin : g_add
      for (genvar i = 0; i < NN; i++) begin : g_node
        assign s[i] = g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  assign count = g_lvl[LEVELS].s[0];

endmodule
