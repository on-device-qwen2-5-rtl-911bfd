// fp32_adder_tree -- N-input FP32 adder tree (N = 8 in the MACRO_MAC).
//
// Sums one column of PE partial sums. The tree has log2(N) levels of
// pairwise FP32 adders (4 + 2 + 1 = 7 adders for N = 8); each level adds
// neighbouring pairs, so the result is ((in0+in1)+(in2+in3))+((in4+in5)+(in6+in7)),
// each addition rounded to nearest even.
//
// Interface and timing: combinational. The MACRO_MAC registers the result
// in its accumulators in the same cycle.
//
// An 8-input adder tree fed by a column of 8 PEs follows the paper; the
// pairing order and the absence of pipeline registers inside the tree are
// this design's choices.
module fp32_adder_tree
  import awq_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  fp32_t [N-1:0] in,
  output fp32_t         sum
);

  localparam int unsigned LEVELS = $clog2(N);

  initial assert (N == (1 << LEVELS)) else $error("N must be a power of two");

  fp32_t level [LEVELS+1][N];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++) level[l][i] = '0;
    for (int i = 0; i < N; i++) level[0][i] = in[i];
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (N >> l); i++)
        level[l][i] = fp32_add(level[l-1][2*i], level[l-1][2*i+1]);
    sum = level[LEVELS][0];
  end

endmodule
