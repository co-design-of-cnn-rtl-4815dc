// adder_tree: balanced combinational adder tree that reduces N signed terms.
//
// The terms are padded with zeros to the next power of two and added
// pairwise, level by level: each level adds neighbouring pairs of the level
// before, so the depth is ceil(log2 N) adders.  The padding adders have a
// constant zero operand and vanish in synthesis.  Used to reduce the
// shift-unit products of one row of an F-block.  Interface: in[N] of IN_W
// bits, sum of OUT_W bits (the caller sizes OUT_W to hold the sum).
// Combinational.
module adder_tree #(
  parameter int unsigned N     = 4,
  parameter int unsigned IN_W  = 9,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);

  localparam int unsigned LEVELS = (N < 2) ? 0 : $clog2(N);
  localparam int unsigned NP     = 1 << LEVELS;

  // Level by level, in place: after level l, t[i] (i < NP >> (l+1)) holds
  // the sum of terms i*2^(l+1) .. (i+1)*2^(l+1)-1.
  always_comb begin
    logic signed [OUT_W-1:0] t [NP];
    for (int i = 0; i < NP; i++) t[i] = (i < N) ? OUT_W'(in[i]) : '0;
    for (int l = 0; l < LEVELS; l++)
      for (int i = 0; i < (NP >> (l + 1)); i++)
        t[i] = t[2*i] + t[2*i+1];
    sum = t[0];
  end

endmodule
