// shift_unit: power-of-two "multiplier" of the WMD processing element.
//
// Multiplies a signed operand by a coefficient 0 or +/-2^-k, k in 0..Z, without
// a multiplier: the Z+1 right-shifted copies of the operand are formed with
// fixed wiring, a multiplexer picks one by the shift code, and the sign bit
// selects the negated value.  Arithmetic right shift rounds towards minus
// infinity.  Only right shifts exist because the accelerator restricts the
// Po2 set to non-positive exponents to save logic; the set of shift amounts
// 0..Z follows the decomposition example that prints Z = 0,1,2,3 (the text
// speaks of "Z predefined shift values"; this design takes 0..Z, Z+1 values).
//
// Interface: x (IN_W signed), en (coefficient non-zero), neg, sh.  y is
// IN_W+1 bits so that negating the most negative operand cannot overflow.
// Purely combinational.
module shift_unit #(
  parameter int unsigned IN_W = 8,
  parameter int unsigned Z    = 3,
  localparam int unsigned SH_W  = wmd_pkg::sh_w(Z),
  localparam int unsigned OUT_W = IN_W + 1
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic                    en,
  input  logic                    neg,
  input  logic        [SH_W-1:0]  sh,
  output logic signed [OUT_W-1:0] y
);

  logic signed [OUT_W-1:0] shifted [Z+1];
  logic signed [OUT_W-1:0] sel;

  // Predefined shifts: pure wiring.
  for (genvar k = 0; k <= Z; k++) begin : g_sh
    assign shifted[k] = OUT_W'(x) >>> k;
  end

  always_comb begin
    sel = shifted[Z];                 // codes above Z saturate at the largest shift
    for (int k = 0; k <= Z; k++)
      if (sh == SH_W'(k)) sel = shifted[k];
    if (!en)      y = '0;
    else if (neg) y = -sel;
    else          y = sel;
  end

endmodule
