// f0_block: first F-block of the WMD processing element.
//
// Computes out = F_0 * vin for one slice: vin holds the S_W activations of
// the slice, F_0 is an M x S_W matrix of Po2 coefficients (0 or +/-2^-k).
// Each of the M rows has S_W shift units, one per input, whose products are
// reduced by an adder tree.  Because this first matrix only has non-zeros in
// its first S_W columns, every shift unit is wired to a fixed input and no
// column index or input multiplexer is needed, as the accelerator description
// states.  The per-element zero flag is this design's way of holding rows with
// fewer than S_W non-zeros.
//
// Interface: vin[S_W] (ACT_W signed), codes = M*S_W F_0 codes, code of row i,
// column j at position i*S_W+j ({nz, neg, sh}, see wmd_pkg); out[M].
// Purely combinational; the PE registers the result.
module f0_block #(
  parameter int unsigned ACT_W = wmd_pkg::ACT_W_D,
  parameter int unsigned S_W   = wmd_pkg::S_W_D,
  parameter int unsigned M     = wmd_pkg::M_D,
  parameter int unsigned Z     = wmd_pkg::Z_D,
  localparam int unsigned SH_W   = wmd_pkg::sh_w(Z),
  localparam int unsigned CODE_W = wmd_pkg::f0_code_w(Z),
  localparam int unsigned OUT_W  = wmd_pkg::f0_out_w(ACT_W, S_W)
) (
  input  logic signed [ACT_W-1:0]        vin   [S_W],
  input  logic        [M*S_W*CODE_W-1:0] codes,
  output logic signed [OUT_W-1:0]        out   [M]
);

  for (genvar i = 0; i < M; i++) begin : g_row
    logic signed [ACT_W:0] prod [S_W];
    for (genvar j = 0; j < S_W; j++) begin : g_col
      logic [CODE_W-1:0] c;
      assign c = codes[(i*S_W+j)*CODE_W +: CODE_W];
      shift_unit #(.IN_W(ACT_W), .Z(Z)) u_su (
        .x  (vin[j]),
        .en (c[CODE_W-1]),
        .neg(c[CODE_W-2]),
        .sh (c[SH_W-1:0]),
        .y  (prod[j])
      );
    end
    adder_tree #(.N(S_W), .IN_W(ACT_W+1), .OUT_W(OUT_W)) u_tree (.in(prod), .sum(out[i]));
  end

endmodule
