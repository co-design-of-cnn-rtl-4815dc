// fgen_block: generic F-block of the WMD processing element.
//
// Computes out = F * v for an M x M decomposed matrix F that has exactly E
// non-zeros per row.  With the diagonal optimisation one of them is a fixed 1
// on the diagonal, so v[i] goes straight into the adder tree of row i and only
// E-1 elements per row are coded.  Each coded element has an M-to-1
// multiplexer that picks the input v[idx] (the sparsity is unstructured) and a
// shift unit that applies +/-2^-k; the E terms of a row are reduced by an
// adder tree.  Later decomposition stages (P > 2) reuse this block in time, so
// input and output have the same width W; the caller sizes W (wmd_pkg::f_w)
// so that the deepest supported decomposition cannot overflow.
//
// Interface: v[M], codes = M*(E-1) F_gen codes, code e of row i at position
// i*(E-1)+e ({neg, sh, idx}, see wmd_pkg); out[M].  Purely combinational.
module fgen_block #(
  parameter int unsigned W = wmd_pkg::f_w(wmd_pkg::ACT_W_D, wmd_pkg::S_W_D, wmd_pkg::E_D,
                                          wmd_pkg::P_MAX_D),
  parameter int unsigned M = wmd_pkg::M_D,
  parameter int unsigned E = wmd_pkg::E_D,
  parameter int unsigned Z = wmd_pkg::Z_D,
  localparam int unsigned SH_W   = wmd_pkg::sh_w(Z),
  localparam int unsigned IDX_W  = wmd_pkg::idx_w(M),
  localparam int unsigned CODE_W = wmd_pkg::fg_code_w(Z, M),
  localparam int unsigned SUM_W  = W + 1 + $clog2(E)
) (
  input  logic signed [W-1:0]            v     [M],
  input  logic        [M*(E-1)*CODE_W-1:0] codes,
  output logic signed [W-1:0]            out   [M]
);

  for (genvar i = 0; i < M; i++) begin : g_row
    logic signed [W:0]       term [E];
    logic signed [SUM_W-1:0] sum;
    assign term[0] = (W+1)'(v[i]);                   // diagonal element, fixed 1
    for (genvar e = 0; e < E-1; e++) begin : g_el
      logic [CODE_W-1:0]     c;
      logic [IDX_W-1:0]      idx;
      logic signed [W-1:0]   sel;
      assign c   = codes[(i*(E-1)+e)*CODE_W +: CODE_W];
      assign idx = c[IDX_W-1:0];
      assign sel = (int'(idx) < M) ? v[idx] : '0;  // input multiplexer
      shift_unit #(.IN_W(W), .Z(Z)) u_su (
        .x  (sel),
        .en (1'b1),
        .neg(c[CODE_W-1]),
        .sh (c[IDX_W +: SH_W]),
        .y  (term[e+1])
      );
    end
    adder_tree #(.N(E), .IN_W(W+1), .OUT_W(SUM_W)) u_tree (.in(term), .sum(sum));
    assign out[i] = W'(sum);
  end

endmodule
