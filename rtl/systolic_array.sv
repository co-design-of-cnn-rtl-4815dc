// systolic_array: PE_X x PE_Y grid of WMD processing elements.
//
// Column x receives input channels x*S_W .. x*S_W+S_W-1 of the current pixel
// at its top; the vector then travels down the column one register per row,
// so every row sees the same inputs (rows differ only in the output channels
// their F matrices produce).  Partial sums flow left to right through the M
// adders of each PE, so the last PE of row y delivers the sum over all
// S_W*PE_X input channels for output channels y*M .. y*M+M-1.
//
// To make the systolic timing line up, the array skews its input: column x
// is delayed by x cycles, so PE(x,y) sees a pixel x+y cycles after it
// entered.  The row results come out of the right edge one cycle apart per
// row and are deskewed (row y delayed by PE_Y-1-y cycles), so all PE_Y*M
// results of one pixel leave together.  The skew and deskew registers are
// this design's choice; the paper shows the grid, its inter-PE registers and
// the row outputs but not how the buffers are aligned to it.
//
// Latency from in_valid to out_valid: (PE_X-1) + (PE_Y-1) + n_fgen + 2 cycles.
// Throughput: one pixel every n_fgen (= Lat_F) cycles; in_valid must respect
// that spacing.
//
// Coefficients are loaded one PE row per cycle: w_load with row address
// w_row writes w_data, which holds the codes of the PE_X PEs of that row
// (PE x in bits [x*COEF_W +: COEF_W]).
module systolic_array #(
  parameter int unsigned ACT_W = wmd_pkg::ACT_W_D,
  parameter int unsigned S_W   = wmd_pkg::S_W_D,
  parameter int unsigned M     = wmd_pkg::M_D,
  parameter int unsigned E     = wmd_pkg::E_D,
  parameter int unsigned Z     = wmd_pkg::Z_D,
  parameter int unsigned P_MAX = wmd_pkg::P_MAX_D,
  parameter int unsigned PE_X  = wmd_pkg::PE_X_D,
  parameter int unsigned PE_Y  = wmd_pkg::PE_Y_D,
  localparam int unsigned PS_W    = wmd_pkg::f_w(ACT_W, S_W, E, P_MAX) + $clog2(PE_X) + 1,
  localparam int unsigned COEF_W  = wmd_pkg::pe_coef_w(S_W, M, E, Z, P_MAX),
  localparam int unsigned NPASS_W = $clog2(P_MAX + 1),
  localparam int unsigned ROW_W   = (PE_Y < 2) ? 1 : $clog2(PE_Y)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NPASS_W-1:0]       n_fgen,
  input  logic                     w_load,
  input  logic [ROW_W-1:0]         w_row,
  input  logic [PE_X*COEF_W-1:0]   w_data,
  input  logic                     in_valid,
  input  logic signed [ACT_W-1:0]  in_vec  [PE_X][S_W],
  output logic                     out_valid,
  output logic signed [PS_W-1:0]   out_sum [PE_Y][M]
);

  // vertical and horizontal links: v*[x][y] enters PE(x,y) from above,
  // p*[x][y] enters PE(x,y) from the left
  logic                    vv [PE_X][PE_Y+1];
  logic signed [ACT_W-1:0] vd [PE_X][PE_Y+1][S_W];
  logic                    pv [PE_X+1][PE_Y];
  logic signed [PS_W-1:0]  pd [PE_X+1][PE_Y][M];

  // ---------------- input skew: column x delayed by x cycles ----------------
  for (genvar x = 0; x < PE_X; x++) begin : g_skew
    if (x == 0) begin : g_direct
      assign vv[0][0] = in_valid;
      assign vd[0][0] = in_vec[0];
    end else begin : g_delay
      logic                    sv [x];
      logic signed [ACT_W-1:0] sd [x][S_W];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < x; k++) begin
            sv[k] <= 1'b0;
            for (int j = 0; j < S_W; j++) sd[k][j] <= '0;
          end
        end else begin
          sv[0] <= in_valid;
          sd[0] <= in_vec[x];
          for (int k = 1; k < x; k++) begin
            sv[k] <= sv[k-1];
            sd[k] <= sd[k-1];
          end
        end
      end
      assign vv[x][0] = sv[x-1];
      assign vd[x][0] = sd[x-1];
    end
  end

  // ---------------- the PE grid ----------------
  for (genvar y = 0; y < PE_Y; y++) begin : g_row
    logic row_sel;
    assign row_sel = w_load && (int'(w_row) == y);
    assign pv[0][y] = 1'b0;
    for (genvar i = 0; i < M; i++) begin : g_zero
      assign pd[0][y][i] = '0;
    end
    for (genvar x = 0; x < PE_X; x++) begin : g_col
      wmd_pe #(.ACT_W(ACT_W), .S_W(S_W), .M(M), .E(E), .Z(Z), .P_MAX(P_MAX), .PS_W(PS_W)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .n_fgen    (n_fgen),
        .w_load    (row_sel),
        .w_data    (w_data[x*COEF_W +: COEF_W]),
        .vin_valid (vv[x][y]),
        .vin       (vd[x][y]),
        .vout_valid(vv[x][y+1]),
        .vout      (vd[x][y+1]),
        .psum_in   (pd[x][y]),
        .psum_valid(pv[x+1][y]),
        .psum_out  (pd[x+1][y])
      );
    end
  end

  // ---------------- output deskew: row y delayed by PE_Y-1-y cycles ----------------
  logic                   rv [PE_Y];
  for (genvar y = 0; y < PE_Y; y++) begin : g_deskew
    localparam int unsigned D = PE_Y - 1 - y;
    if (D == 0) begin : g_direct
      assign rv[y]      = pv[PE_X][y];
      assign out_sum[y] = pd[PE_X][y];
    end else begin : g_delay
      logic                  dv [D];
      logic signed [PS_W-1:0] dd [D][M];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) begin
            dv[k] <= 1'b0;
            for (int i = 0; i < M; i++) dd[k][i] <= '0;
          end
        end else begin
          dv[0] <= pv[PE_X][y];
          dd[0] <= pd[PE_X][y];
          for (int k = 1; k < D; k++) begin
            dv[k] <= dv[k-1];
            dd[k] <= dd[k-1];
          end
        end
      end
      assign rv[y]      = dv[D-1];
      assign out_sum[y] = dd[D-1];
    end
  end

  // every row sees the same pixels, so all deskewed valids coincide
  assign out_valid = rv[0];

  logic unused_rows;
  always_comb begin
    unused_rows = 1'b0;
    for (int y = 1; y < PE_Y; y++) unused_rows |= rv[y];
  end

  a_rows_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      unused_rows |-> out_valid);

endmodule
