// wmd_pe: WMD processing element of the systolic array.
//
// One PE multiplies a slice of S_W input activations by the decomposed weight
// slice F_{P-1} ... F_1 F_0 held in its F-matrix registers and adds the M
// results to the partial sums arriving from its left neighbour, using only
// shifts and additions.  Datapath, in the order of the accelerator figure:
//   vin --> F_0 block --> M pipeline registers --> F_gen block (looped) -->
//   M adders (+ psum_in) --> psum_out register
// F_0 and F_gen are the two hard blocks.  A layer with P = 2 passes through
// F_gen once; for P > 2 F_gen is time-multiplexed: its result is fed back
// and multiplied by the next F matrix, P-1 passes in all, so a PE accepts a
// new input vector only every Lat_F = P-1 cycles (the paper's latency factor
// 1 + (P-2)).  P is a per-layer run-time setting (n_fgen = P-1) up to P_MAX.
// The input vector is also passed down to the PE below through a register
// (inputs are shared along a column).
//
// Timing: vin valid in cycle t -> F_0 result registered at t+1 -> pass j of
// F_gen registered at t+1+j -> psum_out valid at t+2+n_fgen.  psum_in must be
// valid during cycle t+1+n_fgen, which is what the left neighbour provides
// when it sees the same input one cycle earlier.  vout/vout_valid repeat
// vin/vin_valid one cycle later.
//
// Coefficient loading: when w_load is high, w_data (all codes of this PE) is
// written into the F-matrix registers.  Layout of w_data, LSB first: the F_0
// codes (M*S_W of them), then F_gen matrix 1, 2, ... P_MAX-1 (M*(E-1) codes
// each).  Loading while vectors are in flight changes their result; the
// controller only loads an idle array.  How the registers are filled is this
// design's choice; the paper only says the codes are fetched from on-chip
// memory into registers inside the PEs.
module wmd_pe #(
  parameter int unsigned ACT_W = wmd_pkg::ACT_W_D,
  parameter int unsigned S_W   = wmd_pkg::S_W_D,
  parameter int unsigned M     = wmd_pkg::M_D,
  parameter int unsigned E     = wmd_pkg::E_D,
  parameter int unsigned Z     = wmd_pkg::Z_D,
  parameter int unsigned P_MAX = wmd_pkg::P_MAX_D,
  parameter int unsigned PS_W  = 24,                           // partial-sum width
  localparam int unsigned FW      = wmd_pkg::f_w(ACT_W, S_W, E, P_MAX),
  localparam int unsigned F0_W    = wmd_pkg::f0_out_w(ACT_W, S_W),
  localparam int unsigned F0C_W   = M * S_W * wmd_pkg::f0_code_w(Z),
  localparam int unsigned FGC_W   = M * (E - 1) * wmd_pkg::fg_code_w(Z, M),
  localparam int unsigned COEF_W  = wmd_pkg::pe_coef_w(S_W, M, E, Z, P_MAX),
  localparam int unsigned NPASS_W = $clog2(P_MAX + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NPASS_W-1:0]        n_fgen,      // P-1 of the current layer, 1..P_MAX-1
  // coefficient registers
  input  logic                      w_load,
  input  logic [COEF_W-1:0]         w_data,
  // input vector from above, forwarded below
  input  logic                      vin_valid,
  input  logic signed [ACT_W-1:0]   vin   [S_W],
  output logic                      vout_valid,
  output logic signed [ACT_W-1:0]   vout  [S_W],
  // partial sums from the left, to the right
  input  logic signed [PS_W-1:0]    psum_in  [M],
  output logic                      psum_valid,
  output logic signed [PS_W-1:0]    psum_out [M]
);

  // ---------------- F-matrix registers ----------------
  logic [COEF_W-1:0] coef_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      coef_q <= '0;
    else if (w_load) coef_q <= w_data;

  // ---------------- F_0 block and pipeline registers ----------------
  logic signed [F0_W-1:0] f0_out [M];
  logic signed [FW-1:0]   f0_q   [M];
  logic                   f0_valid_q;

  f0_block #(.ACT_W(ACT_W), .S_W(S_W), .M(M), .Z(Z)) u_f0 (
    .vin(vin), .codes(coef_q[F0C_W-1:0]), .out(f0_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f0_valid_q <= 1'b0;
      for (int i = 0; i < M; i++) f0_q[i] <= '0;
    end else begin
      f0_valid_q <= vin_valid;
      if (vin_valid)
        for (int i = 0; i < M; i++) f0_q[i] <= FW'(f0_out[i]);
    end
  end

  // ---------------- time-multiplexed F_gen block ----------------
  logic signed [FW-1:0]      fg_in  [M];
  logic signed [FW-1:0]      fg_out [M];
  logic signed [FW-1:0]      fg_q   [M];
  logic [NPASS_W-1:0]        pass_q;      // passes done on the value in fg_q
  logic                      busy_q;      // fg_q holds an unfinished vector
  logic                      res_valid;   // fg_q holds a finished vector this cycle
  logic [FGC_W-1:0]          fg_codes;
  logic [NPASS_W-1:0]        pass_sel;    // matrix used in this cycle (0-based)

  assign pass_sel = f0_valid_q ? '0 : pass_q;
  always_comb begin
    fg_codes = '0;
    for (int j = 0; j < P_MAX - 1; j++)
      if (int'(pass_sel) == j) fg_codes = coef_q[F0C_W + j*FGC_W +: FGC_W];
    for (int i = 0; i < M; i++) fg_in[i] = f0_valid_q ? f0_q[i] : fg_q[i];
  end

  fgen_block #(.W(FW), .M(M), .E(E), .Z(Z)) u_fgen (.v(fg_in), .codes(fg_codes), .out(fg_out));

  logic fg_step;
  assign fg_step = f0_valid_q || (busy_q && pass_q < n_fgen);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass_q <= '0;
      busy_q <= 1'b0;
      for (int i = 0; i < M; i++) fg_q[i] <= '0;
    end else begin
      if (fg_step) begin
        for (int i = 0; i < M; i++) fg_q[i] <= fg_out[i];
        pass_q <= f0_valid_q ? NPASS_W'(1) : pass_q + 1'b1;
        busy_q <= 1'b1;
      end else if (res_valid) begin
        busy_q <= 1'b0;
      end
    end
  end

  assign res_valid = busy_q && (pass_q == n_fgen);

  // ---------------- M adders towards the right neighbour ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_valid <= 1'b0;
      for (int i = 0; i < M; i++) psum_out[i] <= '0;
    end else begin
      psum_valid <= res_valid;
      if (res_valid)
        for (int i = 0; i < M; i++) psum_out[i] <= psum_in[i] + PS_W'(fg_q[i]);
    end
  end

  // ---------------- input forwarding down the column ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vout_valid <= 1'b0;
      for (int j = 0; j < S_W; j++) vout[j] <= '0;
    end else begin
      vout_valid <= vin_valid;
      if (vin_valid) vout <= vin;
    end
  end

  // A new vector may only enter when the previous one has left F_gen.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
      f0_valid_q |-> !(busy_q && pass_q < n_fgen));
  a_npass: assert property (@(posedge clk) disable iff (!rst_n)
      vin_valid |-> (n_fgen >= 1 && int'(n_fgen) <= P_MAX - 1));

endmodule
