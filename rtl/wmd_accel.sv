// wmd_accel: multiplier-less CNN accelerator built on approximate weight
// matrix decomposition (WMD).
//
// The weights of a convolution are approximated per slice of S_W input
// channels by a product of sparse power-of-two matrices F_{P-1}...F_1 F_0, so
// that every multiplication becomes a right shift and a sign.  The
// accelerator is a weight-stationary systolic array of PE_X x PE_Y WMD
// processing elements that evaluate these products with shift units and
// adder trees; each pixel it takes S_W*PE_X input channels and produces
// M*PE_Y output-channel partial sums.  Around the array sit an input buffer
// (one bank per column), a weight buffer (one word per PE row), an output
// buffer with an accumulator that sums the passes of a folded layer, and a
// controller that sequences the passes of one layer.
//
// Host interface (this design's own; the paper does not describe one):
//   - input buffer write port: in_wr_*, one pixel's S_W*PE_X channels per word
//   - weight buffer write port: w_wr_*, one PE row's F-matrix codes per word
//   - layer configuration cfg and start; busy, done
//   - output buffer read port: out_rd_*, one cycle latency, only while !busy
// A layer's input tiles, output tiles and weight sets must fit the buffer
// depths (asserted at start); larger layers are split by the host.
// Data layouts are given in wmd_pkg (layer_cfg_t) and the block headers.
// Output words hold ACC_W-bit sums of the decomposed convolution; any
// requantisation or activation function is left to the host.
module wmd_accel #(
  parameter int unsigned ACT_W     = wmd_pkg::ACT_W_D,
  parameter int unsigned S_W       = wmd_pkg::S_W_D,
  parameter int unsigned M         = wmd_pkg::M_D,
  parameter int unsigned E         = wmd_pkg::E_D,
  parameter int unsigned Z         = wmd_pkg::Z_D,
  parameter int unsigned P_MAX     = wmd_pkg::P_MAX_D,
  parameter int unsigned PE_X      = wmd_pkg::PE_X_D,
  parameter int unsigned PE_Y      = wmd_pkg::PE_Y_D,
  parameter int unsigned ACC_W     = wmd_pkg::ACC_W_D,
  parameter int unsigned IN_DEPTH  = 1024,
  parameter int unsigned W_DEPTH   = 256,
  parameter int unsigned OUT_DEPTH = 1024,
  localparam int unsigned IN_AW   = $clog2(IN_DEPTH),
  localparam int unsigned W_AW    = $clog2(W_DEPTH),
  localparam int unsigned OUT_AW  = $clog2(OUT_DEPTH),
  localparam int unsigned COEF_W  = wmd_pkg::pe_coef_w(S_W, M, E, Z, P_MAX),
  localparam int unsigned WWORD_W = PE_X * COEF_W,
  localparam int unsigned PS_W    = wmd_pkg::f_w(ACT_W, S_W, E, P_MAX) + $clog2(PE_X) + 1,
  localparam int unsigned NPASS_W = $clog2(P_MAX + 1),
  localparam int unsigned ROW_W   = (PE_Y < 2) ? 1 : $clog2(PE_Y)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // layer control
  input  logic                    start,
  input  wmd_pkg::layer_cfg_t     cfg,
  output logic                    busy,
  output logic                    done,
  // input feature map
  input  logic                    in_wr_en,
  input  logic [IN_AW-1:0]        in_wr_addr,
  input  logic signed [ACT_W-1:0] in_wr_data [PE_X][S_W],
  // F-matrix codes
  input  logic                    w_wr_en,
  input  logic [W_AW-1:0]         w_wr_addr,
  input  logic [WWORD_W-1:0]      w_wr_data,
  // results
  input  logic                    out_rd_en,
  input  logic [OUT_AW-1:0]       out_rd_addr,
  output logic signed [ACC_W-1:0] out_rd_data [PE_Y][M]
);

  logic [NPASS_W-1:0]      n_fgen;
  logic                    wb_rd_en, sa_w_load, ib_rd_en;
  logic [W_AW-1:0]         wb_rd_addr;
  logic [ROW_W-1:0]        sa_w_row;
  logic [IN_AW-1:0]        ib_rd_addr;
  logic                    sa_in_valid, sa_zero, tag_first, array_empty;
  logic [OUT_AW-1:0]       tag_addr;
  logic [WWORD_W-1:0]      wb_rd_data;
  logic signed [ACT_W-1:0] ib_rd_data [PE_X][S_W];
  logic signed [ACT_W-1:0] sa_in_vec  [PE_X][S_W];
  logic                    sa_out_valid;
  logic signed [PS_W-1:0]  sa_out_sum [PE_Y][M];
  logic [OUT_AW:0]         tag_head;
  logic                    tag_empty, tag_full, acc_busy;

  wmd_controller #(
    .PE_Y(PE_Y), .P_MAX(P_MAX), .IN_AW(IN_AW), .OUT_AW(OUT_AW), .W_AW(W_AW)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .n_fgen,
    .wb_rd_en, .wb_rd_addr, .sa_w_load, .sa_w_row,
    .ib_rd_en, .ib_rd_addr, .sa_in_valid, .sa_zero, .tag_addr, .tag_first,
    .array_empty
  );

  weight_buffer #(.WORD_W(WWORD_W), .DEPTH(W_DEPTH)) u_wbuf (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(wb_rd_en), .rd_addr(wb_rd_addr), .rd_data(wb_rd_data)
  );

  input_buffer #(.ACT_W(ACT_W), .S_W(S_W), .PE_X(PE_X), .DEPTH(IN_DEPTH)) u_ibuf (
    .clk, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  // zero padding: pixels outside the input map enter as zero vectors
  always_comb
    for (int x = 0; x < PE_X; x++)
      for (int j = 0; j < S_W; j++)
        sa_in_vec[x][j] = sa_zero ? '0 : ib_rd_data[x][j];

  systolic_array #(
    .ACT_W(ACT_W), .S_W(S_W), .M(M), .E(E), .Z(Z), .P_MAX(P_MAX), .PE_X(PE_X), .PE_Y(PE_Y)
  ) u_sa (
    .clk, .rst_n, .n_fgen,
    .w_load(sa_w_load), .w_row(sa_w_row), .w_data(wb_rd_data),
    .in_valid(sa_in_valid), .in_vec(sa_in_vec),
    .out_valid(sa_out_valid), .out_sum(sa_out_sum)
  );

  tag_fifo #(.W(OUT_AW + 1), .DEPTH(64)) u_tags (
    .clk, .rst_n,
    .push(sa_in_valid), .wr_data({tag_first, tag_addr}),
    .pop(sa_out_valid), .rd_data(tag_head),
    .empty(tag_empty), .full(tag_full)
  );

  output_accumulator #(
    .M(M), .PE_Y(PE_Y), .PS_W(PS_W), .ACC_W(ACC_W), .DEPTH(OUT_DEPTH)
  ) u_acc (
    .clk, .rst_n,
    .in_valid(sa_out_valid), .in_first(tag_head[OUT_AW]), .in_addr(tag_head[OUT_AW-1:0]),
    .in_sum(sa_out_sum),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data),
    .busy(acc_busy)
  );

  assign array_empty = tag_empty && !acc_busy;

  a_tags_not_full: assert property (@(posedge clk) disable iff (!rst_n) !tag_full);
  a_read_when_idle: assert property (@(posedge clk) disable iff (!rst_n) out_rd_en |-> !busy);

  // A layer must fit the buffers: its input tiles, output tiles and weight
  // sets are addressed without wrap-around.
  a_cfg_fits: assert property (@(posedge clk) disable iff (!rst_n) start |->
      (32'(cfg.cin_tiles) * 32'(cfg.in_h) * 32'(cfg.in_w) <= 32'(IN_DEPTH)) &&
      (32'(cfg.cout_tiles) * 32'(cfg.out_h) * 32'(cfg.out_w) <= 32'(OUT_DEPTH)) &&
      (32'(cfg.w_base) + 32'(cfg.cout_tiles) * 32'(cfg.k) * 32'(cfg.k) * 32'(cfg.cin_tiles)
         * 32'(PE_Y) <= 32'(W_DEPTH)));

endmodule
