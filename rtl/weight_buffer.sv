// weight_buffer: on-chip memory holding the decomposed F-matrix codes.
//
// One word holds the codes of one PE row, i.e. PE_X times the per-PE code
// vector of wmd_pe, so that a full row of PE registers is filled in one cycle
// (the accelerator supplies each row of the array in a single cycle from
// BRAM).  A weight set for one array pass is PE_Y consecutive words, row 0
// first.  The host writes it, the controller reads it.
//
// Timing: synchronous read, rd_data valid one cycle after rd_en.  The depth is
// this design's choice.
module weight_buffer #(
  parameter int unsigned WORD_W = wmd_pkg::PE_X_D *
                                  wmd_pkg::pe_coef_w(wmd_pkg::S_W_D, wmd_pkg::M_D, wmd_pkg::E_D,
                                                     wmd_pkg::Z_D, wmd_pkg::P_MAX_D),
  parameter int unsigned DEPTH  = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [WORD_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
