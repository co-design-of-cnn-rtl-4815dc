// input_buffer: on-chip input feature-map buffer of the systolic array.
//
// One memory bank per array column, as in the accelerator (one BRAM feeds
// each column).  Bank x holds, for every word address, the S_W activations
// that column x consumes: input channels cin_t*S_W*PE_X + x*S_W + (0..S_W-1)
// of one pixel.  The host fills the banks through a write port that writes
// the same address of all banks at once; the controller reads all banks at
// the same address, one pixel per read.
//
// Timing: synchronous read, rd_data is valid one cycle after rd_en and holds
// its value otherwise.  The depth (1024 words of S_W*ACT_W = 32 bits, one
// 36-Kb BRAM per column) is this design's choice.
module input_buffer #(
  parameter int unsigned ACT_W = wmd_pkg::ACT_W_D,
  parameter int unsigned S_W   = wmd_pkg::S_W_D,
  parameter int unsigned PE_X  = wmd_pkg::PE_X_D,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic signed [ACT_W-1:0] wr_data [PE_X][S_W],
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACT_W-1:0] rd_data [PE_X][S_W]
);

  for (genvar x = 0; x < PE_X; x++) begin : g_bank
    logic [S_W*ACT_W-1:0] mem [DEPTH];
    logic [S_W*ACT_W-1:0] q;
    logic [S_W*ACT_W-1:0] w;

    always_comb
      for (int j = 0; j < S_W; j++) w[j*ACT_W +: ACT_W] = wr_data[x][j];

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= w;
      if (rd_en) q <= mem[rd_addr];
    end

    for (genvar j = 0; j < S_W; j++) begin : g_el
      assign rd_data[x][j] = q[j*ACT_W +: ACT_W];
    end
  end

endmodule
