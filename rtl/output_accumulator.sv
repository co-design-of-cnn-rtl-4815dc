// output_accumulator: row-result accumulation and on-chip output buffer.
//
// Every pixel leaving the systolic array carries PE_Y*M partial sums (one
// array pass covers S_W*PE_X input channels of one kernel position).  The
// accumulator adds them to what earlier passes stored for the same output
// pixel and writes the total back into the output buffer; the first pass of
// an output (in_first) overwrites instead.  This is the "sum with the outputs
// from the previous iteration, store in the output buffer" step of the
// accelerator; its two-stage read-modify-write and the forwarding are this
// design's own.
//
// Pipeline: stage 1 registers the array result and reads the old word
// (synchronous read); stage 2 adds and writes.  If stage 2 wrote the same
// address in the previous cycle, the freshly written word is forwarded in
// place of the stale read.  One result per cycle is accepted.
//
// The same read port serves the host (rd_en/rd_addr -> rd_data one cycle
// later) when no result is being accumulated; host reads during
// accumulation are a protocol error (asserted).  busy is high while results
// are still inside the two stages.
module output_accumulator #(
  parameter int unsigned M     = wmd_pkg::M_D,
  parameter int unsigned PE_Y  = wmd_pkg::PE_Y_D,
  parameter int unsigned PS_W  = 24,
  parameter int unsigned ACC_W = wmd_pkg::ACC_W_D,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned N  = PE_Y * M
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic [AW-1:0]           in_addr,
  input  logic signed [PS_W-1:0]  in_sum  [PE_Y][M],
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACC_W-1:0] rd_data [PE_Y][M],
  output logic                    busy
);

  logic [N*ACC_W-1:0] mem [DEPTH];
  logic [N*ACC_W-1:0] q;

  // stage 1
  logic                   s1_valid, s1_first;
  logic [AW-1:0]          s1_addr;
  logic signed [PS_W-1:0] s1_sum [PE_Y][M];
  // stage 2 (last write, for forwarding)
  logic                   s2_valid;
  logic [AW-1:0]          s2_addr;
  logic [N*ACC_W-1:0]     s2_data;
  logic [N*ACC_W-1:0]     old, nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_addr  <= '0;
      s2_valid <= 1'b0;
      s2_addr  <= '0;
      s2_data  <= '0;
      for (int y = 0; y < PE_Y; y++)
        for (int i = 0; i < M; i++) s1_sum[y][i] <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_first <= in_first;
        s1_addr  <= in_addr;
        s1_sum   <= in_sum;
      end
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_addr <= s1_addr;
        s2_data <= nxt;
      end
    end
  end

  // memory: one read port (accumulation or host), one write port
  always_ff @(posedge clk) begin
    if (in_valid)   q <= mem[in_addr];
    else if (rd_en) q <= mem[rd_addr];
    if (s1_valid) mem[s1_addr] <= nxt;
  end

  always_comb begin
    old = (s2_valid && s2_addr == s1_addr) ? s2_data : q;
    for (int y = 0; y < PE_Y; y++)
      for (int i = 0; i < M; i++)
        nxt[(y*M+i)*ACC_W +: ACC_W] = (s1_first ? '0 : old[(y*M+i)*ACC_W +: ACC_W])
                                      + ACC_W'(s1_sum[y][i]);
  end

  for (genvar y = 0; y < PE_Y; y++) begin : g_y
    for (genvar i = 0; i < M; i++) begin : g_i
      assign rd_data[y][i] = q[(y*M+i)*ACC_W +: ACC_W];
    end
  end

  assign busy = s1_valid;

  a_no_host_read_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      rd_en |-> !in_valid);

endmodule
