// tb_input_buffer: writes random pixels into a 3-column, 64-word input
// buffer, then reads random addresses (with writes interleaved) and checks
// the one-cycle read latency, that each column returns its own activations,
// and that the output holds when no read is issued.
module tb_input_buffer;
  localparam int S_W = 4, PE_X = 3, DEPTH = 64;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  logic signed [7:0] wr_data [PE_X][S_W], rd_data [PE_X][S_W];
  logic signed [7:0] model [DEPTH][PE_X][S_W];
  logic signed [7:0] exp_q [PE_X][S_W];
  int checks = 0, failures = 0;

  input_buffer #(.ACT_W(8), .S_W(S_W), .PE_X(PE_X), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit rd_prev = 0;
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a);
      for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) begin
        wr_data[x][j] = 8'($urandom);
        model[a][x][j] = wr_data[x][j];
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (rd_prev)
        for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) begin
          checks++;
          if (rd_data[x][j] != exp_q[x][j]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d x=%0d j=%0d", t, x, j);
          end
        end
      rd_en = (t == 0) || ($urandom_range(0, 2) != 0);
      rd_addr = 6'($urandom);
      wr_en = ($urandom_range(0, 3) == 0) && (wr_addr != rd_addr);
      wr_addr = 6'($urandom);
      if (wr_addr == rd_addr) wr_en = 0;
      for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) wr_data[x][j] = 8'($urandom);
      if (rd_en) exp_q = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      rd_prev = 1;   // output holds when not read, so always comparable
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
