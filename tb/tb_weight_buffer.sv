// tb_weight_buffer: fills a 32-word, 300-bit weight buffer with random words,
// then checks random reads (one-cycle latency, output held between reads)
// with writes to other addresses interleaved.
module tb_weight_buffer;
  localparam int WW = 300, DEPTH = 32;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  logic [WW-1:0] wr_data, rd_data, exp_q;
  logic [WW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.WORD_W(WW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WW-1:0] rnd();
    logic [WW-1:0] r;
    for (int k = 0; k < WW; k += 32) r[k +: 32] = $urandom;   // upper part of the last slice drops
    return r;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_data = rnd(); model[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    rd_en = 1; rd_addr = '0; exp_q = model[0];
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (rd_data != exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d", t);
      end
      rd_en = ($urandom_range(0, 2) != 0);
      rd_addr = 5'($urandom);
      wr_addr = 5'($urandom);
      wr_en = ($urandom_range(0, 3) == 0) && (wr_addr != rd_addr);
      wr_data = rnd();
      if (rd_en) exp_q = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
