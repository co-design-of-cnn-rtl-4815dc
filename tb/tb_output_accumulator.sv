// tb_output_accumulator: drives random array results into a 2-row, M=2,
// 16-word accumulator: random first/accumulate flags, random gaps, and runs
// of back-to-back results to the same address (exercises the write
// forwarding).  A model array is kept alongside; after the traffic the host
// port reads every word and compares.  Counts how often forwarding was
// needed (same address in consecutive cycles) and fails if never.
module tb_output_accumulator;
  localparam int M = 2, PE_Y = 2, PS_W = 18, ACC_W = 32, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, rd_en, busy;
  logic [3:0] in_addr, rd_addr;
  logic signed [PS_W-1:0]  in_sum  [PE_Y][M];
  logic signed [ACC_W-1:0] rd_data [PE_Y][M];
  longint model [DEPTH][PE_Y][M];
  int checks = 0, failures = 0, forwards = 0;

  output_accumulator #(.M(M), .PE_Y(PE_Y), .PS_W(PS_W), .ACC_W(ACC_W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'(a);
      @(negedge clk);
      rd_en = 0;
      for (int y = 0; y < PE_Y; y++) for (int i = 0; i < M; i++) begin
        checks++;
        if (longint'(rd_data[y][i]) != model[a][y][i]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d [%0d][%0d] got %0d exp %0d", a, y, i,
                                      rd_data[y][i], model[a][y][i]);
        end
      end
    end
  endtask

  initial begin
    automatic int last_addr = -1;
    in_valid = 0; in_first = 0; rd_en = 0; in_addr = '0; rd_addr = '0;
    for (int y = 0; y < PE_Y; y++) for (int i = 0; i < M; i++) in_sum[y][i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first pass initialises every word
    for (int a = 0; a < DEPTH; a++) begin
      in_valid = 1; in_first = 1; in_addr = 4'(a);
      for (int y = 0; y < PE_Y; y++) for (int i = 0; i < M; i++) begin
        in_sum[y][i] = PS_W'($signed(16'($urandom)));
        model[a][y][i] = longint'(in_sum[y][i]);
      end
      @(negedge clk);
    end
    for (int round = 0; round < 6; round++) begin
      for (int t = 0; t < 400; t++) begin
        in_valid = ($urandom_range(0, 4) != 0);
        in_first = ($urandom_range(0, 9) == 0);
        in_addr  = ($urandom_range(0, 2) == 0 && last_addr >= 0) ? 4'(last_addr) : 4'($urandom);
        if (in_valid) begin
          for (int y = 0; y < PE_Y; y++) for (int i = 0; i < M; i++) begin
            in_sum[y][i] = PS_W'($signed(16'($urandom)));
            model[in_addr][y][i] = (in_first ? 0 : model[in_addr][y][i]) + longint'(in_sum[y][i]);
          end
          if (int'(in_addr) == last_addr) forwards++;
          last_addr = int'(in_addr);
        end else begin
          last_addr = -1;
        end
        @(negedge clk);
      end
      in_valid = 0;
      last_addr = -1;
      repeat (3) @(negedge clk);
      checks++;
      if (busy) failures++;
      check_all();
    end
    checks++;
    if (forwards == 0) failures++;
    $display("forwarded writes: %0d", forwards);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
