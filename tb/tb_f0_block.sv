// tb_f0_block: random check of the F_0 block (M=4 rows, S_W=4, Z=3) against
// the reference: row i = sum_j po2(vin[j], code[i][j]).
module tb_f0_block;
  import wmd_ref_pkg::*;
  localparam int S_W = 4, M = 4;

  logic signed [7:0]  vin [S_W];
  logic [M*S_W*4-1:0] codes;
  logic signed [10:0] out [M];
  int checks = 0, failures = 0;

  f0_block #(.ACT_W(8), .S_W(S_W), .M(M), .Z(3)) dut (.vin, .codes, .out);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int j = 0; j < S_W; j++)
        vin[j] = (t < 50) ? ((t % 2 != 0) ? -8'sd128 : 8'sd127) : 8'($urandom);
      for (int k = 0; k < M * S_W; k++) codes[k*4 +: 4] = (t < 50) ? 4'b1000 | 4'(t % 8) : 4'($urandom);
      #1;
      for (int i = 0; i < M; i++) begin
        automatic longint exp_v = 0;
        for (int j = 0; j < S_W; j++) begin
          automatic logic [3:0] c = codes[(i*S_W+j)*4 +: 4];
          exp_v += po2(longint'(vin[j]), c[3], c[2], int'(c[1:0]));
        end
        checks++;
        if (longint'(out[i]) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d row %0d got %0d exp %0d", t, i, out[i], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
