// tb_fgen_block: random check of the generic F-block (M=4, E=3, Z=3, W=15):
// row i = v[i] + sum over the E-1 coded elements of po2(v[idx], code).
module tb_fgen_block;
  import wmd_ref_pkg::*;
  localparam int M = 4, E = 3, W = 15, CW = 5;

  logic signed [W-1:0]       v   [M];
  logic [M*(E-1)*CW-1:0]     codes;
  logic signed [W-1:0]       out [M];
  int checks = 0, failures = 0;

  fgen_block #(.W(W), .M(M), .E(E), .Z(3)) dut (.v, .codes, .out);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < M; i++) v[i] = W'($signed(12'($urandom)));   // keeps |sum| < 2^14
      codes = (M*(E-1)*CW)'({$urandom, $urandom});
      #1;
      for (int i = 0; i < M; i++) begin
        automatic longint exp_v = longint'(v[i]);
        for (int e = 0; e < E - 1; e++) begin
          automatic logic [CW-1:0] c = codes[(i*(E-1)+e)*CW +: CW];
          exp_v += po2(longint'(v[c[1:0]]), 1'b1, c[4], int'(c[3:2]));
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
