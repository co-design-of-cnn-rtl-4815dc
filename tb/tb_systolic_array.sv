// tb_systolic_array: cycle-accurate check of a 3 x 2 WMD array.
//
// Random codes are loaded one PE row per cycle, then random pixels are
// streamed with random gaps no shorter than Lat_F, for P = 2 and P = 3.
// For a pixel entering in cycle t every row's results must leave together in
// cycle t + (PE_X-1) + (PE_Y-1) + n_fgen + 2, equal to the sum over the
// columns of the reference PE products; out_valid must be low otherwise.
module tb_systolic_array;
  import wmd_ref_pkg::*;
  localparam int S_W = 4, M = 4, E = 3, P_MAX = 3, PE_X = 3, PE_Y = 2;
  localparam int COEF_W = M*S_W*4 + (P_MAX-1)*M*(E-1)*5;
  localparam int PS_W = 15 + 2 + 1;
  localparam int NCYC = 1500;

  logic clk = 0, rst_n = 0;
  logic [1:0] n_fgen;
  logic w_load;
  logic [0:0] w_row;
  logic [PE_X*COEF_W-1:0] w_data;
  logic in_valid, out_valid;
  logic signed [7:0] in_vec [PE_X][S_W];
  logic signed [PS_W-1:0] out_sum [PE_Y][M];

  systolic_array #(.ACT_W(8), .S_W(S_W), .M(M), .E(E), .Z(3), .P_MAX(P_MAX),
                   .PE_X(PE_X), .PE_Y(PE_Y)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [PE_X*COEF_W-1:0] rows [PE_Y];
  bit     sent [NCYC];
  longint px   [NCYC][PE_X][S_W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what, int c);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d: %s", c, what);
    end
  endtask

  initial begin
    automatic int next_ok = 0;
    in_valid = 0; w_load = 0; w_data = '0; w_row = '0; n_fgen = 2'd1;
    for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) in_vec[x][j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      automatic int nf = phase + 1;
      automatic int lat = (PE_X - 1) + (PE_Y - 1) + nf + 2;
      n_fgen = 2'(nf);
      for (int y = 0; y < PE_Y; y++) begin
        for (int k = 0; k < PE_X*COEF_W; k += 32) rows[y][k +: 32] = $urandom;
        w_load = 1; w_row = 1'(y); w_data = rows[y];
        @(negedge clk);
      end
      w_load = 0;
      next_ok = 0;
      for (int c = 0; c < NCYC; c++) begin
        if (c >= lat) begin
          automatic int t = c - lat;
          check(out_valid == sent[t], "out_valid timing", c);
          if (sent[t])
            for (int y = 0; y < PE_Y; y++) begin
              automatic longint tot[] = new[M];
              for (int x = 0; x < PE_X; x++) begin
                automatic longint res[];
                automatic longint vv[] = new[S_W];
                automatic logic [4095:0] cf = '0;
                cf[COEF_W-1:0] = rows[y][x*COEF_W +: COEF_W];
                for (int j = 0; j < S_W; j++) vv[j] = px[t][x][j];
                pe_ref(S_W, M, E, P_MAX, 2, 2, cf, vv, nf, res);
                for (int i = 0; i < M; i++) tot[i] += res[i];
              end
              for (int i = 0; i < M; i++)
                check(longint'(out_sum[y][i]) == tot[i], "row result", c);
            end
        end
        sent[c] = (c < NCYC - 20) && (c >= next_ok) && ($urandom_range(0, 3) != 0);
        in_valid = sent[c];
        if (sent[c]) next_ok = c + nf;
        for (int x = 0; x < PE_X; x++)
          for (int j = 0; j < S_W; j++) begin
            in_vec[x][j] = 8'($urandom);
            px[c][x][j] = longint'(in_vec[x][j]);
          end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
