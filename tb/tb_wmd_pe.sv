// tb_wmd_pe: cycle-accurate check of one WMD processing element.
//
// Random F-matrix codes are loaded, then random input vectors are streamed
// with random gaps (never closer than Lat_F = n_fgen cycles) for n_fgen = 1
// (P = 2) and n_fgen = 2 (P = 3, time-multiplexed F_gen).  psum_in changes
// every cycle.  For a vector entering in cycle t the PE must present, in
// cycle t+2+n_fgen and only then, psum_in(cycle t+1+n_fgen) plus the
// reference product.  The forwarded vector must appear one cycle later.
module tb_wmd_pe;
  import wmd_ref_pkg::*;
  localparam int S_W = 4, M = 4, E = 3, P_MAX = 3, PS_W = 24;
  localparam int COEF_W = M*S_W*4 + (P_MAX-1)*M*(E-1)*5;
  localparam int NCYC = 4000;

  logic clk = 0, rst_n = 0;
  logic [1:0] n_fgen;
  logic w_load;
  logic [COEF_W-1:0] w_data;
  logic vin_valid, vout_valid, psum_valid;
  logic signed [7:0] vin [S_W], vout [S_W];
  logic signed [PS_W-1:0] psum_in [M], psum_out [M];

  wmd_pe #(.ACT_W(8), .S_W(S_W), .M(M), .E(E), .Z(3), .P_MAX(P_MAX), .PS_W(PS_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  longint ps_hist [NCYC][M];
  bit     sent    [NCYC];
  longint vin_hist[NCYC][S_W];
  int     nf_hist [NCYC];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d: %s pv=%0d", cyc, what, psum_valid);
    end
  endtask

  initial begin
    automatic int next_ok = 0;
    vin_valid = 0; w_load = 0; w_data = '0; n_fgen = 2'd1;
    for (int j = 0; j < S_W; j++) vin[j] = '0;
    for (int i = 0; i < M; i++) psum_in[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      automatic int nf = phase + 1;
      // load codes while idle
      @(negedge clk);
      for (int k = 0; k < COEF_W; k += 32) w_data[k +: 32] = $urandom;
      w_load = 1; n_fgen = 2'(nf);
      @(negedge clk);
      w_load = 0;
      repeat (6) @(negedge clk);
      cyc = 0;
      next_ok = 0;
      for (int c = 0; c < NCYC; c++) begin
        // ---- check outputs of cycle c ----
        if (c >= 2 + nf) begin
          automatic int t = c - 2 - nf;
          check(psum_valid == sent[t], "psum_valid timing");
          if (sent[t]) begin
            automatic longint res[];
            automatic longint vv[];
            automatic logic [4095:0] cf = '0;
            cf[COEF_W-1:0] = w_data;
            vv = new[S_W];
            for (int j = 0; j < S_W; j++) vv[j] = vin_hist[t][j];
            pe_ref(S_W, M, E, P_MAX, 2, 2, cf, vv, nf, res);
            for (int i = 0; i < M; i++)
              check(longint'(psum_out[i]) == ps_hist[c-1][i] + res[i], "psum value");
          end
        end
        if (c >= 1 && sent[c-1]) begin
          check(vout_valid, "vout_valid");
          for (int j = 0; j < S_W; j++) check(longint'(vout[j]) == vin_hist[c-1][j], "vout");
        end
        // ---- inputs of cycle c ----
        sent[c] = (c < NCYC - 10) && (c >= next_ok) && ($urandom_range(0, 3) != 0);
        vin_valid = sent[c];
        for (int j = 0; j < S_W; j++) begin
          vin[j] = 8'($urandom);
          vin_hist[c][j] = longint'(vin[j]);
        end
        if (sent[c]) next_ok = c + nf;
        for (int i = 0; i < M; i++) begin
          psum_in[i] = PS_W'($signed(20'($urandom)));
          ps_hist[c][i] = longint'(psum_in[i]);
        end
        cyc = c;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
