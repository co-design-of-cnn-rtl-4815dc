// wmd_accel_harness: drives one instance of the accelerator, built with the
// given hardware parameters, through a single convolution layer and checks
// every output word against the PE reference model of wmd_ref_pkg (same
// procedure as the full-size end-to-end test).  Used by the design-point
// testbench, which instantiates it once per design point; it reports its
// check and failure counts and raises finished when the layer has been read
// back.  The layer also checks that pixels enter the array every Lat_F
// cycles and that the streaming time matches the latency model.
module wmd_accel_harness #(
  parameter int S_W = 4, M = 4, E = 3, Z = 3, P_MAX = 3, PE_X = 8, PE_Y = 12,
  parameter int L_P = 2, L_K = 1, L_STRIDE = 1, L_PAD = 0, L_IH = 4, L_IW = 4,
  parameter int L_CIN_T = 1, L_COUT_T = 1
) (
  output int  checks,
  output int  failures,
  output bit  finished
);
  import wmd_pkg::*;
  import wmd_ref_pkg::*;
  localparam int ACC_W = ACC_W_D;
  localparam int COEF_W = pe_coef_w(S_W, M, E, Z, P_MAX);
  localparam int WW = PE_X * COEF_W;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  layer_cfg_t cfg;
  logic in_wr_en, w_wr_en, out_rd_en;
  logic [9:0] in_wr_addr, out_rd_addr;
  logic [7:0] w_wr_addr;
  logic signed [7:0] in_wr_data [PE_X][S_W];
  logic [WW-1:0] w_wr_data;
  logic signed [ACC_W-1:0] out_rd_data [PE_Y][M];

  wmd_accel #(.S_W(S_W), .M(M), .E(E), .Z(Z), .P_MAX(P_MAX), .PE_X(PE_X), .PE_Y(PE_Y)) dut (.*);
  always #5 clk = ~clk;

  int n_accum = 0, n_pad = 0, n_p3 = 0, n_p2 = 0, n_cout_tiles = 0;
  int cyc = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL (M=%0d) cycle %0d: %s", M, cyc, what);
    end
  endtask

  int stream_cycles = 0, last_in = -100;
  always @(negedge clk) begin
    cyc++;
    if (dut.sa_in_valid) begin
      if (dut.sa_zero) n_pad++;
      if (!dut.tag_first) n_accum++;
      if (cyc - last_in < int'(dut.n_fgen)) check(0, "pixels closer than Lat_F");
      stream_cycles += int'(dut.n_fgen);
      last_in = cyc;
    end
  end

  task automatic run_layer(int p, int k, int stride, int pad, int ih, int iw,
                           int cin_t, int cout_t);
    int oh = (ih + 2*pad - k) / stride + 1;
    int ow = (iw + 2*pad - k) / stride + 1;
    int passes = cin_t * cout_t * k * k;
    int t0, model_cycles;
    longint fmap [][][][][];       // [ci][iy][ix][x][j]
    logic [WW-1:0] wts [];         // [set*PE_Y + row]
    longint expv [][][][];         // [co][pix][y][i]
    fmap = new[cin_t];
    for (int ci = 0; ci < cin_t; ci++) begin
      fmap[ci] = new[ih];
      for (int iy = 0; iy < ih; iy++) begin
        fmap[ci][iy] = new[iw];
        for (int ix = 0; ix < iw; ix++) begin
          fmap[ci][iy][ix] = new[PE_X];
          for (int x = 0; x < PE_X; x++) begin
            fmap[ci][iy][ix][x] = new[S_W];
            for (int j = 0; j < S_W; j++) fmap[ci][iy][ix][x][j] = longint'($signed(8'($urandom)));
          end
        end
      end
    end
    wts = new[passes * PE_Y];
    for (int a = 0; a < passes * PE_Y; a++)
      begin
        logic [WW+31:0] r;
        for (int b = 0; b < WW; b += 32) r[b +: 32] = $urandom;
        wts[a] = r[WW-1:0];
      end
    // host writes
    @(negedge clk);
    for (int ci = 0; ci < cin_t; ci++)
      for (int iy = 0; iy < ih; iy++)
        for (int ix = 0; ix < iw; ix++) begin
          in_wr_en = 1;
          in_wr_addr = 10'(ci*ih*iw + iy*iw + ix);
          for (int x = 0; x < PE_X; x++)
            for (int j = 0; j < S_W; j++) in_wr_data[x][j] = 8'(fmap[ci][iy][ix][x][j]);
          @(negedge clk);
        end
    in_wr_en = 0;
    for (int a = 0; a < passes * PE_Y; a++) begin
      w_wr_en = 1; w_wr_addr = 8'(a); w_wr_data = wts[a];
      @(negedge clk);
    end
    w_wr_en = 0;
    // reference
    expv = new[cout_t];
    for (int co = 0; co < cout_t; co++) begin
      expv[co] = new[oh*ow];
      for (int px = 0; px < oh*ow; px++) begin
        expv[co][px] = new[PE_Y];
        for (int y = 0; y < PE_Y; y++) begin
          expv[co][px][y] = new[M];
          for (int i = 0; i < M; i++) expv[co][px][y][i] = 0;
        end
      end
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++)
          for (int ci = 0; ci < cin_t; ci++) begin
            int set = ((co*k + ky)*k + kx)*cin_t + ci;
            for (int oy = 0; oy < oh; oy++)
              for (int ox = 0; ox < ow; ox++) begin
                int iy = oy*stride + ky - pad, ix = ox*stride + kx - pad;
                if (iy < 0 || ix < 0 || iy >= ih || ix >= iw) continue;
                for (int y = 0; y < PE_Y; y++)
                  for (int x = 0; x < PE_X; x++) begin
                    longint res[];
                    logic [4095:0] cf = '0;
                    cf[COEF_W-1:0] = wts[set*PE_Y + y][x*COEF_W +: COEF_W];
                    pe_ref(S_W, M, E, P_MAX, sh_w(Z), idx_w(M), cf,
                           fmap[ci][iy][ix][x], p - 1, res);
                    for (int i = 0; i < M; i++) expv[co][oy*ow+ox][y][i] += res[i];
                  end
              end
          end
    end
    // run
    cfg = '0;
    cfg.p = 4'(p); cfg.k = 4'(k); cfg.stride = 2'(stride); cfg.pad = 2'(pad);
    cfg.in_h = 10'(ih); cfg.in_w = 10'(iw); cfg.out_h = 10'(oh); cfg.out_w = 10'(ow);
    cfg.cin_tiles = 8'(cin_t); cfg.cout_tiles = 8'(cout_t); cfg.w_base = '0;
    stream_cycles = 0;
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    model_cycles = (p - 1) * k * k * oh * ow * cin_t * cout_t;
    check(stream_cycles == model_cycles, "streaming cycles equal the latency model");
    check(cyc - t0 <= model_cycles + passes * (3*PE_Y + PE_X + p + 8), "load/drain overhead bound");
    $display("M=%0d layer P=%0d K=%0d stride=%0d %0dx%0d->%0dx%0d tiles %0dx%0d: %0d cycles, model %0d",
             M, p, k, stride, ih, iw, oh, ow, cin_t, cout_t, cyc - t0, model_cycles);
    if (p == 3) n_p3++;
    if (p == 2) n_p2++;
    if (cout_t > 1) n_cout_tiles++;
    // read back
    for (int co = 0; co < cout_t; co++)
      for (int px = 0; px < oh*ow; px++) begin
        out_rd_en = 1; out_rd_addr = 10'(co*oh*ow + px);
        @(negedge clk);
        out_rd_en = 0;
        for (int y = 0; y < PE_Y; y++)
          for (int i = 0; i < M; i++)
            check(longint'(out_rd_data[y][i]) == expv[co][px][y][i], "output value");
      end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    start = 0; cfg = '0; in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; w_wr_data = '0;
    for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) in_wr_data[x][j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_layer(L_P, L_K, L_STRIDE, L_PAD, L_IH, L_IW, L_CIN_T, L_COUT_T);
    finished = 1;
  end
endmodule
