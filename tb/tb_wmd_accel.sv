// tb_wmd_accel: end-to-end test of the accelerator at its default size
// (8 x 12 PEs, S_W = 4, M = 4, E = 3, Z = 3, P_MAX = 3).
//
// Four layers are loaded through the host ports, run, read back and compared
// word by word with a reference built from the PE model of wmd_ref_pkg:
//   1. a DS-CNN pointwise layer: 25 x 5 pixels, 64 -> 64 channels, P = 2
//      (2 input-channel tiles x 2 output-channel tiles = 4 folded passes)
//   2. a 3 x 3 convolution with zero padding, P = 3 (time-multiplexed F_gen)
//   3. a 3 x 3 convolution with stride 2 and padding over 2 input tiles
//   4. the pointwise layer again at P = 2 (switching back from P = 3)
// Counted mechanisms, each must occur: folded passes that accumulate into
// earlier results, padded (zero) pixels, P = 3 layers, P = 2 layers, more
// than one output-channel tile.  The pixel rate is checked against the
// latency model: pixels enter the array exactly every Lat_F = P-1 cycles
// within a pass, and the number of streaming cycles equals
// Lat_F * K^2 * O_x*O_y * cin_tiles * cout_tiles.
module tb_wmd_accel;
  import wmd_pkg::*;
  import wmd_ref_pkg::*;
  localparam int S_W = S_W_D, M = M_D, E = E_D, P_MAX = P_MAX_D;
  localparam int PE_X = PE_X_D, PE_Y = PE_Y_D, ACC_W = ACC_W_D;
  localparam int COEF_W = pe_coef_w(S_W, M, E, Z_D, P_MAX);
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

  wmd_accel dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_accum = 0, n_pad = 0, n_p3 = 0, n_p2 = 0, n_cout_tiles = 0;
  int cyc = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL cycle %0d: %s", cyc, what);
    end
  endtask

  // pixel-rate monitor
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
      for (int b = 0; b < WW; b += 32) wts[a][b +: 32] = $urandom;
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
                    pe_ref(S_W, M, E, P_MAX, sh_w(Z_D), idx_w(M), cf,
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
    $display("layer P=%0d K=%0d stride=%0d %0dx%0d->%0dx%0d tiles %0dx%0d: %0d cycles, model %0d",
             p, k, stride, ih, iw, oh, ow, cin_t, cout_t, cyc - t0, model_cycles);
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
    start = 0; cfg = '0; in_wr_en = 0; w_wr_en = 0; out_rd_en = 0;
    in_wr_addr = '0; w_wr_addr = '0; out_rd_addr = '0; w_wr_data = '0;
    for (int x = 0; x < PE_X; x++) for (int j = 0; j < S_W; j++) in_wr_data[x][j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_layer(2, 1, 1, 0, 25, 5, 2, 2);
    run_layer(3, 3, 1, 1, 6, 6, 1, 1);
    run_layer(2, 3, 2, 1, 7, 7, 2, 1);
    run_layer(2, 1, 1, 0, 25, 5, 2, 2);
    check(n_accum > 0, "accumulating passes occurred");
    check(n_pad > 0, "padded pixels occurred");
    check(n_p3 > 0 && n_p2 > 0, "both decomposition depths ran");
    check(n_cout_tiles > 0, "several output tiles occurred");
    $display("mechanisms: accumulate=%0d pad=%0d P3=%0d P2=%0d cout_tiled=%0d",
             n_accum, n_pad, n_p3, n_p2, n_cout_tiles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
