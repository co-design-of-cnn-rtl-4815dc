// tb_wmd_controller: checks the layer sequencer against an independently
// generated schedule.
//
// Three layers are run: a 1x1 convolution folded over 2 input and 2 output
// channel tiles (P = 2), a 3x3 convolution with padding 1 (P = 3), and a 3x3
// convolution with stride 2 and padding 1 (P = 2).  The array is modelled as
// a fixed 9-cycle pipeline that reports when it is empty.  Checked: every
// weight-buffer read address, the row of every coefficient load, every pixel
// (padding flag, input address, output address, first-pass flag), the
// spacing of Lat_F = P-1 cycles between pixels, that no weight load starts
// while pixels are in flight, the number of passes and the done pulse.
module tb_wmd_controller;
  import wmd_pkg::*;
  localparam int PE_Y = 3, P_MAX = 3, LAT = 9;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  layer_cfg_t cfg;
  logic [1:0] n_fgen;
  logic wb_rd_en, sa_w_load, ib_rd_en, sa_in_valid, sa_zero, tag_first, array_empty;
  logic [7:0] wb_rd_addr;
  logic [1:0] sa_w_row;
  logic [9:0] ib_rd_addr, tag_addr;

  wmd_controller #(.PE_Y(PE_Y), .P_MAX(P_MAX), .IN_AW(10), .OUT_AW(10), .W_AW(8)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_w[$], exp_row[$];
  typedef struct { bit zero; int in_addr; int out_addr; bit first; } px_t;
  px_t exp_px[$];
  int inflight[$];
  int cyc = 0;

  initial begin
    repeat (50000) @(posedge clk);
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

  // array model: pixels leave LAT cycles after entering
  always_comb array_empty = (inflight.size() == 0);

  // monitor
  bit prev_ib; int prev_ib_addr; int last_issue = -100; bit in_stream_pass = 0;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    while (inflight.size() > 0 && inflight[0] <= cyc) void'(inflight.pop_front());
    if (wb_rd_en) begin
      check(inflight.size() == 0 && !sa_in_valid, "weight load with pixels in flight");
      check(exp_w.size() > 0 && int'(wb_rd_addr) == exp_w[0], "weight read address");
      if (exp_w.size() > 0) void'(exp_w.pop_front());
      in_stream_pass = 0;
    end
    if (sa_w_load) begin
      check(exp_row.size() > 0 && int'(sa_w_row) == exp_row[0], "row load order");
      if (exp_row.size() > 0) void'(exp_row.pop_front());
    end
    if (sa_in_valid) begin
      px_t e;
      check(exp_px.size() > 0, "unexpected pixel");
      if (exp_px.size() > 0) begin
        e = exp_px.pop_front();
        check(sa_zero == e.zero, "padding flag");
        check(prev_ib == !e.zero, "input read issued iff inside the map");
        if (!e.zero) check(prev_ib_addr == e.in_addr, "input address");
        check(int'(tag_addr) == e.out_addr, "output address");
        check(tag_first == e.first, "first-pass flag");
      end
      if (in_stream_pass) check(cyc - last_issue == int'(n_fgen), "Lat_F spacing");
      last_issue = cyc;
      in_stream_pass = 1;
      inflight.push_back(cyc + LAT);
    end
    prev_ib = ib_rd_en;
    prev_ib_addr = int'(ib_rd_addr);
  end

  task automatic run_layer(int p, int k, int stride, int pad, int ih, int iw,
                           int cin_t, int cout_t, int w_base);
    int oh = (ih + 2*pad - k) / stride + 1;
    int ow = (iw + 2*pad - k) / stride + 1;
    int pass = 0, t0, passes = cin_t * cout_t * k * k;
    for (int co = 0; co < cout_t; co++)
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++)
          for (int ci = 0; ci < cin_t; ci++) begin
            for (int r = 0; r < PE_Y; r++) begin
              exp_w.push_back(w_base + PE_Y*pass + r);
              exp_row.push_back(r);
            end
            for (int oy = 0; oy < oh; oy++)
              for (int ox = 0; ox < ow; ox++) begin
                px_t e;
                int iy = oy*stride + ky - pad, ix = ox*stride + kx - pad;
                e.zero = !(iy >= 0 && ix >= 0 && iy < ih && ix < iw);
                e.in_addr = ci*ih*iw + iy*iw + ix;
                e.out_addr = co*oh*ow + oy*ow + ox;
                e.first = (ky == 0 && kx == 0 && ci == 0);
                exp_px.push_back(e);
              end
            pass++;
          end
    @(negedge clk);
    cfg = '0;
    cfg.p = 4'(p); cfg.k = 4'(k); cfg.stride = 2'(stride); cfg.pad = 2'(pad);
    cfg.in_h = 10'(ih); cfg.in_w = 10'(iw); cfg.out_h = 10'(oh); cfg.out_w = 10'(ow);
    cfg.cin_tiles = 8'(cin_t); cfg.cout_tiles = 8'(cout_t); cfg.w_base = 16'(w_base);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    check(!busy, "idle after done");
    check(exp_w.size() == 0 && exp_row.size() == 0 && exp_px.size() == 0, "schedule complete");
    $display("layer p=%0d k=%0d s=%0d: %0d passes, %0d pixels each, %0d cycles",
             p, k, stride, passes, oh*ow, cyc - t0);
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_layer(2, 1, 1, 0, 3, 4, 2, 2, 5);
    run_layer(3, 3, 1, 1, 4, 4, 1, 1, 0);
    run_layer(2, 3, 2, 1, 5, 5, 2, 1, 17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
