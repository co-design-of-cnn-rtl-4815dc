// tb_wmd_design_points: runs the accelerator built for the two other design
// points reported alongside the default one, each on one layer of its
// network at full size (layer shapes are those of the MLPerf Tiny models):
//   - ResNet point, M = 16 (S_W=4, E=3, Z=3), 4 x 4 PEs: a 3 x 3 convolution
//     with padding 1 on the 32 x 32 map, 16 -> 64 channel slots (1 x 1 tiles;
//     the 16-channel layer uses the first 16), P = 2.  The input fills the
//     1024-word input buffer exactly.
//   - MobileNet point, M = 8, 4 x 11 PEs: a pointwise layer on a 12 x 12 map,
//     32 input channels in 2 input tiles, one output tile of 88 channels, P = 2
// The grid sizes are derived from the reported throughput (PE_X*PE_Y*S_W*M
// results per cycle), their split into rows and columns is a choice.  Each
// harness checks every output word against the reference model, the Lat_F
// pixel spacing and the streaming-cycle count of the latency model.
module tb_wmd_design_points;
  int c0, f0, c1, f1;
  bit d0, d1;

  wmd_accel_harness #(.M(16), .PE_X(4), .PE_Y(4), .L_P(2), .L_K(3), .L_STRIDE(1), .L_PAD(1),
                      .L_IH(32), .L_IW(32), .L_CIN_T(1), .L_COUT_T(1))
    u_resnet (.checks(c0), .failures(f0), .finished(d0));

  wmd_accel_harness #(.M(8), .PE_X(4), .PE_Y(11), .L_P(2), .L_K(1), .L_STRIDE(1), .L_PAD(0),
                      .L_IH(12), .L_IW(12), .L_CIN_T(2), .L_COUT_T(1))
    u_mobilenet (.checks(c1), .failures(f1), .finished(d1));

  initial begin
    fork
      begin
        wait (d0 && d1);
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
        $finish;
      end
      begin
        #20000000;
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
        $finish;
      end
    join_any
  end
endmodule
