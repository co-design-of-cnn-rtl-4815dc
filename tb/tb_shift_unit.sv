// tb_shift_unit: exhaustive check of the Po2 shift unit.
// Every 8-bit operand with every code (en, neg, shift 0..3) is applied and
// the result compared with floor division by 2^k and optional negation.
module tb_shift_unit;
  import wmd_ref_pkg::*;

  logic signed [7:0] x;
  logic              en, neg;
  logic [1:0]        sh;
  logic signed [8:0] y;
  int checks = 0, failures = 0;

  shift_unit #(.IN_W(8), .Z(3)) dut (.x, .en, .neg, .sh, .y);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int xi = -128; xi < 128; xi++)
      for (int c = 0; c < 16; c++) begin
        x = 8'(xi); en = c[3]; neg = c[2]; sh = c[1:0];
        #1;
        checks++;
        if (longint'(y) != po2(longint'(xi), en, neg, int'(sh))) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d en=%0d neg=%0d sh=%0d y=%0d", xi, en, neg, sh, y);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
