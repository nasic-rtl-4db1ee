// tb_input_encoder -- exhaustive check of the signed input to source-line level table:
//   x  : -2  -1   0  +1  +2     (levels in I0/2: V2 = 4, V1.5 = 3, V1 = 2, V0.5 = 1, 0 = 0)
//   SL1:  4   3   2   1   0
//   SL2:  0   1   2   3   4
// plus the range flag and clamping of the three unused codes.
module tb_input_encoder;
  import nasic_pkg::*;

  int checks = 0, failures = 0;
  x_t        x;
  sl_level_t sl[2];
  logic      in_range;

  input_encoder dut (.x(x), .sl(sl), .in_range(in_range));

  int exp1[5] = '{4, 3, 2, 1, 0};
  int exp2[5] = '{0, 1, 2, 3, 4};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -4; v <= 3; v++) begin
      int idx;
      x = x_t'(v);
      #1;
      idx = (v < -2) ? 0 : (v > 2) ? 4 : v + 2;
      check(in_range == (v >= -2 && v <= 2), $sformatf("range flag x=%0d", v));
      check(int'(sl[0]) == exp1[idx], $sformatf("SL1 x=%0d got %0d", v, sl[0]));
      check(int'(sl[1]) == exp2[idx], $sformatf("SL2 x=%0d got %0d", v, sl[1]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
