// tb_weight_encoder -- checks the dual-block thermometer weight coding.
// 1. The 2-state (SLC) and 3-state tables printed in the paper, cell by cell.
// 2. For 2, 3, 4 and 8 states, every weight against a staircase built by raising the strings
//    of block 1 one step at a time in FG11, FG12, ... order, block 2 being the complement.
// 3. The product: with read levels VR1..VR(m-1) and the SL pair (2-x, 2+x) the summed pair
//    current must be 4H + 2*x*W in units of I0/2 for every input x and weight W.
// 4. Range flag and clamping just outside +-H.
module tb_weight_encoder;
  import nasic_pkg::*;

  int checks = 0, failures = 0;

  weight_t w2[1], w3[1], w4[1], w8[1];
  vth_t    s2[1][2][4], s3[1][2][4], s4[1][2][4], s8[1][2][4];
  logic [0:0] r2, r3, r4, r8;

  weight_encoder #(.M_STATES(2)) dut2 (.w(w2), .state(s2), .in_range(r2));
  weight_encoder #(.M_STATES(3)) dut3 (.w(w3), .state(s3), .in_range(r3));
  weight_encoder                 dut4 (.w(w4), .state(s4), .in_range(r4));
  weight_encoder #(.M_STATES(8)) dut8 (.w(w8), .state(s8), .in_range(r8));

  // paper tables: row = FG11..FG14, FG21..FG24; column = W from the most negative value
  int slc[8][5] = '{
    '{0,1,1,1,1}, '{0,0,1,1,1}, '{0,0,0,1,1}, '{0,0,0,0,1},
    '{1,0,0,0,0}, '{1,1,0,0,0}, '{1,1,1,0,0}, '{1,1,1,1,0}};
  int three[8][9] = '{
    '{0,1,1,1,1,2,2,2,2}, '{0,0,1,1,1,1,2,2,2}, '{0,0,0,1,1,1,1,2,2}, '{0,0,0,0,1,1,1,1,2},
    '{2,1,1,1,1,0,0,0,0}, '{2,2,1,1,1,1,0,0,0}, '{2,2,2,1,1,1,1,0,0}, '{2,2,2,2,1,1,1,1,0}};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic void get(input int m, output vth_t s[2][4], output logic r);
    case (m)
      2: begin s = s2[0]; r = r2[0]; end
      3: begin s = s3[0]; r = r3[0]; end
      4: begin s = s4[0]; r = r4[0]; end
      default: begin s = s8[0]; r = r8[0]; end
    endcase
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ms[4] = '{2, 3, 4, 8};

  initial begin
    // 1. printed tables
    for (int v = -2; v <= 2; v++) begin
      w2[0] = weight_t'(v); #1;
      for (int i = 0; i < 4; i++) begin
        check(int'(s2[0][0][i]) == slc[i][v+2],   $sformatf("SLC W=%0d FG1%0d", v, i+1));
        check(int'(s2[0][1][i]) == slc[4+i][v+2], $sformatf("SLC W=%0d FG2%0d", v, i+1));
      end
    end
    for (int v = -4; v <= 4; v++) begin
      w3[0] = weight_t'(v); #1;
      for (int i = 0; i < 4; i++) begin
        check(int'(s3[0][0][i]) == three[i][v+4],   $sformatf("3-state W=%0d FG1%0d", v, i+1));
        check(int'(s3[0][1][i]) == three[4+i][v+4], $sformatf("3-state W=%0d FG2%0d", v, i+1));
      end
    end
    // 2.-4. all cell types
    foreach (ms[j]) begin
      int m, h;
      m = ms[j];
      h = 2 * (m - 1);
      for (int v = -h - 1; v <= h + 1; v++) begin
        int   st[4], wc;
        vth_t s[2][4];
        logic r;
        w2[0] = weight_t'(v); w3[0] = weight_t'(v); w4[0] = weight_t'(v); w8[0] = weight_t'(v);
        #1;
        get(m, s, r);
        check(r == (v >= -h && v <= h), $sformatf("M=%0d W=%0d range flag", m, v));
        wc = (v > h) ? h : (v < -h) ? -h : v;
        st = '{0, 0, 0, 0};
        for (int k = 0; k < wc + h; k++) st[k % 4]++;
        for (int i = 0; i < 4; i++) begin
          check(int'(s[0][i]) == st[i],         $sformatf("M=%0d W=%0d FG1%0d", m, v, i+1));
          check(int'(s[1][i]) == m - 1 - st[i], $sformatf("M=%0d W=%0d FG2%0d", m, v, i+1));
        end
        for (int x = -2; x <= 2; x++) begin
          int cur;
          cur = 0;
          for (int l = 0; l < m - 1; l++)
            for (int i = 0; i < 4; i++) begin
              if (int'(s[0][i]) <= l) cur += 2 - x;
              if (int'(s[1][i]) <= l) cur += 2 + x;
            end
          check(cur == 4 * h + 2 * x * wc, $sformatf("M=%0d W=%0d x=%0d current %0d", m, v, x, cur));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
