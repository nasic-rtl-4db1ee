// tb_cam_encoder -- exhaustive check of the NAND CAM cell encoding.
// For a single 2-bit cell the encoded biases and thresholds are compared with the paper's
// table (query 00 -> VR0/VR3 ... entry 11 -> VTH11/VTH00). For a single cell and for two cells
// in series every (query, entry) combination is then evaluated with the string conduction
// rule (a transistor conducts when its read level is at or above its state; the string conducts
// when all CAM transistors do) and the mask must be 1 exactly when query == entry.
module tb_cam_encoder;
  import nasic_pkg::*;

  int checks = 0, failures = 0;

  logic [1:0] q1, e1[1];
  wl_bias_t   qb1[2];
  vth_t       es1[1][2];
  cam_encoder #(.N_CELLS(1), .CAM_BITS(2)) dut1 (.query_id(q1), .entry_id(e1),
                                                  .query_bias(qb1), .entry_state(es1));

  logic [3:0] q2, e2[1];
  wl_bias_t   qb2[4];
  vth_t       es2[1][4];
  cam_encoder #(.N_CELLS(2), .CAM_BITS(2)) dut2 (.query_id(q2), .entry_id(e2),
                                                  .query_bias(qb2), .entry_state(es2));

  // table of the paper: query levels (VS1, VS2) and entry states (VTH_1, VTH_2)
  int tq1[4] = '{0, 1, 2, 3};
  int tq2[4] = '{3, 2, 1, 0};

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
    for (int q = 0; q < 4; q++) begin
      for (int e = 0; e < 4; e++) begin
        bit m;
        q1 = 2'(q); e1[0] = 2'(e);
        #1;
        check(!qb1[0].pass && !qb1[1].pass, "query WLs must be at read levels");
        check(int'(qb1[0].level) == tq1[q] && int'(qb1[1].level) == tq2[q],
              $sformatf("query %0d levels %0d/%0d", q, qb1[0].level, qb1[1].level));
        check(int'(es1[0][0]) == tq1[e] && int'(es1[0][1]) == tq2[e],
              $sformatf("entry %0d states %0d/%0d", e, es1[0][0], es1[0][1]));
        m = (es1[0][0] <= qb1[0].level) && (es1[0][1] <= qb1[1].level);
        check(m == (q == e), $sformatf("mask q=%0d e=%0d got %0b", q, e, m));
      end
    end
    for (int q = 0; q < 16; q++) begin
      for (int e = 0; e < 16; e++) begin
        bit m;
        q2 = 4'(q); e2[0] = 4'(e);
        #1;
        m = 1'b1;
        for (int w = 0; w < 4; w++) m &= (es2[0][w] <= qb2[w].level);
        check(m == (q == e), $sformatf("2-cell mask q=%0d e=%0d got %0b", q, e, m));
        // upper cell carries the identifier's upper bits
        check(int'(es2[0][0]) == (e >> 2), $sformatf("2-cell upper entry %0d", e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
