// tb_cim_sequencer -- timing of the precharge / multi-pulse read cycle.
// Two instances (3-state cell with T_PRE=5, T_READ=3; default 4-state cell) are started twice
// each. Checked: bias on for exactly T_PRE + (m-1)*T_READ cycles, m-1 sense strobes, read levels
// 0, 1, ... in order, one sense at the end of every pulse, acc_en one cycle after each sense,
// acc_clear in the start cycle and done exactly T_PRE + (m-1)*T_READ + 2 cycles after start.
module tb_cim_sequencer;
  import nasic_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start[2];
  logic busy[2], bias_on[2], read_on[2], sense[2], acc_clear[2], acc_en[2], done[2];
  vth_t read_level[2];

  cim_sequencer #(.M_STATES(3), .T_PRE(5), .T_READ(3)) dut_a (
    .clk, .rst_n, .start(start[0]), .busy(busy[0]), .bias_on(bias_on[0]), .read_on(read_on[0]),
    .read_level(read_level[0]), .sense(sense[0]), .acc_clear(acc_clear[0]), .acc_en(acc_en[0]),
    .done(done[0]));
  cim_sequencer dut_b (
    .clk, .rst_n, .start(start[1]), .busy(busy[1]), .bias_on(bias_on[1]), .read_on(read_on[1]),
    .read_level(read_level[1]), .sense(sense[1]), .acc_clear(acc_clear[1]), .acc_en(acc_en[1]),
    .done(done[1]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int d, input int m, input int tpre, input int tread);
    int cyc, n_bias, n_sense, last_sense, lat;
    bit prev_sense, seen_clear;
    start[d] = 1'b1;
    #1 check(acc_clear[d], "acc_clear in the start cycle");
    @(negedge clk);
    start[d] = 1'b0;
    #1 check(acc_clear[d] == 1'b0, "acc_clear only in the start cycle");
    // cycle 0 was the start cycle; now observe from cycle 1
    cyc = 1; n_bias = 0; n_sense = 0; prev_sense = 0; lat = -1; last_sense = -1;
    while (cyc < 200 && lat < 0) begin
      if (bias_on[d]) n_bias++;
      check(acc_en[d] == prev_sense, $sformatf("acc_en follows sense (cycle %0d)", cyc));
      if (sense[d]) begin
        check(read_on[d], "sense inside a read pulse");
        check(int'(read_level[d]) == n_sense, $sformatf("pulse %0d read level %0d", n_sense, read_level[d]));
        check(cyc == tpre + (n_sense + 1) * tread, $sformatf("sense %0d at cycle %0d", n_sense, cyc));
        n_sense++;
      end
      if (done[d]) lat = cyc;
      prev_sense = sense[d];
      @(negedge clk);
      cyc++;
    end
    check(n_bias == tpre + (m - 1) * tread, $sformatf("bias cycles %0d", n_bias));
    check(n_sense == m - 1, $sformatf("sense count %0d", n_sense));
    check(lat == tpre + (m - 1) * tread + 2, $sformatf("latency %0d", lat));
    check(!busy[d], "idle after done");
  endtask

  initial begin
    start = '{1'b0, 1'b0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy[0] && !busy[1], "idle after reset");
    run(0, 3, 5, 3);
    run(0, 3, 5, 3);
    run(1, 4, 8, 2);
    run(1, 4, 8, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
