// tb_bl_accumulator -- per-BL summation of ADC codes with LSB scaling and offset removal.
// Several rounds of clear + three random pulses on 6 BLs with ADC_LSB = 3; the expected result
// floor((sum(code)*3 - offset) / 2) is computed in the testbench. Also checks that `clear`
// wins over `en` and that a cycle without `en` changes nothing.
module tb_bl_accumulator;
  import nasic_pkg::*;

  localparam int NB = 6, LSB = 3, AW = 16;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, en;
  logic [7:0] code[NB];
  logic [AW-1:0] offset;
  logic signed [AW-1:0] y[NB];

  bl_accumulator #(.N_BL(NB), .ADC_BITS(8), .ADC_LSB(LSB), .ACC_W(AW)) dut (
    .clk, .rst_n, .clear, .en, .adc_code(code), .offset, .y);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum[NB];
    clear = 0; en = 0; offset = '0;
    foreach (code[b]) code[b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      offset = AW'($urandom_range(0, 1200));
      clear = 1; en = 1;
      foreach (code[b]) code[b] = 8'($urandom);
      @(negedge clk);
      clear = 0;
      foreach (sum[b]) sum[b] = 0;
      for (int p = 0; p < 3; p++) begin
        en = 1;
        foreach (code[b]) begin
          code[b] = 8'($urandom);
          sum[b] += int'(code[b]);
        end
        @(negedge clk);
        en = 0;
        foreach (code[b]) code[b] = 8'($urandom);
        @(negedge clk);
      end
      foreach (y[b]) begin
        int e;
        e = (sum[b] * LSB - int'(offset)) >>> 1;
        check(int'(y[b]) == e, $sformatf("round %0d BL %0d got %0d exp %0d", round, b, y[b], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
