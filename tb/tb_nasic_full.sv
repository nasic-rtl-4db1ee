// tb_nasic_full -- the plane at its default size, taken through complete computations.
// Default configuration: 1024 blocks (512 pairs), 4 strings per block, 128 WLs (one 2-bit CAM
// cell, 126 CIM layers), 131072 BLs, 4-state cells, 4 experts, input dimension 128, 8-bit ADC
// with a step of 4*I0. The four experts are interleaved: pair group g = pair / 128 and BL group
// c = BL / 32768 hold expert (c - g) mod 4, so every BL sees 128 pairs of each expert.
// The testbench writes every CAM entry and the weights of one CIM layer through the programming
// port (one page row per request), then computes with two different experts and random inputs. Each BL result is
// compared with the value expected from the testbench's own model of the pulses (staircase
// weight coding, SL levels 2-x / 2+x, per-pulse 8-bit quantisation, offset removal); the
// largest distance to the exact dot product is reported. Latency and the number of read
// pulses are checked as well.
module tb_nasic_full;
  import nasic_pkg::*;

  localparam int NK = 1024, NS = 4, NW = 128, NB = 131072, M = 4, DIM = 128;
  localparam int NP = NK / 2, NE = 4, H = 2 * (M - 1), LAYER = 37;
  localparam int ABITS = 8, ALSB = 8, AW = 24, TPRE = 8, TREAD = 2;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pgm_valid, pgm_ready, pgm_cam, pgm_clamped;
  logic [8:0] pgm_pair;
  logic [6:0] pgm_layer;
  weight_t pgm_weight[NB];
  logic [1:0] pgm_entry[NB];
  logic op_valid, op_ready;
  logic [1:0] op_expert;
  logic [6:0] op_layer;
  x_t op_x[DIM];
  ibl_t bl_current[NB];
  logic adc_sample, res_valid;
  logic [ABITS-1:0] adc_code[NB];
  logic signed [AW-1:0] res_y[NB];

  nasic_top dut (
    .clk, .rst_n, .pgm_valid, .pgm_ready, .pgm_cam, .pgm_pair, .pgm_layer, .pgm_weight,
    .pgm_entry, .pgm_clamped, .op_valid, .op_ready, .op_expert, .op_layer, .op_x, .bl_current,
    .adc_sample, .adc_code, .res_valid, .res_y);

  bl_adc_model #(.N_BL(NB), .BITS(ABITS), .LSB(ALSB)) u_adc (.current(bl_current), .code(adc_code));

  byte wts[NP][NB];
  int  pp[2*H+1][5][M-1];   // pair current (I0/2) by weight, input and read pulse
  int n_sense = 0, n_sat = 0;

  always @(posedge clk) if (rst_n && dut.sense) n_sense++;

  function automatic int expert_of(int p, int b);
    return ((b / (NB / NE)) - (p / DIM) + NE) % NE;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // BL current (I0/2) of read pulse l for one pair
  function automatic int pair_pulse(int w, int x, int l);
    int st[NS], cur;
    st = '{default: 0};
    for (int k = 0; k < w + H; k++) st[k % NS]++;
    cur = 0;
    for (int i = 0; i < NS; i++) begin
      if (st[i] <= l) cur += 2 - x;
      if (M - 1 - st[i] <= l) cur += 2 + x;
    end
    return cur;
  endfunction

  task automatic pgm(input bit cam, input int p);
    pgm_valid = 1; pgm_cam = cam; pgm_pair = 9'(p); pgm_layer = 7'(LAYER);
    for (int b = 0; b < NB; b++) begin
      pgm_weight[b] = weight_t'(wts[p][b]);
      pgm_entry[b]  = 2'(expert_of(p, b));
    end
    while (!pgm_ready) @(negedge clk);
    @(negedge clk);
    pgm_valid = 0;
  endtask

  task automatic op(input int e);
    int x[DIM], lat, s0, max_err;
    foreach (x[i]) begin
      x[i] = $urandom_range(0, 4) - 2;
      op_x[i] = x_t'(x[i]);
    end
    s0 = n_sense;
    op_valid = 1; op_expert = 2'(e); op_layer = 7'(LAYER);
    while (!op_ready) @(negedge clk);
    @(negedge clk);
    op_valid = 0;
    lat = 1;
    while (!res_valid && lat < 1000) begin
      @(negedge clk);
      lat++;
    end
    check(lat == TPRE + (M - 1) * TREAD + 2, $sformatf("latency %0d", lat));
    max_err = 0;
    for (int b = 0; b < NB; b++) begin
      int q, exact, cur;
      q = 0; exact = 0;
      for (int p = 0; p < NP; p++)
        if (expert_of(p, b) == e) exact += x[p % DIM] * int'(wts[p][b]);
      for (int l = 0; l < M - 1; l++) begin
        cur = 0;
        for (int p = 0; p < NP; p++)
          if (expert_of(p, b) == e) cur += pp[int'(wts[p][b]) + H][x[p % DIM] + 2][l];
        if (cur / ALSB > 2 ** ABITS - 1) begin
          n_sat++;
          q += (2 ** ABITS - 1) * ALSB;
        end else q += cur / ALSB * ALSB;
      end
      q = (q - 2 * NS * (M - 1) * DIM) >>> 1;
      check(int'(res_y[b]) == q, $sformatf("E%0d BL%0d y=%0d exp %0d", e, b, res_y[b], q));
      if (q - exact > max_err) max_err = q - exact;
      if (exact - q > max_err) max_err = exact - q;
    end
    check(n_sense - s0 == M - 1, "read pulses per computation");
    $display("expert %0d: %0d BLs checked, largest ADC quantisation error %0d (weights -6..+6, inputs -2..+2)",
             e, NB, max_err);
  endtask

  initial begin
    pgm_valid = 0; op_valid = 0; pgm_cam = 0; pgm_pair = '0; pgm_layer = '0;
    op_expert = '0; op_layer = '0;
    foreach (pgm_weight[b]) begin
      pgm_weight[b] = '0;
      pgm_entry[b]  = '0;
    end
    foreach (op_x[i]) op_x[i] = '0;
    for (int w = -H; w <= H; w++)
      for (int x = -2; x <= 2; x++)
        for (int l = 0; l < M - 1; l++) pp[w+H][x+2][l] = pair_pulse(w, x, l);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < NB; b++) wts[p][b] = byte'($urandom_range(0, 2 * H) - H);
    for (int p = 0; p < NP; p++) pgm(1, p);
    $display("CAM entries written");
    for (int p = 0; p < NP; p++) pgm(0, p);
    $display("weights written");
    op(1);
    op(2);
    $display("ADC saturations: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
