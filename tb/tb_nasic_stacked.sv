// tb_nasic_stacked -- end-to-end test of the plane with two stacked CAM cells and 8-state cells.
// Plane: 32 blocks (16 pairs), 4 strings per block, 8 WLs (two 2-bit CAM cells = 4 WLs, 4 CIM
// layers), 16 BLs, 8-state (3-bit) cells (weights -14..+14, 7 read pulses), 16 experts selected
// by a 4-bit identifier, input dimension 1, ideal ADC. Pair p and BL b hold expert (b - p) mod 16,
// so each BL sees every expert on exactly one pair and a match needs both CAM cells to agree
// (the upper cell compares the two most significant bits, the lower cell the two others).
// Like tb_nasic_top it programs through the page port, runs random computations for every expert
// and compares every BL with sum(x*W) over the selected expert's pairs and with a per-pulse
// current model. Mechanisms counted (each must occur): gating by the upper cell alone, gating by
// the lower cell alone, expert and layer switches, 7 senses per computation, weight clamping, a
// compute request held off by programming, results of both signs; latency is checked.
module tb_nasic_stacked;
  import nasic_pkg::*;

  localparam int NK = 32, NS = 4, NW = 8, NB = 16, M = 8, DIM = 1, TPRE = 3, TREAD = 2;
  localparam int NP = NK / 2, NE = 16, NLAY = 3, H = 2 * (M - 1);
  localparam int ABITS = 12, ALSB = 1, AW = 24;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic pgm_valid, pgm_ready, pgm_cam, pgm_clamped;
  logic [3:0] pgm_pair;
  logic [1:0] pgm_layer;
  weight_t pgm_weight[NB];
  logic [3:0] pgm_entry[NB];
  logic op_valid, op_ready;
  logic [3:0] op_expert;
  logic [1:0] op_layer;
  x_t op_x[DIM];
  ibl_t bl_current[NB];
  logic adc_sample, res_valid;
  logic [ABITS-1:0] adc_code[NB];
  logic signed [AW-1:0] res_y[NB];

  nasic_top #(.N_BLOCKS(NK), .N_SSL(NS), .N_WL(NW), .N_BL(NB), .M_STATES(M), .N_CAM_CELLS(2),
              .CAM_BITS(2), .INPUT_DIM(DIM), .T_PRE(TPRE), .T_READ(TREAD), .ADC_BITS(ABITS),
              .ADC_LSB(ALSB), .ACC_W(AW)) dut (
    .clk, .rst_n, .pgm_valid, .pgm_ready, .pgm_cam, .pgm_pair, .pgm_layer, .pgm_weight,
    .pgm_entry, .pgm_clamped, .op_valid, .op_ready, .op_expert, .op_layer, .op_x, .bl_current,
    .adc_sample, .adc_code, .res_valid, .res_y);

  bl_adc_model #(.N_BL(NB), .BITS(ABITS), .LSB(ALSB)) u_adc (.current(bl_current), .code(adc_code));

  int wts[NLAY][NP][NB];
  int n_gated = 0, n_expert_sw = 0, n_layer_sw = 0, n_sense = 0, n_clamp = 0, n_held = 0;
  int n_neg = 0, n_pos = 0, n_ops = 0, n_gate_hi = 0, n_gate_lo = 0;

  function automatic int expert_of(int p, int b);
    return ((b / (NB / NE)) - (p / DIM) + NE) % NE;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && dut.sense) n_sense++;

  // one page-row request: weights of layer `lay` (cam = 0) or CAM entries (cam = 1) of pair p
  task automatic pgm(input bit cam, input int p, input int lay);
    pgm_valid = 1; pgm_cam = cam; pgm_pair = 4'(p); pgm_layer = 2'(lay);
    for (int b = 0; b < NB; b++) begin
      pgm_weight[b] = weight_t'(cam ? 0 : wts[lay][p][b]);
      pgm_entry[b]  = 4'(expert_of(p, b));
    end
    while (!pgm_ready) @(negedge clk);
    @(negedge clk);
    pgm_valid = 0;
  endtask

  // expected BL current (I0/2) of read pulse l for pair p with weight w and input x
  function automatic int pair_pulse(int w, int x, int l);
    int st[NS], cur;
    int wc;
    wc = (w > H) ? H : (w < -H) ? -H : w;
    st = '{default: 0};
    for (int k = 0; k < wc + H; k++) st[k % NS]++;
    cur = 0;
    for (int i = 0; i < NS; i++) begin
      if (st[i] <= l) cur += 2 - x;
      if (M - 1 - st[i] <= l) cur += 2 + x;
    end
    return cur;
  endfunction

  task automatic op(input int e, input int lay);
    int x[DIM], lat;
    int exp_y[NB], exp_q[NB];
    foreach (x[i]) begin
      x[i] = $urandom_range(0, 4) - 2;
      op_x[i] = x_t'(x[i]);
    end
    foreach (exp_y[b]) begin
      exp_y[b] = 0;
      exp_q[b] = 0;
      for (int p = 0; p < NP; p++) begin
        if (expert_of(p, b) == e) begin
          int wc;
          wc = (wts[lay][p][b] > H) ? H : (wts[lay][p][b] < -H) ? -H : wts[lay][p][b];
          exp_y[b] += x[p % DIM] * wc;
        end else if (wts[lay][p][b] != 0 && x[p % DIM] != 0) begin
          n_gated++;
          if ((expert_of(p, b) >> 2) == (e >> 2)) n_gate_lo++;
          if ((expert_of(p, b) & 3) == (e & 3)) n_gate_hi++;
        end
      end
      for (int l = 0; l < M - 1; l++) begin
        int cur;
        cur = 0;
        for (int p = 0; p < NP; p++)
          if (expert_of(p, b) == e) cur += pair_pulse(wts[lay][p][b], x[p % DIM], l);
        exp_q[b] += cur / ALSB * ALSB;
      end
      exp_q[b] = (exp_q[b] - 2 * NS * (M - 1) * DIM) >>> 1;
    end
    op_valid = 1; op_expert = 4'(e); op_layer = 2'(lay);
    while (!op_ready) @(negedge clk);
    @(negedge clk);
    op_valid = 0;
    lat = 1;
    while (!res_valid && lat < 100) begin
      @(negedge clk);
      lat++;
    end
    check(lat == TPRE + (M - 1) * TREAD + 2, $sformatf("latency %0d", lat));
    foreach (res_y[b]) begin
      check(int'(res_y[b]) == exp_y[b], $sformatf("E%0d L%0d BL%0d y=%0d exp %0d", e, lay, b, res_y[b], exp_y[b]));
      check(int'(res_y[b]) == exp_q[b], $sformatf("E%0d L%0d BL%0d pulse model %0d", e, lay, b, exp_q[b]));
      if (exp_y[b] < 0) n_neg++;
      if (exp_y[b] > 0) n_pos++;
    end
    n_ops++;
  endtask

  initial begin
    int prev_e, prev_l, s0;
    pgm_valid = 0; op_valid = 0; pgm_cam = 0; pgm_pair = '0; pgm_layer = '0;
    foreach (pgm_weight[b]) begin
      pgm_weight[b] = '0;
      pgm_entry[b]  = '0;
    end
    op_expert = '0; op_layer = '0;
    foreach (op_x[i]) op_x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // CAM entries: interleaved expert mapping
    for (int p = 0; p < NP; p++) pgm(1, p, 0);
    // weights of three CIM layers
    for (int lay = 0; lay < NLAY; lay++)
      for (int p = 0; p < NP; p++) begin
        for (int b = 0; b < NB; b++) wts[lay][p][b] = $urandom_range(0, 2 * H) - H;
        pgm(0, p, lay);
        @(negedge clk);
        @(negedge clk);
        check(!pgm_clamped, "no clamp for in-range weights");
      end
    // one out-of-range weight (clamped to +H)
    wts[2][5][3] = H + 1;
    pgm(0, 5, 2);
    @(negedge clk);
    @(negedge clk);
    if (pgm_clamped) n_clamp++;
    // a compute request arriving with a programming request waits for it
    op_valid = 1;
    pgm_valid = 1; pgm_cam = 0; pgm_pair = 4'd1; pgm_layer = 2'd1;
    for (int b = 0; b < NB; b++) pgm_weight[b] = weight_t'(wts[1][1][b]);
    #1 if (!op_ready && pgm_ready) n_held++;
    @(negedge clk);
    pgm_valid = 0;
    op_valid = 0;
    // computations
    prev_e = -1; prev_l = -1;
    s0 = n_sense;
    for (int r = 0; r < 2; r++)
      for (int lay = 0; lay < NLAY; lay++)
        for (int e = 0; e < NE; e++) begin
          if (prev_e >= 0 && e != prev_e) n_expert_sw++;
          if (prev_l >= 0 && lay != prev_l) n_layer_sw++;
          op(e, lay);
          prev_e = e; prev_l = lay;
        end
    check(n_sense - s0 == n_ops * (M - 1), $sformatf("senses %0d for %0d ops", n_sense - s0, n_ops));
    check(n_gated > 0,     "CAM mismatch gating exercised");
    check(n_gate_hi > 0,   "gating by the upper cell alone");
    check(n_gate_lo > 0,   "gating by the lower cell alone");
    check(n_expert_sw > 0, "expert switch exercised");
    check(n_layer_sw > 0,  "layer switch exercised");
    check(n_clamp == 1,    "weight clamp reported");
    check(n_held == 1,     "compute held off by programming");
    check(n_neg > 0 && n_pos > 0, "signed results of both signs");
    $display("mechanisms: gate_hi=%0d gate_lo=%0d gated=%0d expert_sw=%0d layer_sw=%0d senses=%0d clamp=%0d held=%0d neg=%0d pos=%0d ops=%0d",
             n_gate_hi, n_gate_lo, n_gated, n_expert_sw, n_layer_sw, n_sense - s0, n_clamp, n_held, n_neg, n_pos, n_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
