// tb_nand_plane -- behavioural NAND plane: programming, string conduction and BL summation.
// A 4-block x 4-SSL x 4-WL x 5-BL plane is programmed row by row with random states through
// the programming port (one row left erased, reading as state 0), then sensed under random biases (WLs at Vpass or a random read level,
// random SSL/GSL and SL levels). The expected BL currents come from a copy of the cell states
// kept in the testbench: a string adds its SL level when GSL, its SSL and all its cells conduct.
// A directed part uses WL0/WL1 as a 2-bit CAM cell to show that a mismatch gates the string.
module tb_nand_plane;
  import nasic_pkg::*;

  localparam int NK = 4, NS = 4, NW = 4, NB = 5;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic             pgm_en;
  logic [1:0]       pgm_block, pgm_wl;
  vth_t             pgm_page[NS][NB];
  wl_bias_t         wl_bias[NW];
  logic [NS-1:0]    ssl_on;
  logic             gsl_on, sense;
  sl_level_t        sl_level[NK];
  ibl_t             bl_current[NB];

  nand_plane #(.N_BLOCKS(NK), .N_SSL(NS), .N_WL(NW), .N_BL(NB)) dut (
    .clk, .pgm_en, .pgm_block, .pgm_wl, .pgm_page,
    .wl_bias, .ssl_on, .gsl_on, .sl_level, .sense, .bl_current);

  int st[NK][NS][NW][NB];
  int n_gated = 0, n_matched = 0;

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

  // writes the pages of all strings of block k on WL w: state v[s][b]
  task automatic program_row(input int k, input int w, input int v[NS][NB]);
    pgm_en = 1; pgm_block = 2'(k); pgm_wl = 2'(w);
    for (int s = 0; s < NS; s++)
      for (int b = 0; b < NB; b++) begin
        pgm_page[s][b] = vth_t'(v[s][b]);
        st[k][s][w][b] = v[s][b];
      end
    @(negedge clk);
    pgm_en = 0;
  endtask

  task automatic sense_and_check(input string tag);
    int exp[NB];
    foreach (exp[b]) begin
      exp[b] = 0;
      if (gsl_on)
        for (int k = 0; k < NK; k++)
          for (int s = 0; s < NS; s++) begin
            bit on;
            on = ssl_on[s];
            for (int w = 0; w < NW; w++)
              if (!wl_bias[w].pass && st[k][s][w][b] > int'(wl_bias[w].level)) on = 0;
            if (on) exp[b] += int'(sl_level[k]);
          end
    end
    sense = 1;
    @(negedge clk);
    sense = 0;
    foreach (exp[b])
      check(int'(bl_current[b]) == exp[b], $sformatf("%s BL%0d got %0d exp %0d", tag, b, bl_current[b], exp[b]));
    // biases change without sense: output must hold
    gsl_on = ~gsl_on;
    @(negedge clk);
    gsl_on = ~gsl_on;
    foreach (exp[b]) check(int'(bl_current[b]) == exp[b], $sformatf("%s BL%0d hold", tag, b));
  endtask

  initial begin
    int v[NS][NB];
    pgm_en = 0; sense = 0; gsl_on = 1; ssl_on = '1;
    foreach (pgm_page[s, b]) pgm_page[s][b] = '0;
    foreach (wl_bias[w]) wl_bias[w] = '{pass: 1'b1, level: '0};
    foreach (sl_level[k]) sl_level[k] = '0;
    pgm_block = '0; pgm_wl = '0;
    @(negedge clk);
    // every row but (block 3, WL 2), which stays erased and must read as state 0
    foreach (st[k, s, w, b]) st[k][s][w][b] = 0;
    for (int k = 0; k < NK; k++)
      for (int w = 0; w < NW; w++)
        if (!(k == 3 && w == 2)) begin
          foreach (v[s, b]) v[s][b] = $urandom_range(0, 3);
          program_row(k, w, v);
        end
    for (int t = 0; t < 150; t++) begin
      foreach (wl_bias[w]) begin
        wl_bias[w].pass  = ($urandom_range(0, 2) == 0);
        wl_bias[w].level = vth_t'($urandom_range(0, 3));
      end
      ssl_on = NS'($urandom);
      gsl_on = ($urandom_range(0, 7) != 0);
      foreach (sl_level[k]) sl_level[k] = sl_level_t'($urandom_range(0, 4));
      sense_and_check($sformatf("random %0d", t));
    end
    // directed CAM gating: WL0/WL1 hold entry (e, 3-e) on BL0 of every string of block 0
    ssl_on = '1; gsl_on = 1;
    foreach (sl_level[k]) sl_level[k] = (k == 0) ? sl_level_t'(4) : '0;
    for (int e = 0; e < 4; e++) begin
      foreach (v[s, b]) v[s][b] = e;
      program_row(0, 0, v);
      foreach (v[s, b]) v[s][b] = 3 - e;
      program_row(0, 1, v);
      foreach (v[s, b]) v[s][b] = 0;
      program_row(0, 2, v);
      for (int q = 0; q < 4; q++) begin
        wl_bias[0] = '{pass: 1'b0, level: vth_t'(q)};
        wl_bias[1] = '{pass: 1'b0, level: vth_t'(3 - q)};
        wl_bias[2] = '{pass: 1'b0, level: '0};
        wl_bias[3] = '{pass: 1'b1, level: '0};
        sense_and_check($sformatf("cam e=%0d q=%0d", e, q));
        check(int'(bl_current[0]) == ((q == e) ? 16 : 0), $sformatf("cam gate e=%0d q=%0d", e, q));
        if (q == e) n_matched++; else n_gated++;
      end
    end
    check(n_matched == 4 && n_gated == 12, "CAM cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
