// nasic_top -- CAM-selected multibit NAND compute-in-memory plane for MoE expert layers.
//
// The plane stores the weights of several MoE experts interleaved over its blocks and BLs.
// The upper WLs of every NAND string hold a CAM entry naming the expert whose weight sits in the
// lower (CIM) cells of that string. A computation broadcasts the router's expert identifier to
// all CAM cells and the inputs to all source lines at once; strings of any other expert are cut
// off by their own CAM cells, so each BL sums only the products of the selected expert. Each
// weight is a dual-block thermometer code over the 4 strings of a block pair (weight_encoder),
// each input a pair of complementary source-line levels (input_encoder); with m-state cells the
// selected WL is read with m-1 pulses (cim_sequencer), each sensed, digitised and summed per BL
// (bl_accumulator).
//
// Interfaces
//   Programming (pgm_*): valid/ready, one page row (all BLs) per request, as NAND is written
//   page by page. pgm_cam = 0 writes pgm_weight[bl] for every BL into CIM layer pgm_layer of
//   block pair pgm_pair (2 cycles: one block each, all SSL pages of it at once). pgm_cam = 1
//   writes the CAM entries pgm_entry[bl] of pair pgm_pair into both blocks and every CAM WL
//   (4*N_CAM_CELLS cycles). pgm_clamped, valid after the request, is high when a weight of the
//   last weight request was outside +-H and was clamped.
//   Compute (op_*): valid/ready. op_expert is the expert identifier (CAM query), op_layer the CIM
//   layer to read, op_x[INPUT_DIM] the signed inputs; pair p receives op_x[p % INPUT_DIM], which
//   is the input broadcast of the interleaved mapping (each group of INPUT_DIM pairs holds one
//   expert per BL group).
//   ADC boundary: bl_current (I0/2 units) goes to an external ADC per BL; adc_code must hold its
//   conversion while adc_sample is high (one cycle after each sense).
//   Result: res_valid for one cycle with res_y[b] = sum over matched pairs of x*W on BL b.
// Timing: op accepted at cycle 0; res_valid at T_PRE + (M_STATES-1)*T_READ + 2.
// Design choices not taken from the paper: the handshakes, the cycle counts, the ADC code scale,
// digital summation of the pulses and the constant offset removal, which assumes every BL sees
// exactly INPUT_DIM pairs of the selected expert (true for the interleaved mapping).
module nasic_top
  import nasic_pkg::*;
#(
  parameter int unsigned N_BLOCKS    = PLANE_SL,
  parameter int unsigned N_SSL       = SSL_PER_GSL,
  parameter int unsigned N_WL        = PLANE_WL,
  parameter int unsigned N_BL        = PLANE_BL,
  parameter int unsigned M_STATES    = 4,
  parameter int unsigned N_CAM_CELLS = 1,
  parameter int unsigned CAM_BITS    = 2,
  parameter int unsigned INPUT_DIM   = 128,
  parameter int unsigned T_PRE       = 8,
  parameter int unsigned T_READ      = 2,
  parameter int unsigned ADC_BITS    = 8,
  parameter int unsigned ADC_LSB     = 8,
  parameter int unsigned ACC_W       = 24,
  localparam int unsigned N_PAIRS    = N_BLOCKS / 2,
  localparam int unsigned N_CAM_WL   = 2 * N_CAM_CELLS,
  localparam int unsigned N_CIM_WL   = N_WL - N_CAM_WL,
  localparam int unsigned ID_W       = N_CAM_CELLS * CAM_BITS,
  localparam int unsigned PAIR_W     = $clog2(N_PAIRS),
  localparam int unsigned LAYER_W    = $clog2(N_CIM_WL)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // programming
  input  logic                    pgm_valid,
  output logic                    pgm_ready,
  input  logic                    pgm_cam,
  input  logic [PAIR_W-1:0]       pgm_pair,
  input  logic [LAYER_W-1:0]      pgm_layer,
  input  weight_t                 pgm_weight[N_BL],
  input  logic [ID_W-1:0]         pgm_entry[N_BL],
  output logic                    pgm_clamped,
  // compute request
  input  logic                    op_valid,
  output logic                    op_ready,
  input  logic [ID_W-1:0]         op_expert,
  input  logic [LAYER_W-1:0]      op_layer,
  input  x_t                      op_x[INPUT_DIM],
  // external BL ADCs
  output ibl_t                    bl_current[N_BL],
  output logic                    adc_sample,
  input  logic [ADC_BITS-1:0]     adc_code[N_BL],
  // result
  output logic                    res_valid,
  output logic signed [ACC_W-1:0] res_y[N_BL]
);

  localparam int unsigned BLK_W  = $clog2(N_BLOCKS);
  localparam int unsigned WL_W   = $clog2(N_WL);
  localparam int unsigned STEP_W = $clog2(4 * N_CAM_CELLS + 1);
  // zero-product current of one matched pair over a cycle, in I0/2: 2 * N_SSL * (m-1)
  localparam int unsigned PAIR_ZERO = 2 * N_SSL * (M_STATES - 1);
  localparam logic [ACC_W-1:0] OFFSET = ACC_W'(PAIR_ZERO * INPUT_DIM);

  initial begin
    assert (N_BLOCKS % 2 == 0) else $error("blocks are used in pairs");
    assert (N_PAIRS % INPUT_DIM == 0) else $error("pairs must be a multiple of INPUT_DIM");
    assert (N_CAM_WL < N_WL) else $error("no WL left for CIM");
  end

  // ------------------------------------------------------------------ programming path
  typedef enum logic [0:0] {P_IDLE, P_BUSY} pstate_e;
  pstate_e           pst;
  logic [STEP_W-1:0] step;
  logic              p_cam;
  logic [PAIR_W-1:0] p_pair;
  logic [LAYER_W-1:0] p_layer;
  weight_t           p_weight[N_BL];
  logic [ID_W-1:0]   p_entry[N_BL];
  logic              seq_busy;

  vth_t              w_state[N_BL][2][N_SSL];
  logic [N_BL-1:0]   w_in_range;
  vth_t              e_state[N_BL][N_CAM_WL];
  wl_bias_t q_bias [N_CAM_WL];
  logic [ID_W-1:0] q_expert;

  weight_encoder #(.M_STATES(M_STATES), .N_STR(N_SSL), .N_LANES(N_BL)) u_wenc (
    .w(p_weight), .state(w_state), .in_range(w_in_range)
  );

  cam_encoder #(.N_CELLS(N_CAM_CELLS), .CAM_BITS(CAM_BITS), .N_LANES(N_BL)) u_cenc (
    .query_id(q_expert), .entry_id(p_entry), .query_bias(q_bias), .entry_state(e_state)
  );

  logic [STEP_W-1:0] last_step;
  assign last_step = p_cam ? STEP_W'(4 * N_CAM_CELLS - 1) : STEP_W'(1);

  assign pgm_ready = (pst == P_IDLE) && !seq_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pst         <= P_IDLE;
      step        <= '0;
      p_cam       <= 1'b0;
      p_pair      <= '0;
      p_layer     <= '0;
      for (int b = 0; b < N_BL; b++) begin
        p_weight[b] <= '0;
        p_entry[b]  <= '0;
      end
      pgm_clamped <= 1'b0;
    end else begin
      unique case (pst)
        P_IDLE: if (pgm_valid && pgm_ready) begin
          pst      <= P_BUSY;
          step     <= '0;
          p_cam    <= pgm_cam;
          p_pair   <= pgm_pair;
          p_layer  <= pgm_layer;
          p_weight <= pgm_weight;
          p_entry  <= pgm_entry;
        end
        P_BUSY: begin
          if (step == '0 && !p_cam) pgm_clamped <= !(&w_in_range);
          if (step == last_step) pst <= P_IDLE;
          else step <= step + 1'b1;
        end
        default: pst <= P_IDLE;
      endcase
    end
  end

  // one plane write per step: weights step = block of the pair; CAM step = {wl, block}
  logic             pl_pgm_en;
  logic [BLK_W-1:0] pl_pgm_block;
  logic [WL_W-1:0]  pl_pgm_wl;
  vth_t             pl_pgm_page[N_SSL][N_BL];

  always_comb begin
    pl_pgm_en    = (pst == P_BUSY);
    pl_pgm_block = BLK_W'({p_pair, step[0]});
    pl_pgm_wl    = p_cam ? WL_W'(step >> 1) : WL_W'(N_CAM_WL + p_layer);
    for (int s = 0; s < N_SSL; s++)
      for (int b = 0; b < N_BL; b++)
        pl_pgm_page[s][b] = p_cam ? e_state[b][int'(step) / 2] : w_state[b][step[0]][s];
  end

  // ------------------------------------------------------------------ compute path
  logic              start;
  logic [LAYER_W-1:0] q_layer;
  x_t                q_x[INPUT_DIM];
  logic              bias_on, read_on, sense, acc_clear, acc_en, done;
  vth_t              read_level;

  assign op_ready = (pst == P_IDLE) && !seq_busy && !pgm_valid;
  assign start    = op_valid && op_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_expert <= '0;
      q_layer  <= '0;
      for (int i = 0; i < INPUT_DIM; i++) q_x[i] <= '0;
    end else if (start) begin
      q_expert <= op_expert;
      q_layer  <= op_layer;
      for (int i = 0; i < INPUT_DIM; i++) q_x[i] <= op_x[i];
    end
  end

  cim_sequencer #(.M_STATES(M_STATES), .T_PRE(T_PRE), .T_READ(T_READ)) u_seq (
    .clk, .rst_n, .start, .busy(seq_busy), .bias_on, .read_on, .read_level,
    .sense, .acc_clear, .acc_en, .done
  );

  // input expansion: one encoder per input, broadcast to every group of INPUT_DIM pairs
  sl_level_t x_sl[INPUT_DIM][2];
  for (genvar i = 0; i < INPUT_DIM; i++) begin : g_in
    logic unused_range;
    input_encoder u_ienc (.x(q_x[i]), .sl(x_sl[i]), .in_range(unused_range));
  end

  sl_level_t pl_sl[N_BLOCKS];
  wl_bias_t  pl_wl[N_WL];

  always_comb begin
    for (int k = 0; k < N_BLOCKS; k++)
      pl_sl[k] = bias_on ? x_sl[(k / 2) % INPUT_DIM][k % 2] : '0;
    for (int w = 0; w < N_WL; w++) begin
      if (w < N_CAM_WL)                         pl_wl[w] = q_bias[w];
      else if (w == N_CAM_WL + int'(q_layer))   pl_wl[w] = '{pass: 1'b0, level: read_on ? read_level : '0};
      else                                      pl_wl[w] = '{pass: 1'b1, level: '0};
    end
  end

  nand_plane #(.N_BLOCKS(N_BLOCKS), .N_SSL(N_SSL), .N_WL(N_WL), .N_BL(N_BL)) u_plane (
    .clk,
    .pgm_en(pl_pgm_en), .pgm_block(pl_pgm_block), .pgm_wl(pl_pgm_wl), .pgm_page(pl_pgm_page),
    .wl_bias(pl_wl), .ssl_on({N_SSL{bias_on}}), .gsl_on(bias_on), .sl_level(pl_sl),
    .sense, .bl_current
  );

  assign adc_sample = acc_en;

  bl_accumulator #(.N_BL(N_BL), .ADC_BITS(ADC_BITS), .ADC_LSB(ADC_LSB), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .en(acc_en), .adc_code, .offset(OFFSET), .y(res_y)
  );

  assign res_valid = done;

  // the two request types never overlap
  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(pl_pgm_en && seq_busy));

endmodule
