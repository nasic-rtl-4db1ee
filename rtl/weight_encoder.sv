// weight_encoder -- block-wise modified thermometer coding of a signed multibit weight.
//
// A weight occupies one cell on each of the N_STR strings (one per SSL) of two paired blocks on
// the same BL and the same WL. With m threshold states per cell the weight range is +-H with
// H = N_STR*(m-1)/2 (4 strings: SLC +-2, 3-state +-4, 4-state +-6). The first block holds
// S = W + H "threshold steps" spread as a staircase over its strings: string i (1-based) gets
// state floor((S + N_STR - i) / N_STR), so FG11 is raised first and the states of the block differ
// by at most one. The second block is the complement, state (m-1) - state of the same string.
// This reproduces the paper's tables for the 2-state (Fig. 6c), 3-state (Fig. 7c) and 4-state
// (Fig. 7h) cells and its general m-state staircase (Fig. 7i).
// Under read levels VR_1..VR_(m-1) a cell in state s conducts (m-1-s) times, so block 1 conducts
// H - W times and block 2 H + W times over one computation cycle.
//
// Interface: N_LANES weights are encoded side by side (a whole page of BLs when programming).
// w[l] is the signed weight of lane l; state[l][b][i] is the threshold state of string i of
// block b of the pair. in_range[l] is low when |w[l]| > H; w[l] is then clamped. Purely
// combinational. The lane count is this design's choice.
module weight_encoder
  import nasic_pkg::*;
#(
  parameter int unsigned M_STATES = 4,   // threshold states used by a CIM cell (2-bit cell)
  parameter int unsigned N_STR    = SSL_PER_GSL,
  parameter int unsigned N_LANES  = 1
) (
  input  weight_t            w[N_LANES],
  output vth_t               state[N_LANES][2][N_STR],
  output logic [N_LANES-1:0] in_range
);

  localparam int H = (N_STR * (M_STATES - 1)) / 2;

  initial begin
    assert (M_STATES >= 2 && M_STATES <= (1 << STATE_W)) else $error("bad M_STATES");
    assert ((N_STR * (M_STATES - 1)) % 2 == 0) else $error("N_STR*(M_STATES-1) must be even");
  end

  always_comb begin
    for (int l = 0; l < N_LANES; l++) begin
      int wi, s, st;
      wi          = int'(w[l]);
      in_range[l] = (wi >= -H) && (wi <= H);
      if (wi > H)  wi = H;
      if (wi < -H) wi = -H;
      s = wi + H;
      for (int i = 0; i < N_STR; i++) begin
        st             = (s + N_STR - 1 - i) / N_STR;   // string index i is 0-based here
        state[l][0][i] = vth_t'(st);
        state[l][1][i] = vth_t'(int'(M_STATES) - 1 - st);
      end
    end
  end

endmodule
