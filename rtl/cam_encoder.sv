// cam_encoder -- search-query and entry encoding of the multibit NAND CAM cells.
//
// A CAM cell is two flash transistors in series on the NAND string (two WLs). A b-bit entry E
// is stored as the threshold pair (VTH_E, VTH_(L-E)), L = 2^b - 1, and a b-bit query Q is applied
// as the gate pair (VR_Q, VR_(L-Q)). A transistor conducts when its read level is at or above its
// state, so both conduct only when E <= Q and L-E <= L-Q, i.e. E == Q: the string passes current
// (mask M = 1) on a match and is cut off (M = 0) otherwise. For b = 2 this gives exactly the
// table of the paper: query 00 -> (VR0, VR3), 01 -> (VR1, VR2), 10 -> (VR2, VR1),
// 11 -> (VR3, VR0); entry 00 -> (VTH00, VTH11), 01 -> (VTH01, VTH10), 10 -> (VTH10, VTH01),
// 11 -> (VTH11, VTH00). Several CAM cells can be stacked on the string for finer-grained expert
// mapping; the string then matches only when every cell matches. Cell 0 is the uppermost cell
// and takes the most significant bits of the expert identifier (as in the paper's 8-expert
// example, whose upper CAM layer splits the experts into E0-E3 and E4-E7).
//
// Interface: query_id is the searched expert identifier; query_bias[2c], query_bias[2c+1] are
// the gate biases of cell c's two WLs. entry_id[l] are N_LANES entries encoded side by side (a
// page of BLs when programming); entry_state[l][2c], entry_state[l][2c+1] are the thresholds to
// program into cell c of lane l. Purely combinational. The lane count is this design's choice.
// Uniform cell width across all stacked cells is this design's choice (the paper's example mixes
// a 1-bit and a 2-bit cell).
module cam_encoder
  import nasic_pkg::*;
#(
  parameter int unsigned N_CELLS  = 1,   // CAM cells in series on a string
  parameter int unsigned CAM_BITS = 2,   // bits per CAM cell (MLC example)
  parameter int unsigned N_LANES  = 1,
  localparam int unsigned ID_W    = N_CELLS * CAM_BITS
) (
  input  logic [ID_W-1:0] query_id,
  input  logic [ID_W-1:0] entry_id[N_LANES],
  output wl_bias_t        query_bias [2*N_CELLS],
  output vth_t            entry_state[N_LANES][2*N_CELLS]
);

  localparam logic [CAM_BITS-1:0] TOP = {CAM_BITS{1'b1}};

  initial begin
    assert (CAM_BITS <= STATE_W) else $error("CAM cell wider than the flash cell");
  end

  always_comb begin
    for (int unsigned c = 0; c < N_CELLS; c++) begin
      logic [CAM_BITS-1:0] q;
      q = query_id[(N_CELLS-1-c)*CAM_BITS +: CAM_BITS];
      query_bias[2*c]   = '{pass: 1'b0, level: STATE_W'(q)};
      query_bias[2*c+1] = '{pass: 1'b0, level: STATE_W'(TOP - q)};
      for (int l = 0; l < N_LANES; l++) begin
        logic [CAM_BITS-1:0] e;
        e = entry_id[l][(N_CELLS-1-c)*CAM_BITS +: CAM_BITS];
        entry_state[l][2*c]   = vth_t'(e);
        entry_state[l][2*c+1] = vth_t'(TOP - e);
      end
    end
  end

endmodule
