// nasic_pkg -- shared constants and types of the CAM-selected multibit NAND CIM design.
//
// The plane geometry follows the reference 3D NAND plane: 128 word lines (WLs) per string,
// 1k source lines (one per block), 128k bit lines (BLs) and four string-select lines (SSLs)
// under each ground-select line (GSL), with cells that hold up to 3 bits (8 threshold states).
// Analog quantities are carried as small integer codes:
//   * vth_t      threshold state of a flash cell, 0 = lowest VTH (VTH0 / VTH00).
//   * wl_bias_t  bias of one WL: either the pass voltage (cell always conducts) or read level L
//                (VR_L); a cell in state s conducts at read level L when s <= L.
//   * sl_level_t source-line level, equal to the string current limit in units of I0/2:
//                0 = 0 V, 1 = V0.5, 2 = V1, 3 = V1.5, 4 = V2.
//   * x_t        signed input value, -2..+2 (four non-zero SL states).
//   * weight_t   signed weight, wide enough for an 8-state cell (-14..+14).
// The "state <= level" conduction rule, the SL levels and the value ranges follow the paper's
// figures; the integer codings themselves are this design's choice.
package nasic_pkg;

  localparam int unsigned PLANE_WL      = 128;     // WLs (layers) per string
  localparam int unsigned PLANE_SL      = 1024;    // SLs = blocks per plane
  localparam int unsigned PLANE_BL      = 131072;  // BLs per plane (page size)
  localparam int unsigned SSL_PER_GSL   = 4;       // strings per block on one BL
  localparam int unsigned CELL_BITS_MAX = 3;       // 3-bit flash cell

  localparam int unsigned STATE_W = CELL_BITS_MAX;
  typedef logic [STATE_W-1:0] vth_t;

  typedef struct packed {
    logic             pass;   // 1: Vpass, cell conducts whatever its state
    logic [STATE_W-1:0] level; // read level index L of VR_L when pass = 0
  } wl_bias_t;

  typedef logic [2:0] sl_level_t;

  localparam int X_MAX = 2;
  typedef logic signed [2:0] x_t;
  typedef logic signed [4:0] weight_t;

  // Current of one BL in units of I0/2.
  localparam int unsigned IBL_W = 16;
  typedef logic [IBL_W-1:0] ibl_t;

  // A flash cell conducts under a WL bias when the bias is Vpass or the read level is at or
  // above its threshold state.
  function automatic logic cell_conducts(vth_t state, wl_bias_t bias);
    return bias.pass || (state <= bias.level);
  endfunction

endpackage
