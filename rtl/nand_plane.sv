// nand_plane -- behavioural model of one 3D NAND plane used as a CAM-selected CIM array.
// (Behavioural model of an analog memory array: currents are integers and the storage is
//  allocated on demand; it is not meant for synthesis.)
//
// Geometry: N_BLOCKS blocks, each with its own source line (SL) and one GSL; N_SSL strings per
// block on every bit line (BL); each string is N_WL flash cells in series. Cell (block, ssl,
// wl, bl) holds a threshold state. The upper WLs of a string act as CAM cells (expert entry),
// the lower ones as CIM cells (weights); the model does not distinguish them, the biases do.
//
// Current model (the paper's current-limited string): a string conducts when its SSL and the
// GSL are open and every one of its cells conducts under its WL bias (Vpass, or read level L
// with state <= L). A conducting string carries the current set by its SL voltage,
// sl_level * I0/2; a string that does not conduct carries nothing (IOFF taken as 0). Each BL
// sums all strings on it. A mismatching CAM cell therefore cuts off the whole string, which
// gates the CIM product y = M * (x * W) as the paper describes; WLs under Vpass play no part.
// Device variation, IOFF and RC settling are not modelled.
//
// Programming writes, in one clock, the pages of all N_SSL strings of one block on one WL
// (N_SSL x N_BL states) when pgm_en is high; program/erase pulses are not modelled. A WL of a
// block that was never programmed reads as erased (state 0, lowest VTH). Only programmed
// (block, WL) rows take memory, so the model runs at the full 128k-BL page width as long as
// only a few layers are written.
// Sensing: when `sense` is high the BL currents under the present biases are latched into
// bl_current at the clock edge, in units of I0/2; they hold until the next sense.
module nand_plane
  import nasic_pkg::*;
#(
  parameter int unsigned N_BLOCKS = PLANE_SL,
  parameter int unsigned N_SSL    = SSL_PER_GSL,
  parameter int unsigned N_WL     = PLANE_WL,
  parameter int unsigned N_BL     = PLANE_BL,
  localparam int unsigned BLK_W   = $clog2(N_BLOCKS),
  localparam int unsigned WL_W    = $clog2(N_WL)
) (
  input  logic             clk,
  // programming
  input  logic             pgm_en,
  input  logic [BLK_W-1:0] pgm_block,
  input  logic [WL_W-1:0]  pgm_wl,
  input  vth_t             pgm_page[N_SSL][N_BL],
  // array biases
  input  wl_bias_t         wl_bias[N_WL],
  input  logic [N_SSL-1:0] ssl_on,
  input  logic             gsl_on,
  input  sl_level_t        sl_level[N_BLOCKS],
  // sensing
  input  logic             sense,
  output ibl_t             bl_current[N_BL]
);

  // row storage: slot[block][wl] is -1 while the row is erased, else its index in `rows`
  typedef vth_t row_t[N_SSL][N_BL];
  row_t rows[$];
  int   slot[N_BLOCKS][N_WL];

  initial begin
    for (int k = 0; k < N_BLOCKS; k++)
      for (int w = 0; w < N_WL; w++) slot[k][w] = -1;
  end

  always_ff @(posedge clk) begin
    if (pgm_en) begin
      if (slot[pgm_block][pgm_wl] < 0) begin
        slot[pgm_block][pgm_wl] <= rows.size();
        rows.push_back(pgm_page);
      end else begin
        rows[slot[pgm_block][pgm_wl]] = pgm_page;
      end
    end
  end

  int unsigned n_rd;
  int unsigned rd_wl[N_WL];
  ibl_t        sum[N_BL];
  logic        on[N_BL];

  always_ff @(posedge clk) begin
    if (sense) begin
      // only WLs at a read level can cut a string off
      n_rd = 0;
      for (int w = 0; w < N_WL; w++)
        if (!wl_bias[w].pass) begin
          rd_wl[n_rd] = w;
          n_rd++;
        end
      for (int b = 0; b < N_BL; b++) sum[b] = '0;
      if (gsl_on) begin
        for (int k = 0; k < N_BLOCKS; k++) begin
          if (sl_level[k] != '0) begin
            for (int s = 0; s < N_SSL; s++) begin
              if (ssl_on[s]) begin
                for (int b = 0; b < N_BL; b++) on[b] = 1'b1;
                for (int r = 0; r < N_WL; r++) begin
                  if (r < n_rd) begin
                    int sl;
                    sl = slot[k][rd_wl[r]];
                    // an erased row (state 0) conducts at every read level
                    if (sl >= 0)
                      for (int b = 0; b < N_BL; b++)
                        on[b] &= cell_conducts(rows[sl][s][b], wl_bias[rd_wl[r]]);
                  end
                end
                for (int b = 0; b < N_BL; b++)
                  if (on[b]) sum[b] += ibl_t'(sl_level[k]);
              end
            end
          end
        end
      end
      for (int b = 0; b < N_BL; b++) bl_current[b] <= sum[b];
    end
  end

endmodule
