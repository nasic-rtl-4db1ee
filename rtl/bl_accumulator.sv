// bl_accumulator -- per-BL sum of the sensed read pulses and removal of the zero offset.
//
// A multibit computation cycle senses the BL current once per read pulse; the result of the
// cycle is the sum of these currents. Each pulse is digitised to an ADC code whose LSB is
// ADC_LSB units of I0/2; this block adds code*ADC_LSB into one accumulator per BL. Because the
// dual-block coding makes every selected (CAM-matched) pair carry 2H + x*W units of I0, even a
// product of zero draws current; `offset` (in I0/2 units, 4H times the number of matched pairs
// on a BL) is removed and the remainder halved, so y = sum(x*W) over the matched pairs, in
// units of one product step. The digital summation and the offset removal are this design's
// reading of the paper, which states only that the result is the sum of the pulse currents and
// shows the zero level at 4*I0 (2-state cell) and 8*I0 (3-state cell).
//
// Interface: `clear` zeroes all accumulators, `en` adds adc_code (both sampled at the clock edge;
// clear wins). y is combinational from the accumulators. Arithmetic shift: with a coarse ADC the
// result is floored to a whole step.
module bl_accumulator
  import nasic_pkg::*;
#(
  parameter int unsigned N_BL     = PLANE_BL,
  parameter int unsigned ADC_BITS = 8,
  parameter int unsigned ADC_LSB  = 8,
  parameter int unsigned ACC_W    = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic [ADC_BITS-1:0]     adc_code[N_BL],
  input  logic [ACC_W-1:0]        offset,
  output logic signed [ACC_W-1:0] y[N_BL]
);

  logic [ACC_W-1:0] acc[N_BL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BL; b++) acc[b] <= '0;
    end else if (clear) begin
      for (int b = 0; b < N_BL; b++) acc[b] <= '0;
    end else if (en) begin
      for (int b = 0; b < N_BL; b++)
        acc[b] <= acc[b] + ACC_W'(adc_code[b]) * ACC_W'(ADC_LSB);
    end
  end

  always_comb begin
    for (int b = 0; b < N_BL; b++) y[b] = $signed(acc[b] - offset) >>> 1;
  end

endmodule
