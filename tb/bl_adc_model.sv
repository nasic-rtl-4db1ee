// bl_adc_model -- behavioural model of the per-BL ADCs (testbench only; not synthesizable
// intent). Each BL current, in units of I0/2, is converted to floor(I / LSB) and clipped at
// 2^BITS - 1, the ideal transfer of a BITS-bit converter whose full scale is LSB * 2^BITS.
// Combinational: the code is ready in the cycle the design samples it.
module bl_adc_model
  import nasic_pkg::*;
#(
  parameter int unsigned N_BL = 8,
  parameter int unsigned BITS = 8,
  parameter int unsigned LSB  = 8
) (
  input  ibl_t            current[N_BL],
  output logic [BITS-1:0] code[N_BL]
);
  always_comb begin
    for (int b = 0; b < N_BL; b++) begin
      int unsigned q;
      q = int'(current[b]) / LSB;
      code[b] = (q > (2 ** BITS - 1)) ? BITS'(2 ** BITS - 1) : BITS'(q);
    end
  end
endmodule
