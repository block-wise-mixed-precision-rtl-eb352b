// adc_array: behavioural model of the OU_W 4-bit ADCs of a PIM bank.
// Not synthesizable intent: the real ADCs are mixed-signal circuits.
//
// Each ADC converts one bitline sum into an ADC_BITS code. The model is an
// ideal converter with unit step: code = sum, saturated at 2^ADC_BITS-1. With
// a 9-wordline OU and 1-bit cells and inputs a bitline sum never exceeds 9, so
// a 4-bit ADC is exact; saturation only shows with larger OUs.
// One ADC per active bitline follows the paper's rule that the number of
// bitlines on at once matches the number of ADCs. Combinational.
module adc_array
  import bwq_pkg::*;
#(
  parameter int N     = OU_W,
  parameter int IN_W  = $clog2(XBAR_ROWS + 1),
  parameter int BITS  = ADC_BITS
) (
  input  logic [IN_W-1:0] ain  [N],
  output logic [BITS-1:0] code [N]
);
  localparam int FULL = (1 << BITS) - 1;
  always_comb begin
    for (int n = 0; n < N; n++)
      code[n] = (int'(ain[n]) > FULL) ? BITS'(FULL) : BITS'(ain[n]);
  end
endmodule
