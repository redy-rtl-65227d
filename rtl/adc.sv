// adc: behavioural model of a sample-and-hold plus ADC on a crossbar bitline.
//
// This is a behavioural model of an analog part. It samples the bitline value
// (given as an integer count of conductance units) and converts it with an
// ideal transfer function of one count per LSB, clipping at full scale
// 2^ADC_BITS-1; sat flags a clipped sample. The 5-bit resolution follows the
// published configuration; the transfer function is this design's
// assumption. Combinational: the conversion completes within the cycle.
module adc #(
  parameter int ADC_BITS = 5,
  parameter int IN_W     = 9
) (
  input  logic [IN_W-1:0]     sum,
  output logic [ADC_BITS-1:0] code,
  output logic                sat
);

  localparam logic [IN_W-1:0] FULL = IN_W'((1 << ADC_BITS) - 1);

  assign sat  = (sum > FULL);
  assign code = sat ? ADC_BITS'(FULL) : ADC_BITS'(sum);

endmodule
