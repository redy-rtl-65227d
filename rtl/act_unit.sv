// act_unit: dequantization and activation function of the chip.
//
// Turns an accumulated integer dot product back into a real value and
// applies ReLU: y = max(acc - offset, 0) * 2^-frac, delivered as FP32. The
// offset carries the zero-point and any other integer correction of the
// layer, and the power-of-two scale stands for the 1/s of the
// dequantization formula r = (Q + z)/s; both formats are this design's
// choices. Conversion to FP32 finds the leading one, sets the exponent from
// its position and truncates the mantissa; results below the smallest
// normal number flush to zero. The published chip also names a sigmoid
// option, which is not built here.
//
// Purely combinational. The sign bit of y is always 0, since ReLU output is
// never negative; it is kept so that y is a complete FP32 word.
module act_unit (
  input  logic signed [31:0] acc,
  input  logic signed [31:0] offset,
  input  logic [5:0]         frac,
  output logic [31:0]        y
);

  logic signed [32:0] v;
  logic [31:0]        mag;
  int                 msb;
  int                 ex;
  logic [63:0]        norm;

  always_comb begin
    v    = 33'(acc) - 33'(offset);
    mag  = (v > 0) ? v[31:0] : 32'd0;
    msb  = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) msb = i;
    ex   = 127 + msb - int'(frac);
    norm = {32'd0, mag} << (63 - msb);        // leading one at bit 63
    if (v <= 0 || v[32] || ex <= 0) y = 32'd0;
    else                            y = {1'b0, 8'(ex), norm[62:40]};
  end

endmodule
