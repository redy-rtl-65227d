// uniform_quant: uniform quantizer of FP32 activations to a group precision.
//
// Implements Q = INT(r*s) - z with round-half-up, clipped to 0..255, and then
// reduces the 8-bit code to p bits by dividing by 2^(8-p) with rounding and
// saturating at 2^p-1. All groups of a layer share one range and scale s, as
// required for their partial sums to be added; because the p-bit code keeps
// the weight of the 8-bit code's top bits, a left shift by 8-p after the
// crossbar brings a group's result back to the layer's 8-bit range. The
// scale is given as s = scale_m * 2^scale_e so that r*s is a 24x16-bit
// integer multiply and a shift. Negative activations, zeros and denormals
// give 0; Inf/NaN saturate. Formats and rounding are this design's choices;
// the formula and the per-group precision follow the paper.
//
// Purely combinational.
module uniform_quant
  import redy_pkg::*;
(
  input  logic [31:0] act,
  input  quant_cfg_t  qcfg,
  input  prec_t       prec,
  output logic [7:0]  q
);

  logic [7:0]         e;
  logic [23:0]        man;
  logic [39:0]        prod;
  logic signed [10:0] sh;       // value = prod * 2^sh
  logic [41:0]        rounded;
  logic [41:0]        r8;
  logic signed [42:0] z_sub;
  logic [7:0]         q8;
  logic [3:0]         d;
  logic [8:0]         qp;
  logic [8:0]         pmax;
  int unsigned        rsh;

  assign e    = act[30:23];
  assign man  = {1'b1, act[22:0]};
  assign prod = man * qcfg.scale_m;
  assign sh   = 11'(signed'({3'b000, e})) - 11'sd150 + 11'(qcfg.scale_e);

  always_comb begin
    rsh     = 0;
    rounded = '0;
    r8      = '0;
    if (act[31] || e == 8'd0 || qcfg.scale_m == 16'd0) begin
      r8 = '0;
    end else if (e == 8'hFF || sh >= 0) begin
      r8 = 42'd1 << 40;                   // at least 2^23: far above 255
    end else begin
      rsh = unsigned'(-int'(sh));
      if (rsh > 41) r8 = '0;
      else begin
        rounded = {2'b00, prod} + (42'd1 << (rsh - 1));
        r8      = rounded >> rsh;
      end
    end
    z_sub = signed'({1'b0, r8}) - 43'(qcfg.zero);
    if (z_sub < 0)        q8 = 8'd0;
    else if (z_sub > 255) q8 = 8'd255;
    else                  q8 = z_sub[7:0];

    d    = (prec >= 4'(MAX_PREC) || prec == 4'd0) ? 4'd0 : 4'(MAX_PREC) - prec;
    pmax = (9'd1 << (4'(MAX_PREC) - d)) - 9'd1;
    qp   = (d == 0) ? {1'b0, q8} : ({1'b0, q8} + (9'd1 << (d - 1))) >> d;
    q    = (qp > pmax) ? pmax[7:0] : qp[7:0];
  end

endmodule
