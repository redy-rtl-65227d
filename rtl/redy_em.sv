// redy_em: Error Module of a ReDy unit.
//
// Computes the deviation from uniform, DU = (1/n) * sum_i |hist[i] - ED[i]|,
// one bin per cycle, with the three published functional units: a subtractor
// (SUB), an absolute value (ABS) and an accumulator (ACC). The bin count and
// its expected value arrive through the unit's bin multiplexer. The division
// by n is implicit: the accumulator is read as a fixed-point number whose
// point sits at bit n_log2, and is re-aligned to a fixed unsigned Q1.10 output
// (11 bits, the width printed for DU) so the thresholds do not depend on n.
// Values that would exceed the 11-bit range saturate. Per-bin ED values
// (rather than one ED for all bins) follow the hardware description, which
// calls the ED values non-linear.
//
// Interface: clr zeroes the accumulator; each en cycle adds one |bin - ed|.
// Timing: du reflects the accumulator register (one cycle after the last
// en) combinationally re-aligned.
module redy_em
  import redy_pkg::*;
#(
  parameter int CW = CNT_W,
  parameter int DW = DU_W,
  parameter int DF = DU_FRAC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [CW-1:0] bin_val,
  input  logic [CW-1:0] ed_val,
  input  logic [3:0]    n_log2,
  output logic [DW-1:0] du
);

  localparam int AW = CW + 4;          // room for N_BINS <= 16 terms

  logic signed [CW:0] diff;            // SUB
  logic [CW-1:0]      absd;            // ABS
  logic [AW-1:0]      acc;             // ACC
  logic [AW+DF-1:0]   wide;

  assign diff = $signed({1'b0, bin_val}) - $signed({1'b0, ed_val});
  assign absd = diff[CW] ? CW'(-diff) : CW'(diff);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) acc <= '0;
    else if (en)       acc <= acc + AW'(absd);
  end

  // Re-align: value = acc / 2^n_log2, output = value * 2^DF.
  always_comb begin
    if (n_log2 <= 4'(DF)) wide = (AW+DF)'(acc) << (DF - int'(n_log2));
    else                  wide = (AW+DF)'(acc) >> (int'(n_log2) - DF);
    du = (wide > (AW+DF)'({DW{1'b1}})) ? '1 : DW'(wide);
  end

endmodule
