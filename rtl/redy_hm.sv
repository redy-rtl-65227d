// redy_hm: Histogram Module of a ReDy unit.
//
// Takes the 8-bit exponent field of each FP32 activation (the sign and the
// mantissa are not used, as in the published unit) and compares it with
// N_BINS-1 boundaries r_0..r_(N-2) through "greater or equal" comparators
// GE_0..GE_(N-2). The comparator outputs form a thermometer code; the bin is
// the position of its edge: bin 0 when e < r_0, bin i when r_(i-1) <= e < r_i,
// bin N-1 when e >= r_(N-2). One counter per bin is then incremented.
// Comparators, counters and the exponent input follow the paper; the
// ascending order of the boundaries, saturating counters and the subsampling
// rule (bin activations 0, k, 2k, ... of a group, k = sample_stride) are this
// design's choices.
//
// Interface: clr clears the counters and the sampling phase (start of a
// group); while en is high every act_valid cycle presents the exponent
// of one activation.
// Timing: one activation per cycle; hist reflects a sample one cycle after it
// was presented.
module redy_hm
  import redy_pkg::*;
#(
  parameter int NB = N_BINS,
  parameter int EW = EXP_W,
  parameter int CW = CNT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   en,
  input  logic                   act_valid,
  input  logic [EW-1:0]          exp_in,  // exponent field of the FP32 activation
  input  logic [NB-2:0][EW-1:0]  bound,
  input  logic [7:0]             sample_stride,
  output logic [NB-1:0][CW-1:0]  hist
);

  logic [NB-2:0] ge;       // GE_i = (e >= r_i)
  logic [NB-1:0] hit;      // one-hot bin select
  logic [7:0]    phase;
  logic          take;

  always_comb begin
    for (int i = 0; i < NB-1; i++) ge[i] = (exp_in >= bound[i]);
    hit[0] = !ge[0];
    for (int i = 1; i < NB-1; i++) hit[i] = ge[i-1] && !ge[i];
    hit[NB-1] = ge[NB-2];
  end

  assign take = en && act_valid && (phase == 8'd0);

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      phase <= '0;
    end else if (en && act_valid) begin
      if (sample_stride <= 8'd1 || phase == sample_stride - 8'd1) phase <= '0;
      else phase <= phase + 8'd1;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NB; i++) begin
      if (!rst_n || clr)                     hist[i] <= '0;
      else if (take && hit[i] && hist[i] != '1) hist[i] <= hist[i] + 1'b1;
    end
  end

endmodule
