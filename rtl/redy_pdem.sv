// redy_pdem: Precision Decoder/Encoder Module of a ReDy unit.
//
// Five comparators test DU against the thresholds p1..p5 and a priority
// encoder turns the result into a precision: DU > p1 gives 8 bits,
// p2 < DU <= p1 gives 7, p3 < DU <= p2 gives 6, p4 < DU <= p3 gives 5,
// p5 < DU <= p4 gives 4, and anything lower 3 bits, as in the published
// algorithm. Groups too small to form a histogram (group size below the
// number of bins) bypass to 8 bits. Purely combinational.
module redy_pdem
  import redy_pkg::*;
(
  input  logic [DU_W-1:0]             du,
  input  logic [N_COEF-1:0][DU_W-1:0] p,       // [0]=p1 .. [4]=p5
  input  logic                        bypass,
  output prec_t                       prec
);

  logic [N_COEF-1:0] gt;

  always_comb begin
    for (int i = 0; i < N_COEF; i++) gt[i] = (du > p[i]);
    prec = prec_t'(MIN_PREC);
    for (int i = N_COEF-1; i >= 0; i--)
      if (gt[i]) prec = prec_t'(MAX_PREC - i);
    if (bypass) prec = prec_t'(MAX_PREC);
  end

endmodule
