// accum_unit: accumulation unit with output buffer.
//
// Adds N_IN partial-sum vectors element-wise and stores the result in a
// register that serves as the output buffer. With clr the register is loaded
// with the new sum, otherwise the new sum is added to what it holds, so a
// result can also be built over several steps. The same unit is used in the
// processing element, the tile and the chip, as the published hierarchy
// places an accumulation stage at each of these levels; its structure is this
// design's choice.
//
// Timing: out_vec is updated at the clock edge of a cycle with en high.
module accum_unit #(
  parameter int N_IN  = 2,
  parameter int N_OUT = 32,
  parameter int W     = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic                              en,
  input  logic [N_IN-1:0][N_OUT-1:0][W-1:0] in_vec,
  output logic [N_OUT-1:0][W-1:0]           out_vec
);

  logic [N_OUT-1:0][W-1:0] sum;

  always_comb begin
    for (int k = 0; k < N_OUT; k++) begin
      sum[k] = clr ? '0 : out_vec[k];
      for (int i = 0; i < N_IN; i++) sum[k] = sum[k] + in_vec[i][k];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  out_vec <= '0;
    else if (en) out_vec <= sum;
  end

endmodule
