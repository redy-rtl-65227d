// reram_xbar: behavioural model of a ReRAM crossbar array (1T1R cells).
//
// This is a behavioural model of an analog part, not synthesizable logic
// meant for a digital flow. Each cell stores a 2-bit conductance level. A
// wordline driven high (a 1-bit DAC output: only two voltage levels are
// needed because inputs are streamed one bit at a time) makes every cell on
// that row add its conductance to the current of its bitline, so each
// bitline carries the dot product of the wordline bits with its column
// (Kirchhoff's current law). The model reports that current as the exact
// integer sum; noise, IR drop and device variation are not modelled. The
// 128x128 size and 2-bit cells follow the published configuration.
//
// Interface: prog_en writes prog_val into cell (prog_row, prog_col) at the
// clock edge (stands in for the write circuitry). bl_sum follows wl
// combinationally (one analog settling step per cycle).
module reram_xbar #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  localparam int SUM_W    = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                              clk,
  input  logic                              prog_en,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [$clog2(COLS)-1:0]           prog_col,
  input  logic [CELL_BITS-1:0]              prog_val,
  input  logic [ROWS-1:0]                   wl,
  output logic [COLS-1:0][SUM_W-1:0]        bl_sum
);

  logic [CELL_BITS-1:0] g [ROWS][COLS];

  always_ff @(posedge clk)
    if (prog_en) g[prog_row][prog_col] <= prog_val;

  // One summing network per bitline.
  for (genvar c = 0; c < COLS; c++) begin : g_bl
    always_comb begin
      bl_sum[c] = '0;
      for (int r = 0; r < ROWS; r++)
        if (wl[r]) bl_sum[c] = bl_sum[c] + SUM_W'(g[r][c]);
    end
  end

endmodule
