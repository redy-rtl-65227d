// tile: a tile of processing elements with its tile buffer and its
// accumulation and output buffer.
//
// Activations arriving for the tile are steered to the PE buffer of the
// addressed PE (the tile buffer is reduced here to this distribution; the
// published design gives it no size). All PEs start together; when the last
// one reports done, the tile adds their partial-sum vectors into its output
// buffer. The hierarchy follows the published architecture; the interface
// is this design's own.
//
// Interface: buf_*/prog_* address a PE and an APU inside it; start (while
// idle) launches all PEs with their precisions. Timing: done pulses one cycle
// after the slowest PE's done, psum valid from then on.
module tile
  import redy_pkg::*;
#(
  parameter int PES       = 2,
  parameter int APUS      = 3,
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int W_BITS    = 8,
  parameter int N_ADC     = 16,
  parameter int ADC_BITS  = 5,
  parameter int ACC_W     = 32,
  localparam int N_OUT    = COLS / (W_BITS / CELL_BITS),
  localparam int PI_W     = (PES > 1) ? $clog2(PES) : 1,
  localparam int AI_W     = (APUS > 1) ? $clog2(APUS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              prog_en,
  input  logic [PI_W-1:0]                   prog_pe,
  input  logic [AI_W-1:0]                   prog_apu,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [$clog2(COLS)-1:0]           prog_col,
  input  logic [CELL_BITS-1:0]              prog_val,
  input  logic                              buf_we,
  input  logic [PI_W-1:0]                   buf_pe,
  input  logic [AI_W-1:0]                   buf_apu,
  input  logic [$clog2(ROWS)-1:0]           buf_row,
  input  logic [MAX_PREC-1:0]               buf_data,
  input  logic                              start,
  input  prec_t [PES-1:0][APUS-1:0]         prec,
  output logic                              busy,
  output logic                              done,
  output logic                              adc_sat,
  output logic [N_OUT-1:0][ACC_W-1:0]       psum
);

  logic [PES-1:0]                         p_done, p_sat, seen;
  logic [PES-1:0][N_OUT-1:0][ACC_W-1:0]   p_psum;
  logic                                   running, all_done;

  for (genvar i = 0; i < PES; i++) begin : g_pe
    pe #(.APUS(APUS), .ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .W_BITS(W_BITS),
         .N_ADC(N_ADC), .ADC_BITS(ADC_BITS), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n,
      .prog_en(prog_en && prog_pe == PI_W'(i)), .prog_apu, .prog_row, .prog_col, .prog_val,
      .buf_we(buf_we && buf_pe == PI_W'(i)), .buf_apu, .buf_row, .buf_data,
      .start, .prec(prec[i]),
      .busy(), .done(p_done[i]), .adc_sat(p_sat[i]), .psum(p_psum[i])
    );
  end

  assign all_done = running && ((seen | p_done) == '1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      seen    <= '0;
      done    <= 1'b0;
    end else begin
      done <= all_done;
      if (start) begin
        running <= 1'b1;
        seen    <= '0;
      end else if (all_done) begin
        running <= 1'b0;
        seen    <= '0;
      end else begin
        seen <= seen | p_done;
      end
    end
  end

  accum_unit #(.N_IN(PES), .N_OUT(N_OUT), .W(ACC_W)) u_acc (
    .clk, .rst_n, .clr(1'b1), .en(all_done), .in_vec(p_psum), .out_vec(psum)
  );

  assign busy    = running;
  assign adc_sat = |p_sat;

endmodule
