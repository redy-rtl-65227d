// pe: Processing Element, a group of APUs sharing a PE buffer and an
// accumulation unit.
//
// The PE buffer holds one quantized group per APU and is filled one
// activation per cycle; since every APU latches its group at start, the
// buffer can be refilled for the next window while the APUs compute. The
// APUs all start together but finish at different times, because each runs
// for its own group's precision; when the last one is done, their partial
// sums are added into the PE's output buffer. The grouping follows the
// published hierarchy; the buffer organisation and handshake are this
// design's own.
//
// Interface: buf_* writes the PE buffer; prog_* programs a cell of APU
// prog_apu; start (while idle) launches all APUs with prec[a]. Timing: done
// pulses one cycle after the slowest APU's done, with psum valid from then
// until the next start.
module pe
  import redy_pkg::*;
#(
  parameter int APUS      = 3,
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int W_BITS    = 8,
  parameter int N_ADC     = 16,
  parameter int ADC_BITS  = 5,
  parameter int ACC_W     = 32,
  localparam int N_OUT    = COLS / (W_BITS / CELL_BITS),
  localparam int AI_W     = (APUS > 1) ? $clog2(APUS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_en,
  input  logic [AI_W-1:0]               prog_apu,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic [$clog2(COLS)-1:0]       prog_col,
  input  logic [CELL_BITS-1:0]          prog_val,
  input  logic                          buf_we,
  input  logic [AI_W-1:0]               buf_apu,
  input  logic [$clog2(ROWS)-1:0]       buf_row,
  input  logic [MAX_PREC-1:0]           buf_data,
  input  logic                          start,
  input  prec_t [APUS-1:0]              prec,
  output logic                          busy,
  output logic                          done,
  output logic                          adc_sat,
  output logic [N_OUT-1:0][ACC_W-1:0]   psum
);

  logic [ROWS-1:0][MAX_PREC-1:0] pbuf [APUS];
  logic [APUS-1:0]                    a_done, a_sat, seen;
  logic [APUS-1:0][N_OUT-1:0][ACC_W-1:0] a_psum;
  logic                               running, all_done;

  always_ff @(posedge clk)
    if (buf_we) pbuf[buf_apu][buf_row] <= buf_data;

  for (genvar a = 0; a < APUS; a++) begin : g_apu
    apu #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .W_BITS(W_BITS),
          .N_ADC(N_ADC), .ADC_BITS(ADC_BITS), .ACC_W(ACC_W)) u_apu (
      .clk, .rst_n,
      .prog_en(prog_en && prog_apu == AI_W'(a)), .prog_row, .prog_col, .prog_val,
      .in_act(pbuf[a]), .start, .prec(prec[a]),
      .busy(), .done(a_done[a]), .adc_sat(a_sat[a]), .psum(a_psum[a])
    );
  end

  assign all_done = running && ((seen | a_done) == '1);

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
        seen <= seen | a_done;
      end
    end
  end

  // Accumulation and output buffer of the PE.
  accum_unit #(.N_IN(APUS), .N_OUT(N_OUT), .W(ACC_W)) u_acc (
    .clk, .rst_n, .clr(1'b1), .en(all_done), .in_vec(a_psum), .out_vec(psum)
  );

  assign busy    = running;
  assign adc_sat = |a_sat;

endmodule
