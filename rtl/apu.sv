// apu: Analog Processing Unit, one ReRAM crossbar with its periphery.
//
// Holds the weights of one kernel position (r,s) for up to ROWS input
// channels and COLS/4 output channels: an 8-bit weight is split over four
// adjacent 2-bit cells, column 4k+j holding bits 2j+1:2j of weight k. On
// start the APU latches the quantized group (WL switch matrix drive) and its
// precision p, then streams the inputs one bit per step, least significant
// bit first, for p steps instead of a fixed 8: this is where a lower ReDy
// precision saves crossbar activations and conversions. In every step the
// analog multiplexer connects the 128 bitlines to the 16 shared ADCs in
// COLS/N_ADC phases (ADC a converts column 16m+a in phase m). Shift-and-add
// units combine the four slices of a weight (shift 2j) and the input bits
// (shift b) into per-output registers. At the end the result is shifted left
// by 8-p so that groups quantized to different precisions add in the same
// range. Crossbar size, cell precision, ADC count and resolution follow the
// published configuration; bit order, slice order and mux schedule are this
// design's choices. Weights are unsigned codes.
//
// Interface: program cells with prog_*; pulse start while idle with prec in
// 1..8 and in_act valid. Timing: done pulses p*COLS/N_ADC + 2 cycles after
// start, with psum valid from then until the next start. adc_sat pulses in
// any cycle in which an ADC clipped.
module apu
  import redy_pkg::*;
#(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int W_BITS    = 8,
  parameter int N_ADC     = 16,
  parameter int ADC_BITS  = 5,
  parameter int ACC_W     = 32,
  localparam int SLICES   = W_BITS / CELL_BITS,
  localparam int N_OUT    = COLS / SLICES,
  localparam int N_PH     = COLS / N_ADC,
  localparam int KPP      = N_ADC / SLICES,         // outputs finished per phase
  localparam int SUM_W    = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1),
  localparam int PH_W     = (N_PH > 1) ? $clog2(N_PH) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            prog_en,
  input  logic [$clog2(ROWS)-1:0]         prog_row,
  input  logic [$clog2(COLS)-1:0]         prog_col,
  input  logic [CELL_BITS-1:0]            prog_val,
  input  logic [ROWS-1:0][MAX_PREC-1:0]   in_act,
  input  logic                            start,
  input  prec_t                           prec,
  output logic                            busy,
  output logic                            done,
  output logic                            adc_sat,
  output logic [N_OUT-1:0][ACC_W-1:0]     psum
);

  typedef enum logic [1:0] {IDLE, RUN, FIN} state_t;
  state_t state;

  logic [ROWS-1:0][MAX_PREC-1:0] in_reg;
  prec_t                         p_reg;
  logic [2:0]                    bitn;
  logic [PH_W-1:0]               ph;
  logic [ROWS-1:0]               wl;
  logic [COLS-1:0][SUM_W-1:0]    bl_sum;
  logic [N_ADC-1:0][ADC_BITS-1:0] code;
  logic [N_ADC-1:0]              sat;
  logic [KPP-1:0][ACC_W-1:0]     add;
  logic [N_OUT-1:0][ACC_W-1:0]   acc;
  logic                          last_step;

  // WL switch matrix: bit bitn of every latched input.
  always_comb
    for (int r = 0; r < ROWS; r++) wl[r] = in_reg[r][bitn];

  reram_xbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS)) u_xbar (
    .clk, .prog_en, .prog_row, .prog_col, .prog_val, .wl, .bl_sum
  );

  // Analog multiplexer and the shared ADC pool.
  for (genvar a = 0; a < N_ADC; a++) begin : g_adc
    logic [SUM_W-1:0] bl;
    assign bl = bl_sum[int'(ph) * N_ADC + a];
    adc #(.ADC_BITS(ADC_BITS), .IN_W(SUM_W)) u_adc (.sum(bl), .code(code[a]), .sat(sat[a]));
  end

  assign adc_sat = (state == RUN) && (|sat);

  // Shift-and-add across the weight slices of each output finished this phase.
  always_comb begin
    for (int kk = 0; kk < KPP; kk++) begin
      add[kk] = '0;
      for (int j = 0; j < SLICES; j++)
        add[kk] = add[kk] + (ACC_W'(code[kk*SLICES + j]) << (CELL_BITS * j));
    end
  end

  assign last_step = (ph == PH_W'(N_PH - 1)) && (bitn == 3'(p_reg - 1'b1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      bitn  <= '0;
      ph    <= '0;
      p_reg <= prec_t'(MAX_PREC);
      acc   <= '0;
      psum  <= '0;
      done  <= 1'b0;
    end else begin
      done <= (state == FIN);
      unique case (state)
        IDLE: if (start) begin
                state  <= RUN;
                in_reg <= in_act;
                p_reg  <= (prec == '0 || prec > prec_t'(MAX_PREC)) ? prec_t'(MAX_PREC) : prec;
                bitn   <= '0;
                ph     <= '0;
                acc    <= '0;
              end
        RUN:  begin
                for (int k = 0; k < N_OUT; k++)
                  if (k / KPP == int'(ph))
                    acc[k] <= acc[k] + (add[k % KPP] << bitn);
                if (ph == PH_W'(N_PH - 1)) begin
                  ph   <= '0;
                  bitn <= bitn + 1'b1;
                end else begin
                  ph <= ph + 1'b1;
                end
                if (last_step) state <= FIN;
              end
        FIN:  begin
                for (int k = 0; k < N_OUT; k++)
                  psum[k] <= acc[k] << (MAX_PREC - int'(p_reg));
                state <= IDLE;
              end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == IDLE);

endmodule
