// redy_ctrl: controller and bin-select counter of a ReDy unit.
//
// Sequences the three steps of the unit. On grp_start the histogram counters
// and the error accumulator are cleared and the Histogram Module is enabled
// (en_hm) while the group streams in. After the activation flagged act_last,
// the small counter (sel) steps the bin multiplexer through the N_BINS bins
// with the Error Module enabled (en_em), one bin per cycle. One further cycle
// (DEC) lets the decoder see the final DU; done pulses and the precision is
// latched by the unit. The enable names follow the published block diagram;
// the state machine itself is this design's.
//
// Timing: done is high exactly N_BINS+1 cycles after the cycle that carried
// act_last. busy is high from grp_start until done.
// clr is grp_start itself: the histogram counters and the error accumulator
// are cleared in the cycle a group is accepted.
module redy_ctrl
  import redy_pkg::*;
#(
  parameter int NB = N_BINS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   grp_start,
  input  logic                   act_valid,
  input  logic                   act_last,
  output logic                   clr,
  output logic                   en_hm,
  output logic                   en_em,
  output logic [$clog2(NB)-1:0]  sel,
  output logic                   done,
  output logic                   busy
);

  typedef enum logic [1:0] {IDLE, HIST, ERR, DEC} state_t;
  state_t state;

  assign clr   = grp_start;
  assign en_hm = (state == HIST);
  assign en_em = (state == ERR);
  assign done  = (state == DEC);
  assign busy  = (state != IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      sel   <= '0;
    end else begin
      unique case (state)
        IDLE: if (grp_start) state <= HIST;
        HIST: if (act_valid && act_last) begin
                state <= ERR;
                sel   <= '0;
              end
        ERR:  begin
                sel <= sel + 1'b1;
                if (sel == $clog2(NB)'(NB-1)) state <= DEC;
              end
        DEC:  state <= IDLE;
      endcase
    end
  end

  // A group can only begin in IDLE.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 grp_start |-> state == IDLE);

endmodule
