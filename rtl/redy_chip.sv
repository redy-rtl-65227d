// redy_chip: top level of the ReDy accelerator for convolution layers.
//
// The chip computes a convolution layer window by window. A window is split
// into groups, one per kernel position (r,s), each group holding the
// activations of all input channels at that position; group g is mapped to
// APU g, whose crossbar stores the weights of that kernel position for all
// output channels. Each window goes through the three published stages:
//
//   Pre-processing  The group's FP32 activations are read from the global
//                   buffer and streamed through a ReDy unit (groups are handed
//                   round-robin to N_REDY units), which returns the group's
//                   precision (3..8 bits). If the next unit in turn is still
//                   busy the stream stalls. Once all precisions are known the
//                   activations are read a second time, quantized to their
//                   group's precision and written into the PE buffers.
//   Execution       All APUs run bit-serially, each for its own group's
//                   precision, and their results are added in the PEs and
//                   tiles.
//   Post-processing The tiles' results are added in the chip accumulation
//                   unit, dequantized, passed through ReLU and max pooling,
//                   and written back to the global buffer.
//
// The stages of one window run one after the other; the published design
// overlaps them across layers in a deep pipeline, which is not built here.
// The order of groups, the buffer layouts, the configuration ports and the
// handshakes are this design's own.
//
// Global buffer layout: input activation (window w, group g, channel c) at
// in_base + (w*n_groups + g)*C + c with C = rcfg.depth; pooled output vector
// o (N_OUT words) at out_base + o*N_OUT.
//
// Interface: while idle the host owns the global buffer port (host_*) and
// programs crossbar cells (prog_*, APU index = group index). start launches
// n_windows windows with the configuration held on rcfg/qcfg/pcfg; done
// pulses at the end. grp_* report each precision decision, stall marks a
// cycle lost waiting for a ReDy unit, adc_sat a cycle with a clipped ADC.
module redy_chip
  import redy_pkg::*;
#(
  parameter int N_REDY       = 3,
  parameter int N_TILES      = 2,
  parameter int PES_PER_TILE = 2,
  parameter int APUS_PER_PE  = 3,
  parameter int ROWS         = 128,
  parameter int COLS         = 128,
  parameter int CELL_BITS    = 2,
  parameter int W_BITS       = 8,
  parameter int N_ADC        = 16,
  parameter int ADC_BITS     = 5,
  parameter int ACC_W        = 32,
  parameter int GB_DEPTH     = 4096,
  localparam int N_GRP       = N_TILES * PES_PER_TILE * APUS_PER_PE,
  localparam int N_OUT       = COLS / (W_BITS / CELL_BITS),
  localparam int GW          = $clog2(N_GRP + 1),
  localparam int AW          = $clog2(GB_DEPTH),
  localparam int RW          = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // global buffer host port (used while idle)
  input  logic                      host_we,
  input  logic [AW-1:0]             host_addr,
  input  logic [31:0]               host_wdata,
  output logic [31:0]               host_rdata,
  // crossbar programming (used while idle)
  input  logic                      prog_en,
  input  logic [GW-1:0]             prog_grp,
  input  logic [RW-1:0]             prog_row,
  input  logic [$clog2(COLS)-1:0]   prog_col,
  input  logic [CELL_BITS-1:0]      prog_val,
  // layer configuration
  input  redy_cfg_t                 rcfg,
  input  quant_cfg_t                qcfg,
  input  post_cfg_t                 pcfg,
  input  logic [GW-1:0]             n_groups,
  input  logic [15:0]               n_windows,
  input  logic [AW-1:0]             in_base,
  input  logic [AW-1:0]             out_base,
  // control and status
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic                      grp_valid,
  output logic [GW-1:0]             grp_id,
  output prec_t                     grp_prec,
  output logic                      stall,
  output logic                      adc_sat
);

  localparam int UW = (N_REDY > 1) ? $clog2(N_REDY) : 1;
  localparam int TI = PES_PER_TILE * APUS_PER_PE;
  localparam int PI_W = (PES_PER_TILE > 1) ? $clog2(PES_PER_TILE) : 1;
  localparam int AI_W = (APUS_PER_PE > 1) ? $clog2(APUS_PER_PE) : 1;

  typedef enum logic [3:0] {S_IDLE, S_PRE, S_PRE_WAIT, S_QNT, S_QNT_END, S_EXE, S_EXE_WAIT,
                            S_ACC, S_POST, S_POOL, S_WB, S_NEXT, S_DONE} state_t;
  state_t state;

  // ---------------------------------------------------------------- buffer
  logic          gb_we;
  logic [AW-1:0] gb_addr;
  logic [31:0]   gb_wdata, gb_rdata;
  logic          ctl_we;
  logic [AW-1:0] ctl_addr;
  logic [31:0]   ctl_wdata;

  assign gb_we    = (state == S_IDLE) ? host_we    : ctl_we;
  assign gb_addr  = (state == S_IDLE) ? host_addr  : ctl_addr;
  assign gb_wdata = (state == S_IDLE) ? host_wdata : ctl_wdata;
  assign host_rdata = gb_rdata;

  global_buffer #(.DEPTH(GB_DEPTH), .WIDTH(32)) u_gb (
    .clk, .we(gb_we), .addr(gb_addr), .wdata(gb_wdata), .rdata(gb_rdata)
  );

  // ---------------------------------------------------------- counters
  logic [15:0]          win;        // current window
  logic [15:0]          opix;       // pooled outputs written
  logic [GW-1:0]        g;          // group being read
  logic [RW:0]          c;          // channel / row being read
  logic [UW-1:0]        u_cur;      // ReDy unit for group g
  logic [DEPTH_W-1:0]   chans;
  logic [AW-1:0]        win_base;   // in_base + win*n_groups*C
  logic [AW-1:0]        grp_base;   // address of channel 0 of group g
  logic [$clog2(N_OUT+1)-1:0] k_wb;
  logic [GW:0]          pending;    // groups sent to units, precision not back

  assign chans = rcfg.depth;

  // ------------------------------------------------------------- ReDy units
  logic [N_REDY-1:0]          u_start, u_busy, u_done, u_done_q;
  prec_t [N_REDY-1:0]         u_prec;
  logic [N_REDY-1:0][GW-1:0]  u_grp;
  logic                       rd_valid, rd_last;   // GB read issued last cycle
  logic [UW-1:0]              rd_unit;
  logic                       rq_valid, rq_zero;   // quantization write pending
  logic [GW-1:0]              rq_grp;
  logic [RW-1:0]              rq_row;

  for (genvar u = 0; u < N_REDY; u++) begin : g_redy
    redy_unit u_redy (
      .clk, .rst_n, .cfg(rcfg), .grp_start(u_start[u]),
      .act_valid(rd_valid && rd_unit == UW'(u)), .act(gb_rdata), .act_last(rd_last),
      .busy(u_busy[u]), .done(u_done[u]), .prec(u_prec[u])
    );
  end

  // Precision register file, one entry per group (sent along with the data).
  prec_t [N_GRP-1:0] prec_reg;
  logic              grp_issue;   // first channel of a group is read this cycle

  assign grp_issue = (state == S_PRE) && (c == '0) && (g < n_groups) && !u_busy[u_cur];
  assign stall     = (state == S_PRE) && (c == '0) && (g < n_groups) && !grp_issue;

  always_comb begin
    u_start = '0;
    if (grp_issue) u_start[u_cur] = 1'b1;
  end

  // Precision results come back one cycle after each unit's done.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_done_q  <= '0;
      prec_reg  <= '0;
      u_grp     <= '0;
      grp_valid <= 1'b0;
      grp_id    <= '0;
      grp_prec  <= prec_t'(MAX_PREC);
    end else begin
      u_done_q  <= u_done;
      grp_valid <= 1'b0;
      for (int u = 0; u < N_REDY; u++) begin
        if (u_start[u]) u_grp[u] <= g;
        if (u_done_q[u]) begin
          prec_reg[u_grp[u]] <= u_prec[u];
          grp_valid <= 1'b1;
          grp_id    <= u_grp[u];
          grp_prec  <= u_prec[u];
        end
      end
      if (state == S_QNT && g == '0 && c == '0)
        for (int i = 0; i < N_GRP; i++)
          if (GW'(i) >= n_groups) prec_reg[i] <= prec_t'(MIN_PREC);
    end
  end

  // ------------------------------------------------------------ quantizer
  logic [7:0] q;
  prec_t      q_prec;

  assign q_prec = prec_reg[rq_grp];

  uniform_quant u_quant (.act(gb_rdata), .qcfg, .prec(q_prec), .q);

  // ---------------------------------------------------------- tiles
  logic [N_TILES-1:0]                       t_done, t_sat, t_seen;
  logic [N_TILES-1:0][N_OUT-1:0][ACC_W-1:0] t_psum;
  logic [N_OUT-1:0][ACC_W-1:0]              chip_sum;
  logic                                     exe_start, t_all;
  logic [GW-1:0]                            pg, bg;

  assign pg = prog_grp;
  assign bg = rq_grp;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(.PES(PES_PER_TILE), .APUS(APUS_PER_PE), .ROWS(ROWS), .COLS(COLS),
           .CELL_BITS(CELL_BITS), .W_BITS(W_BITS), .N_ADC(N_ADC), .ADC_BITS(ADC_BITS),
           .ACC_W(ACC_W)) u_tile (
      .clk, .rst_n,
      .prog_en(prog_en && (state == S_IDLE) && int'(pg) / TI == t),
      .prog_pe(PI_W'((int'(pg) % TI) / APUS_PER_PE)),
      .prog_apu(AI_W'(int'(pg) % APUS_PER_PE)),
      .prog_row, .prog_col, .prog_val,
      .buf_we(rq_valid && int'(bg) / TI == t),
      .buf_pe(PI_W'((int'(bg) % TI) / APUS_PER_PE)),
      .buf_apu(AI_W'(int'(bg) % APUS_PER_PE)),
      .buf_row(rq_row), .buf_data(rq_zero ? 8'd0 : q),
      .start(exe_start), .prec(prec_reg[t*TI +: TI]),
      .busy(), .done(t_done[t]), .adc_sat(t_sat[t]), .psum(t_psum[t])
    );
  end

  assign exe_start = (state == S_EXE);
  assign t_all     = (state == S_EXE_WAIT) && ((t_seen | t_done) == '1);
  assign adc_sat   = |t_sat;

  // Chip-level accumulation units.
  accum_unit #(.N_IN(N_TILES), .N_OUT(N_OUT), .W(ACC_W)) u_chip_acc (
    .clk, .rst_n, .clr(1'b1), .en(t_all), .in_vec(t_psum), .out_vec(chip_sum)
  );

  // ----------------------------------------------- activation and pooling
  logic [N_OUT-1:0][31:0] act_vec, pool_vec;
  logic                   pool_in, pool_out;

  for (genvar k = 0; k < N_OUT; k++) begin : g_act
    act_unit u_act (.acc(chip_sum[k]), .offset(pcfg.offset), .frac(pcfg.frac), .y(act_vec[k]));
  end

  assign pool_in = (state == S_POST);

  pool_unit #(.N_OUT(N_OUT)) u_pool (
    .clk, .rst_n, .clr(state == S_IDLE), .in_valid(pool_in), .in_vec(act_vec),
    .pool_n(pcfg.pool_n), .out_valid(pool_out), .out_vec(pool_vec)
  );

  // ------------------------------------------------------------ controller
  assign grp_base = win_base + AW'(int'(g) * int'(chans));

  always_comb begin
    ctl_we    = 1'b0;
    ctl_addr  = grp_base + AW'(c);
    ctl_wdata = '0;
    if (state == S_WB) begin
      ctl_we    = 1'b1;
      ctl_addr  = out_base + AW'(int'(opix) * N_OUT + int'(k_wb));
      ctl_wdata = pool_vec[k_wb];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      win      <= '0;
      opix     <= '0;
      g        <= '0;
      c        <= '0;
      u_cur    <= '0;
      win_base <= '0;
      k_wb     <= '0;
      pending  <= '0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
      rd_unit  <= '0;
      rq_valid <= 1'b0;
      rq_zero  <= 1'b0;
      rq_grp   <= '0;
      rq_row   <= '0;
      t_seen   <= '0;
      done     <= 1'b0;
    end else begin
      done     <= 1'b0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
      rq_valid <= 1'b0;
      pending  <= pending + (GW+1)'(grp_issue) - (GW+1)'($countones(u_done_q));
      unique case (state)
        S_IDLE: if (start) begin
                  state    <= S_PRE;
                  win      <= '0;
                  opix     <= '0;
                  g        <= '0;
                  c        <= '0;
                  u_cur    <= '0;
                  win_base <= in_base;
                end
        // Stream every group of the window through a ReDy unit.
        S_PRE: begin
                 if (g >= n_groups) begin
                   state <= S_PRE_WAIT;
                 end else if (c != '0 || grp_issue) begin
                   rd_valid <= 1'b1;
                   rd_unit  <= u_cur;
                   rd_last  <= (DEPTH_W'(c) == chans - 1'b1);
                   if (DEPTH_W'(c) == chans - 1'b1) begin
                     c     <= '0;
                     g     <= g + 1'b1;
                     u_cur <= (u_cur == UW'(N_REDY - 1)) ? '0 : u_cur + 1'b1;
                   end else begin
                     c <= c + 1'b1;
                   end
                 end
               end
        S_PRE_WAIT: if (pending == '0 && u_done_q == '0 && u_done == '0) begin
                      state <= S_QNT;
                      g     <= '0;
                      c     <= '0;
                    end
        // Read each group again, quantize it and fill the PE buffers
        // (rows past the group size and unused APUs are written with 0).
        S_QNT: begin
                 rq_valid <= 1'b1;
                 rq_grp   <= g;
                 rq_row   <= RW'(c);
                 rq_zero  <= (g >= n_groups) || (DEPTH_W'(c) >= chans);
                 if (c == (RW+1)'(ROWS - 1)) begin
                   c <= '0;
                   if (g == GW'(N_GRP - 1)) state <= S_QNT_END;
                   else                      g <= g + 1'b1;
                 end else begin
                   c <= c + 1'b1;
                 end
               end
        S_QNT_END: state <= S_EXE;
        S_EXE: begin
                 state  <= S_EXE_WAIT;
                 t_seen <= '0;
               end
        S_EXE_WAIT: begin
                      t_seen <= t_seen | t_done;
                      if (t_all) state <= S_ACC;
                    end
        S_ACC:  state <= S_POST;
        S_POST: state <= S_POOL;
        S_POOL: if (pool_out) begin
                  state <= S_WB;
                  k_wb  <= '0;
                end else begin
                  state <= S_NEXT;
                end
        S_WB: if (k_wb == ($bits(k_wb))'(N_OUT - 1)) begin
                state <= S_NEXT;
                opix  <= opix + 1'b1;
              end else begin
                k_wb <= k_wb + 1'b1;
              end
        S_NEXT: if (win == n_windows - 16'd1) begin
                  state <= S_DONE;
                end else begin
                  win      <= win + 16'd1;
                  win_base <= win_base + AW'(int'(n_groups) * int'(chans));
                  g        <= '0;
                  c        <= '0;
                  state    <= S_PRE;
                end
        S_DONE: begin
                  done  <= 1'b1;
                  state <= S_IDLE;
                end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_group_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                 start |-> (rcfg.depth <= DEPTH_W'(ROWS)) && (n_groups <= GW'(N_GRP)));

endmodule
