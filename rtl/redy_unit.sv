// redy_unit: one ReDy unit, which chooses the precision of a group of
// activations on the fly.
//
// A group is the set of activations that share a kernel position (r,s) and
// differ in input channel; all of it is streamed through one crossbar, so all
// of it gets one precision. The unit computes an exponent histogram (redy_hm),
// sweeps the bins through a multiplexer into the error module (redy_em) that
// forms DU, the mean absolute deviation from the expected (uniform) counts,
// and lets the decoder (redy_pdem) map DU to 3..8 bits. A flat histogram (low
// DU) tolerates few bits; a peaked one keeps more. Layers whose groups are
// smaller than the bin count (e.g. the 3-channel first layer) are forced to 8
// bits. Structure and widths follow the published unit; the handshake is this
// design's own.
//
// Interface: pulse grp_start while idle (busy low), then present the group on
// act_valid/act, flagging the last activation with act_last, starting the
// cycle after grp_start. Timing: one activation per cycle; done pulses
// with prec valid N_BINS+1 cycles after the last activation; prec holds
// until the next done.
module redy_unit
  import redy_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  redy_cfg_t   cfg,
  input  logic        grp_start,
  input  logic        act_valid,
  input  logic [31:0] act,
  input  logic        act_last,
  output logic        busy,
  output logic        done,
  output prec_t       prec
);

  logic                          clr, en_hm, en_em;
  logic [SEL_W-1:0]              sel;
  logic [N_BINS-1:0][CNT_W-1:0]  hist;
  logic [CNT_W-1:0]              bin_val, ed_val;
  logic [DU_W-1:0]               du;
  prec_t                         prec_d;
  logic                          hm_valid, hm_last;

  redy_ctrl u_ctrl (
    .clk, .rst_n, .grp_start,
    .act_valid(hm_valid), .act_last(hm_last),
    .clr, .en_hm, .en_em, .sel, .done, .busy
  );

  // Activations are taken only while the histogram step is active.
  assign hm_valid = act_valid && en_hm;
  assign hm_last  = act_last;

  redy_hm u_hm (
    .clk, .rst_n, .clr,
    .en(en_hm), .act_valid(hm_valid), .exp_in(act[30:23]),
    .bound(cfg.bound), .sample_stride(cfg.sample_stride), .hist
  );

  // Bin multiplexer driven by the controller's counter.
  assign bin_val = hist[sel];
  assign ed_val  = cfg.ed[sel];

  redy_em u_em (
    .clk, .rst_n, .clr, .en(en_em),
    .bin_val, .ed_val, .n_log2(cfg.n_log2), .du
  );

  redy_pdem u_pdem (
    .du, .p(cfg.p), .bypass(cfg.depth < DEPTH_W'(N_BINS)), .prec(prec_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)    prec <= prec_t'(MAX_PREC);
    else if (done) prec <= prec_d;
  end

endmodule
