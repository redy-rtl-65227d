// tb_redy_chip: end-to-end test of the whole chip at its default size
// (two tiles, four PEs, twelve 128x128 APUs, three ReDy units).
//
// Three convolution layers are run, each through the host port:
//   L1  3 input channels, 9 groups: every group is shallower than the eight
//       histogram bins, so the ReDy bypass gives 8 bits; groups are so short
//       that the three ReDy units run out and the input stream stalls.
//       Max pooling over pairs of windows.
//   L2  64 channels, 6 groups, full histogram: each group's activations are
//       built with a chosen concentration in one exponent bin, so the
//       decided precision covers 3..8 bits.
//   L3  the same weights with 2:1 subsampled histograms.
// The testbench writes weights and activations, starts the chip, and
// recomputes everything on its own: the precision of every group (from a
// software histogram), the quantized inputs, the bit-serial crossbar results
// with 5-bit ADC clipping, the sum over all APUs, dequantization with ReLU
// (the offset is set to the median sum so both signs occur) and pooling.
// It compares every reported group precision and every word written back.
// Each mechanism (stall, bypass, each precision 3..8, subsampling, ReLU
// clamp, pooling, ADC clipping) is counted and must occur at least once.
// Layer shapes, thresholds (p1..p5 = 1600..400 in Q1.10, bounds 110+2i) and
// data patterns are this testbench's own; no test vectors are published.
module tb_redy_chip;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  localparam int N_GRP = 12, ROWS = 128, COLS = 128, N_OUT = 32, GBD = 4096;

  logic clk = 0, rst_n = 0;
  logic host_we = 0;
  logic [11:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;
  logic prog_en = 0;
  logic [3:0] prog_grp = '0;
  logic [6:0] prog_row = '0, prog_col = '0;
  logic [1:0] prog_val = '0;
  redy_cfg_t rcfg;
  quant_cfg_t qcfg;
  post_cfg_t pcfg;
  logic [3:0] n_groups = '0;
  logic [15:0] n_windows = '0;
  logic [11:0] in_base = '0, out_base = '0;
  logic start = 0, busy, done, grp_valid, stall, adc_sat;
  logic [3:0] grp_id;
  prec_t grp_prec;

  redy_chip dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_bypass = 0, n_sub = 0, n_relu0 = 0, n_pool = 0, n_sat = 0;
  int n_prec [9];
  int cells [N_GRP][];        // [g][r*COLS + c]
  logic [31:0] gbm [GBD];     // software copy of the global buffer
  int exp_prec [$];           // expected precisions in decision order
  int exp_grp [$];

  always @(posedge clk) begin
    if (stall && rst_n)   n_stall++;
    if (adc_sat && rst_n) n_sat++;
    if (grp_valid && rst_n) begin
      checks++;
      if (exp_grp.size() == 0) begin
        failures++; $display("FAIL unexpected precision report");
      end else begin
        int eg, ep;
        eg = exp_grp.pop_front();
        ep = exp_prec.pop_front();
        if (int'(grp_id) != eg || int'(grp_prec) != ep) begin
          failures++;
          $display("FAIL group %0d prec %0d, expected group %0d prec %0d", grp_id, grp_prec, eg, ep);
        end
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(input int a, input logic [31:0] d);
    host_we = 1; host_addr = 12'(a); host_wdata = d; gbm[a] = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic program_weights(input int ng, input int rows, input int cmax);
    for (int g = 0; g < ng; g++) begin
      cells[g] = new[ROWS*COLS];
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < COLS; c++) begin
          int v;
          v = $urandom_range(0, cmax);
          cells[g][r*COLS + c] = v;
          prog_en = 1; prog_grp = 4'(g); prog_row = 7'(r); prog_col = 7'(c); prog_val = 2'(v);
          @(negedge clk);
        end
    end
    prog_en = 0;
  endtask

  // Activation with exponent in histogram bin b (bounds 110 + 2i).
  function automatic logic [31:0] act_in_bin(input int b);
    int e;
    e = 108 + 2*b + $urandom_range(0, 1);
    return {1'b0, 8'(e), 23'($urandom)};
  endfunction

  // Runs one layer: writes inputs, computes the reference, runs the chip
  // and compares the written-back outputs.
  task automatic run_layer(input int ng, input int ch, input int nwin, input int pool,
                           input int stride, input int nlog2, input int edv);
    int base_out, npix, conc, mainb, nm;
    logic [31:0] acts [];
    int x [];
    int pr [N_GRP];
    longint sums [][N_OUT];
    longint all [$];
    logic [31:0] y [][N_OUT];
    logic [31:0] pooled [N_OUT];
    longint med;
    int cyc;

    rcfg.depth = DEPTH_W'(ch);
    rcfg.sample_stride = 8'(stride);
    rcfg.n_log2 = 4'(nlog2);
    for (int i = 0; i < N_BINS; i++) rcfg.ed[i] = 10'(edv);
    for (int i = 0; i < N_BINS-1; i++) rcfg.bound[i] = 8'(110 + 2*i);
    rcfg.p[0] = 11'd1600; rcfg.p[1] = 11'd1300; rcfg.p[2] = 11'd1000;
    rcfg.p[3] = 11'd700;  rcfg.p[4] = 11'd400;
    qcfg.scale_m = 16'd5; qcfg.scale_e = 8'sd12; qcfg.zero = 8'd1;
    n_groups = 4'(ng); n_windows = 16'(nwin); in_base = '0;
    base_out = ng * ch * nwin;
    out_base = 12'(base_out);

    sums = new[nwin];
    acts = new[ch];
    x = new[ch];
    for (int w = 0; w < nwin; w++) begin
      for (int k = 0; k < N_OUT; k++) sums[w][k] = 0;
      for (int g = 0; g < ng; g++) begin
        // concentration level cycles through six steps
        conc = (w * ng + g) % 6;
        mainb = $urandom_range(0, N_BINS-1);
        nm = (ch * (100 - 19 * conc)) / 100;
        for (int c = 0; c < ch; c++) begin
          acts[c] = (c < nm) ? act_in_bin(mainb) : act_in_bin(c % N_BINS);
          host_write((w*ng + g)*ch + c, acts[c]);
        end
        pr[g] = ref_group_prec(acts, rcfg);
        exp_grp.push_back(g);
        exp_prec.push_back(pr[g]);
        n_prec[pr[g]]++;
        if (ch < N_BINS) n_bypass++;
        if (stride > 1) n_sub++;
        for (int c = 0; c < ch; c++) x[c] = ref_quant(acts[c], qcfg, pr[g]);
        for (int k = 0; k < N_OUT; k++) sums[w][k] += ref_apu_out(x, cells[g], COLS, k, pr[g]);
      end
      for (int k = 0; k < N_OUT; k++) all.push_back(sums[w][k]);
    end
    all.sort();
    med = all[all.size() / 2];
    pcfg.offset = 32'(med);
    pcfg.frac = 6'd6;
    pcfg.pool_n = 4'(pool);

    y = new[nwin];
    for (int w = 0; w < nwin; w++)
      for (int k = 0; k < N_OUT; k++) begin
        y[w][k] = ref_int2fp(sums[w][k] - med, 6);
        if (y[w][k] == 32'd0) n_relu0++;
      end

    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 2000000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL layer did not finish"); end
    $display("layer C=%0d groups=%0d windows=%0d: %0d cycles", ch, ng, nwin, cyc);
    checks++;
    if (exp_grp.size() != 0) begin
      failures++; $display("FAIL %0d precision reports missing", exp_grp.size());
      exp_grp.delete(); exp_prec.delete();
    end

    // read back and compare
    npix = (pool <= 1) ? nwin : nwin / pool;
    for (int o = 0; o < npix; o++) begin
      int pn;
      pn = (pool <= 1) ? 1 : pool;
      for (int k = 0; k < N_OUT; k++) begin
        pooled[k] = y[o*pn][k];
        for (int j = 1; j < pn; j++) if (y[o*pn + j][k] > pooled[k]) pooled[k] = y[o*pn + j][k];
      end
      if (pn > 1) n_pool++;
      for (int k = 0; k < N_OUT; k++) begin
        host_addr = 12'(base_out + o*N_OUT + k);
        @(negedge clk);
        checks++;
        if (host_rdata !== pooled[k]) begin
          failures++;
          if (failures < 20)
            $display("FAIL out %0d k=%0d got %h exp %h", o, k, host_rdata, pooled[k]);
        end
      end
    end
  endtask

  initial begin
    foreach (n_prec[i]) n_prec[i] = 0;
    rcfg = '0; qcfg = '0; pcfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    program_weights(9, 3, 3);
    run_layer(9, 3, 4, 2, 1, 2, 1);
    program_weights(6, 64, 3);
    run_layer(6, 64, 4, 1, 1, 6, 8);
    run_layer(6, 64, 4, 2, 2, 5, 4);

    checks++; if (n_stall == 0)  begin failures++; $display("FAIL no stall"); end
    checks++; if (n_bypass == 0) begin failures++; $display("FAIL no bypass"); end
    checks++; if (n_sub == 0)    begin failures++; $display("FAIL no subsampled group"); end
    checks++; if (n_relu0 == 0)  begin failures++; $display("FAIL no ReLU clamp"); end
    checks++; if (n_pool == 0)   begin failures++; $display("FAIL no pooled output"); end
    checks++; if (n_sat == 0)    begin failures++; $display("FAIL no ADC clipping"); end
    for (int p = MIN_PREC; p <= MAX_PREC; p++) begin
      checks++;
      if (n_prec[p] == 0) begin failures++; $display("FAIL precision %0d never chosen", p); end
    end
    $display("stalls=%0d bypass=%0d subsampled=%0d relu0=%0d pooled=%0d adc_clip=%0d",
             n_stall, n_bypass, n_sub, n_relu0, n_pool, n_sat);
    $display("precision counts 3..8: %0d %0d %0d %0d %0d %0d",
             n_prec[3], n_prec[4], n_prec[5], n_prec[6], n_prec[7], n_prec[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
