// tb_redy_unit: end-to-end check of one ReDy unit (histogram, bin
// multiplexer, error module, decoder and controller). Random groups with
// different shapes (one bin, a few bins, spread out) are streamed with random
// boundaries, per-bin expected counts, thresholds and subsampling; the
// precision is compared with the reference algorithm, and done must come
// exactly N_BINS+1 cycles after the last activation. Groups smaller than the
// bin count must be forced to 8 bits.
module tb_redy_unit;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  redy_cfg_t cfg;
  logic grp_start = 0, act_valid = 0, act_last = 0;
  logic [31:0] act = '0;
  logic busy, done;
  prec_t prec;
  int checks = 0, failures = 0;
  int seen[9];

  redy_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] acts[];
    int n, expp, lat, nb, k, ns, lg;
    foreach (seen[i]) seen[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N_BINS-1; i++) cfg.bound[i] = 8'(110 + 2*i);
      n  = (t % 10 == 9) ? $urandom_range(1, 7) : $urandom_range(16, 256);
      cfg.depth = DEPTH_W'(n);
      cfg.sample_stride = 8'((t % 3 == 0) ? $urandom_range(2, 10) : 1);
      k  = (cfg.sample_stride <= 1) ? 1 : int'(cfg.sample_stride);
      ns = (n + k - 1) / k;
      lg = $clog2(ns);
      cfg.n_log2 = 4'(lg);
      for (int i = 0; i < N_BINS; i++) cfg.ed[i] = CNT_W'(ns / N_BINS);
      cfg.p[0] = 11'(1600); cfg.p[1] = 11'(1300); cfg.p[2] = 11'(1000);
      cfg.p[3] = 11'(700);  cfg.p[4] = 11'(400);
      nb = $urandom_range(1, 8);                // number of bins used
      acts = new[n];
      for (int i = 0; i < n; i++) begin
        int e;
        e = 109 + 2 * ((t % 2 == 0) ? (i % nb) : $urandom_range(0, nb - 1));
        acts[i] = {1'b0, 8'(e), 23'($urandom)};
      end
      expp = ref_group_prec(acts, cfg);
      @(negedge clk);
      checks++;
      if (busy) failures++;
      grp_start = 1; @(negedge clk); grp_start = 0;
      for (int i = 0; i < n; i++) begin
        if ($urandom_range(0, 7) == 0) begin act_valid = 0; @(negedge clk); end
        act_valid = 1; act = acts[i]; act_last = (i == n - 1);
        @(negedge clk);
      end
      act_valid = 0; act_last = 0;
      lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != N_BINS + 1) begin failures++; $display("FAIL latency %0d", lat); end
      @(negedge clk);
      seen[prec]++;
      if (int'(prec) != expp) begin
        failures++;
        $display("FAIL t=%0d n=%0d nb=%0d prec %0d exp %0d", t, n, nb, prec, expp);
      end
    end
    for (int i = 3; i <= 8; i++) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL precision %0d never chosen", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
