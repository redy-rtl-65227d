// tb_redy_hm: checks the histogram module against a reference binning.
// Streams random groups of exponents with random ascending boundaries and
// subsampling strides (1..4), then compares every bin counter. Also checks
// that clr empties the counters and that samples without en are ignored.
module tb_redy_hm;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0, act_valid = 0;
  logic [EXP_W-1:0] exp_in = '0;
  logic [N_BINS-2:0][EXP_W-1:0] bound;
  logic [7:0] sample_stride = 8'd1;
  logic [N_BINS-1:0][CNT_W-1:0] hist;
  int checks = 0, failures = 0;

  redy_hm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_hist[N_BINS];
    int n, k;
    int e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int base;
      base = 100 + $urandom_range(0, 10);
      for (int i = 0; i < N_BINS-1; i++) bound[i] = 8'(base + 2*i + $urandom_range(0, 1));
      sample_stride = 8'($urandom_range(0, 4));
      k = (sample_stride <= 1) ? 1 : int'(sample_stride);
      n = $urandom_range(1, 200);
      foreach (exp_hist[i]) exp_hist[i] = 0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0; en = 1;
      for (int i = 0; i < n; i++) begin
        e = $urandom_range(95, 125);
        if (i % 3 == 0) e = $urandom_range(0, 255);
        exp_in = 8'(e);
        act_valid = ($urandom_range(0, 5) != 0);
        if (!act_valid) begin
          @(negedge clk);
          act_valid = 1;
        end
        if (i % k == 0) exp_hist[ref_bin(e, bound)]++;
        @(negedge clk);
      end
      act_valid = 0;
      // samples presented with en low are ignored
      en = 0; exp_in = 8'd0; act_valid = 1; @(negedge clk); act_valid = 0;
      for (int i = 0; i < N_BINS; i++) begin
        checks++;
        if (int'(hist[i]) != exp_hist[i]) begin
          failures++;
          $display("FAIL t=%0d bin %0d got %0d exp %0d", t, i, hist[i], exp_hist[i]);
        end
      end
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    checks++;
    if (hist != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
