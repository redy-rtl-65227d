// tb_redy_em: checks the error module. For random bin counts, expected
// counts and n_log2 it feeds eight bins, one per cycle, and compares DU
// (Q1.10, saturating) with the reference sum of absolute differences.
module tb_redy_em;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [CNT_W-1:0] bin_val = '0, ed_val = '0;
  logic [3:0] n_log2 = '0;
  logic [DU_W-1:0] du;
  int checks = 0, failures = 0;

  redy_em dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h[N_BINS];
    logic [N_BINS-1:0][CNT_W-1:0] ed;
    int exp_du;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      n_log2 = 4'($urandom_range(0, 12));
      for (int i = 0; i < N_BINS; i++) begin
        h[i]  = (t % 4 == 0) ? $urandom_range(0, 1023) : $urandom_range(0, 40);
        ed[i] = CNT_W'((t % 4 == 0) ? $urandom_range(0, 1023) : $urandom_range(0, 40));
      end
      exp_du = ref_du(h, ed, int'(n_log2));
      @(negedge clk); clr = 1; @(negedge clk); clr = 0; en = 1;
      for (int i = 0; i < N_BINS; i++) begin
        bin_val = CNT_W'(h[i]); ed_val = ed[i];
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (int'(du) != exp_du) begin
        failures++;
        $display("FAIL t=%0d du %0d exp %0d", t, du, exp_du);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
