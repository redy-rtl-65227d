// tb_pool_unit: feeds random non-negative FP32 vectors with windows of 1 to
// 4 and checks the emitted element-wise maximum (compared as real numbers)
// and that exactly one vector leaves per window, one cycle after the last.
module tb_pool_unit;
  import tb_ref_pkg::*;
  localparam int N_OUT = 4;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  logic [N_OUT-1:0][31:0] in_vec = '0, out_vec;
  logic [3:0] pool_n = 4'd2;
  logic out_valid;
  int checks = 0, failures = 0;

  pool_unit #(.N_OUT(N_OUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real mx [N_OUT];
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      pool_n = 4'($urandom_range(0, 4));
      n = (pool_n <= 1) ? 1 : int'(pool_n);
      clr = 1; @(negedge clk); clr = 0;
      foreach (mx[k]) mx[k] = -1.0;
      for (int i = 0; i < n; i++) begin
        for (int k = 0; k < N_OUT; k++) begin
          real r;
          r = real'($urandom_range(0, 100000)) / 7.0;
          in_vec[k] = real2fp(r);
          if (fp2real(in_vec[k]) > mx[k]) mx[k] = fp2real(in_vec[k]);
        end
        in_valid = 1; @(negedge clk); in_valid = 0;
        checks++;
        if (out_valid != (i == n - 1)) begin failures++; $display("FAIL valid t=%0d i=%0d", t, i); end
      end
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (fp2real(out_vec[k]) != mx[k]) begin failures++; $display("FAIL max"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
