// tb_accum_unit: three inputs, eight outputs. Checks that clr loads the sum
// of the inputs, that later enables add to the held value, and that the
// value holds while en is low.
module tb_accum_unit;
  localparam int N_IN = 3, N_OUT = 8, W = 32;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [N_IN-1:0][N_OUT-1:0][W-1:0] in_vec = '0;
  logic [N_OUT-1:0][W-1:0] out_vec;
  longint exp_v [N_OUT];
  int checks = 0, failures = 0;

  accum_unit #(.N_IN(N_IN), .N_OUT(N_OUT), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (exp_v[k]) exp_v[k] = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      clr = (t % 5 == 0);
      en  = ($urandom_range(0, 3) != 0) || clr;
      for (int i = 0; i < N_IN; i++)
        for (int k = 0; k < N_OUT; k++) in_vec[i][k] = W'($urandom_range(0, 100000));
      if (en) for (int k = 0; k < N_OUT; k++) begin
        if (clr) exp_v[k] = 0;
        for (int i = 0; i < N_IN; i++) exp_v[k] += longint'(in_vec[i][k]);
      end
      @(negedge clk);
      clr = 0; en = 0;
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (longint'(out_vec[k]) != (exp_v[k] & 64'hFFFF_FFFF)) begin
          failures++; $display("FAIL t=%0d k=%0d", t, k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
