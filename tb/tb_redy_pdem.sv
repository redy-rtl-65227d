// tb_redy_pdem: checks the precision decoder for every DU value against
// several sets of descending thresholds, and the small-group bypass.
module tb_redy_pdem;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  logic [DU_W-1:0] du;
  logic [N_COEF-1:0][DU_W-1:0] p;
  logic bypass;
  prec_t prec;
  int checks = 0, failures = 0;
  int seen[9];

  redy_pdem dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[i]) seen[i] = 0;
    for (int t = 0; t < 8; t++) begin
      int v;
      v = 1800;
      for (int i = 0; i < N_COEF; i++) begin
        v = v - $urandom_range(50, 350);
        p[i] = DU_W'(v);
      end
      for (int d = 0; d < 2048; d += 1 + (t > 1 ? 7 : 0)) begin
        du = DU_W'(d);
        bypass = (t == 7) ? 1'b1 : ($urandom_range(0, 15) == 0);
        #1;
        checks++;
        seen[prec]++;
        if (int'(prec) != ref_prec(d, p, bypass)) begin
          failures++;
          $display("FAIL du=%0d got %0d exp %0d", d, prec, ref_prec(d, p, bypass));
        end
      end
    end
    for (int i = 3; i <= 8; i++) begin
      checks++;
      if (seen[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
