// tb_act_unit: checks dequantization and ReLU. For random accumulated
// values, offsets and scales the FP32 result must equal the truncated value
// of (acc - offset) * 2^-frac, be zero for non-positive inputs, and lie
// within one mantissa step of the real result.
module tb_act_unit;
  import tb_ref_pkg::*;
  logic signed [31:0] acc, offset;
  logic [5:0] frac;
  logic [31:0] y;
  int checks = 0, failures = 0;
  int relu_hits = 0;

  act_unit dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v;
    real ideal, got;
    for (int t = 0; t < 20000; t++) begin
      acc    = (t % 3 == 0) ? 32'($urandom) : 32'($urandom_range(0, 4000000));
      offset = (t % 4 == 0) ? 32'($urandom_range(0, 4000000)) : 32'sd0;
      frac   = 6'($urandom_range(0, 40));
      #1;
      v = longint'(acc) - longint'(offset);
      if (v <= 0) relu_hits++;
      checks++;
      if (y != ref_int2fp(v, int'(frac))) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d off=%0d frac=%0d y=%h exp=%h", acc, offset, frac, y, ref_int2fp(v, int'(frac)));
      end
      if (v > 0 && 127 + $clog2(v + 1) - 1 - int'(frac) > 0) begin
        ideal = real'(v) * (2.0 ** (-real'(frac)));
        got   = fp2real(y);
        checks++;
        if (got > ideal || got < ideal * (1.0 - 1.0e-6)) begin
          failures++; $display("FAIL value %f vs %f", got, ideal);
        end
      end
    end
    checks++;
    if (relu_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
