// tb_uniform_quant: checks the quantizer against real-valued arithmetic.
// Random positive FP32 activations, scales, zero points and precisions
// (3..8) are quantized and compared with round(r*s) - z, clipped to 8 bits
// and reduced to p bits; negative values, zero, huge values and Inf must
// give 0 or saturate.
module tb_uniform_quant;
  import redy_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] act;
  quant_cfg_t  qcfg;
  prec_t       prec;
  logic [7:0]  q;
  int checks = 0, failures = 0;

  uniform_quant dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r;
    int expq;
    for (int t = 0; t < 20000; t++) begin
      qcfg.scale_m = 16'($urandom_range(1, 65535));
      qcfg.scale_e = 8'(-$urandom_range(8, 20));
      qcfg.zero    = (t % 4 == 0) ? 8'($urandom_range(0, 20)) : 8'd0;
      prec         = prec_t'($urandom_range(3, 8));
      r = real'($urandom_range(0, 1000000)) / 1000.0;
      r = r * (2.0 ** ($urandom_range(0, 8) - 4.0));
      act = real2fp(r);
      case (t % 50)
        0: act = 32'hBF80_0000;   // -1.0
        1: act = 32'h0000_0000;
        2: act = 32'h7F80_0000;   // +Inf
        3: act = 32'h7F00_0000;   // huge
        default: ;
      endcase
      #1;
      expq = ref_quant(act, qcfg, int'(prec));
      checks++;
      if (int'(q) != expq) begin
        failures++;
        if (failures < 10) $display("FAIL act=%h s=%0d*2^%0d z=%0d p=%0d got %0d exp %0d",
                                     act, qcfg.scale_m, qcfg.scale_e, qcfg.zero, prec, q, expq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
