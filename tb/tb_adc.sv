// tb_adc: sweeps every input value of the ADC model and checks the code
// (equal to the input up to full scale, then clipped) and the clip flag.
module tb_adc;
  logic [8:0] sum;
  logic [4:0] code;
  logic sat;
  int checks = 0, failures = 0;

  adc dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      sum = 9'(v); #1;
      checks++;
      if (int'(code) != ((v > 31) ? 31 : v) || sat != (v > 31)) begin
        failures++; $display("FAIL %0d -> %0d %0d", v, code, sat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
