// tb_apu: checks one APU at its full size (128x128 crossbar of 2-bit cells,
// 16 five-bit ADCs). Random weights are programmed cell by cell; groups of
// random activations, some sparse (no ADC clipping) and some dense (ADC
// clipping), are run at random precisions 1..8. Every partial sum is
// compared with a bit-level reference: for each input bit and column the
// dot product is clipped to the ADC range, slices are weighted by 4^j, bits
// by 2^b, and the total is scaled by 2^(8-p). The latency must be
// p*8+2 cycles from start to done.
module tb_apu;
  import redy_pkg::*;
  localparam int ROWS = 128, COLS = 128, N_OUT = 32;

  logic clk = 0, rst_n = 0;
  logic prog_en = 0;
  logic [6:0] prog_row = '0, prog_col = '0;
  logic [1:0] prog_val = '0;
  logic [ROWS-1:0][7:0] in_act = '0;
  logic start = 0;
  prec_t prec = prec_t'(8);
  logic busy, done, adc_sat;
  logic [N_OUT-1:0][31:0] psum;
  logic [1:0] wcell [ROWS][COLS];
  int checks = 0, failures = 0, sat_runs = 0, clean_runs = 0;

  apu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_out(int k, int p);
    longint tot = 0;
    for (int b = 0; b < p; b++)
      for (int j = 0; j < 4; j++) begin
        int s = 0;
        for (int r = 0; r < ROWS; r++)
          if (in_act[r][b]) s += int'(wcell[r][4*k+j]);
        if (s > 31) s = 31;
        tot += longint'(s) << (2*j + b);
      end
    return tot << (8 - p);
  endfunction

  initial begin
    int p, lat, dense;
    bit saw_sat;
    logic [ROWS-1:0][7:0] saved;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        wcell[r][c] = ($urandom_range(0, 3) == 0) ? 2'($urandom_range(1, 3)) : 2'd0;
        prog_en = 1; prog_row = 7'(r); prog_col = 7'(c); prog_val = wcell[r][c];
        @(negedge clk);
      end
    prog_en = 0;
    for (int t = 0; t < 24; t++) begin
      p = (t < 8) ? t + 1 : $urandom_range(1, 8);
      dense = (t % 3 == 2);
      for (int r = 0; r < ROWS; r++)
        in_act[r] = (dense || r < 12) ? 8'($urandom_range(0, 255)) : 8'd0;
      for (int r = 0; r < ROWS; r++)
        in_act[r] = in_act[r] & 8'((1 << p) - 1);
      prec = prec_t'(p);
      saved = in_act;
      start = 1; @(negedge clk); start = 0;
      in_act = '0;                       // the APU must hold its own copy
      lat = 1; saw_sat = 0;
      while (!done && lat < 200) begin
        saw_sat |= adc_sat;
        @(negedge clk); lat++;
      end
      checks++;
      if (lat != p * 8 + 2) begin failures++; $display("FAIL latency p=%0d %0d", p, lat); end
      if (saw_sat) sat_runs++; else clean_runs++;
      in_act = saved;                    // the reference reads in_act
      begin
        for (int k = 0; k < N_OUT; k++) begin
          checks++;
          if (longint'(psum[k]) != ref_out(k, p)) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d p=%0d k=%0d got %0d exp %0d", t, p, k, psum[k], ref_out(k, p));
          end
        end
      end
    end
    checks += 2;
    if (sat_runs == 0)   begin failures++; $display("FAIL no ADC clipping exercised"); end
    if (clean_runs == 0) begin failures++; $display("FAIL no clean run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
