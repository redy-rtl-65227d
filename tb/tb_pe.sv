// tb_pe: a processing element with two small APUs (16x16 crossbars, four
// ADCs each). Programs random weights, writes random groups into the PE
// buffer, starts both APUs with different precisions and checks that done
// follows the slower APU and that the PE output is the sum of the two
// bit-level reference results. The buffer is rewritten while the APUs run to
// check that the running computation is not disturbed.
// Sizes and data are this testbench's own choices.
module tb_pe;
  import redy_pkg::*;
  import tb_ref_pkg::*;
  localparam int APUS = 2, ROWS = 16, COLS = 16, N_ADC = 4, N_OUT = 4;

  logic clk = 0, rst_n = 0;
  logic prog_en = 0;
  logic [0:0] prog_apu = '0, buf_apu = '0;
  logic [3:0] prog_row = '0, prog_col = '0, buf_row = '0;
  logic [1:0] prog_val = '0;
  logic buf_we = 0;
  logic [7:0] buf_data = '0;
  logic start = 0;
  prec_t [APUS-1:0] prec;
  logic busy, done, adc_sat;
  logic [N_OUT-1:0][31:0] psum;
  int cells [APUS][];
  int x [APUS][];
  int checks = 0, failures = 0;

  pe #(.APUS(APUS), .ROWS(ROWS), .COLS(COLS), .N_ADC(N_ADC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p[APUS];
    int lat, exp_lat;
    longint e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < APUS; a++) begin
      cells[a] = new[ROWS*COLS];
      x[a] = new[ROWS];
      for (int i = 0; i < ROWS*COLS; i++) begin
        cells[a][i] = $urandom_range(0, 2);
        prog_en = 1; prog_apu = 1'(a); prog_row = 4'(i / COLS); prog_col = 4'(i % COLS);
        prog_val = 2'(cells[a][i]);
        @(negedge clk);
      end
    end
    prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      for (int a = 0; a < APUS; a++) begin
        p[a] = $urandom_range(1, 8);
        prec[a] = prec_t'(p[a]);
        for (int r = 0; r < ROWS; r++) begin
          x[a][r] = $urandom_range(0, (1 << p[a]) - 1);
          buf_we = 1; buf_apu = 1'(a); buf_row = 4'(r); buf_data = 8'(x[a][r]);
          @(negedge clk);
        end
      end
      buf_we = 0;
      exp_lat = ((p[0] > p[1]) ? p[0] : p[1]) * (COLS / N_ADC) + 3;
      start = 1; @(negedge clk); start = 0;
      // overwrite the buffer while the APUs compute
      buf_we = 1; buf_apu = 1'b0; buf_row = 4'd0; buf_data = 8'hFF; @(negedge clk); buf_we = 0;
      lat = 2;
      while (!done && lat < 200) begin @(negedge clk); lat++; end
      checks++;
      if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", lat, exp_lat); end
      for (int k = 0; k < N_OUT; k++) begin
        e = 0;
        for (int a = 0; a < APUS; a++) e += ref_apu_out(x[a], cells[a], COLS, k, p[a]);
        checks++;
        if (longint'(psum[k]) != e) begin
          failures++; $display("FAIL t=%0d k=%0d got %0d exp %0d", t, k, psum[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
