// tb_tile: a tile of two PEs with two small APUs each (16x16 crossbars, four
// ADCs). Programs random weights, fills every PE buffer with random inputs,
// gives each of the four APUs its own precision and checks that the tile
// reports done one cycle after the slowest PE and that its output vector is
// the sum of the four bit-level reference results. Some runs use inputs
// dense enough to clip the 5-bit ADCs; the reference clips identically.
// Sizes and data are this testbench's own choices.
module tb_tile;
  import redy_pkg::*;
  import tb_ref_pkg::*;
  localparam int PES = 2, APUS = 2, ROWS = 16, COLS = 16, N_ADC = 4, N_OUT = 4;
  localparam int NA = PES * APUS;

  logic clk = 0, rst_n = 0;
  logic prog_en = 0, buf_we = 0, start = 0;
  logic [0:0] prog_pe = '0, prog_apu = '0, buf_pe = '0, buf_apu = '0;
  logic [3:0] prog_row = '0, prog_col = '0, buf_row = '0;
  logic [1:0] prog_val = '0;
  logic [7:0] buf_data = '0;
  prec_t [PES-1:0][APUS-1:0] prec;
  logic busy, done, adc_sat;
  logic [N_OUT-1:0][31:0] psum;
  int cells [NA][];
  int x [NA][];
  int checks = 0, failures = 0, n_sat = 0;

  tile #(.PES(PES), .APUS(APUS), .ROWS(ROWS), .COLS(COLS), .N_ADC(N_ADC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (adc_sat) n_sat++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p[NA];
    int lat, exp_lat, pmax;
    longint e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      cells[a] = new[ROWS*COLS];
      x[a] = new[ROWS];
      for (int i = 0; i < ROWS*COLS; i++) begin
        cells[a][i] = $urandom_range(0, 3);
        prog_en = 1; prog_pe = 1'(a / APUS); prog_apu = 1'(a % APUS);
        prog_row = 4'(i / COLS); prog_col = 4'(i % COLS); prog_val = 2'(cells[a][i]);
        @(negedge clk);
      end
    end
    prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      pmax = 0;
      for (int a = 0; a < NA; a++) begin
        p[a] = $urandom_range(3, 8);
        if (p[a] > pmax) pmax = p[a];
        prec[a / APUS][a % APUS] = prec_t'(p[a]);
        for (int r = 0; r < ROWS; r++) begin
          x[a][r] = (t % 4 == 0) ? (1 << p[a]) - 1 : $urandom_range(0, (1 << p[a]) - 1);
          buf_we = 1; buf_pe = 1'(a / APUS); buf_apu = 1'(a % APUS); buf_row = 4'(r);
          buf_data = 8'(x[a][r]);
          @(negedge clk);
        end
      end
      buf_we = 0;
      exp_lat = pmax * (COLS / N_ADC) + 4;
      start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 300) begin @(negedge clk); lat++; end
      checks++;
      if (lat != exp_lat) begin failures++; $display("FAIL latency %0d exp %0d", lat, exp_lat); end
      for (int k = 0; k < N_OUT; k++) begin
        e = 0;
        for (int a = 0; a < NA; a++) e += ref_apu_out(x[a], cells[a], COLS, k, p[a]);
        checks++;
        if (longint'(psum[k]) != e) begin
          failures++; $display("FAIL t=%0d k=%0d got %0d exp %0d", t, k, psum[k], e);
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL ADC saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
