// tb_global_buffer: writes random words to random addresses, keeps a
// shadow copy and checks every read, including the one-cycle read latency.
module tb_global_buffer;
  localparam int DEPTH = 4096;
  logic clk = 0, we = 0;
  logic [11:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] shadow [DEPTH];
  logic        known  [DEPTH];
  int checks = 0, failures = 0;

  global_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (known[i]) known[i] = 0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      addr = 12'($urandom_range(0, 255) * 16 + (t % 16));
      we   = ($urandom_range(0, 1) == 1);
      wdata = $urandom;
      if (we) begin shadow[addr] = wdata; known[addr] = 1; end
      @(negedge clk);
      if (!we && known[addr]) begin
        checks++;
        if (rdata !== shadow[addr]) begin failures++; $display("FAIL addr %0d", addr); end
      end
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
