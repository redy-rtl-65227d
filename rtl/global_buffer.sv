// global_buffer: the chip's global activation buffer, a single-port SRAM.
//
// Holds the FP32 input activations of a layer and receives its outputs. The
// published design names an SRAM global buffer but gives no size or port
// structure; this is a plain synchronous single-port memory written as an
// array so that synthesis maps it to a memory macro.
//
// Interface: one access per cycle; a write stores wdata at addr; a read
// returns the word at addr on rdata one cycle later (read-before-write
// behaviour is not relied on by the controller).
module global_buffer #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
