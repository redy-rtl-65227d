// pool_unit: max-pooling unit.
//
// Takes one vector of N_OUT FP32 results per output pixel and keeps the
// element-wise maximum over pool_n consecutive pixels, then emits it (pool_n
// of 0 or 1 passes every vector through). Inputs are non-negative (after
// ReLU), and for non-negative IEEE-754 numbers the unsigned integer order of
// the bit patterns equals the numeric order, so plain comparators suffice.
// The published chip has pooling units applying a maximum or average; only
// the maximum is built. Window shape (consecutive pixels) is this design's
// choice.
//
// Timing: out_valid pulses, with out_vec, one cycle after the in_valid that
// completes a window.
module pool_unit #(
  parameter int N_OUT = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        in_valid,
  input  logic [N_OUT-1:0][31:0]      in_vec,
  input  logic [3:0]                  pool_n,
  output logic                        out_valid,
  output logic [N_OUT-1:0][31:0]      out_vec
);

  logic [N_OUT-1:0][31:0] mx, nxt;
  logic [3:0]             cnt;
  logic                   last;

  assign last = (pool_n <= 4'd1) || (cnt == pool_n - 4'd1);

  always_comb
    for (int k = 0; k < N_OUT; k++)
      nxt[k] = (cnt == 4'd0 || in_vec[k] > mx[k]) ? in_vec[k] : mx[k];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      mx        <= '0;
      out_vec   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (last) begin
          out_vec   <= nxt;
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          mx  <= nxt;
          cnt <= cnt + 4'd1;
        end
      end
    end
  end

endmodule
