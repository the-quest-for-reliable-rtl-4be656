// ws_pe: weight-stationary multiply-accumulate processing element.
//
// The PE holds one weight. Each cycle it multiplies the activation arriving from
// the left by that weight, adds the product to the partial sum arriving from above
// and registers the result for the PE below; the activation is registered and
// passed to the PE on the right. Operand and accumulator widths default to the
// 8-bit multiplier and 24-bit accumulator of a TPU MAC. Instantiated with a 16-bit
// weight and a 32-bit accumulator, the same PE is the checksum PE that holds the
// sum of a row of weights in the ABFT column.
//
// Interface: w_we loads w_in into the weight register. x_in/psum_in are consumed
// every cycle; x_out and psum_out appear one cycle later. err_mask is XORed into
// the registered partial sum; it models a timing error in this PE for fault
// injection and is tied to zero in normal use (this port is a choice of this
// design, used to reproduce the error-injection experiments in simulation).
// Arithmetic wraps modulo 2^ACC_W. Reset clears all registers.
module ws_pe #(
  parameter int unsigned X_W   = 8,
  parameter int unsigned W_W   = 8,
  parameter int unsigned ACC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_we,
  input  logic signed [W_W-1:0]   w_in,
  input  logic signed [X_W-1:0]   x_in,
  input  logic signed [ACC_W-1:0] psum_in,
  input  logic        [ACC_W-1:0] err_mask,
  output logic signed [X_W-1:0]   x_out,
  output logic signed [ACC_W-1:0] psum_out
);

  logic signed [W_W-1:0]       w_q;
  logic signed [X_W+W_W-1:0]   prod;
  logic signed [ACC_W-1:0]     sum;

  always_comb begin
    prod = w_q * x_in;
    sum  = psum_in + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      x_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_we) w_q <= w_in;
      x_out    <= x_in;
      psum_out <= sum ^ err_mask;
    end
  end

endmodule
