// os_pe: output-stationary multiply-accumulate processing element.
//
// The PE keeps its output in a local accumulator. When valid_in is set it adds
// w_in * x_in to it. The weight and its valid bit are registered and passed to the
// PE on the right, the activation to the PE below, so operands move one PE per
// cycle. When drain is set the accumulator instead loads acc_in, the value of the
// PE above, so a column of PEs shifts its results out at the bottom one per cycle.
// clr zeroes the accumulator at the start of a tile. With a 16-bit weight and a
// 32-bit accumulator the same PE is the checksum PE of the bottom row, which
// multiplies the weight checksum e^T*W by the activations to form e^T*W*X.
//
// Priority: clr, then drain, then accumulate. err_mask is XORed into the next
// accumulator value whenever it is nonzero; it models a timing error for fault
// injection and is zero in normal use (a choice of this design). Arithmetic wraps
// modulo 2^ACC_W. Reset clears all registers.
module os_pe #(
  parameter int unsigned X_W   = 8,
  parameter int unsigned W_W   = 8,
  parameter int unsigned ACC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    drain,
  input  logic                    valid_in,
  input  logic signed [W_W-1:0]   w_in,
  input  logic signed [X_W-1:0]   x_in,
  input  logic signed [ACC_W-1:0] acc_in,
  input  logic        [ACC_W-1:0] err_mask,
  output logic                    valid_out,
  output logic signed [W_W-1:0]   w_out,
  output logic signed [X_W-1:0]   x_out,
  output logic signed [ACC_W-1:0] acc_out
);

  logic signed [X_W+W_W-1:0] prod;
  logic signed [ACC_W-1:0]   acc_d;

  always_comb begin
    prod = w_in * x_in;
    if (clr)           acc_d = '0;
    else if (drain)    acc_d = acc_in;
    else if (valid_in) acc_d = acc_out + ACC_W'(prod);
    else               acc_d = acc_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_out <= 1'b0;
      w_out     <= '0;
      x_out     <= '0;
      acc_out   <= '0;
    end else begin
      valid_out <= valid_in;
      w_out     <= w_in;
      x_out     <= x_in;
      acc_out   <= acc_d ^ err_mask;
    end
  end

endmodule
