// Processing element of the spiking PE array.
//
// A spike is 0 or 1, so spike x weight reduces to an AND: the product is the
// weight when the spike is 1 and 0 otherwise. The product is added to the
// partial sum of the neighbouring PE, or to 0, as chosen by the PE's input
// multiplexer; which neighbour feeds it (left for 1x1 convolution, upper-left
// diagonal for 3x3 convolution) is wired in the PE array. This follows the PE
// drawn in the paper (multiplier, a mux with a constant-0 input, an adder).
// The partial-sum width ACC_W is this design's choice: 12 bits hold the sum of
// nine signed 8-bit products without overflow.
//
// Purely combinational: psum_out = (use_in ? psum_in : 0) + (spk ? w : 0).
module pe #(
  parameter int unsigned W_W   = 8,
  parameter int unsigned ACC_W = 12
) (
  input  logic                    spk,
  input  logic signed [W_W-1:0]   w,
  input  logic                    use_in,
  input  logic signed [ACC_W-1:0] psum_in,
  output logic signed [ACC_W-1:0] psum_out
);
  logic signed [ACC_W-1:0] prod;
  logic signed [ACC_W-1:0] chain;

  always_comb begin
    prod     = spk ? ACC_W'(w) : '0;
    chain    = use_in ? psum_in : '0;
    psum_out = chain + prod;
  end
endmodule
