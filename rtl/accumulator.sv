// Time-step accumulator: adds up the outputs of the 12 PE blocks for one time
// step and joins them with the partial sum kept in the temp SRAM.
//
// For each of the eight rows of an output column:
//   sum = sat( (sum_b psum[b] << shift) + (use_temp ? temp : 0)
//              + (add_bias ? bias : 0) )
// The paper gives the function (sum the 12 channels, accumulate with the temp
// SRAM contents, feed the LIF neurons) and the 9-bit width; the saturation,
// the bitplane shift used by the encoding layer (shift = bit index of the
// 8-bit image bitplane being processed) and adding the bias with the last
// input group are this design's choices. Combinational; the caller registers
// the result. Four instances, one per time step.
module accumulator
  import snn_pkg::*;
#(
  parameter int unsigned NB = N_BLK,
  parameter int unsigned R  = ROWS,
  parameter int unsigned PW = PSUM_W
) (
  input  logic signed [NB-1:0][R-1:0][PW-1:0] psum,   // [block][row]
  input  logic                                use_temp,
  input  logic signed [R-1:0][PW-1:0]         temp,
  input  logic                                add_bias,
  input  logic signed [7:0]                   bias,
  input  logic [2:0]                          shift,
  output logic signed [R-1:0][PW-1:0]         sum
);
  localparam int unsigned SW = PW + $clog2(NB) + 8 + 2;

  function automatic logic signed [PW-1:0] sat(input logic signed [SW-1:0] v);
    logic signed [SW-1:0] maxv, minv;
    maxv = SW'((1 << (PW - 1)) - 1);
    minv = -SW'(1 << (PW - 1));
    if (v > maxv) return maxv[PW-1:0];
    if (v < minv) return minv[PW-1:0];
    return v[PW-1:0];
  endfunction

  always_comb begin
    for (int r = 0; r < int'(R); r++) begin
      logic signed [SW-1:0] acc;
      acc = '0;
      for (int b = 0; b < int'(NB); b++) acc += SW'($signed(psum[b][r]));
      acc = acc <<< shift;
      if (use_temp) acc += SW'($signed(temp[r]));
      if (add_bias) acc += SW'(bias);
      sum[r] = sat(acc);
    end
  end
endmodule
