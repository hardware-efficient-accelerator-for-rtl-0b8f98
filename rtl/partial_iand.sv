// Partial IAND: the spike-only replacement of the residual addition.
//
// The residual block output is x * (1 - s), with x the block's input spikes
// and s the spikes of the convolution branch; on spikes this is x AND NOT s.
// This unit does it for one output column (R rows x NT time steps). With
// en = 0 the LIF spikes pass unchanged. The operation is the paper's; taking x
// from the output spike buffer word being overwritten is this design's choice.
// Combinational.
module partial_iand
  import snn_pkg::*;
#(
  parameter int unsigned NT = T,
  parameter int unsigned R  = ROWS
) (
  input  logic                 en,
  input  logic [NT-1:0][R-1:0] x,   // residual spikes
  input  logic [NT-1:0][R-1:0] s,   // LIF output spikes
  output logic [NT-1:0][R-1:0] y
);
  always_comb y = en ? (x & ~s) : s;
endmodule
