// Partial-sum buffer of one time step: 128 words of eight 9-bit partial sums
// (one output column). Four of these, one per time step, make the paper's
// 4 x 1 KB temp SRAMs; 128 x 72 bits is 1.125 KB, the nearest power-of-two
// depth to the printed 1 KB (this design's choice).
//
// The accumulator reads the stored partial sum of a column one cycle ahead
// (synchronous read) and writes the new sum back; a word is read again only
// in the next input group, so no bypass is needed.
module temp_sram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = TMP_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      we,
  input  logic [AW-1:0] waddr,
  input  psum_col_t wdata,
  input  logic      re,
  input  logic [AW-1:0] raddr,
  output psum_col_t rdata
);
  sram_2p #(.DEPTH(DEPTH), .SEGS(ROWS), .SEG_W(PSUM_W), .AW(AW)) u_mem (
    .clk, .rst_n, .we, .waddr, .wseg({ROWS{1'b1}}), .wdata(wdata), .re, .raddr, .rdata(rdata)
  );
endmodule
