// Output spike buffer: two 6.75 KB banks of 16 words x 3456 bits, used
// ping-pong.
//
// The core side (bank bank_sel) receives the layer's output spikes one 8x4
// column (one 32-bit segment) at a time through per-segment write enables, and
// can read the word it is about to update, which gives the residual spikes for
// the IAND step (read-modify-write). The other bank is the outside side: the
// memory controller drains results from it or preloads residual spikes into
// it, and the PE blocks can read it as the next layer's input without a trip
// to off-chip memory. Size and width are the paper's; the segment writes, the
// read-modify-write and the bank roles are this design's choices.
// Reads are synchronous, held while the read enable is low.
module spike_temp_sram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = SPK_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    bank_sel,
  input  logic                    c_re,
  input  logic [AW-1:0]           c_raddr,
  output spk_word_t               c_rdata,
  input  logic                    c_we,
  input  logic [AW-1:0]           c_waddr,
  input  logic [NSEG-1:0]         c_wseg,
  input  spk_word_t               c_wdata,
  input  logic                    x_re,
  input  logic [AW-1:0]           x_raddr,
  output spk_word_t               x_rdata,
  input  logic                    x_we,
  input  logic [AW-1:0]           x_waddr,
  input  spk_word_t               x_wdata
);
  pingpong_sram #(.DEPTH(DEPTH), .SEGS(NSEG), .SEG_W(SEG_W), .AW(AW)) u_pp (
    .clk, .rst_n, .bank_sel,
    .c_we, .c_waddr, .c_wseg, .c_wdata, .c_re, .c_raddr, .c_rdata,
    .x_we, .x_waddr, .x_wseg({NSEG{1'b1}}), .x_wdata, .x_re, .x_raddr, .x_rdata
  );
endmodule
