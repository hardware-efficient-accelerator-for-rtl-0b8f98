// Input spike buffer: two 6.75 KB banks of 16 words x 3456 bits
// (9 x 8 spikes x 12 PE blocks x 4 time steps), used ping-pong.
//
// Size and width are the paper's; the ping-pong use of the drawn pair is this
// design's choice. A word is 108 segments (segment = PE block * 9 + j) of
// [time step][row] spikes, see snn_pkg. In 3x3 mode one word holds eight
// columns of the 8x8 maps of 12 input channels; in 1x1 mode one word holds one
// column of 108 input channels. Reads are synchronous and held while re is
// low; the memory controller fills the bank the core is not using.
module spike_sram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = SPK_DEPTH,
  parameter int unsigned WIDTH = SPK_W,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             bank_sel,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             ext_we,
  input  logic [AW-1:0]    ext_waddr,
  input  logic [WIDTH-1:0] ext_wdata
);
  pingpong_sram #(.DEPTH(DEPTH), .SEGS(1), .SEG_W(WIDTH), .AW(AW)) u_pp (
    .clk, .rst_n, .bank_sel,
    .c_we(1'b0), .c_waddr('0), .c_wseg('0), .c_wdata('0),
    .c_re(re), .c_raddr(raddr), .c_rdata(rdata),
    .x_we(ext_we), .x_waddr(ext_waddr), .x_wseg(1'b1), .x_wdata(ext_wdata),
    .x_re(1'b0), .x_raddr('0), .x_rdata()
  );
endmodule
