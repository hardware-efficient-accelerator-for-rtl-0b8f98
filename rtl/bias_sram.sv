// Bias buffer: 0.25 KB, 256 signed 8-bit biases, one per output channel.
//
// Size and width (1x8b) are the paper's. The memory controller writes it;
// the core reads the bias of the current output channel once (synchronous
// read, held at the output) and the same value goes to all four time-step
// accumulators.
module bias_sram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = BIAS_DEPTH,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             ext_we,
  input  logic [AW-1:0]    ext_waddr,
  input  logic [WIDTH-1:0] ext_wdata
);
  sram_2p #(.DEPTH(DEPTH), .SEGS(1), .SEG_W(WIDTH), .AW(AW)) u_mem (
    .clk, .rst_n, .we(ext_we), .waddr(ext_waddr), .wseg(1'b1), .wdata(ext_wdata),
    .re, .raddr, .rdata
  );
endmodule
