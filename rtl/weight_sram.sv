// Weight buffer: two 54 KB banks of 512 words x 864 bits (9 weights x 12 PE
// blocks x 8 bits), used ping-pong.
//
// The paper gives the size (54 KB), the word width (9x12x8b) and draws the
// buffer as a pair; reading the pair as ping-pong banks, one filled by the
// memory controller while the core reads the other, is this design's choice.
// Word layout: weight j of PE block b sits at bits [(b*9+j)*8 +: 8]. The core
// reads synchronously and the word stays at the output until the next read,
// so one fetch serves all columns and all four time steps of an input group.
module weight_sram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = W_DEPTH,
  parameter int unsigned WIDTH = WWORD,
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
