// Ping-pong pair of SRAM banks.
//
// bank_sel names the bank the core uses; the external (memory controller)
// port reaches the other bank, so one bank can be filled or drained while the
// core works on the other. Each side has a read port and a segmented write
// port. Reads are synchronous (data one cycle after re) and held while re is
// low. Swapping bank_sel between layers exchanges the roles.
module pingpong_sram #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned SEGS  = 1,
  parameter int unsigned SEG_W = 8,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       bank_sel,
  // core side, bank bank_sel
  input  logic                       c_we,
  input  logic [AW-1:0]              c_waddr,
  input  logic [SEGS-1:0]            c_wseg,
  input  logic [SEGS-1:0][SEG_W-1:0] c_wdata,
  input  logic                       c_re,
  input  logic [AW-1:0]              c_raddr,
  output logic [SEGS-1:0][SEG_W-1:0] c_rdata,
  // external side, bank !bank_sel
  input  logic                       x_we,
  input  logic [AW-1:0]              x_waddr,
  input  logic [SEGS-1:0]            x_wseg,
  input  logic [SEGS-1:0][SEG_W-1:0] x_wdata,
  input  logic                       x_re,
  input  logic [AW-1:0]              x_raddr,
  output logic [SEGS-1:0][SEG_W-1:0] x_rdata
);
  logic                       we   [2];
  logic [AW-1:0]              wa   [2];
  logic [SEGS-1:0]            ws   [2];
  logic [SEGS-1:0][SEG_W-1:0] wd   [2];
  logic                       re   [2];
  logic [AW-1:0]              ra   [2];
  logic [SEGS-1:0][SEG_W-1:0] rd   [2];
  logic                       sel_q; // bank_sel seen by the reads in flight

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (b[0] == bank_sel) begin
        we[b] = c_we; wa[b] = c_waddr; ws[b] = c_wseg; wd[b] = c_wdata;
        re[b] = c_re; ra[b] = c_raddr;
      end else begin
        we[b] = x_we; wa[b] = x_waddr; ws[b] = x_wseg; wd[b] = x_wdata;
        re[b] = x_re; ra[b] = x_raddr;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_2p #(.DEPTH(DEPTH), .SEGS(SEGS), .SEG_W(SEG_W), .AW(AW)) u_bank (
      .clk, .rst_n, .we(we[b]), .waddr(wa[b]), .wseg(ws[b]), .wdata(wd[b]),
      .re(re[b]), .raddr(ra[b]), .rdata(rd[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_q <= 1'b0;
    else        sel_q <= bank_sel;
  end

  assign c_rdata = sel_q ? rd[1] : rd[0];
  assign x_rdata = sel_q ? rd[0] : rd[1];
endmodule
