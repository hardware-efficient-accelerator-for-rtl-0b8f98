// Two-port SRAM model: one synchronous write port with per-segment write
// enables and one synchronous read port.
//
// The word is SEGS segments of SEG_W bits; a write updates only the segments
// whose enable is set. A read with re=1 returns the addressed word on the next
// clock edge; with re=0 the read register keeps its value, so a word fetched
// once can be used for many cycles. A read of the address being written in
// the same cycle returns the old word. The read register resets to zero; the
// array itself is not reset, like a real SRAM. Used for every on-chip buffer.
module sram_2p #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned SEGS  = 1,
  parameter int unsigned SEG_W = 8,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [SEGS-1:0]           wseg,
  input  logic [SEGS-1:0][SEG_W-1:0] wdata,
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [SEGS-1:0][SEG_W-1:0] rdata
);
  logic [SEGS-1:0][SEG_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int s = 0; s < int'(SEGS); s++)
        if (wseg[s]) mem[waddr][s] <= wdata[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

  // Addresses must stay inside the array.
  assert property (@(posedge clk) disable iff (!rst_n) we |-> (32'(waddr) < DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) re |-> (32'(raddr) < DEPTH));
endmodule
