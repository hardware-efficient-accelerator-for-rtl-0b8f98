// 8x9 spiking PE array for one time step.
//
// Each cycle the array takes one column of input spikes and produces one
// column of eight output partial sums, in either of two data flows:
//
//  * MODE_CONV1 (1x1 convolution and matrix multiplication): PE (r, j) gets
//    spike spk[j][r] of input channel j and weight w[j]; partial sums run
//    horizontally along each row, so output r = sum_j spk[j][r] * w[j]. Nine
//    input channels of one 8-row column are reduced per cycle; an 8x8 map
//    takes eight cycles.
//  * MODE_CONV3 (3x3 convolution): the eight spikes of one input column,
//    spk[0][r], are broadcast along the rows and the nine weights down the
//    columns. The array splits into three 8x3 sub-arrays, one per kernel
//    column kx; weight index j = 3*kx + ky. Inside a sub-array partial sums run
//    diagonally, giving P_kx[o] = sum_ky x[o+ky-1] * w[3*kx+ky], with rows
//    outside the 8-row tile taken as zero (the paper's ADDER1 = A1WA2 + A2WA3
//    and ADDER8 = A7WA1 + A8WA2). The eight output adders then join the three
//    sub-array results of consecutive input columns through two registers,
//    out(c) = P_0(c-1) + P_1(c) + P_2(c+1). After the 8 columns of a group one
//    zero "flush" column pushes out the last output column.
//
// The diagonal/horizontal wiring follows the paper; the register-based column
// combiner is this design's reading of its output adders. Outputs saturate to
// PSUM_W bits, the width the paper prints for the PE-block outputs.
//
// Timing: output registered, one cycle after the input column. In 3x3 mode
// the first column of a group (first=1) produces no output, each later column
// (including the flush column) produces the previous column's result.
module pe_array
  import snn_pkg::*;
#(
  parameter int unsigned R      = ROWS,
  parameter int unsigned C      = COLS,
  parameter int unsigned WW     = W_W,
  parameter int unsigned PW     = PSUM_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  mode_e                       mode,
  input  logic                        first,   // first column of an input group
  input  logic                        flush,   // zero input column (3x3 mode)
  input  logic [C-1:0][R-1:0]         spk,     // [j][row]
  input  logic signed [C-1:0][WW-1:0] w,       // [j]
  output logic                        out_valid,
  output logic signed [R-1:0][PW-1:0] psum
);
  localparam int unsigned ACC_W = 12;
  localparam int unsigned CMB_W = ACC_W + 2;

  logic signed [ACC_W-1:0] pout [R][C];

  // One PE per (row, column). Each PE's chain input is the neighbour's own
  // net inside the generate scope: the left neighbour in 1x1 mode, the
  // upper-left neighbour of the same 8x3 sub-array in 3x3 mode (none in a
  // sub-array's first column or in row 0, where the mux selects 0).
  for (genvar r = 0; r < int'(R); r++) begin : g_row
    for (genvar j = 0; j < int'(C); j++) begin : g_col
      logic signed [ACC_W-1:0] po, pl, pd, pi;
      logic                    xi, ui;
      if (j > 0) begin : g_l
        assign pl = g_row[r].g_col[j-1].po;
      end else begin : g_l0
        assign pl = '0;
      end
      if ((j % 3) != 0 && r > 0) begin : g_d
        assign pd = g_row[r-1].g_col[j-1].po;
      end else begin : g_d0
        assign pd = '0;
      end
      always_comb begin
        if (mode == MODE_CONV1) begin
          xi = spk[j][r];
          ui = (j > 0);
          pi = pl;
        end else begin
          xi = flush ? 1'b0 : spk[0][r];
          ui = ((j % 3) != 0) && (r > 0);
          pi = pd;
        end
      end
      pe #(.W_W(WW), .ACC_W(ACC_W)) u_pe (
        .spk(xi), .w(w[j]), .use_in(ui), .psum_in(pi), .psum_out(po)
      );
      assign pout[r][j] = po;
    end
  end

  function automatic logic signed [PW-1:0] sat(input logic signed [CMB_W-1:0] v);
    logic signed [CMB_W-1:0] maxv, minv;
    maxv = CMB_W'((1 << (PW - 1)) - 1);
    minv = -CMB_W'(1 << (PW - 1));
    if (v > maxv) return maxv[PW-1:0];
    if (v < minv) return minv[PW-1:0];
    return v[PW-1:0];
  endfunction

  // Diagonal sub-array results P_kx[o] (3x3 mode).
  logic signed [CMB_W-1:0] p3 [3][R];
  always_comb begin
    for (int kx = 0; kx < 3; kx++) begin
      for (int o = 0; o < int'(R); o++) begin
        if (o < int'(R) - 1) p3[kx][o] = CMB_W'(pout[o+1][3*kx+2]);
        else                 p3[kx][o] = CMB_W'(pout[R-1][3*kx+1]);
      end
    end
  end

  // Column combiner registers.
  logic signed [CMB_W-1:0] ra [R];
  logic signed [CMB_W-1:0] rb [R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      psum      <= '0;
      for (int o = 0; o < int'(R); o++) begin
        ra[o] <= '0;
        rb[o] <= '0;
      end
    end else begin
      out_valid <= in_valid && (mode == MODE_CONV1 || !first);
      if (in_valid) begin
        for (int o = 0; o < int'(R); o++) begin
          if (mode == MODE_CONV1) begin
            psum[o] <= sat(CMB_W'(pout[o][C-1]));
          end else begin
            psum[o] <= sat((first ? CMB_W'(0) : ra[o]) + p3[2][o]);
            ra[o]   <= (first ? CMB_W'(0) : rb[o]) + p3[1][o];
            rb[o]   <= p3[0][o];
          end
        end
      end
    end
  end
endmodule
