// PE block: four PE arrays, one per time step, fed with the same nine weights.
//
// This is where the paper's parallel tick batching happens: the products of
// input spikes and weights have no dependency between time steps, so all four
// time steps of one input channel group are computed side by side and the
// weight word is fetched once for all of them.
//
// Input is the block's nine segments of a spike word, seg[j][t][row]. In 1x1
// mode array t gets spike seg[j][t][row] for all j. In 3x3 mode segment j is
// column j of the block's input channel and the block picks column `col`,
// broadcast into the array's first input. Timing as in pe_array: outputs one
// cycle after the input.
module pe_block
  import snn_pkg::*;
#(
  parameter int unsigned NT = T
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  input  mode_e                                 mode,
  input  logic                                  first,
  input  logic                                  flush,
  input  logic [2:0]                            col,
  input  logic [COLS-1:0][NT-1:0][ROWS-1:0]     seg,   // [j][t][row]
  input  logic signed [COLS-1:0][W_W-1:0]       w,
  output logic                                  out_valid,
  output logic signed [NT-1:0][ROWS-1:0][PSUM_W-1:0] psum // [t][row]
);
  logic [NT-1:0] v;

  for (genvar t = 0; t < int'(NT); t++) begin : g_t
    logic [COLS-1:0][ROWS-1:0] s;
    always_comb begin
      for (int j = 0; j < int'(COLS); j++) begin
        if (mode == MODE_CONV1) s[j] = seg[j][t];
        else                    s[j] = (j == 0) ? seg[col][t] : '0;
      end
    end
    pe_array u_arr (
      .clk, .rst_n, .in_valid, .mode, .first, .flush,
      .spk(s), .w, .out_valid(v[t]), .psum(psum[t])
    );
  end

  assign out_valid = v[0];
endmodule
