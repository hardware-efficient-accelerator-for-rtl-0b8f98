// Unrolled, time-step reconfigurable LIF neurons.
//
// Instead of keeping a membrane potential in memory between time steps, the
// leaky integrate-and-fire recurrence is unrolled over the four time steps
// and evaluated in one combinational pass, because the four accumulator
// results of all time steps arrive together. For each of the R neurons:
//   V(1) = acc(1)
//   V(t) = acc(t) + carry(t-1),  carry(t-1) = (tsel link on and no spike at
//          t-1) ? V(t-1) >>> LEAK_SHIFT : 0
//   spk(t) = V(t) >= vth
// The shift by 2 (leak factor 0.25), the comparator Vin >= Vth, the zero
// input of the carry mux and the three link selectors are the paper's; the
// selectors (from time step 1/2 link to 3/4 link) are 111 for four time steps,
// 101 for two independent pairs and 000 for four independent single steps.
// Resetting to 0 after a spike (hard reset) is this design's reading of the
// zero input. The membrane is one bit wider than the accumulator output, which
// covers acc + V/4 without overflow. The threshold is a run-time input in the
// accumulator's fixed-point scale.
module lif_unrolled
  import snn_pkg::*;
#(
  parameter int unsigned NT         = T,
  parameter int unsigned R          = ROWS,
  parameter int unsigned PW         = PSUM_W,
  parameter int unsigned LEAK_SHIFT = 2
) (
  input  logic signed [NT-1:0][R-1:0][PW-1:0] acc,   // [t][row]
  input  logic signed [PW-1:0]                vth,
  input  logic [NT-2:0]                       tsel,  // [NT-2] = link t1->t2
  output logic [NT-1:0][R-1:0]                spk    // [t][row]
);
  always_comb begin
    for (int r = 0; r < int'(R); r++) begin
      logic signed [PW:0] v;
      logic signed [PW:0] carry;
      carry = '0;
      for (int t = 0; t < int'(NT); t++) begin
        v         = (PW+1)'($signed(acc[t][r])) + carry;
        spk[t][r] = (v >= (PW+1)'(vth));
        if (t < int'(NT) - 1 && tsel[NT-2-t] && !spk[t][r]) carry = v >>> LEAK_SHIFT;
        else                                              carry = '0;
      end
    end
  end
endmodule
