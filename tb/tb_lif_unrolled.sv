// Test of the unrolled LIF neurons for the three time-step configurations
// (selectors 111, 101, 000) against a sequential LIF model run over each
// independent group of time steps: V = acc + V_prev/4 (arithmetic shift),
// fire when V >= vth, membrane 0 after a spike and at a group start.
// Includes one hand-worked case.
module tb_lif_unrolled;
  import snn_pkg::*;
  logic signed [3:0][7:0][8:0] acc;
  logic signed [8:0] vth;
  logic [2:0] tsel;
  logic [3:0][7:0] spk;
  int checks = 0, failures = 0, n_fire_after_leak = 0;

  lif_unrolled dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(int steps);
    #1;
    for (int r = 0; r < 8; r++) begin
      int v;
      v = 0;
      for (int t = 0; t < 4; t++) begin
        logic e;
        if (t % steps == 0) v = 0;       // new sample: no carried membrane
        v = int'($signed(acc[t][r])) + (v >>> 2);
        e = (v >= int'(vth));
        if (e && t % steps != 0 && int'($signed(acc[t][r])) < int'(vth)) n_fire_after_leak++;
        checks++;
        if (spk[t][r] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL steps=%0d t=%0d r=%0d got %0d exp %0d", steps, t, r, spk[t][r], e);
        end
        if (e) v = 0;
      end
    end
  endtask

  initial begin
    // Hand-worked: acc = 6, 6, 6, 6 with vth 7 and four time steps:
    // V1=6 no, V2=6+1=7 fire, V3=6 no, V4=6+1=7 fire.
    acc = '0; vth = 9'sd7; tsel = TSEL_T4;
    for (int t = 0; t < 4; t++) acc[t][0] = 9'sd6;
    #1;
    checks++;
    if ({spk[3][0], spk[2][0], spk[1][0], spk[0][0]} != 4'b1010) failures++;
    // Same input with one time step: never fires.
    tsel = TSEL_T1;
    #1;
    checks++;
    if ({spk[3][0], spk[2][0], spk[1][0], spk[0][0]} != 4'b0000) failures++;
    for (int it = 0; it < 3000; it++) begin
      for (int t = 0; t < 4; t++) for (int r = 0; r < 8; r++) acc[t][r] = 9'(int'($urandom % 512) - 256);
      vth = 9'(int'($urandom % 200));
      tsel = TSEL_T4; check_all(4);
      tsel = TSEL_T2; check_all(2);
      tsel = TSEL_T1; check_all(1);
    end
    checks++;
    if (n_fire_after_leak == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
