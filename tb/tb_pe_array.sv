// Test of the 8x9 PE array in both data flows against a direct model.
//  3x3: random 8x8 spike map and 3x3 kernel, 8 columns + 1 flush column in,
//       8 output columns out, each exactly one cycle after the column that
//       completes it; zero padding at the tile edges.
//  1x1: nine random input channels, 8 columns in, 8 outputs out, one cycle
//       after each input. Also checks 9-bit saturation with large weights.
module tb_pe_array;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, flush = 0;
  mode_e mode = MODE_CONV3;
  logic [8:0][7:0] spk = '0;
  logic signed [8:0][7:0] w = '0;
  logic out_valid;
  logic signed [7:0][8:0] psum;
  int checks = 0, failures = 0, n_sat = 0;

  pe_array dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat9(int v);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  logic map [8][8];        // [col][row]
  logic m1 [9][8][8];      // [ch][col][row]
  int   exp_q [$];
  int   got_cols;

  // Compare outputs as they appear.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int r = 0; r < 8; r++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'($signed(psum[r])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d col=%0d row=%0d got %0d exp %0d", mode, got_cols, r, psum[r], e);
        end
      end
      got_cols++;
    end
  end

  task automatic test3(int wmax);
    int cyc;
    for (int j = 0; j < 9; j++) w[j] = 8'(int'($urandom % (2*wmax+1)) - wmax);
    for (int c = 0; c < 8; c++) for (int r = 0; r < 8; r++) map[c][r] = 1'($urandom);
    for (int c = 0; c < 8; c++)
      for (int o = 0; o < 8; o++) begin
        int s;
        s = 0;
        for (int kx = 0; kx < 3; kx++)
          for (int ky = 0; ky < 3; ky++) begin
            int ic, ir;
            ic = c + kx - 1; ir = o + ky - 1;
            if (ic >= 0 && ic < 8 && ir >= 0 && ir < 8 && map[ic][ir]) s += int'($signed(w[kx*3+ky]));
          end
        if (sat9(s) != s) n_sat++;
        exp_q.push_back(sat9(s));
      end
    got_cols = 0;
    mode = MODE_CONV3;
    for (int c = 0; c < 9; c++) begin
      @(negedge clk);
      in_valid = 1; first = (c == 0); flush = (c == 8);
      spk = '0;
      if (c < 8) for (int r = 0; r < 8; r++) spk[0][r] = map[c][r];
      for (int j = 1; j < 9; j++) spk[j] = 8'($urandom);  // ignored in 3x3 mode
    end
    @(negedge clk);
    in_valid = 0; first = 0; flush = 0;
    @(posedge clk); #1;
    // All 8 outputs must be out by now: 9 input cycles, 1 cycle latency.
    checks++;
    if (got_cols != 8) begin failures++; $display("FAIL 3x3 produced %0d columns", got_cols); end
  endtask

  task automatic test1(int wmax);
    for (int j = 0; j < 9; j++) w[j] = 8'(int'($urandom % (2*wmax+1)) - wmax);
    for (int ch = 0; ch < 9; ch++) for (int c = 0; c < 8; c++) for (int r = 0; r < 8; r++) m1[ch][c][r] = 1'($urandom);
    for (int c = 0; c < 8; c++)
      for (int r = 0; r < 8; r++) begin
        int s;
        s = 0;
        for (int ch = 0; ch < 9; ch++) if (m1[ch][c][r]) s += int'($signed(w[ch]));
        if (sat9(s) != s) n_sat++;
        exp_q.push_back(sat9(s));
      end
    got_cols = 0;
    mode = MODE_CONV1;
    for (int c = 0; c < 8; c++) begin
      @(negedge clk);
      in_valid = 1; first = (c == 0); flush = 0;
      for (int ch = 0; ch < 9; ch++) for (int r = 0; r < 8; r++) spk[ch][r] = m1[ch][c][r];
    end
    @(negedge clk);
    in_valid = 0; first = 0;
    @(posedge clk); #1;
    checks++;
    if (got_cols != 8) begin failures++; $display("FAIL 1x1 produced %0d columns", got_cols); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin test3(20); test1(20); end
    for (int i = 0; i < 10; i++) begin test3(127); test1(127); end
    @(negedge clk);
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
