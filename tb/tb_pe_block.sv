// Test of a PE block: four time-step arrays share one weight set. In 3x3 mode
// the block selects column `col` of its segments; in 1x1 mode each array gets
// all nine segments of its time step. Each array's output is compared with a
// direct model; outputs follow their input by one cycle.
module tb_pe_block;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, flush = 0;
  mode_e mode = MODE_CONV3;
  logic [2:0] col = '0;
  logic [8:0][3:0][7:0] seg = '0;
  logic signed [8:0][7:0] w = '0;
  logic out_valid;
  logic signed [3:0][7:0][8:0] psum;
  int checks = 0, failures = 0;

  pe_block dut (.*);

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

  int exp_q [$];
  int ncols;
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int t = 0; t < 4; t++) for (int r = 0; r < 8; r++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'($signed(psum[t][r])) != e) begin
        failures++;
        if (failures < 10) $display("FAIL mode=%0d t=%0d r=%0d got %0d exp %0d", mode, t, r, psum[t][r], e);
      end
    end
    ncols++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      logic [8:0][3:0][7:0] s3;
      logic [7:0][8:0][3:0][7:0] s1;
      for (int j = 0; j < 9; j++) w[j] = 8'(int'($urandom % 41) - 20);
      // 3x3: segment j = column j of the channel, per time step
      s3 = {9{32'($urandom)}};
      for (int j = 0; j < 9; j++) s3[j] = 32'($urandom);
      for (int t = 0; t < 4; t++)
        for (int c = 0; c < 8; c++) for (int o = 0; o < 8; o++) begin
          int s;
          s = 0;
          for (int kx = 0; kx < 3; kx++) for (int ky = 0; ky < 3; ky++) begin
            int ic, ir;
            ic = c + kx - 1; ir = o + ky - 1;
            if (ic >= 0 && ic < 8 && ir >= 0 && ir < 8 && s3[ic][t][ir]) s += int'($signed(w[kx*3+ky]));
          end
          exp_q.push_back(sat9(s));
        end
      // reorder expectations: [t][c][o] pushed, outputs come [c][t][o]
      begin
        int tmp [$];
        tmp = exp_q; exp_q = {};
        for (int c = 0; c < 8; c++) for (int t = 0; t < 4; t++) for (int o = 0; o < 8; o++)
          exp_q.push_back(tmp[t*64 + c*8 + o]);
      end
      ncols = 0;
      mode = MODE_CONV3;
      for (int c = 0; c < 9; c++) begin
        @(negedge clk);
        in_valid = 1; first = (c == 0); flush = (c == 8); col = 3'(c); seg = s3;
      end
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (ncols != 8) begin failures++; $display("FAIL 3x3 columns %0d", ncols); end
      // 1x1
      for (int c = 0; c < 8; c++) for (int j = 0; j < 9; j++) s1[c][j] = 32'($urandom);
      for (int c = 0; c < 8; c++) for (int t = 0; t < 4; t++) for (int o = 0; o < 8; o++) begin
        int s;
        s = 0;
        for (int j = 0; j < 9; j++) if (s1[c][j][t][o]) s += int'($signed(w[j]));
        exp_q.push_back(sat9(s));
      end
      ncols = 0;
      mode = MODE_CONV1;
      for (int c = 0; c < 8; c++) begin
        @(negedge clk);
        in_valid = 1; first = (c == 0); flush = 0; col = 3'(c); seg = s1[c];
      end
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (ncols != 8) begin failures++; $display("FAIL 1x1 columns %0d", ncols); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
