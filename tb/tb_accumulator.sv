// Random test of the time-step accumulator: 12 block sums, optional temp
// partial sum, optional bias, bitplane shift, 9-bit saturation.
module tb_accumulator;
  logic signed [11:0][7:0][8:0] psum;
  logic use_temp, add_bias;
  logic signed [7:0][8:0] temp, sum;
  logic signed [7:0] bias;
  logic [2:0] shift;
  int checks = 0, failures = 0, n_sat = 0;

  accumulator dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat9(int v);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int range;
      range = (it % 3 == 0) ? 512 : 40;
      for (int b = 0; b < 12; b++) for (int r = 0; r < 8; r++) psum[b][r] = 9'(int'($urandom % range) - range / 2);
      for (int r = 0; r < 8; r++) temp[r] = 9'(int'($urandom % 512) - 256);
      use_temp = 1'($urandom); add_bias = 1'($urandom);
      bias = 8'($urandom); shift = (it % 4 == 0) ? 3'($urandom) : 3'd0;
      #1;
      for (int r = 0; r < 8; r++) begin
        int s, e;
        s = 0;
        for (int b = 0; b < 12; b++) s += int'($signed(psum[b][r]));
        s = s * (1 << shift);
        if (use_temp) s += int'($signed(temp[r]));
        if (add_bias) s += int'(bias);
        e = sat9(s);
        if (e != s) n_sat++;
        checks++;
        if (int'($signed(sum[r])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d r=%0d got %0d exp %0d", it, r, sum[r], e);
        end
      end
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
