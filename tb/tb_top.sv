// End-to-end test of the accelerator core at its default sizes.
//
// The test keeps its own copy of every buffer, fills the chip's buffers
// through the memory-controller ports with random spikes, weights and biases,
// runs a sequence of layers and compares every word of the output spike
// buffer with a reference model written here from the layer equations
// (3x3 / 1x1 convolution, saturation to 9 bits, temp-SRAM accumulation over
// input groups, bias, bitplane weighting, unrolled LIF with 4/2/1 time steps,
// IAND against the stored residual). Layers:
//   L1 3x3, T=4, 2 groups, 14 output channels, 3x3 output layout
//   L2 3x3 with inputs taken on chip from L1's output bank, T=1
//   L3 1x1, T=2, 2 groups, IAND against preloaded residuals, 1x1 layout
//   L4 3x3 encoding layer, 8 bitplane groups, large weights (saturation)
// Each layer's cycle count is checked against oc*groups*(9 or 8) + 4, and
// every mechanism is counted; a mechanism never seen counts as a failure.
module tb_top;
  import snn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  logic w_we = 0, s_we = 0, b_we = 0, st_we = 0, st_re = 0;
  logic [8:0] w_waddr = '0;
  logic [WWORD-1:0] w_wdata = '0;
  logic [3:0] s_waddr = '0, st_waddr = '0, st_raddr = '0;
  spk_word_t s_wdata = '0, st_wdata = '0, st_rdata;
  logic [7:0] b_waddr = '0, b_wdata = '0;

  spike_iand_former_acc dut (.*);

  int checks = 0, failures = 0;

  // Mirrors of the on-chip buffers.
  spk_word_t        spk_m [2][SPK_DEPTH];
  logic [WWORD-1:0] w_m   [2][W_DEPTH];
  logic [7:0]       b_m   [BIAS_DEPTH];
  spk_word_t        st_m  [2][SPK_DEPTH];

  // Mechanism counters.
  int n_conv3, n_conv1, n_t4, n_t2, n_t1, n_iand_cut, n_temp_acc, n_bias,
      n_bitplane, n_src_temp, n_sat, n_reset, n_leak, n_pingpong;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic rand_spk(int pct);
    return ($urandom % 100) < pct;
  endfunction

  function automatic int sat9(int v);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  function automatic int wgt(logic [WWORD-1:0] word, int idx);
    logic signed [7:0] x;
    x = word[idx*8 +: 8];
    return int'(x);
  endfunction

  // ---------- buffer fills through the outside ports ----------
  task automatic fill_spk(int bank, int addr, int pct);
    spk_word_t d;
    for (int s = 0; s < int'(NSEG); s++)
      for (int t = 0; t < int'(T); t++)
        for (int r = 0; r < int'(ROWS); r++) d[s][t][r] = rand_spk(pct);
    cfg.in_bank = ~bank[0];
    @(negedge clk);
    s_we = 1; s_waddr = 4'(addr); s_wdata = d;
    @(negedge clk);
    s_we = 0;
    spk_m[bank][addr] = d;
  endtask

  task automatic fill_w(int bank, int addr, int wmax);
    logic [WWORD-1:0] d;
    for (int i = 0; i < int'(N_BLK * COLS); i++)
      d[i*8 +: 8] = 8'(int'($urandom % (2 * wmax + 1)) - wmax);
    cfg.w_bank = ~bank[0];
    @(negedge clk);
    w_we = 1; w_waddr = 9'(addr); w_wdata = d;
    @(negedge clk);
    w_we = 0;
    w_m[bank][addr] = d;
  endtask

  task automatic fill_b(int addr, int v);
    @(negedge clk);
    b_we = 1; b_waddr = 8'(addr); b_wdata = 8'(v);
    @(negedge clk);
    b_we = 0;
    b_m[addr] = 8'(v);
  endtask

  task automatic fill_st(int bank, int addr, int pct);
    spk_word_t d;
    for (int s = 0; s < int'(NSEG); s++)
      for (int t = 0; t < int'(T); t++)
        for (int r = 0; r < int'(ROWS); r++) d[s][t][r] = rand_spk(pct);
    cfg.out_bank = ~bank[0];
    @(negedge clk);
    st_we = 1; st_waddr = 4'(addr); st_wdata = d;
    @(negedge clk);
    st_we = 0;
    st_m[bank][addr] = d;
  endtask

  // ---------- reference model of one layer ----------
  task automatic ref_layer(layer_cfg_t c);
    int ng, no, acc [T][8][ROWS];
    ng = int'(c.n_groups); no = int'(c.n_out);
    for (int oc = 0; oc < no; oc++) begin
      for (int g = 0; g < ng; g++) begin
        logic [WWORD-1:0] ww;
        ww = w_m[c.w_bank][(int'(c.w_base) + oc * ng + g) % W_DEPTH];
        for (int t = 0; t < int'(T); t++)
          for (int col = 0; col < 8; col++)
            for (int o = 0; o < int'(ROWS); o++) begin
              int tot, shift;
              tot = 0;
              for (int b = 0; b < int'(N_BLK); b++) begin
                int p;
                p = 0;
                if (c.mode == MODE_CONV3) begin
                  spk_word_t wd;
                  wd = c.src_temp ? st_m[~c.out_bank][(int'(c.spk_base) + g) % 16]
                                  : spk_m[c.in_bank][(int'(c.spk_base) + g) % 16];
                  for (int kx = 0; kx < 3; kx++)
                    for (int ky = 0; ky < 3; ky++) begin
                      int ic, ir;
                      ic = col + kx - 1; ir = o + ky - 1;
                      if (ic >= 0 && ic < 8 && ir >= 0 && ir < 8)
                        if (wd[b*9 + ic][t][ir]) p += wgt(ww, b*9 + kx*3 + ky);
                    end
                end else begin
                  spk_word_t wd;
                  int a;
                  a = (int'(c.spk_base) + 8 * g + col) % 16;
                  wd = c.src_temp ? st_m[~c.out_bank][a] : spk_m[c.in_bank][a];
                  for (int j = 0; j < 9; j++)
                    if (wd[b*9 + j][t][o]) p += wgt(ww, b*9 + j);
                end
                if (sat9(p) != p) n_sat++;
                tot += sat9(p);
              end
              shift = c.bitplane ? (g % 8) : 0;
              tot = tot * (1 << shift);
              if (g > 0) begin tot += acc[t][col][o]; n_temp_acc++; end
              if (g == ng - 1) begin
                logic signed [7:0] bb;
                bb = b_m[oc];
                tot += int'(bb);
                if (bb != 0) n_bias++;
              end
              if (sat9(tot) != tot) n_sat++;
              acc[t][col][o] = sat9(tot);
            end
      end
      // LIF, IAND, store
      for (int col = 0; col < 8; col++) begin
        int addr, sg;
        seg_t sp, x, y;
        for (int o = 0; o < int'(ROWS); o++) begin
          int v, carry;
          carry = 0;
          for (int t = 0; t < int'(T); t++) begin
            v = acc[t][col][o] + carry;
            sp[t][o] = (v >= int'(c.vth));
            if (t < 3 && c.tsel[2 - t]) begin
              if (sp[t][o]) begin carry = 0; n_reset++; end
              else begin
                carry = v >>> 2;
                if (carry != 0) n_leak++;
              end
            end else carry = 0;
          end
        end
        if (c.out_layout == MODE_CONV3) begin
          addr = int'(c.out_base) + oc / 12; sg = (oc % 12) * 9 + col;
        end else begin
          addr = int'(c.out_base) + (oc >= 108 ? 8 : 0) + col; sg = oc % 108;
        end
        addr = addr % 16;
        x = st_m[c.out_bank][addr][sg];
        y = c.iand ? (x & ~sp) : sp;
        if (c.iand) n_iand_cut += $countones(x & sp);
        st_m[c.out_bank][addr][sg] = y;
      end
    end
  endtask

  // ---------- run one layer and compare ----------
  task automatic run_layer(layer_cfg_t c, int words_lo, int words_hi);
    int cyc, expect_cyc;
    cfg = c;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    expect_cyc = int'(c.n_out) * int'(c.n_groups) * ((c.mode == MODE_CONV3) ? 9 : 8) + 4;
    checks++;
    if (cyc != expect_cyc) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc, expect_cyc);
    end
    ref_layer(c);
    if (c.mode == MODE_CONV3) n_conv3++; else n_conv1++;
    if (c.tsel == TSEL_T4) n_t4++;
    if (c.tsel == TSEL_T2) n_t2++;
    if (c.tsel == TSEL_T1) n_t1++;
    if (c.bitplane) n_bitplane++;
    if (c.src_temp) n_src_temp++;
    // read back the bank just written
    cfg.out_bank = ~c.out_bank;
    for (int a = words_lo; a <= words_hi; a++) begin
      @(negedge clk);
      st_re = 1; st_raddr = 4'(a);
      @(negedge clk);
      st_re = 0;
      for (int s = 0; s < int'(NSEG); s++) begin
        checks++;
        if (st_rdata[s] !== st_m[c.out_bank][a][s]) begin
          failures++;
          if (failures < 10)
            $display("FAIL word %0d seg %0d got %h exp %h", a, s, st_rdata[s], st_m[c.out_bank][a][s]);
        end
      end
    end
    cfg.out_bank = c.out_bank;
  endtask

  layer_cfg_t c1, c2, c3, c4;
  int nz;

  initial begin
    cfg = '0;
    cfg.n_groups = 1; cfg.n_out = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Output banks start from known contents.
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < 16; a++) fill_st(b, a, 0);
    for (int i = 0; i < 32; i++) fill_b(i, int'($urandom % 61) - 30);

    // ---------------- L1 ----------------
    c1 = '0;
    c1.mode = MODE_CONV3; c1.out_layout = MODE_CONV3; c1.tsel = TSEL_T4;
    c1.in_bank = 1'b0; c1.w_bank = 1'b0; c1.out_bank = 1'b0;
    c1.n_groups = 2; c1.n_out = 14; c1.spk_base = 4'd0; c1.w_base = 9'd0;
    c1.out_base = 4'd0; c1.vth = 9'sd20;
    for (int a = 0; a < 2; a++) fill_spk(0, a, 30);
    for (int a = 0; a < 28; a++) fill_w(0, a, 6);
    cfg = c1;
    run_layer(c1, 0, 1);

    // ---------------- L2: input from L1's bank, one time step ----------------
    c2 = '0;
    c2.mode = MODE_CONV3; c2.out_layout = MODE_CONV3; c2.tsel = TSEL_T1;
    c2.src_temp = 1'b1; c2.w_bank = 1'b1; c2.out_bank = 1'b1;
    c2.n_groups = 1; c2.n_out = 12; c2.spk_base = 4'd0; c2.w_base = 9'd100;
    c2.out_base = 4'd3; c2.vth = 9'sd10;
    for (int a = 100; a < 112; a++) fill_w(1, a, 10);
    cfg = c2;
    run_layer(c2, 3, 3);
    n_pingpong++;

    // ---------------- L3: 1x1 with IAND, two time steps ----------------
    c3 = '0;
    c3.mode = MODE_CONV1; c3.out_layout = MODE_CONV1; c3.tsel = TSEL_T2;
    c3.iand = 1'b1; c3.in_bank = 1'b1; c3.w_bank = 1'b0; c3.out_bank = 1'b0;
    c3.n_groups = 2; c3.n_out = 5; c3.spk_base = 4'd0; c3.w_base = 9'd200;
    c3.out_base = 4'd8; c3.vth = 9'sd24;
    for (int a = 0; a < 16; a++) fill_spk(1, a, 25);
    for (int a = 200; a < 210; a++) fill_w(0, a, 8);
    for (int a = 8; a < 16; a++) fill_st(0, a, 60);   // residual spikes
    cfg = c3;
    run_layer(c3, 8, 15);
    n_pingpong++;

    // ---------------- L4: bitplane encoding layer ----------------
    c4 = '0;
    c4.mode = MODE_CONV3; c4.out_layout = MODE_CONV3; c4.tsel = TSEL_T4;
    c4.bitplane = 1'b1; c4.in_bank = 1'b0; c4.w_bank = 1'b1; c4.out_bank = 1'b1;
    c4.n_groups = 8; c4.n_out = 3; c4.spk_base = 4'd4; c4.w_base = 9'd300;
    c4.out_base = 4'd10; c4.vth = 9'sd60;
    for (int a = 4; a < 12; a++) fill_spk(0, a, 50);
    for (int a = 300; a < 324; a++) fill_w(1, a, 60);
    cfg = c4;
    run_layer(c4, 10, 10);

    // ---------------- mechanism coverage ----------------
    nz = 0;
    foreach (st_m[b, a]) nz += $countones(st_m[b][a]);
    $display("conv3=%0d conv1=%0d t4=%0d t2=%0d t1=%0d iand_cut=%0d temp_acc=%0d bias=%0d",
             n_conv3, n_conv1, n_t4, n_t2, n_t1, n_iand_cut, n_temp_acc, n_bias);
    $display("bitplane=%0d src_temp=%0d saturate=%0d lif_reset=%0d leak=%0d pingpong=%0d spikes=%0d",
             n_bitplane, n_src_temp, n_sat, n_reset, n_leak, n_pingpong, nz);
    checks += 13;
    if (n_conv3 == 0) failures++;
    if (n_conv1 == 0) failures++;
    if (n_t4 == 0) failures++;
    if (n_t2 == 0) failures++;
    if (n_t1 == 0) failures++;
    if (n_iand_cut == 0) failures++;
    if (n_temp_acc == 0) failures++;
    if (n_bias == 0) failures++;
    if (n_bitplane == 0) failures++;
    if (n_src_temp == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_reset == 0 || n_leak == 0) failures++;
    if (n_pingpong == 0 || nz == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
