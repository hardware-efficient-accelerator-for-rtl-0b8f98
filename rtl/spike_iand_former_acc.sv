// Spiking-transformer accelerator core with fully parallel tick batching.
//
// All four time steps of a layer are processed at once: every PE block holds
// one PE array per time step, all fed the same weight word, and the LIF
// neurons are unrolled over the time steps so no membrane potential is ever
// stored. The residual additions of the transformer are replaced by IAND
// (x AND NOT s), so every layer consumes and produces spikes only.
//
// Datapath, one output column of 8 rows x 4 time steps per cycle:
//   S0  system controller issues the spike, weight and bias reads
//   S1  12 PE blocks (48 PE arrays, 3456 PEs) compute on the SRAM outputs;
//       the temp SRAM read of the column is issued
//   S2  4 accumulators (one per time step) add the 12 blocks, the stored
//       partial sum and, on the last input group, the bias; the partial sum
//       is written back to the temp SRAM; the residual word is read from the
//       spike temp SRAM
//   S3  unrolled LIF neurons fire, partial IAND is applied, the 8x4 spikes
//       are written into one segment of the spike temp SRAM word
// Inputs come from the spike SRAM, or (src_temp) from the spike temp SRAM
// bank not being written, so consecutive layers can stay on chip. Outputs are
// placed for the next layer's data flow (out_layout): 3x3 layout puts
// channel oc column c at word out_base + oc/12, segment (oc mod 12)*9 + c;
// 1x1 layout at word out_base + 8*(oc/108) + c, segment oc mod 108.
//
// The block structure, sizes and widths follow the paper's architecture
// figure; the pipeline, the address maps and the bank roles are this design's.
// The memory controller is not part of this module: its side of every buffer
// is a port here. External ports reach the bank the core is not using; the
// spike temp SRAM's outside read port is taken by the core while a src_temp
// layer runs.
module spike_iand_former_acc
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // layer control
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // memory-controller side
  input  logic              w_we,
  input  logic [8:0]        w_waddr,
  input  logic [WWORD-1:0]  w_wdata,
  input  logic              s_we,
  input  logic [3:0]        s_waddr,
  input  spk_word_t         s_wdata,
  input  logic              b_we,
  input  logic [7:0]        b_waddr,
  input  logic [7:0]        b_wdata,
  input  logic              st_we,
  input  logic [3:0]        st_waddr,
  input  spk_word_t         st_wdata,
  input  logic              st_re,
  input  logic [3:0]        st_raddr,
  output spk_word_t         st_rdata
);
  // ---------------- S0: controller ----------------
  layer_cfg_t cq;
  logic       sp_re, w_re, b_re;
  logic [3:0] sp_raddr;
  logic [8:0] w_raddr;
  logic [7:0] b_raddr;
  pipe_tag_t  tag0, tag1, tag2, tag3;

  sys_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q(cq), .busy, .done,
    .sp_re, .sp_raddr, .w_re, .w_raddr, .b_re, .b_raddr, .tag(tag0)
  );

  logic core_src_temp;
  assign core_src_temp = busy && cq.src_temp;

  // Bank roles: while a layer runs they follow the latched configuration;
  // while idle they follow the cfg port, so the memory controller can point
  // the outside ports at the banks it wants to fill or drain.
  logic in_bank, w_bank, out_bank;
  assign in_bank  = busy ? cq.in_bank  : cfg.in_bank;
  assign w_bank   = busy ? cq.w_bank   : cfg.w_bank;
  assign out_bank = busy ? cq.out_bank : cfg.out_bank;

  // ---------------- buffers ----------------
  spk_word_t        sp_rdata, st_x_rdata, st_c_rdata;
  logic [WWORD-1:0] w_rdata;
  logic [7:0]       b_rdata;

  spike_sram u_spike_sram (
    .clk, .rst_n, .bank_sel(in_bank),
    .re(sp_re && !cq.src_temp), .raddr(sp_raddr), .rdata(sp_rdata),
    .ext_we(s_we), .ext_waddr(s_waddr), .ext_wdata(s_wdata)
  );

  weight_sram u_weight_sram (
    .clk, .rst_n, .bank_sel(w_bank),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata),
    .ext_we(w_we), .ext_waddr(w_waddr), .ext_wdata(w_wdata)
  );

  bias_sram u_bias_sram (
    .clk, .rst_n, .re(b_re), .raddr(b_raddr), .rdata(b_rdata),
    .ext_we(b_we), .ext_waddr(b_waddr), .ext_wdata(b_wdata)
  );

  logic             st_c_re, st_c_we;
  logic [3:0]       st_c_raddr, st_c_waddr;
  logic [NSEG-1:0]  st_c_wseg;
  spk_word_t        st_c_wdata;

  spike_temp_sram u_spike_temp_sram (
    .clk, .rst_n, .bank_sel(out_bank),
    .c_re(st_c_re), .c_raddr(st_c_raddr), .c_rdata(st_c_rdata),
    .c_we(st_c_we), .c_waddr(st_c_waddr), .c_wseg(st_c_wseg), .c_wdata(st_c_wdata),
    .x_re(core_src_temp ? sp_re : st_re), .x_raddr(core_src_temp ? sp_raddr : st_raddr),
    .x_rdata(st_x_rdata),
    .x_we(st_we), .x_waddr(st_waddr), .x_wdata(st_wdata)
  );
  assign st_rdata = st_x_rdata;

  // ---------------- S1: PE blocks ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1 <= '0;
    end else begin
      tag1 <= tag0;
    end
  end

  spk_word_t in_word;
  assign in_word = cq.src_temp ? st_x_rdata : sp_rdata;

  logic signed [N_BLK-1:0][T-1:0][ROWS-1:0][PSUM_W-1:0] blk_psum;
  logic [N_BLK-1:0] blk_valid;

  for (genvar b = 0; b < int'(N_BLK); b++) begin : g_blk
    logic [COLS-1:0][T-1:0][ROWS-1:0] seg;
    logic signed [COLS-1:0][W_W-1:0]  wv;
    always_comb begin
      for (int j = 0; j < int'(COLS); j++) begin
        seg[j] = in_word[b*COLS + j];
        wv[j]  = w_rdata[(b*COLS + j)*W_W +: W_W];
      end
    end
    pe_block u_pe_block (
      .clk, .rst_n, .in_valid(tag1.valid), .mode(cq.mode), .first(tag1.first),
      .flush(tag1.flush), .col(tag1.col), .seg, .w(wv),
      .out_valid(blk_valid[b]), .psum(blk_psum[b])
    );
  end

  // Output column produced from this S1 column (valid one cycle later).
  logic [2:0] ocol1, ocol2, ocol3;
  assign ocol1 = (cq.mode == MODE_CONV1) ? tag1.col : (tag1.flush ? 3'd7 : tag1.col - 3'd1);

  // Bias of the output channel, captured when it arrives.
  logic signed [7:0] bias_hold, bias1, bias2;
  assign bias1 = (tag1.valid && tag1.first && tag1.first_g) ? b_rdata : bias_hold;

  // Temp SRAM read for the column whose partial sums arrive next cycle.
  logic tmp_re;
  assign tmp_re = tag1.valid && !tag1.first_g &&
                  (cq.mode == MODE_CONV1 || !tag1.first);

  // ---------------- S2: accumulators ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag2      <= '0;
      ocol2     <= '0;
      bias2     <= '0;
      bias_hold <= '0;
    end else begin
      tag2      <= tag1;
      ocol2     <= ocol1;
      bias2     <= bias1;
      bias_hold <= bias1;
    end
  end

  logic v2;
  assign v2 = blk_valid[0];

  psum_col_t acc_sum [T];
  psum_col_t tmp_rd  [T];

  for (genvar t = 0; t < int'(T); t++) begin : g_t
    logic signed [N_BLK-1:0][ROWS-1:0][PSUM_W-1:0] ps;
    always_comb
      for (int b = 0; b < int'(N_BLK); b++) ps[b] = blk_psum[b][t];

    temp_sram u_temp_sram (
      .clk, .rst_n,
      .we(v2 && !tag2.last_g), .waddr(7'(ocol2)), .wdata(acc_sum[t]),
      .re(tmp_re), .raddr(7'(ocol1)), .rdata(tmp_rd[t])
    );

    accumulator u_acc (
      .psum(ps), .use_temp(!tag2.first_g), .temp(tmp_rd[t]),
      .add_bias(tag2.last_g), .bias(bias2), .shift(tag2.shift), .sum(acc_sum[t])
    );
  end

  // Output location of (oc, column).
  function automatic logic [3:0] out_addr(input layer_cfg_t c, input logic [7:0] o,
                                          input logic [2:0] col);
    if (c.out_layout == MODE_CONV3) return c.out_base + 4'(o / 8'd12);
    else                            return c.out_base + ((o >= 8'd108) ? 4'd8 : 4'd0) + 4'(col);
  endfunction
  function automatic logic [6:0] out_seg(input layer_cfg_t c, input logic [7:0] o,
                                         input logic [2:0] col);
    if (c.out_layout == MODE_CONV3) return 7'((o % 8'd12) * 8'd9 + 8'(col));
    else                            return 7'(o % 8'd108);
  endfunction

  logic st_out2;
  assign st_out2    = v2 && tag2.last_g;
  assign st_c_re    = st_out2 && cq.iand;
  assign st_c_raddr = out_addr(cq, tag2.oc, ocol2);

  // ---------------- S3: LIF, IAND, store ----------------
  logic signed [T-1:0][ROWS-1:0][PSUM_W-1:0] acc_q;
  logic v3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
      v3    <= 1'b0;
      tag3  <= '0;
      ocol3 <= '0;
    end else begin
      for (int t = 0; t < int'(T); t++) acc_q[t] <= acc_sum[t];
      v3    <= st_out2;
      tag3  <= tag2;
      ocol3 <= ocol2;
    end
  end

  seg_t lif_spk, iand_out;
  logic [6:0] seg3;
  assign seg3 = out_seg(cq, tag3.oc, ocol3);

  lif_unrolled u_lif (
    .acc(acc_q), .vth(cq.vth), .tsel(cq.tsel), .spk(lif_spk)
  );

  partial_iand u_iand (
    .en(cq.iand), .x(st_c_rdata[seg3]), .s(lif_spk), .y(iand_out)
  );

  always_comb begin
    st_c_we    = v3;
    st_c_waddr = out_addr(cq, tag3.oc, ocol3);
    st_c_wseg  = '0;
    st_c_wseg[seg3] = 1'b1;
    for (int s = 0; s < int'(NSEG); s++) st_c_wdata[s] = iand_out;
  end

  // All PE blocks run in lock step.
  assert property (@(posedge clk) disable iff (!rst_n) (blk_valid == '0) || (&blk_valid));
endmodule
