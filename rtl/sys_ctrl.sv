// System controller: runs one layer through the PE blocks.
//
// On start the layer configuration is latched and the controller walks
//   for oc in 0..n_out-1          (output channels)
//     for g in 0..n_groups-1      (input channel groups)
//       for step                  (columns of the 8x8 map)
// issuing one column per clock cycle with no stalls:
//  * 3x3 mode: steps 0..8. The group's spike word (8 columns of 12 input
//    channels) and weight word are read once at step 0 and held at the SRAM
//    outputs; step 8 is a zero flush column that empties the PE arrays'
//    column combiner. 9 cycles per group.
//  * 1x1 mode: steps 0..7, one spike word (one column of 108 input channels)
//    per step, weight word read once at step 0. 8 cycles per group.
// The bias of an output channel is read at its first step. Each issued read
// carries a pipeline tag (first/flush/column/first and last group/bitplane
// shift/output channel) that the datapath delays along with the data. After
// the last issue the controller waits DRAIN cycles for the pipeline to finish
// writing, then pulses done for one cycle and drops busy. start is ignored
// while busy.
//
// The paper names the controller only; the loop order, the single weight
// fetch per group and the timing are this design's, chosen to match the
// paper's one output column per cycle and one weight access for all time
// steps. Address map: spike word = spk_base + g (3x3) or spk_base + 8g + step
// (1x1); weight word = w_base + oc*n_groups + g; bias address = oc.
module sys_ctrl
  import snn_pkg::*;
#(
  parameter int unsigned DRAIN = 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output layer_cfg_t  cfg_q,
  output logic        busy,
  output logic        done,
  output logic        sp_re,
  output logic [3:0]  sp_raddr,
  output logic        w_re,
  output logic [8:0]  w_raddr,
  output logic        b_re,
  output logic [7:0]  b_raddr,
  output pipe_tag_t   tag
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN } state_e;
  state_e     state;
  logic [7:0] oc;
  logic [5:0] g;
  logic [3:0] step;
  logic [1:0] drain;
  logic [8:0] w_grp;     // oc * n_groups, kept incrementally

  logic [3:0] last_step;
  logic       last_col, last_grp, last_oc;

  assign last_step = (cfg_q.mode == MODE_CONV3) ? 4'd8 : 4'd7;
  assign last_col  = (step == last_step);
  assign last_grp  = (g == cfg_q.n_groups - 6'd1);
  assign last_oc   = (oc == cfg_q.n_out - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg_q <= '0;
      oc    <= '0;
      g     <= '0;
      step  <= '0;
      drain <= '0;
      w_grp <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cfg_q <= cfg;
          oc    <= '0;
          g     <= '0;
          step  <= '0;
          w_grp <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (!last_col) step <= step + 4'd1;
          else begin
            step <= '0;
            if (!last_grp) g <= g + 6'd1;
            else begin
              g     <= '0;
              w_grp <= w_grp + 9'(cfg_q.n_groups);
              if (!last_oc) oc <= oc + 8'd1;
              else begin
                state <= S_DRAIN;
                drain <= 2'(DRAIN - 1);
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else drain <= drain - 2'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic run;
  assign run  = (state == S_RUN);
  assign busy = (state != S_IDLE);

  always_comb begin
    sp_re    = run && ((cfg_q.mode == MODE_CONV1) || step == 4'd0);
    sp_raddr = (cfg_q.mode == MODE_CONV1) ? cfg_q.spk_base + {g[0], 3'b000} + step
                                          : cfg_q.spk_base + g[3:0];
    w_re     = run && (step == 4'd0);
    w_raddr  = cfg_q.w_base + w_grp + 9'(g);
    b_re     = run && (step == 4'd0) && (g == '0);
    b_raddr  = oc;
    tag.valid   = run;
    tag.first   = (step == 4'd0);
    tag.flush   = (cfg_q.mode == MODE_CONV3) && (step == 4'd8);
    tag.col     = step[2:0];
    tag.first_g = (g == '0);
    tag.last_g  = last_grp;
    tag.shift   = cfg_q.bitplane ? g[2:0] : 3'd0;
    tag.oc      = oc;
  end

  // A layer needs at least one group and one output channel.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !busy) |-> (cfg.n_groups != 0 && cfg.n_out != 0));
endmodule
