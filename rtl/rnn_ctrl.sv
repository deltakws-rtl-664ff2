// rnn_ctrl: controller of the Delta-RNN accelerator (paper Fig. 1, "Ctrl").
//
// It runs the network of the paper's Fig. 2(b), a Delta-GRU layer of 64 neurons over 10 input
// features followed by a 12-class FC layer, frame by frame:
//   INIT  read the 34 bias rows into the lanes' gate memories and FC accumulators, clear x_hat,
//         h_hat and h, clear the Delta FIFOs (start of an utterance, after reset/restart and after
//         every decision)
//   LOAD  pop num_in features of the next frame from the asynchronous FIFO into the state buffer
//   ENC   the encoder sweeps the NI+NH state elements, one per clock, stalling while any Delta
//         FIFO is almost full; in parallel the MAC sweep takes each non-zero delta j at the FIFO
//         head and reads its 24 weight rows (3 gates x 8 neuron groups), one per clock; the last
//         row pops the delta. Zero deltas cost one encoder clock and no weight reads.
//   DRAIN one clock for the last accumulation
//   NLU   eight clocks, neuron group k = 0..7 in every lane
//   HWAIT wait for the state assembler to write h_t; after num_frames frames go to FC, else LOAD
//   FC    128 weight rows: h_j is broadcast and row FC_BASE+2j+q accumulates classes 8q+m
//   ARG   start the argmax; its result leaves as the decision, then INIT
// Weight rows are read with a one-clock latency; the accumulate/bias controls (acc_en, bias_en,
// sel, k) are therefore issued one clock after the row address, from an execute-stage register.
// A frame with n non-zero deltas takes about num_in + 24 n + 15 clocks when the MAC sweep is the
// bottleneck (n >= 4), and at least NI+NH encoder clocks otherwise.
// The delta-driven, column-wise schedule follows the paper's description; the state sequence,
// the row layout and the dense FC layer at the end of the utterance are this design's choices.
module rnn_ctrl
  import kws_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  rnn_cfg_t         cfg,
  input  logic             restart,
  // input features
  input  logic             fifo_empty,
  output logic             fifo_pop,
  // state buffer
  output logic             sb_clear,
  output logic             x_we,
  output logic [3:0]       x_idx,
  output logic [6:0]       enc_idx,
  output logic [5:0]       rd_idx,
  // encoder
  output logic             enc_valid,
  input  logic             enc_out_valid,
  // Delta FIFOs
  input  logic             lane_empty,
  input  logic             lane_af,
  input  logic [6:0]       head_idx,
  output logic             lane_pop,
  output logic             lane_clear,
  // MAC lanes
  output logic             d_load,
  output logic             d_from_h,
  output logic             acc_en,
  output logic             bias_en,
  output acc_sel_e         sel,
  output logic [2:0]       k,
  output logic             h_clear,
  output logic             nlu_en,
  output logic [2:0]       nlu_k,
  input  logic             h_done,
  output logic             arg_start,
  // weight memory
  output logic             rd_en,
  output logic [ROW_W-1:0] rd_row,
  // status
  output logic             idle,
  output logic             stall,
  output logic             frame_done,
  output logic [7:0]       frame_cnt
);
  typedef enum logic [3:0] {
    S_INIT, S_LOAD, S_ENC, S_DRAIN, S_NLU, S_HWAIT, S_FC, S_FCD, S_ARG
  } state_e;
  state_e st;

  localparam int NE = NI + NH;
  logic [7:0] cnt;
  logic [6:0] e;
  logic [1:0] g;
  logic [2:0] kk;
  logic       mac_issue;
  logic       ex_acc, ex_bias;
  acc_sel_e   ex_sel, iss_sel;
  logic [2:0] ex_k, iss_k;

  assign mac_issue = (st == S_ENC) && !lane_empty;
  assign enc_valid = (st == S_ENC) && (e != 7'(NE)) && !lane_af;
  assign stall     = (st == S_ENC) && (e != 7'(NE)) && lane_af;
  assign enc_idx   = e;
  assign lane_pop  = mac_issue && g == 2'd2 && kk == 3'(NGRP - 1);
  assign fifo_pop  = (st == S_LOAD) && !fifo_empty && !restart;
  assign x_we      = fifo_pop;
  assign x_idx     = cnt[3:0];
  assign rd_idx    = cnt[6:1];
  assign nlu_en    = (st == S_NLU);
  assign nlu_k     = cnt[2:0];
  assign arg_start = (st == S_ARG);
  assign idle      = (st == S_LOAD) && fifo_empty;
  assign sb_clear  = (st == S_INIT) && cnt == 8'd0;
  assign h_clear   = sb_clear;
  assign lane_clear = sb_clear;
  assign d_from_h  = (st == S_FC);
  assign d_load    = mac_issue || (st == S_FC);

  // row address and accumulator selection of the current issue
  always_comb begin
    rd_en   = 1'b0;
    rd_row  = '0;
    iss_sel = SEL_R;
    iss_k   = '0;
    unique case (st)
      S_INIT: begin
        rd_en  = 1'b1;
        rd_row = ROW_W'(BIAS_BASE) + ROW_W'(cnt);
        if (cnt < 8'(4 * NGRP)) begin
          iss_sel = acc_sel_e'({1'b0, cnt[4:3]});
          iss_k   = cnt[2:0];
        end else begin
          iss_sel = cnt[0] ? SEL_FC1 : SEL_FC0;
        end
      end
      S_ENC: if (mac_issue) begin
        rd_en  = 1'b1;
        rd_row = ((ROW_W'(head_idx) * 12'd3 + ROW_W'(g)) << 3) + ROW_W'(kk);
        iss_k  = kk;
        if (g == 2'd0)      iss_sel = SEL_R;
        else if (g == 2'd1) iss_sel = SEL_U;
        else                iss_sel = (int'(head_idx) < NI) ? SEL_CX : SEL_CH;
      end
      S_FC: begin
        rd_en   = 1'b1;
        rd_row  = ROW_W'(FC_BASE) + ROW_W'(cnt);
        iss_sel = cnt[0] ? SEL_FC1 : SEL_FC0;
      end
      default: ;
    endcase
  end

  assign acc_en  = ex_acc;
  assign bias_en = ex_bias;
  assign sel     = ex_sel;
  assign k       = ex_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_INIT; cnt <= '0; e <= '0; g <= '0; kk <= '0; frame_cnt <= '0;
      ex_acc <= 1'b0; ex_bias <= 1'b0; ex_sel <= SEL_R; ex_k <= '0; frame_done <= 1'b0;
    end else begin
      ex_acc     <= mac_issue || (st == S_FC);
      ex_bias    <= (st == S_INIT);
      ex_sel     <= iss_sel;
      ex_k       <= iss_k;
      frame_done <= 1'b0;
      if (restart) begin
        st <= S_INIT; cnt <= '0; e <= '0; g <= '0; kk <= '0; frame_cnt <= '0;
      end else begin
        unique case (st)
          S_INIT: begin
            frame_cnt <= '0;
            if (cnt == 8'(4 * NGRP + 1)) begin
              cnt <= '0; st <= S_LOAD;
            end else cnt <= cnt + 1'b1;
          end
          S_LOAD: if (!fifo_empty) begin
            if (cnt[3:0] == cfg.num_in - 4'd1) begin
              cnt <= '0; e <= '0; g <= '0; kk <= '0; st <= S_ENC;
            end else cnt <= cnt + 1'b1;
          end
          S_ENC: begin
            if (enc_valid) e <= e + 1'b1;
            if (mac_issue) begin
              kk <= kk + 1'b1;
              if (kk == 3'(NGRP - 1)) g <= (g == 2'd2) ? 2'd0 : g + 1'b1;
            end
            if (e == 7'(NE) && !enc_out_valid && lane_empty) st <= S_DRAIN;
          end
          S_DRAIN: begin
            cnt <= '0; st <= S_NLU;
          end
          S_NLU: begin
            if (cnt == 8'(NGRP - 1)) begin
              cnt <= '0; st <= S_HWAIT;
            end else cnt <= cnt + 1'b1;
          end
          S_HWAIT: if (h_done) begin
            frame_done <= 1'b1;
            frame_cnt  <= frame_cnt + 1'b1;
            cnt        <= '0;
            st         <= (frame_cnt + 8'd1 >= cfg.num_frames) ? S_FC : S_LOAD;
          end
          S_FC: begin
            if (cnt == 8'(2 * NH - 1)) begin
              cnt <= '0; st <= S_FCD;
            end else cnt <= cnt + 1'b1;
          end
          S_FCD: st <= S_ARG;
          S_ARG: begin
            cnt <= '0; st <= S_INIT;
          end
          default: st <= S_INIT;
        endcase
      end
    end
  end
endmodule
