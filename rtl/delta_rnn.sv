// delta_rnn: the temporally sparse Delta-RNN accelerator (paper Fig. 1 and Fig. 3).
//
// Runs a Delta-GRU of NH = 64 neurons over NI = 10 input features per 16 ms frame and, after
// num_frames frames, a 12-class FC layer and an argmax. Its idea: instead of multiplying the whole
// weight matrix with each new input and hidden vector, only the elements whose change since they
// were last propagated exceeds Delta_TH are propagated, and each such delta costs one weight
// column. With about 87 % of the deltas below threshold (the paper's design point) most weight
// reads and MACs of a frame are skipped.
//
// Structure: config_reg (host settings), rnn_ctrl (sequencing), state_buffer (x_t, x_hat, h,
// h_hat), delta_encoder (one element per clock), eight delta_lane ('0'-skip + Delta FIFO, every
// lane receives the same broadcast stream), eight mac_nlu lanes (gate memories, MAC, nonlinear
// unit), state_assembler (collects h and class scores) and argmax. The 24 kB weight memory is
// outside (weight_mem): rd_en/rd_row ask for a 64-bit row of eight 8b weights, which must arrive
// on rd_q one clock later.
//
// Interface: feat_empty/feat_data/feat_pop read 12b features (Q3.8) from the asynchronous FIFO;
// cfg_we/cfg_addr/cfg_data write config_reg; dec_valid pulses with the decided class dec_cls and
// its score. Status outputs idle, stall, skip, nz, frame_done, frame_cnt serve the host and tests.
// The lane count, operand widths, encoder, '0'-skip, Delta FIFOs, broadcast and state assembler
// follow the paper; everything about formats, memory layout and scheduling is this design's own.
module delta_rnn
  import kws_pkg::*;
#(
  parameter int FIFO_DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // features from the asynchronous FIFO
  input  logic                  feat_empty,
  input  logic [FEAT_W-1:0]     feat_data,
  output logic                  feat_pop,
  // configuration
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_addr,
  input  logic [15:0]           cfg_data,
  // weight memory read port
  output logic                  rd_en,
  output logic [ROW_W-1:0]      rd_row,
  input  logic [NLANE*W_W-1:0]  rd_q,
  // decision
  output logic                  dec_valid,
  output logic [3:0]            dec_cls,
  output logic signed [M_W-1:0] dec_score,
  // status
  output logic                  idle,
  output logic                  stall,
  output logic                  skip,
  output logic                  nz,
  output logic                  frame_done,
  output logic [7:0]            frame_cnt
);
  rnn_cfg_t cfg;
  logic     restart;
  config_reg u_cfg (.clk, .rst_n, .we(cfg_we), .addr(cfg_addr), .data(cfg_data), .cfg, .restart);

  // controller
  logic sb_clear, x_we, enc_valid, lane_pop, lane_clear, d_load, d_from_h, acc_en, bias_en;
  logic h_clear, nlu_en, h_done, arg_start;
  logic [3:0] x_idx;
  logic [6:0] enc_idx;
  logic [5:0] rd_idx;
  logic [2:0] k, nlu_k;
  acc_sel_e   sel;
  logic       enc_out_valid, enc_out_nz, upd_en;
  logic [6:0] enc_out_idx, upd_idx;
  logic signed [D_W-1:0] enc_out_delta, upd_val, enc_cur, enc_prev, rd_h;
  logic [NLANE-1:0] l_empty, l_af, l_skip;
  logic [6:0]            l_hidx [NLANE];
  logic signed [D_W-1:0] l_hd   [NLANE];

  rnn_ctrl u_ctrl (
    .clk, .rst_n, .cfg, .restart,
    .fifo_empty(feat_empty), .fifo_pop(feat_pop),
    .sb_clear, .x_we, .x_idx, .enc_idx, .rd_idx,
    .enc_valid, .enc_out_valid,
    .lane_empty(l_empty[0]), .lane_af(|l_af), .head_idx(l_hidx[0]), .lane_pop, .lane_clear,
    .d_load, .d_from_h, .acc_en, .bias_en, .sel, .k, .h_clear, .nlu_en, .nlu_k, .h_done,
    .arg_start, .rd_en, .rd_row, .idle, .stall, .frame_done, .frame_cnt);

  logic                  hw_en;
  logic [2:0]            hw_k;
  logic signed [D_W-1:0] hw_data [NLANE];
  state_buffer u_sb (
    .clk, .rst_n, .clear(sb_clear), .x_we, .x_idx, .x_data(feat_data),
    .enc_idx, .enc_cur, .enc_prev, .upd_en, .upd_idx, .upd_val,
    .hw_en, .hw_k, .hw_data, .rd_idx, .rd_h);

  delta_encoder u_enc (
    .clk, .rst_n, .in_valid(enc_valid), .in_idx(enc_idx), .cur(enc_cur), .prev(enc_prev),
    .th(cfg.delta_th), .out_valid(enc_out_valid), .out_idx(enc_out_idx),
    .out_delta(enc_out_delta), .out_nz(enc_out_nz), .upd_en, .upd_idx, .upd_val);

  logic                  h_valid [NLANE];
  logic [2:0]            h_k     [NLANE];
  logic signed [D_W-1:0] h_new   [NLANE];
  logic signed [M_W-1:0] fc0 [NLANE], fc1 [NLANE];

  for (genvar m = 0; m < NLANE; m++) begin : g_lane
    delta_lane #(.DEPTH(FIFO_DEPTH)) u_dl (
      .clk, .rst_n, .clear(lane_clear), .in_valid(enc_out_valid), .in_idx(enc_out_idx),
      .in_delta(enc_out_delta), .pop(lane_pop), .empty(l_empty[m]), .almost_full(l_af[m]),
      .head_idx(l_hidx[m]), .head_delta(l_hd[m]), .skip(l_skip[m]));
    mac_nlu u_mac (
      .clk, .rst_n, .d_load, .d_in(d_from_h ? rd_h : l_hd[m]),
      .acc_en, .bias_en, .sel, .k, .w(rd_q[m*W_W +: W_W]),
      .h_clear, .nlu_en, .nlu_k,
      .h_valid(h_valid[m]), .h_k(h_k[m]), .h_new(h_new[m]), .fc0(fc0[m]), .fc1(fc1[m]));
  end

  logic signed [M_W-1:0] scores [NCLS];
  state_assembler u_asm (
    .clk, .rst_n, .h_valid(h_valid[0]), .h_k(h_k[0]), .h_new, .fc0, .fc1,
    .hw_en, .hw_k, .hw_data, .h_done, .scores);

  argmax u_arg (
    .clk, .rst_n, .in_valid(arg_start), .scores, .out_valid(dec_valid), .cls(dec_cls),
    .max_score(dec_score));

  assign skip = l_skip[0];
  assign nz   = enc_out_valid && enc_out_nz;
endmodule
