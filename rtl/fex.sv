// fex: serial IIR band-pass-filter feature extractor (FEx).
//
// A 12b audio sample arriving at 8 kS/s is run through up to 16 band-pass channels by a single
// time-multiplexed filter datapath: fex_reconfig sweeps the selected channels one per clock,
// iir_bpf filters, envelope_det averages |y| over a 128-sample (16 ms) frame, and at the end of
// each frame fex_postproc turns each channel's envelope into a 12b log-compressed, normalised
// feature. The features of one frame leave serially, in channel order, on feat_valid/feat; with
// 10 channels selected (the paper's main configuration, 516 Hz to 4.22 kHz) that is a 10-word
// feature vector every 16 ms. Latency from the sample that ends a frame to its first feature is
// three clocks (sequencer slot, filter register, envelope register, post-processing register).
//
// Configuration (cfg_we, cfg_addr, cfg_data) is decoded by cfg_addr[9:8]:
//   0: filter coefficients, cfg_addr[6:0] and cfg_data[11:0] as in iir_bpf
//   1: post-processing parameters, cfg_addr[5:0] and cfg_data[15:0] as in fex_postproc
//   2: channel-select mask Ch_sel (cfg_data[15:0], bit c enables channel c; reset 16'h03FF)
//   3: clear all filter states, accumulators and the frame counter
// This address map and the reset mask are this design's choices.
module fex
  import kws_pkg::*;
#(
  parameter int LEN = FRAME_LEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [AUD_W-1:0]  sample,
  input  logic                     cfg_we,
  input  logic [9:0]               cfg_addr,
  input  logic [19:0]              cfg_data,
  output logic                     feat_valid,
  output logic [3:0]               feat_ch,
  output logic signed [FEAT_W-1:0] feat,
  output logic                     frame_done,
  output logic                     sample_dropped,
  output logic [NCH_MAX-1:0]       ch_sel
);
  logic clear;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ch_sel <= 16'h03FF;
    else if (cfg_we && cfg_addr[9:8] == 2'd2) ch_sel <= cfg_data[15:0];
  assign clear = cfg_we && cfg_addr[9:8] == 2'd3;

  logic                    s_valid, s_fend, busy;
  logic [3:0]              s_ch;
  logic signed [AUD_W-1:0] s_x;
  fex_reconfig #(.LEN(LEN)) u_seq (
    .clk, .rst_n, .clear, .ch_sel, .in_valid, .sample,
    .slot_valid(s_valid), .slot_ch(s_ch), .slot_x(s_x), .slot_frame_end(s_fend),
    .busy, .dropped(sample_dropped));

  logic                   f_valid, f_fend;
  logic [3:0]             f_ch;
  logic signed [ST_W-1:0] f_y;
  iir_bpf u_bpf (
    .clk, .rst_n, .clear, .in_valid(s_valid), .ch_idx(s_ch), .x(s_x),
    .out_valid(f_valid), .out_ch(f_ch), .y(f_y),
    .cfg_we(cfg_we && cfg_addr[9:8] == 2'd0), .cfg_addr(cfg_addr[6:0]),
    .cfg_data(cfg_data[B_W-1:0]));
  // frame-end flag travels alongside the filter's one-clock latency
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) f_fend <= 1'b0;
    else        f_fend <= s_fend;

  logic             e_valid;
  logic [3:0]       e_ch;
  logic [ENV_W-1:0] e_env;
  envelope_det #(.LEN(LEN)) u_env (
    .clk, .rst_n, .clear, .in_valid(f_valid), .in_ch(f_ch), .y(f_y), .frame_end(f_fend),
    .env_valid(e_valid), .env_ch(e_ch), .env(e_env));

  fex_postproc u_post (
    .clk, .rst_n, .in_valid(e_valid), .in_ch(e_ch), .env(e_env),
    .out_valid(feat_valid), .out_ch(feat_ch), .feat,
    .cfg_we(cfg_we && cfg_addr[9:8] == 2'd1), .cfg_addr(cfg_addr[5:0]),
    .cfg_data(cfg_data[15:0]));

  // pulses after the last selected channel of a frame has left
  logic [3:0] last_ch;
  always_comb begin
    last_ch = '0;
    for (int i = 0; i < NCH_MAX; i++) if (ch_sel[i]) last_ch = 4'(i);
  end
  assign frame_done = feat_valid && feat_ch == last_ch;
endmodule
