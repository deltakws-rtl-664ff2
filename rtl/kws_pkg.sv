// kws_pkg: widths, memory map and shared arithmetic of the DeltaKWS keyword-spotting chip.
//
// Number formats (the sizes 12b audio, 12b features, 20b filter states, 12b/8b filter
// coefficients, 16b envelope, 12b deltas and 8b weights follow the paper; the placement of the
// binary point is this design's choice):
//   audio sample      12b signed integer
//   IIR state         20b signed, same scale as the audio input
//   IIR b coefficient 12b signed, 10 fraction bits (range -2..2)
//   IIR a01 gain      8b unsigned, 10 fraction bits (range 0..0.25)
//   envelope          16b unsigned
//   feature, h, delta 12b signed, 8 fraction bits (Q3.8)
//   weight, bias      8b signed, 6 fraction bits (Q1.6)
//   gate memory M     16b signed, 8 fraction bits (Q7.8)
//
// Weight memory map (rows of 64 bits = 8 weights, weight m of a row goes to MAC lane m):
//   GRU rows   row = (j*3 + g)*8 + k     j = delta index (0..NI-1 inputs, NI.. hidden),
//                                        g = gate r/u/c, k = neuron group (neuron 8k+m)
//   FC rows    row = FC_BASE + 2j + q    j = hidden index, class 8q+m
//   bias rows  row = BIAS_BASE + s*8 + k s = r, u, cx, ch;  then BIAS_BASE+32+q for FC bias
// Row r lives in bank group r/1024 (banks 4g..4g+3) at word r%1024; bank b of the group holds
// the weights of lanes 2b (low byte) and 2b+1 (high byte).
package kws_pkg;

  // ---------------- network sizes (Fig. 2(b)) ----------------
  localparam int NI     = 10;   // Delta-input channels
  localparam int NH     = 64;   // Delta-GRU neurons
  localparam int NCLS   = 12;   // classes
  localparam int NLANE  = 8;    // MAC + NLU lanes
  localparam int NGRP   = NH / NLANE;  // neuron groups per lane (8)

  // ---------------- formats ----------------
  localparam int AUD_W  = 12;
  localparam int ST_W   = 20;
  localparam int B_W    = 12;
  localparam int B_FRAC = 10;
  localparam int A_W    = 8;
  localparam int A_FRAC = 10;
  localparam int ENV_W  = 16;
  localparam int FEAT_W = 12;
  localparam int D_W    = 12;   // activations and deltas
  localparam int D_FRAC = 8;
  localparam int W_W    = 8;
  localparam int W_FRAC = 6;
  localparam int M_W    = 16;

  // ---------------- FEx ----------------
  localparam int NCH_MAX     = 16;   // channels the filter bank supports
  localparam int FRAME_LEN   = 128;  // samples per 16 ms frame at 8 kS/s

  // ---------------- weight memory ----------------
  localparam int NBANK      = 12;
  localparam int BANK_WORDS = 1024;
  localparam int FC_BASE    = (NI + NH) * 3 * NGRP;     // 1776
  localparam int BIAS_BASE  = FC_BASE + NH * 2;         // 1904
  localparam int NROWS      = BIAS_BASE + 4 * NGRP + 2; // 1938
  localparam int ROW_W      = 12;

  // accumulator selectors of a lane
  typedef enum logic [2:0] {
    SEL_R = 3'd0, SEL_U = 3'd1, SEL_CX = 3'd2, SEL_CH = 3'd3, SEL_FC0 = 3'd4, SEL_FC1 = 3'd5
  } acc_sel_e;

  // run-time configuration of the Delta-RNN accelerator
  typedef struct packed {
    logic [D_W-1:0] delta_th;    // Delta_TH in Q3.8
    logic [7:0]     num_frames;  // frames per decision
    logic [3:0]     num_in;      // features per frame (<= NI)
  } rnn_cfg_t;

  // log2(1 + i/32) * 256, rounded: mantissa table of the log(x+1) compressor
  localparam logic [7:0] LOG_LUT [32] = '{
    8'd0,   8'd11,  8'd22,  8'd33,  8'd44,  8'd54,  8'd63,  8'd73,
    8'd82,  8'd92,  8'd100, 8'd109, 8'd118, 8'd126, 8'd134, 8'd142,
    8'd150, 8'd157, 8'd165, 8'd172, 8'd179, 8'd186, 8'd193, 8'd200,
    8'd207, 8'd213, 8'd220, 8'd226, 8'd232, 8'd238, 8'd244, 8'd250};

  // saturate a signed value of any width up to 32 bits to W bits
  function automatic logic signed [31:0] sat_s(input logic signed [31:0] v, input int w);
    logic signed [31:0] hi, lo;
    hi = (32'sd1 <<< (w - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // piecewise-linear sigmoid (PLAN), input Q.8, output 0..256 in Q.8
  function automatic logic signed [31:0] sigmoid_q8(input logic signed [31:0] x);
    logic signed [31:0] a, y;
    a = (x < 0) ? -x : x;
    if (a >= 32'sd1280)     y = 32'sd256;
    else if (a >= 32'sd608) y = (a >>> 5) + 32'sd216;
    else if (a >= 32'sd256) y = (a >>> 3) + 32'sd160;
    else                    y = (a >>> 2) + 32'sd128;
    return (x < 0) ? (32'sd256 - y) : y;
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, input Q.8, output -256..256 in Q.8
  function automatic logic signed [31:0] tanh_q8(input logic signed [31:0] x);
    return 2 * sigmoid_q8(2 * x) - 32'sd256;
  endfunction

endpackage
