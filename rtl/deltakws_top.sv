// deltakws_top: the DeltaKWS keyword-spotting chip.
//
// Audio enters as a stream of 12b samples at 8 kS/s. A serial IIR band-pass feature extractor
// (fex) turns every 16 ms of audio into a vector of ten 12b features; an asynchronous FIFO carries
// the features into the clock domain of the Delta-RNN accelerator (delta_rnn), which runs a
// 64-neuron Delta-GRU and a 12-class FC layer whose weights sit in a 24 kB on-chip memory of
// twelve 2 kB banks (weight_mem). After a programmable number of frames (62, one second) the
// accelerator emits the keyword class.
//
// Clocks: the host supplies two fast clocks, clk_rnn_pad and clk_iir_pad. Each SPI link shifts
// one bit per fast clock; clk_div divides each fast clock by RNN_DIV / IIR_DIV for the processing
// logic (the paper's measurements use 125 kHz for the RNN and 128 kHz for the FEx). The divided
// clocks are generated from the fast ones, but the design treats each pair as unrelated and
// crosses with pulse synchronisers (pulse_sync) whose data is held steady by spi_rx.
//
// Audio/FEx link (a_cs_n, a_mosi, clocked by clk_iir_pad), MSB first:
//   12-bit frame: one signed audio sample
//   32-bit frame: {2'b00, addr[9:0], data[19:0]}, a FEx configuration write (see fex)
// Control link (c_cs_n, c_mosi, c_miso, clocked by clk_rnn_pad), MSB first, 40-bit frames:
//   {cmd[3:0], addr[19:0], data[15:0]}: cmd 1 writes weight word addr[13:0] (bank addr[13:10]),
//   cmd 2 writes accelerator configuration register addr[3:0] (see config_reg).
//   During every frame c_miso shifts out the status {dec_seen, 3'b0, class[3:0], frame_cnt[7:0]}.
// Weights must be written while the accelerator waits for features (before audio starts), and
// a restart (config register 3) issued afterwards so that the new biases are loaded.
// dec_valid/dec_cls give the decision in parallel as well (clk_rnn domain, one-clock pulse).
// The block structure and the 12b/16b widths follow the paper; link formats, clock ratios and the
// status word are this design's choices.
module deltakws_top
  import kws_pkg::*;
#(
  parameter int RNN_DIV = 2,
  parameter int IIR_DIV = 2,
  parameter int LEN     = FRAME_LEN
) (
  input  logic        clk_rnn_pad,
  input  logic        clk_iir_pad,
  input  logic        rst_n,
  input  logic        a_cs_n,
  input  logic        a_mosi,
  input  logic        c_cs_n,
  input  logic        c_mosi,
  output logic        c_miso,
  output logic        dec_valid,
  output logic [3:0]  dec_cls,
  output logic        clk_rnn,
  output logic        clk_iir,
  output logic        feat_dropped
);
  // ---------------- clocks ----------------
  clk_div #(.DIV(RNN_DIV)) u_cdr (.clk_in(clk_rnn_pad), .rst_n, .clk_out(clk_rnn));
  clk_div #(.DIV(IIR_DIV)) u_cdi (.clk_in(clk_iir_pad), .rst_n, .clk_out(clk_iir));

  // ---------------- audio / FEx link ----------------
  logic [31:0] a_word;
  logic [5:0]  a_bits;
  logic        a_valid, a_valid_s;
  spi_rx #(.MAXB(32), .TXB(16)) u_spi_a (
    .clk(clk_iir_pad), .rst_n, .cs_n(a_cs_n), .mosi(a_mosi), .miso(),
    .tx_word(16'h0000), .rx_word(a_word), .rx_bits(a_bits), .rx_valid(a_valid));
  pulse_sync u_ps_a (.src_clk(clk_iir_pad), .src_rst_n(rst_n), .src_pulse(a_valid),
                     .dst_clk(clk_iir), .dst_rst_n(rst_n), .dst_pulse(a_valid_s));

  logic                     fx_fv, fx_fdone, fx_drop;
  logic [3:0]               fx_fch;
  logic signed [FEAT_W-1:0] fx_feat;
  logic [NCH_MAX-1:0]       fx_sel;
  fex #(.LEN(LEN)) u_fex (
    .clk(clk_iir), .rst_n,
    .in_valid(a_valid_s && a_bits == 6'd12), .sample(a_word[AUD_W-1:0]),
    .cfg_we(a_valid_s && a_bits == 6'd32), .cfg_addr(a_word[29:20]), .cfg_data(a_word[19:0]),
    .feat_valid(fx_fv), .feat_ch(fx_fch), .feat(fx_feat), .frame_done(fx_fdone),
    .sample_dropped(fx_drop), .ch_sel(fx_sel));

  // ---------------- clock-domain crossing of features ----------------
  logic              f_full, f_empty, f_pop;
  logic [FEAT_W-1:0] f_data;
  async_fifo #(.W(FEAT_W), .DEPTH(16)) u_afifo (
    .wr_clk(clk_iir), .wr_rst_n(rst_n), .wr_en(fx_fv), .wr_data(fx_feat), .wr_full(f_full),
    .rd_clk(clk_rnn), .rd_rst_n(rst_n), .rd_en(f_pop), .rd_data(f_data), .rd_empty(f_empty));
  always_ff @(posedge clk_iir or negedge rst_n)
    if (!rst_n) feat_dropped <= 1'b0;
    else if ((fx_fv && f_full) || fx_drop) feat_dropped <= 1'b1;

  // ---------------- control link ----------------
  logic [39:0] c_word;
  logic [5:0]  c_bits;
  logic        c_valid, c_valid_s;
  logic [15:0] status;
  spi_rx #(.MAXB(40), .TXB(16)) u_spi_c (
    .clk(clk_rnn_pad), .rst_n, .cs_n(c_cs_n), .mosi(c_mosi), .miso(c_miso),
    .tx_word(status), .rx_word(c_word), .rx_bits(c_bits), .rx_valid(c_valid));
  pulse_sync u_ps_c (.src_clk(clk_rnn_pad), .src_rst_n(rst_n), .src_pulse(c_valid),
                     .dst_clk(clk_rnn), .dst_rst_n(rst_n), .dst_pulse(c_valid_s));
  logic c_ok, w_we, r_we;
  assign c_ok = c_valid_s && c_bits == 6'd40;
  assign w_we = c_ok && c_word[39:36] == 4'd1;
  assign r_we = c_ok && c_word[39:36] == 4'd2;

  // ---------------- weight memory and accelerator ----------------
  logic                 rd_en;
  logic [ROW_W-1:0]     rd_row;
  logic [NLANE*W_W-1:0] rd_q;
  weight_mem u_wmem (
    .clk(clk_rnn), .wr_en(w_we), .wr_addr(c_word[29:16]), .wr_data(c_word[15:0]),
    .rd_en, .rd_row, .rd_q);

  logic                  idle, stall, skip, nz, frame_done;
  logic [7:0]            frame_cnt;
  logic signed [M_W-1:0] dec_score;
  delta_rnn u_rnn (
    .clk(clk_rnn), .rst_n,
    .feat_empty(f_empty), .feat_data(f_data), .feat_pop(f_pop),
    .cfg_we(r_we), .cfg_addr(c_word[19:16]), .cfg_data(c_word[15:0]),
    .rd_en, .rd_row, .rd_q,
    .dec_valid, .dec_cls, .dec_score,
    .idle, .stall, .skip, .nz, .frame_done, .frame_cnt);

  logic       dec_seen;
  logic [3:0] last_cls;
  always_ff @(posedge clk_rnn or negedge rst_n)
    if (!rst_n) begin
      dec_seen <= 1'b0; last_cls <= '0;
    end else if (dec_valid) begin
      dec_seen <= 1'b1; last_cls <= dec_cls;
    end
  assign status = {dec_seen, 3'b000, last_cls, frame_cnt};
endmodule
