// tb_deltakws_top: whole-chip test at the default parameters, one full decision.
//
// Acts as the host: over the control link it loads a random network into the 24 kB weight memory
// and sets Delta_TH; over the audio link it programs sixteen stable band-pass channels, selects
// ten of them (channels 2..11) and then streams one second of synthetic audio (8000 samples:
// silence, a tone burst, silence) as 12-bit SPI frames at 8 kS/s. The features the FEx puts into
// the asynchronous FIFO are captured, checked for count and channel order, and run through the
// reference network (kws_ref_pkg); after the 62nd frame the chip's decision (parallel output and
// the status word read back over the control link) must match the reference. Every mechanism of
// the design must occur at least once: unselected channel slots, frame ends, FIFO crossings,
// zero deltas skipped, non-zero deltas, encoder stalls on full Delta FIFOs, the restart, and the
// decision.
module tb_deltakws_top;
  import kws_pkg::*;
  import kws_ref_pkg::*;

  localparam int NFRAMES = 62;
  localparam logic [15:0] CH_SEL = 16'h0FFC;
  logic clk_rnn_pad = 0, clk_iir_pad = 0, rst_n = 1;
  always #2 clk_rnn_pad = ~clk_rnn_pad;
  always #3 clk_iir_pad = ~clk_iir_pad;

  logic a_cs_n = 1, a_mosi = 0, c_cs_n = 1, c_mosi = 0, c_miso;
  logic dec_valid, clk_rnn, clk_iir, feat_dropped;
  logic [3:0] dec_cls;

  deltakws_top dut (.clk_rnn_pad, .clk_iir_pad, .rst_n, .a_cs_n, .a_mosi, .c_cs_n, .c_mosi,
                    .c_miso, .dec_valid, .dec_cls, .clk_rnn, .clk_iir, .feat_dropped);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #60000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host link tasks ----------------
  task automatic c_frame(logic [39:0] word, output logic [15:0] st);
    st = '0;
    @(negedge clk_rnn_pad);
    c_cs_n = 0;
    for (int i = 39; i >= 0; i--) begin
      c_mosi = word[i];
      @(posedge clk_rnn_pad);
      if (i >= 24) st = {st[14:0], c_miso};
      @(negedge clk_rnn_pad);
    end
    c_cs_n = 1;
    repeat (12) @(negedge clk_rnn_pad);
  endtask

  task automatic a_frame(logic [31:0] word, int nbits, int gap);
    @(negedge clk_iir_pad);
    a_cs_n = 0;
    for (int i = nbits - 1; i >= 0; i--) begin
      a_mosi = word[i];
      @(negedge clk_iir_pad);
    end
    a_cs_n = 1;
    repeat (gap) @(negedge clk_iir_pad);
  endtask

  task automatic fex_cfg(int addr, int data);
    a_frame({2'b00, 10'(addr), 20'(data)}, 32, 8);
  endtask

  // ---------------- observation ----------------
  int n_skip = 0, n_nz = 0, n_stall = 0, n_unsel = 0, n_fend = 0, n_xfer = 0, n_dec = 0;
  int n_restart = 0, lat = 0;
  always @(negedge clk_rnn) if (rst_n) begin
    if (dut.u_rnn.skip)  n_skip++;
    if (dut.u_rnn.nz)    n_nz++;
    if (dut.u_rnn.stall) n_stall++;
    if (dut.f_pop)       n_xfer++;
    if (dut.u_rnn.u_cfg.restart) n_restart++;
    if (dec_valid)       n_dec++;
    if (dut.f_pop)       lat = 0;
    else if (n_dec == 0) lat++;
  end
  int feats [NFRAMES][NI];
  int nfeat = 0;
  int exp_ch;
  always @(negedge clk_iir) if (rst_n) begin
    if (dut.u_fex.busy && !dut.u_fex.s_valid) n_unsel++;
    if (dut.u_fex.frame_done) n_fend++;
    if (dut.u_fex.feat_valid) begin
      exp_ch = 2 + nfeat % NI;
      if (dut.u_fex.feat_ch != 4'(exp_ch)) begin
        checks++; failures++;
        $display("FAIL: feature %0d from channel %0d, expected %0d", nfeat, dut.u_fex.feat_ch,
                 exp_ch);
      end
      if (nfeat < NFRAMES * NI) feats[nfeat / NI][nfeat % NI] = int'(dut.u_fex.feat);
      nfeat++;
    end
  end

  // ---------------- stimulus ----------------
  logic [15:0] st;
  real th_pi = 3.14159265358979;
  initial begin
    randomize_weights(7, 40);
    #1 rst_n = 0;                          // a real falling edge for the asynchronous resets
    repeat (5) @(negedge clk_rnn_pad);
    rst_n = 1;
    repeat (20) @(negedge clk_rnn_pad);
    // weights: row r, lane l -> bank 4*(r/1024) + l/2, word r%1024, byte l%2
    for (int r = 0; r < NROWS; r++)
      for (int b = 0; b < 4; b++)
        c_frame({4'd1, 6'd0, 4'(4 * (r / 1024) + b), 10'(r % 1024),
                 8'(w[r][2 * b + 1]), 8'(w[r][2 * b])}, st);
    c_frame({4'd2, 20'd0, 16'd51}, st);   // Delta_TH = 0.2
    c_frame({4'd2, 20'd3, 16'd0}, st);    // restart: load biases
    $display("weights loaded at %0t", $time);
    // FEx: channel c has two pole pairs of radius 0.9 at angle pi*(c+1)/18
    for (int c = 0; c < NCH_MAX; c++) begin
      int b1, b2;
      b1 = int'(-1.8 * $cos(th_pi * (c + 1) / 18.0) * 1024.0);
      b2 = int'(0.81 * 1024.0);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd0}, b1);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd1}, b2);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd2}, b1);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd3}, b2);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd4}, 64);
      fex_cfg({2'd0, 1'b0, 4'(c), 3'd5}, 2);        // SOS-II numerator 1 - 2z^-1 + z^-2
      fex_cfg({2'd1, 2'b00, 4'(c), 2'd2}, 1536);    // mu = 6.0 in the log domain
    end
    fex_cfg({2'd2, 8'd0}, CH_SEL);
    fex_cfg({2'd3, 8'd0}, 0);                       // clear filter states and frame counter
    // one second of audio
    for (int n = 0; n < NFRAMES * FRAME_LEN; n++) begin
      int s;
      real env;
      env = (n > 2500 && n < 5500) ? 1.0 : 0.0;
      s = int'(env * 1500.0 * $sin(2.0 * th_pi * 700.0 * n / 8000.0)
               + env * 400.0 * $sin(2.0 * th_pi * 2100.0 * n / 8000.0));
      a_frame(32'(12'(s)), 12, 32 - 12 - 1);
    end
    // decision
    fork
      begin
        @(negedge clk_rnn iff dec_valid);
      end
      begin
        #40000000;
      end
    join_any
    disable fork;
    check(nfeat == NFRAMES * NI, $sformatf("%0d features, expected %0d", nfeat, NFRAMES * NI));
    init();
    for (int f = 0; f < NFRAMES; f++) begin
      int xf [NI];
      for (int i = 0; i < NI; i++) xf[i] = (feats[f][i] > 2047) ? feats[f][i] - 4096 : feats[f][i];
      frame(xf, 51);
    end
    begin
      int best;
      best = decide();
      $display("decision %0d, reference %0d (score %0d)", dec_cls, best, fc[best]);
      check(dec_cls == 4'(best), "decided class differs from the reference");
      check(dut.u_rnn.dec_score == 16'(fc[best]), "decision score differs from the reference");
      check(n_nz == nz_cnt, $sformatf("non-zero deltas %0d, reference %0d", n_nz, nz_cnt));
    end
    repeat (50) @(negedge clk_rnn_pad);
    check(n_dec == 1, $sformatf("%0d decisions, expected 1", n_dec));
    // latency from the last feature entering the accelerator to the decision, in RNN clocks:
    // the last frame (at most 24 weight rows per non-zero delta) plus 128 FC rows and the argmax
    $display("decision latency %0d RNN clocks after the last feature (%0d us at 125 kHz)",
             lat, lat * 8);
    check(lat > 2 * NH && lat <= 24 * (NI + NH) + 2 * NH + 40, "decision latency");
    c_frame({4'd0, 36'd0}, st);
    check(st[15] && st[11:8] == dec_cls, $sformatf("status word %h", st));
    check(!feat_dropped, "features or samples were dropped");
    $display("mechanisms: unselected slots %0d, frame ends %0d, FIFO transfers %0d, skips %0d, non-zero %0d, stalls %0d, restarts %0d, decisions %0d",
             n_unsel, n_fend, n_xfer, n_skip, n_nz, n_stall, n_restart, n_dec);
    check(n_unsel > 0, "channel selection never skipped a slot");
    check(n_fend == NFRAMES, "frame count");
    check(n_xfer == NFRAMES * NI, "FIFO crossings");
    check(n_skip > 0, "no zero delta skipped");
    check(n_nz > 0, "no non-zero delta");
    check(n_stall > 0, "encoder never stalled");
    check(n_restart > 0, "restart never happened");
    $display("temporal sparsity %0d %%", 100 * n_skip / (n_skip + n_nz));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
