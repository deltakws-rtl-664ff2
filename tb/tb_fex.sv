// tb_fex: bit-true, self-checking test of the feature extractor and its four sub-blocks
// (fex_reconfig, iir_bpf, envelope_det, fex_postproc).
//
// The test programs all sixteen channels with random stable band-pass sections (pole radius
// 0.75..0.95, numerator 1 -/+ 2z^-1 + z^-2) and random post-processing constants (beta, alpha, mu,
// 1/sigma), and selects a non-contiguous set of channels. It then streams LEN-sample frames of
// random-amplitude audio, one sample every 20 clocks. A model written from the equations
//   w[n] = x[n] - (b1 w[n-1] + b2 w[n-2]) / 2^10 ;  v[n] = w[n] +/- 2 w[n-1] + w[n-2]
//   (SOS 1 output scaled by a01 / 2^10, saturated to 20 b), env = sum |y| / LEN,
//   feat = (log2(1 + alpha (env - beta)) - mu) / sigma
// predicts every feature. The test checks:
//   - each feature value, and that features come in ascending order of the selected channels;
//   - a frame_done pulse after each frame's last selected channel;
//   - the rate: one feature vector per LEN samples;
//   - the latency: the last feature of a frame comes at most 16 + 4 clocks after the frame's last
//     sample;
//   - that unselected channels produce nothing;
//   - that a sample arriving while two are still pending is reported as dropped.
// The log2 table is the one the design uses (kws_pkg::LOG_LUT); it is itself checked against
// $ln to within one table step (a 5-bit mantissa, 1/32 octave).
module tb_fex;
  import kws_pkg::*;
  localparam int LEN = FRAME_LEN;
  localparam int NFR = 4;
  localparam logic [15:0] SEL = 16'b1011_0110_1101_0011;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, cfg_we = 0;
  logic signed [AUD_W-1:0] sample = 0;
  logic [9:0] cfg_addr = 0;
  logic [19:0] cfg_data = 0;
  logic feat_valid, frame_done, sample_dropped;
  logic [3:0] feat_ch;
  logic signed [FEAT_W-1:0] feat;
  logic [NCH_MAX-1:0] ch_sel;

  fex #(.LEN(LEN)) dut (.clk, .rst_n, .in_valid, .sample, .cfg_we, .cfg_addr, .cfg_data,
    .feat_valid, .feat_ch, .feat, .frame_done, .sample_dropped, .ch_sel);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- model ----------------
  int b11 [16], b21 [16], b12 [16], b22 [16], a01 [16], s1 [16], s2 [16];
  int beta [16], alpha [16], mu [16], isig [16];
  int w11 [16], w12 [16], w21 [16], w22 [16], acc [16];

  function automatic int sat(int v, int bits);
    int hi = (1 << (bits - 1)) - 1;
    int lo = -(1 << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int iir(int c, int x);
    int w1n, y1, w2n, v2;
    w1n = sat(x - ((b11[c] * w11[c] + b21[c] * w12[c]) >>> 10), 20);
    y1  = sat(((w1n + (s1[c] ? -2 : 2) * w11[c] + w12[c]) * a01[c]) >>> 10, 20);
    w2n = sat(y1 - ((b12[c] * w21[c] + b22[c] * w22[c]) >>> 10), 20);
    v2  = sat(w2n + (s2[c] ? -2 : 2) * w21[c] + w22[c], 20);
    w12[c] = w11[c]; w11[c] = w1n; w22[c] = w21[c]; w21[c] = w2n;
    return v2;
  endfunction

  function automatic int log2q8(int u);   // u in 1..4096, result in 4.8 fixed point
    int e = 0;
    for (int b = 0; b < 13; b++) if (u & (1 << b)) e = b;
    return e * 256 + int'(LOG_LUT[((u << (12 - e)) >> 7) & 31]);
  endfunction

  function automatic int post(int c, int env);
    int s;
    s = (env > beta[c]) ? ((env - beta[c]) * alpha[c]) >> 4 : 0;
    if (s > 4095) s = 4095;
    return sat(((log2q8(s + 1) - mu[c]) * isig[c]) >>> 6, 12);
  endfunction

  int exp_q [$];
  int ch_q [$];
  task automatic model_sample(int x, bit fend);
    for (int c = 0; c < 16; c++) if (SEL[c]) begin
      int y, mag;
      y = iir(c, x);
      mag = (y < 0) ? -y : y;
      if (mag > 65535) mag = 65535;
      acc[c] += mag;
      if (fend) begin
        exp_q.push_back(post(c, acc[c] / LEN));
        ch_q.push_back(c);
        acc[c] = 0;
      end
    end
  endtask

  // ---------------- monitor ----------------
  int n_feat = 0, n_done = 0, t_last = 0, cyc = 0, n_drop = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (sample_dropped) n_drop++;
    if (feat_valid) begin
      n_feat++;
      if (ch_q.size() == 0) begin
        checks++; failures++; $display("FAIL: unexpected feature from channel %0d", feat_ch);
      end else begin
        int e, c;
        e = exp_q.pop_front();
        c = ch_q.pop_front();
        check(feat_ch == 4'(c), $sformatf("feature from channel %0d, expected %0d", feat_ch, c));
        check(int'(feat) == e, $sformatf("channel %0d feature %0d, expected %0d", c, feat, e));
      end
      if (frame_done) begin
        n_done++;
        check(ch_q.size() == 0, "frame_done before the frame's last feature");
        check(cyc - t_last <= 16 + 4, $sformatf("frame latency %0d clocks", cyc - t_last));
      end
    end
  end

  task automatic cfg(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_data = 20'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  real pi = 3.14159265358979;
  initial begin
    // the log table against the natural logarithm
    for (int u = 1; u < 4096; u += 37) begin
      real r;
      r = $ln(real'(u)) / $ln(2.0) * 256.0;
      check(log2q8(u) - r < 12.0 && r - log2q8(u) < 12.0, $sformatf("log2(%0d) = %0d", u, log2q8(u)));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 16; c++) begin
      real rad, th;
      rad = 0.75 + 0.2 * $urandom_range(100, 0) / 100.0;
      th  = pi * (c + 1) / 18.0;
      b11[c] = int'(-2.0 * rad * $cos(th) * 1024.0); b21[c] = int'(rad * rad * 1024.0);
      rad = 0.75 + 0.2 * $urandom_range(100, 0) / 100.0;
      b12[c] = int'(-2.0 * rad * $cos(th * 1.1) * 1024.0); b22[c] = int'(rad * rad * 1024.0);
      a01[c] = int'($urandom_range(255, 16));
      s1[c] = int'($urandom_range(1, 0)); s2[c] = int'($urandom_range(1, 0));
      beta[c] = int'($urandom_range(300, 0)); alpha[c] = int'($urandom_range(64, 4));
      mu[c] = int'($urandom_range(2000, 0)); isig[c] = int'($urandom_range(120, 10));
      w11[c] = 0; w12[c] = 0; w21[c] = 0; w22[c] = 0; acc[c] = 0;
      cfg({2'd0, 1'b0, 4'(c), 3'd0}, b11[c]);
      cfg({2'd0, 1'b0, 4'(c), 3'd1}, b21[c]);
      cfg({2'd0, 1'b0, 4'(c), 3'd2}, b12[c]);
      cfg({2'd0, 1'b0, 4'(c), 3'd3}, b22[c]);
      cfg({2'd0, 1'b0, 4'(c), 3'd4}, a01[c]);
      cfg({2'd0, 1'b0, 4'(c), 3'd5}, {s2[c][0], s1[c][0]});
      cfg({2'd1, 2'd0, 4'(c), 2'd0}, beta[c]);
      cfg({2'd1, 2'd0, 4'(c), 2'd1}, alpha[c]);
      cfg({2'd1, 2'd0, 4'(c), 2'd2}, mu[c]);
      cfg({2'd1, 2'd0, 4'(c), 2'd3}, isig[c]);
    end
    check(ch_sel == 16'h03FF, "ten channels selected after reset");
    cfg({2'd2, 8'd0}, SEL);
    check(ch_sel == SEL, "channel selection written");
    cfg({2'd3, 8'd0}, 0);
    for (int n = 0; n < NFR * LEN; n++) begin
      int x, amp;
      amp = 200 + 400 * ((n / LEN) % 3);
      x = int'($urandom_range(2 * amp, 0)) - amp;
      model_sample(x, (n % LEN) == LEN - 1);
      @(negedge clk); in_valid = 1; sample = AUD_W'(x);
      @(negedge clk); in_valid = 0;
      if (n % LEN == LEN - 1) t_last = cyc;
      repeat (18) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    check(n_done == NFR, $sformatf("%0d frames done, expected %0d", n_done, NFR));
    check(n_feat == NFR * $countones(SEL), $sformatf("%0d features", n_feat));
    // three samples in three clocks: one is processed, one waits, the third is dropped
    check(n_drop == 0, "no sample dropped at 8 kS/s");
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); in_valid = 1; sample = '0;
    end
    @(negedge clk); in_valid = 0;
    repeat (60) @(negedge clk);
    check(n_drop == 1, $sformatf("%0d samples dropped, expected 1", n_drop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
