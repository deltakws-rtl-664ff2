// tb_delta_encoder: self-checking test of the Delta encoder.
//
// Random (cur, prev, Delta_TH) triples, including full-scale differences that need saturation,
// |delta| equal to the threshold and threshold 0. For each input the test checks:
//   - that the state-memory update (upd_en, upd_idx, upd_val = prev + sat(delta)) appears in the
//     same clock, and only if |cur - prev| > Delta_TH;
//   - that one clock later out_valid/out_idx and out_delta give the saturated delta, or 0 with
//     out_nz low when the change is below the threshold (a one-element-per-clock rate with one
//     clock of latency).
module tb_delta_encoder;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [6:0] in_idx = 0;
  logic signed [D_W-1:0] cur = 0, prev = 0;
  logic [D_W-1:0] th = 0;
  logic out_valid, out_nz, upd_en;
  logic [6:0] out_idx, upd_idx;
  logic signed [D_W-1:0] out_delta, upd_val;

  delta_encoder dut (.clk, .rst_n, .in_valid, .in_idx, .cur, .prev, .th, .out_valid, .out_idx,
    .out_delta, .out_nz, .upd_en, .upd_idx, .upd_val);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_fire = 0, n_sat = 0, n_zero = 0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int d, ds, c, p, thr;
      bit fire;
      c   = int'($urandom_range(4095, 0)) - 2048;
      p   = (t % 4 == 0) ? c + int'($urandom_range(20, 0)) - 10 : int'($urandom_range(4095, 0)) - 2048;
      if (p > 2047) p = 2047;
      if (p < -2048) p = -2048;
      thr = (t % 5 == 0) ? 0 : int'($urandom_range(300, 0));
      // |delta| equal to the threshold (which is a positive Q3.8 value, at most 2047)
      if (t % 7 == 0 && ((c > p) ? c - p : p - c) <= 2047) thr = (c > p) ? c - p : p - c;
      d    = c - p;
      fire = ((d < 0) ? -d : d) > thr;
      ds   = (d > 2047) ? 2047 : (d < -2048) ? -2048 : d;
      @(negedge clk);
      in_valid = 1; in_idx = 7'(t); cur = D_W'(c); prev = D_W'(p); th = D_W'(thr);
      #1;
      check(upd_en == fire, $sformatf("upd_en for %0d - %0d, th %0d", c, p, thr));
      if (fire) check(upd_idx == 7'(t) && int'(upd_val) == ((p + ds > 2047) ? 2047 : (p + ds < -2048) ? -2048 : p + ds),
                      $sformatf("upd_val %0d", upd_val));
      @(posedge clk); #1;
      check(out_valid && out_idx == 7'(t), "out_valid/out_idx one clock later");
      check(out_nz == fire && int'(out_delta) == (fire ? ds : 0),
            $sformatf("delta %0d (nz %0d), expected %0d", out_delta, out_nz, fire ? ds : 0));
      if (fire) n_fire++; else n_zero++;
      if (ds != d) n_sat++;
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    check(!out_valid && !out_nz, "idle");
    check(n_fire > 0 && n_zero > 0 && n_sat > 0, "fired, skipped and saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
