// tb_delta_rnn: end-to-end test of the Delta-RNN accelerator with the weight memory.
//
// Loads random weights into weight_mem, feeds frames of Q3.8 features (some frames repeat the
// previous one, some change only a little, so that deltas are skipped), and after each frame
// compares the hidden state in the state buffer with the reference model kws_ref_pkg. At the end
// of the utterance the decided class and its score are compared too. It also measures each
// frame's compute time (from its last feature to frame_done) and checks it against the schedule
// of 24 clocks per non-zero delta, and requires encoder stalls, '0'-skips and non-zero deltas to
// have happened.
module tb_delta_rnn;
  import kws_pkg::*;
  import kws_ref_pkg::*;

  localparam int NFR = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // feature FIFO model
  int fmem [1024];
  int fwp = 0, frp = 0;
  logic feat_empty, feat_pop;
  logic [FEAT_W-1:0] feat_data;
  assign feat_empty = (fwp == frp);
  assign feat_data  = FEAT_W'(fmem[frp % 1024]);
  always @(posedge clk) if (feat_pop && fwp != frp) frp <= frp + 1;

  logic cfg_we = 0;
  logic [3:0] cfg_addr = 0;
  logic [15:0] cfg_data = 0;
  logic rd_en;
  logic [ROW_W-1:0] rd_row;
  logic [NLANE*W_W-1:0] rd_q;
  logic wr_en = 0;
  logic [13:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic dec_valid, idle, stall, skip, nz, frame_done;
  logic [3:0] dec_cls;
  logic signed [M_W-1:0] dec_score;
  logic [7:0] frame_cnt;

  weight_mem u_mem (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_row, .rd_q);
  delta_rnn dut (.clk, .rst_n, .feat_empty, .feat_data, .feat_pop, .cfg_we, .cfg_addr, .cfg_data,
                 .rd_en, .rd_row, .rd_q, .dec_valid, .dec_cls, .dec_score, .idle, .stall, .skip,
                 .nz, .frame_done, .frame_cnt);

  int n_stall = 0, n_skip = 0, n_nz = 0, n_dec = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (skip)  n_skip++;
    if (nz)    n_nz++;
  end

  task automatic cfg_write(int a, int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_data = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int x [NI];
  int xprev [NI];
  int th = 40;
  int t0, cyc, nzb;
  initial begin
    randomize_weights(1, 40);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights: row r, lane l -> bank 4*(r/1024) + l/2, word r%1024, byte l%2
    for (int r = 0; r < NROWS; r++)
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        wr_en   = 1;
        wr_addr = {4'(4 * (r / 1024) + b), 10'(r % 1024)};
        wr_data = {8'(w[r][2 * b + 1]), 8'(w[r][2 * b])};
      end
    @(negedge clk); wr_en = 0;
    $display("weights loaded at %0t", $time);
    cfg_write(0, th);
    cfg_write(1, NFR);
    cfg_write(3, 0);           // restart: load biases
    init();
    for (int i = 0; i < NI; i++) xprev[i] = 0;
    for (int f = 0; f < NFR; f++) begin
      for (int i = 0; i < NI; i++) begin
        case (f % 3)
          0: x[i] = int'($urandom_range(1000, 0)) - 500;        // new frame
          1: x[i] = xprev[i] + int'($urandom_range(60, 0)) - 30; // small change
          default: x[i] = xprev[i];                              // identical frame
        endcase
        xprev[i] = x[i];
      end
      nzb = nz_cnt;
      frame(x, th);
      for (int i = 0; i < NI; i++) begin fmem[fwp % 1024] = x[i]; fwp = fwp + 1; end
      while (fwp != frp) @(posedge clk);
      t0 = $time / 10;
      @(posedge clk iff frame_done);
      cyc = $time / 10 - t0;
      #1;
      for (int n = 0; n < NH; n++)
        check(dut.u_sb.h[n] == 12'(h[n]), $sformatf("frame %0d h[%0d] %0d != %0d", f, n,
              dut.u_sb.h[n], h[n]));
      $display("frame %0d: %0d non-zero deltas, %0d clocks", f, nz_cnt - nzb, cyc);
      if (nz_cnt - nzb >= 4)
        check(cyc >= 24 * (nz_cnt - nzb) && cyc <= 24 * (nz_cnt - nzb) + 30,
              $sformatf("frame %0d takes %0d clocks for %0d deltas", f, cyc, nz_cnt - nzb));
      else
        check(cyc >= NI + NH && cyc <= NI + NH + 24 * (nz_cnt - nzb) + 30, "sparse frame time");
    end
    @(posedge clk iff dec_valid);
    begin
      int best;
      best = decide();
      check(dec_cls == 4'(best), $sformatf("class %0d != %0d", dec_cls, best));
      check(dec_score == 16'(fc[best]), $sformatf("score %0d != %0d", dec_score, fc[best]));
    end
    check(n_nz == nz_cnt, $sformatf("non-zero deltas %0d != %0d", n_nz, nz_cnt));
    check(n_stall > 0, "encoder never stalled");
    check(n_skip > 0, "no delta was skipped");
    $display("stalls %0d skips %0d nz %0d", n_stall, n_skip, n_nz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
