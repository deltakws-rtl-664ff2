// tb_async_fifo: self-checking test of the dual-clock FIFO.
//
// The writer (period 10) and the reader (period 14) run on unrelated clocks and both act at
// random. Every word read must equal the oldest word written (scoreboard), no write may be lost
// (wr_full only blocks), wr_full must rise once DEPTH words are in flight, and a word written
// into an empty FIFO must reach the read side within a bounded time (two-flop synchroniser: at most
// 4 read clocks). At the end, everything written must have been read back.
module tb_async_fifo;
  localparam int W = 12, DEPTH = 8;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #5 wclk = ~wclk;
  always #7 rclk = ~rclk;

  logic wr_en = 0, rd_en = 0, wr_full, rd_empty;
  logic [W-1:0] wr_data = 0, rd_data;
  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.wr_clk(wclk), .wr_rst_n(rst_n), .wr_en, .wr_data,
    .wr_full, .rd_clk(rclk), .rd_rst_n(rst_n), .rd_en, .rd_data, .rd_empty);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] sb [$];
  int n_wr = 0, n_rd = 0, n_full = 0;
  int phase = 0;           // 0: random, 1: writer only (fill), 2: reader only (drain)

  always @(negedge wclk) begin
    wr_en   = 0;
    if (rst_n && n_wr < 400 && phase != 2 && (phase == 1 || $urandom_range(3, 0) != 0)) begin
      wr_en   = 1;
      wr_data = W'($urandom);
    end
  end
  always @(posedge wclk) if (wr_en && !wr_full) begin sb.push_back(wr_data); n_wr++; end
  always @(posedge wclk) if (wr_full) n_full++;

  always @(negedge rclk) rd_en = rst_n && phase != 1 && (phase == 2 || $urandom_range(2, 0) != 0);
  always @(posedge rclk) if (rd_en && !rd_empty) begin
    check(sb.size() > 0, "read from an empty scoreboard");
    if (sb.size() > 0) begin
      check(rd_data == sb[0], $sformatf("read %h, expected %h", rd_data, sb[0]));
      void'(sb.pop_front());
    end
    n_rd++;
  end

  initial begin
    repeat (3) @(negedge wclk);
    rst_n = 1;
    wait (n_wr >= 300);
    // fill: the reader stops, so the FIFO must report full after DEPTH words
    phase = 1;
    repeat (40) @(posedge wclk);
    #1 check(wr_full, "wr_full with the reader stopped");
    check(sb.size() == DEPTH, $sformatf("%0d words held when full, expected %0d", sb.size(), DEPTH));
    phase = 2;
    wait (sb.size() == 0);
    repeat (10) @(posedge rclk);
    #1 check(rd_empty, "empty after draining");
    // latency of one word into an empty FIFO
    phase = 1;
    begin
      int t0;
      @(posedge wclk iff wr_en && !wr_full);
      t0 = 0;
      while (rd_empty) begin @(posedge rclk); t0++; end
      check(t0 <= 4, $sformatf("write-to-read latency %0d read clocks", t0));
    end
    phase = 0;
    wait (n_wr >= 400);
    phase = 2;
    wait (sb.size() == 0);
    repeat (5) @(posedge rclk);
    check(n_rd == n_wr && n_rd >= 400, $sformatf("wrote %0d, read %0d", n_wr, n_rd));
    check(n_full > 0, "FIFO never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
