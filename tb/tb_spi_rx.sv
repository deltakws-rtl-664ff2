// tb_spi_rx: self-checking test of the serial receiver.
//
// Sends frames of 12, 32 and 40 random bits (MSB first, one bit per clock), and a zero-length
// chip-select pulse. After each frame it checks:
//   - rx_word and rx_bits;
//   - that rx_valid is a single pulse exactly one clock after the clock edge that sees cs_n high
//     (one word per frame, delivered with a latency of one clock);
//   - that the bits shifted out on miso during the frame are the 16-bit tx_word, MSB first.
// The empty frame must produce no rx_valid.
module tb_spi_rx;
  logic clk = 0, rst_n = 0, cs_n = 1, mosi = 0, miso;
  logic [15:0] tx_word = 16'hA5C3;
  logic [39:0] rx_word;
  logic [5:0]  rx_bits;
  logic        rx_valid;
  always #5 clk = ~clk;

  spi_rx #(.MAXB(40), .TXB(16)) dut (.clk, .rst_n, .cs_n, .mosi, .miso, .tx_word, .rx_word,
                                     .rx_bits, .rx_valid);

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

  int n_valid = 0;
  always @(posedge clk) if (rx_valid) n_valid++;

  task automatic frame(logic [39:0] word, int nbits);
    logic [15:0] got;
    int v0;
    got = '0;
    @(negedge clk);
    cs_n = 0;
    for (int i = nbits - 1; i >= 0; i--) begin
      mosi = word[i];
      @(posedge clk);
      if (nbits - 1 - i < 16) got = {got[14:0], miso};
      @(negedge clk);
    end
    cs_n = 1;
    v0 = n_valid;
    @(posedge clk);           // this edge sees cs_n high
    #1 check(rx_valid, $sformatf("%0d-bit frame: rx_valid one clock after cs_n rose", nbits));
    check(rx_bits == 6'(nbits), $sformatf("rx_bits %0d, expected %0d", rx_bits, nbits));
    check(rx_word == (word & ((40'd1 << nbits) - 1)), $sformatf("rx_word %h", rx_word));
    if (nbits >= 16) check(got == tx_word, $sformatf("miso %h, expected %h", got, tx_word));
    repeat (3) @(posedge clk);
    #1 check(n_valid == v0 + 1, "rx_valid is a single pulse");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [39:0] w;
      w = {$urandom, $urandom};
      tx_word = 16'($urandom);
      frame(w, (t % 3 == 0) ? 12 : (t % 3 == 1) ? 32 : 40);
    end
    // empty frame
    begin
      int v0;
      v0 = n_valid;
      @(negedge clk); cs_n = 0; cs_n = 1;
      repeat (4) @(posedge clk);
      #1 check(n_valid == v0, "empty chip-select pulse gives no word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
