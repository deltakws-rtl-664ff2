// tb_weight_mem: self-checking test of the 24 kB weight memory (12 banks of 2 kB).
//
// Fills all 12 x 1024 words with random data through the 16-bit write port. It then reads random
// 64-bit rows back, one per clock, back to back. Row r must return banks 4*(r/1024)..+3 at word
// r%1024, lowest bank in the lowest 16 bits, on the clock after the request (one-cycle read
// latency at one row per clock: the rate the MAC lanes need). The last row of each bank group is
// read too.
module tb_weight_mem;
  import kws_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [13:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic [ROW_W-1:0] rd_row = 0;
  logic [NLANE*W_W-1:0] rd_q;

  weight_mem dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_row, .rd_q);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] m [NBANK][BANK_WORDS];
  function automatic logic [63:0] row(int r);
    int g = r / BANK_WORDS, a = r % BANK_WORDS;
    return {m[4*g+3][a], m[4*g+2][a], m[4*g+1][a], m[4*g][a]};
  endfunction

  initial begin
    for (int b = 0; b < NBANK; b++)
      for (int a = 0; a < BANK_WORDS; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = {4'(b), 10'(a)}; wr_data = 16'($urandom); m[b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      automatic int r = (t < 3) ? (t + 1) * BANK_WORDS - 1 : int'($urandom_range(3 * BANK_WORDS - 1, 0));
      @(negedge clk);
      rd_en = 1; rd_row = ROW_W'(r);
      // the row is valid from the next falling edge until the rising edge that consumes it
      fork
        automatic int rr = r;
      begin
        @(posedge clk); @(negedge clk); #1;
        check(rd_q == row(rr), $sformatf("row %0d: %h, expected %h", rr, rd_q, row(rr)));
      end join_none
    end
    @(negedge clk); rd_en = 0;
    repeat (3) @(negedge clk);
    check(checks >= 2000, "every row read was checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
