// tb_argmax: self-checking test of the 12-class argmax.
//
// Applies random signed score vectors, including ones with ties, full-scale negative values and
// all-equal vectors. out_valid must follow in_valid by exactly one clock. cls must be the index of
// the largest score, the lowest index on a tie, and max_score its value. Outputs must hold while
// in_valid is low.
module tb_argmax;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic signed [M_W-1:0] scores [NCLS];
  logic [3:0] cls;
  logic signed [M_W-1:0] max_score;

  argmax dut (.clk, .rst_n, .in_valid, .scores, .out_valid, .cls, .max_score);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (scores[i]) scores[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int best;
      for (int i = 0; i < NCLS; i++)
        case (t % 4)
          0: scores[i] = M_W'($urandom);
          1: scores[i] = M_W'($urandom_range(3, 0));           // many ties
          2: scores[i] = -16'sd32768 + M_W'($urandom_range(2, 0));
          default: scores[i] = 16'sd100;                        // all equal
        endcase
      best = 0;
      for (int i = 1; i < NCLS; i++) if (scores[i] > scores[best]) best = i;
      @(negedge clk); in_valid = 1;
      @(posedge clk); #1;
      check(out_valid, "out_valid one clock after in_valid");
      check(cls == 4'(best), $sformatf("class %0d, expected %0d", cls, best));
      check(max_score == scores[best], "max_score");
      @(negedge clk); in_valid = 0;
      for (int i = 0; i < NCLS; i++) scores[i] = M_W'($urandom);
      @(posedge clk); #1;
      check(!out_valid && cls == 4'(best), "outputs hold without in_valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
