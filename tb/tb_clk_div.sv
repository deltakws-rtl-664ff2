// tb_clk_div: self-checking test of the clock divider.
//
// Two dividers run from the same input clock: one at the default DIV = 2 and one at DIV = 8. For
// each, the test measures the output period and high time in input clocks over many cycles. The
// period must equal DIV input clocks, giving the paper's rate reduction (e.g. 250 kHz to 125 kHz
// for DIV = 2), and the duty cycle must be 50 %. While reset is held, the output must stay low.
module tb_clk_div;
  logic clk = 0, rst_n = 0;
  logic c2, c8;
  always #5 clk = ~clk;

  clk_div dut2 (.clk_in(clk), .rst_n, .clk_out(c2));
  clk_div #(.DIV(8)) dut8 (.clk_in(clk), .rst_n, .clk_out(c8));

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

  // count input clocks between output edges
  int n = 0;
  always @(posedge clk) n++;
  int r2 [$], f2 [$], r8 [$], f8 [$];
  always @(posedge c2) r2.push_back(n);
  always @(negedge c2) if (rst_n) f2.push_back(n);
  always @(posedge c8) r8.push_back(n);
  always @(negedge c8) if (rst_n) f8.push_back(n);

  task automatic measure(int r [$], int f [$], int div);
    check(r.size() > 10, $sformatf("DIV=%0d: too few output cycles (%0d)", div, r.size()));
    for (int i = 1; i < r.size(); i++)
      check(r[i] - r[i-1] == div, $sformatf("DIV=%0d period %0d", div, r[i] - r[i-1]));
    for (int i = 0; i < r.size() && i < f.size(); i++)
      check(f[i] - r[i] == div / 2, $sformatf("DIV=%0d high time %0d", div, f[i] - r[i]));
  endtask

  initial begin
    repeat (10) @(negedge clk);
    check(c2 == 0 && c8 == 0, "outputs low during reset");
    check(r2.size() == 0 && r8.size() == 0, "no output edges during reset");
    rst_n = 1;
    repeat (200) @(negedge clk);
    measure(r2, f2, 2);
    measure(r8, f8, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
