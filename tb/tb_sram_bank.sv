// tb_sram_bank: self-checking test of one 2 kB SRAM bank (1024 x 16 b, 4 blocks of 256 rows).
//
// Writes random data to every word, then reads every word back in random order with
// interleaved writes. It checks the bank's timing as the paper describes it: the address is
// registered at the rising clock edge and Q changes at the following falling edge, so a read
// issued at rising edge t is valid half a clock later and Q holds until the next read.
// Deselected cycles (CS_n high) and writes must not change Q.
module tb_sram_bank;
  logic CLK = 0, CS_n = 1, WE_n = 1;
  logic [9:0]  A = 0;
  logic [15:0] D = 0, Q;
  always #5 CLK = ~CLK;

  sram_bank dut (.CLK, .CS_n, .WE_n, .A, .D, .Q);

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

  logic [15:0] ref_m [1024];
  task automatic wr(int a, logic [15:0] d);
    @(negedge CLK); CS_n = 0; WE_n = 0; A = 10'(a); D = d; ref_m[a] = d;
    @(posedge CLK); #1 CS_n = 1; WE_n = 1;
  endtask
  task automatic rd(int a);
    logic [15:0] q_before;
    @(negedge CLK); CS_n = 0; WE_n = 1; A = 10'(a);
    q_before = Q;
    @(posedge CLK); #1 CS_n = 1;
    check(Q == q_before, "Q must not change at the rising edge");
    @(negedge CLK); #1;
    check(Q == ref_m[a], $sformatf("read %0d: %h, expected %h", a, Q, ref_m[a]));
  endtask

  initial begin
    for (int a = 0; a < 1024; a++) wr(a, 16'($urandom));
    for (int t = 0; t < 1500; t++) begin
      int a;
      a = int'($urandom_range(1023, 0));
      if (t % 5 == 4) wr(a, 16'($urandom));
      else rd(a);
    end
    // Q holds through deselected cycles and writes
    rd(17);
    repeat (3) @(negedge CLK);
    wr(18, ~ref_m[17]);
    @(negedge CLK); #1;
    check(Q == ref_m[17], "Q held after idle cycles and a write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
