// tb_config_reg: self-checking test of the accelerator's configuration register.
//
// Checks the reset values: Delta_TH = 51 (0.2 in Q3.8), 62 frames per decision, 10 inputs.
// Then it checks that writes to addresses 0..2 land in the right field, that an out-of-range or
// zero input count falls back to 10, and that a write to address 3 gives a single one-clock
// restart pulse and changes no field.
module tb_config_reg;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, restart;
  logic [3:0] addr = 0;
  logic [15:0] data = 0;
  rnn_cfg_t cfg;

  config_reg dut (.clk, .rst_n, .we, .addr, .data, .cfg, .restart);

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

  int n_restart = 0;
  always @(posedge clk) if (rst_n && restart) n_restart++;

  task automatic wr(int a, int d);
    @(negedge clk); we = 1; addr = 4'(a); data = 16'(d);
    @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.delta_th == 12'd51 && cfg.num_frames == 8'd62 && cfg.num_in == 4'd10,
          $sformatf("reset values %0d %0d %0d", cfg.delta_th, cfg.num_frames, cfg.num_in));
    for (int t = 0; t < 50; t++) begin
      rnn_cfg_t old;
      int a, d;
      a = t % 3;
      d = int'($urandom_range(65535, 0));
      old = cfg;
      wr(a, d);
      case (a)
        0: check(cfg.delta_th == 12'(d) && cfg.num_frames == old.num_frames
                 && cfg.num_in == old.num_in, "Delta_TH write");
        1: check(cfg.num_frames == 8'(d) && cfg.delta_th == old.delta_th
                 && cfg.num_in == old.num_in, "num_frames write");
        default: check(cfg.num_in == ((d % 16 == 0 || d % 16 > 10) ? 4'd10 : 4'(d % 16))
                       && cfg.delta_th == old.delta_th, $sformatf("num_in write %0d", d % 16));
      endcase
    end
    begin
      rnn_cfg_t old;
      old = cfg;
      wr(3, 16'hFFFF);
      repeat (3) @(negedge clk);
      check(n_restart == 1, $sformatf("%0d restart pulses", n_restart));
      check(cfg == old, "restart changes no field");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
