// tb_delta_lane: self-checking test of one '0'-skip + Delta FIFO lane.
//
// Random deltas (about half of them zero) are offered while the consumer pops at random, obeying
// almost_full the way the encoder does (no new delta while almost_full). The test checks that:
//   - zero deltas raise skip and are never stored;
//   - non-zero deltas come out in order with their index (scoreboard);
//   - empty and almost_full match the occupancy (almost_full at DEPTH - 2 entries);
//   - clear empties the lane.
module tb_delta_lane;
  import kws_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, pop = 0;
  logic [6:0] in_idx = 0;
  logic signed [D_W-1:0] in_delta = 0;
  logic empty, almost_full, skip;
  logic [6:0] head_idx;
  logic signed [D_W-1:0] head_delta;

  delta_lane #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clear, .in_valid, .in_idx, .in_delta, .pop,
    .empty, .almost_full, .head_idx, .head_delta, .skip);

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

  int q_i [$], q_d [$];
  int n_skip = 0, n_af = 0, n_pop = 0;
  always @(posedge clk) if (rst_n && !clear) begin
    check(empty == (q_i.size() == 0), "empty flag");
    check(almost_full == (q_i.size() >= DEPTH - 2), $sformatf("almost_full with %0d", q_i.size()));
    check(skip == (in_valid && in_delta == 0), "skip flag");
    if (almost_full) n_af++;
    if (skip) n_skip++;
    if (pop && !empty) begin
      check(head_idx == 7'(q_i[0]) && int'(head_delta) == q_d[0],
            $sformatf("head %0d/%0d, expected %0d/%0d", head_idx, head_delta, q_i[0], q_d[0]));
      void'(q_i.pop_front()); void'(q_d.pop_front());
      n_pop++;
    end
    if (in_valid && in_delta != 0) begin q_i.push_back(int'(in_idx)); q_d.push_back(int'(in_delta)); end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = !almost_full && ($urandom_range(3, 0) != 0);
      in_idx   = 7'($urandom);
      in_delta = ($urandom_range(1, 0) == 0) ? '0 : D_W'($urandom_range(4000, 1) - 2000);
      if (in_valid && in_delta == 0) in_delta = 0;
      pop      = (t % 500 < 250) ? ($urandom_range(3, 0) == 0) : ($urandom_range(1, 0) == 0);
    end
    @(negedge clk); in_valid = 0; pop = 0;
    check(n_skip > 0 && n_af > 0 && n_pop > 0, $sformatf("skips %0d, almost-full %0d, pops %0d",
          n_skip, n_af, n_pop));
    // clear
    @(negedge clk); in_valid = 1; in_delta = 12'sd5;
    @(negedge clk); in_valid = 0; clear = 1;
    @(negedge clk); clear = 0; q_i.delete(); q_d.delete();
    #1 check(empty, "empty after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
