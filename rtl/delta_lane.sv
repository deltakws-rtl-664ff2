// delta_lane: '0'-skip filter and Delta FIFO in front of one MAC lane (paper Fig. 3).
//
// The Delta Encoder broadcasts every encoded element (index and delta) to all lanes. Each lane
// drops the zero deltas ('0'-skip, signalled by the skip pulse) and queues the non-zero ones in a
// small FIFO; its MAC reads the head (head_idx, head_delta, empty) and removes it with pop. The
// controller stalls the encoder while almost_full is set, so the FIFO cannot overflow while
// elements are still in the encoder's output register; an assertion checks this.
// The paper names the '0'-skip and the Delta FIFO; the depth (8) and the almost-full margin of two
// entries are this design's choices.
module delta_lane
  import kws_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  logic [6:0]            in_idx,
  input  logic signed [D_W-1:0] in_delta,
  input  logic                  pop,
  output logic                  empty,
  output logic                  almost_full,
  output logic [6:0]            head_idx,
  output logic signed [D_W-1:0] head_delta,
  output logic                  skip
);
  localparam int AW = $clog2(DEPTH);
  logic [6:0]            q_idx [DEPTH];
  logic signed [D_W-1:0] q_d   [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic push, do_pop;

  assign push   = in_valid && (in_delta != '0);
  assign skip   = in_valid && (in_delta == '0);
  assign do_pop = pop && !empty;
  assign empty  = (cnt == '0);
  assign almost_full = (cnt >= (AW+1)'(DEPTH - 2));
  assign head_idx    = q_idx[rp];
  assign head_delta  = q_d[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) begin
        q_idx[wp] <= in_idx;
        q_d[wp]   <= in_delta;
        wp        <= wp + 1'b1;
      end
      if (do_pop) rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push && !do_pop |-> cnt < (AW+1)'(DEPTH));
endmodule
