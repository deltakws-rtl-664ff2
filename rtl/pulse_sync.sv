// pulse_sync: carries a one-clock pulse from one clock domain to another.
//
// The source pulse flips a toggle flop; the destination passes the toggle through two flops and
// emits a one-clock pulse on each change. Pulses in the source must be at least three destination
// clocks apart. Used between the fast interface clocks and the divided processing clocks; the
// data that goes with a pulse is held stable by the sender (see spi_rx). This is this design's
// own choice: the paper does not describe how the host interface crosses clock domains.
module pulse_sync (
  input  logic src_clk,
  input  logic src_rst_n,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst_n,
  output logic dst_pulse
);
  logic tog;
  logic [2:0] s;
  always_ff @(posedge src_clk or negedge src_rst_n)
    if (!src_rst_n) tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;
  always_ff @(posedge dst_clk or negedge dst_rst_n)
    if (!dst_rst_n) s <= '0;
    else s <= {s[1:0], tog};
  assign dst_pulse = s[2] ^ s[1];
endmodule
