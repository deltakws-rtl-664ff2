// clk_div: clock generator that divides a fast pad clock down to a processing clock.
//
// The chip receives two fast clocks from the host (one for the Delta-RNN side, one for the IIR
// feature extractor); each drives one divider, because the SPI link needs the fast clock while the
// processing runs more efficiently slower (paper, Sec. II-A). The paper gives no ratio or circuit:
// here a counter toggles the output every DIV/2 input cycles, giving a 50 % duty clock at
// clk_in/DIV (DIV even, >= 2). The output is low during reset and its first rising edge comes
// DIV/2 input cycles after reset is released.
module clk_div #(
  parameter int DIV = 2
) (
  input  logic clk_in,
  input  logic rst_n,
  output logic clk_out
);
  localparam int HALF = (DIV < 2) ? 1 : DIV / 2;
  localparam int CW   = (HALF < 2) ? 1 : $clog2(HALF);
  logic [CW-1:0] cnt;
  always_ff @(posedge clk_in or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; clk_out <= 1'b0;
    end else if (cnt == CW'(HALF - 1)) begin
      cnt <= '0; clk_out <= ~clk_out;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
