// async_fifo: dual-clock FIFO that carries the 12b feature words of the feature extractor
// (write side, IIR clock) to the Delta-RNN accelerator (read side, RNN clock).
//
// The paper names an asynchronous FIFO between the two clock domains; its structure is not given.
// This is the usual design: a register-array memory, binary read/write pointers with one extra
// wrap bit, Gray-coded copies of each pointer passed through two flops into the other domain, and
// full/empty computed from the synchronised Gray pointers. A write with wr_full high and a read
// with rd_empty high are ignored. rd_data shows the head word combinationally (first-word
// fall-through); rd_en pops it. DEPTH must be a power of two; 8 is this design's choice.
module async_fifo #(
  parameter int W     = 12,
  parameter int DEPTH = 8
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         wr_full,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_empty
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0] wbin, rbin, wgray, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wr_en && !wr_full) begin
        wbin  <= wbin + 1'b1;
        wgray <= b2g(wbin + 1'b1);
      end
    end
  end
  always_ff @(posedge wr_clk)
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  assign wr_full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read domain
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (rd_en && !rd_empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= b2g(rbin + 1'b1);
      end
    end
  end
  assign rd_empty = (rgray == wgray_r2);
  assign rd_data  = mem[rbin[AW-1:0]];
endmodule
