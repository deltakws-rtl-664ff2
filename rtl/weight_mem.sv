// weight_mem: the 24 kB weight memory, twelve 2 kB sram_bank instances (paper Fig. 1 and 8).
//
// Write port (host loading): wr_en writes the 16b word wr_data into bank wr_addr[13:10] at word
// wr_addr[9:0]; each word packs two 8b weights. Read port (accelerator): rd_en with a 12-bit row
// number reads one 64-bit row, eight 8b weights, one per MAC lane. Row r lives in bank group
// g = r/1024, i.e. banks 4g..4g+3 at word r%1024, and bank 4g+b supplies lanes 2b (low byte) and
// 2b+1 (high byte); only the four banks of the addressed group are enabled. Like the banks, rd_q
// changes at the falling clock edge after the rising edge that took rd_en, so the row is there
// for the consumer's next rising edge: a one-clock read latency.
// The paper gives the 12 x 2 kB banking and the 16b word with two weights; the parallel read of
// four banks, which feeds all eight MAC lanes every clock, and the row layout are this design's
// choices. A write wins over a read in the same clock.
module weight_mem
  import kws_pkg::*;
#(
  parameter int NB    = NBANK,
  parameter int WORDS = BANK_WORDS
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [13:0]          wr_addr,
  input  logic [15:0]          wr_data,
  input  logic                 rd_en,
  input  logic [ROW_W-1:0]     rd_row,
  output logic [NLANE*W_W-1:0] rd_q
);
  localparam int AW   = $clog2(WORDS);
  localparam int NGRPB = NB / 4;
  logic [15:0] q [NB];
  logic [1:0]  grp_q;
  logic [1:0]  rgrp;
  assign rgrp = 2'(rd_row >> AW);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic cs_n, we_n;
    logic [AW-1:0] a;
    always_comb begin
      cs_n = 1'b1; we_n = 1'b1; a = rd_row[AW-1:0];
      if (wr_en) begin
        if (int'(wr_addr[13:10]) == b) begin
          cs_n = 1'b0; we_n = 1'b0; a = wr_addr[AW-1:0];
        end
      end else if (rd_en && int'(rgrp) == b / 4) begin
        cs_n = 1'b0;
      end
    end
    sram_bank #(.NBLK(4), .NROWB(WORDS / 4), .WORD(16)) u_bank (
      .CLK(clk), .CS_n(cs_n), .WE_n(we_n), .A(a), .D(wr_data), .Q(q[b]));
  end

  always_ff @(posedge clk)
    if (rd_en && !wr_en) grp_q <= rgrp;

  always_comb begin
    rd_q = '0;
    for (int g = 0; g < NGRPB; g++)
      if (int'(grp_q) == g)
        rd_q = {q[4*g+3], q[4*g+2], q[4*g+1], q[4*g]};
  end
endmodule
