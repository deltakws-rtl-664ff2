// sram_bank: one 2 kB bank (1024 x 16b) of the near-threshold weight SRAM, logic view.
//
// The silicon bank is a full-custom 8T-cell macro (paper Fig. 8): an address register and a data
// register, a 2-bit column decoder and an 8-bit row decoder, four blocks (BLK #0..#3) of 256 x 16
// cells each with their own sense amplifiers, and a skew-resistant column MUX that picks one
// block's sense-amplifier output SA0..SA3 and refreshes Q near the falling clock edge. This module
// models that logic behaviour with synthesizable code: four 256 x 16 arrays, A and D sampled on
// the rising CLK edge while CS_n is low, a write when WE_n is low, and for a read the selected
// block's word driven onto Q at the following falling edge of CLK. Q holds its value on cycles
// without a read (CS_n high or a write). A consumer clocked on the rising edge therefore sees the
// read word one clock after presenting the address.
// The interface names (A[9:0], D[15:0], Q[15:0], CLK, CS_n, WE_n), the 4 x 256 x 16 organisation,
// the 2/8 split of the address and the falling-edge Q are the paper's. Which address bits select
// the block is not printed; this design uses A[9:8] for the block and A[7:0] for the row.
// Word-line and I/O level shifters, the voltage booster and the self-timed timing generator are
// circuit-level parts without a logic function of their own and are not modelled.
module sram_bank #(
  parameter int NBLK  = 4,
  parameter int NROWB = 256,
  parameter int WORD  = 16
) (
  input  logic                              CLK,
  input  logic                              CS_n,
  input  logic                              WE_n,
  input  logic [$clog2(NBLK*NROWB)-1:0]     A,
  input  logic [WORD-1:0]                   D,
  output logic [WORD-1:0]                   Q
);
  localparam int RB = $clog2(NROWB);
  localparam int CB = (NBLK < 2) ? 1 : $clog2(NBLK);

  logic [WORD-1:0] blk [NBLK][NROWB];
  logic [RB-1:0]   row_q;
  logic [CB-1:0]   col_q;
  logic            rd_q;
  logic [WORD-1:0] sa [NBLK];

  // address/data registers and write drivers
  always_ff @(posedge CLK) begin
    rd_q <= !CS_n && WE_n;
    if (!CS_n) begin
      row_q <= A[RB-1:0];
      col_q <= CB'(A[$bits(A)-1:RB]);
      if (!WE_n) blk[CB'(A[$bits(A)-1:RB])][A[RB-1:0]] <= D;
    end
  end

  // sense amplifiers of every block read the addressed row
  always_comb
    for (int b = 0; b < NBLK; b++) sa[b] = blk[b][row_q];

  // column MUX: Q refreshed at the falling clock edge
  always_ff @(negedge CLK)
    if (rd_q) Q <= sa[col_q];
endmodule
