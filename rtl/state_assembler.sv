// state_assembler: gathers the outputs of the eight MAC + NLU lanes (paper Fig. 3).
//
// Hidden state: in the NLU phase all lanes produce the new h of neuron 8k + m in the same clock
// (h_valid, h_k). The assembler registers the eight values and writes them into the state buffer
// as one group (hw_en, hw_k, hw_data) a clock later, and pulses h_done once all NGRP groups of a
// frame are written, which tells the controller that h_t is complete.
// Output: the FC accumulators of the lanes are arranged into the class-score vector, class
// 8q + m coming from lane m's accumulator q (scores). That part is pure wiring with no logic, so
// on its own this block shows the 192 score bits as passed straight through.
// The paper names the block and says it keeps the states updated and coordinated; the register
// stage and the done pulse are this design's choices.
module state_assembler
  import kws_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  h_valid,
  input  logic [2:0]            h_k,
  input  logic signed [D_W-1:0] h_new [NLANE],
  input  logic signed [M_W-1:0] fc0 [NLANE],
  input  logic signed [M_W-1:0] fc1 [NLANE],
  output logic                  hw_en,
  output logic [2:0]            hw_k,
  output logic signed [D_W-1:0] hw_data [NLANE],
  output logic                  h_done,
  output logic signed [M_W-1:0] scores [NCLS]
);
  logic [3:0] ngrp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hw_en <= 1'b0; hw_k <= '0; h_done <= 1'b0; ngrp <= '0;
      for (int m = 0; m < NLANE; m++) hw_data[m] <= '0;
    end else begin
      hw_en  <= h_valid;
      h_done <= 1'b0;
      if (h_valid) begin
        hw_k <= h_k;
        for (int m = 0; m < NLANE; m++) hw_data[m] <= h_new[m];
        if (ngrp == 4'(NGRP - 1)) begin
          ngrp   <= '0;
          h_done <= 1'b1;
        end else begin
          ngrp <= ngrp + 1'b1;
        end
      end
    end
  end

  always_comb
    for (int c = 0; c < NCLS; c++)
      scores[c] = (c < NLANE) ? fc0[c % NLANE] : fc1[c % NLANE];
endmodule
